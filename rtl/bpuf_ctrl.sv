// bpuf_ctrl: sequencer for one evaluation of the Butterfly PUF array and
// capture of its response.
//
// It drives the excite, gate and clk_enable nets of the array in the order
// the Butterfly PUF needs:
//   EXCITE  excite high for EXCITE_CYCLES: upper latches forced to 0, lower to 1
//   GATE    gate raised while excite is still high
//   ENABLE  clk_enable (the latches' GE) raised as well
//   RELEASE excite dropped with both latches transparent; the cells settle
//           for SETTLE_CYCLES
//   HOLD    gate dropped: each cell keeps the value it settled to
//   CAPTURE the N response bits are registered and valid is raised
// This ordering is the paper's; the cycle counts and the capture register
// are this design's choice (the paper says only "for some clock cycles").
//
// Interface: start (pulse) begins an evaluation when idle; busy is high
// during it; valid rises with response and stays high until the next start.
// Timing: EXCITE_CYCLES + SETTLE_CYCLES + 4 cycles from start to valid.
module bpuf_ctrl #(
  parameter int unsigned N             = 128,
  parameter int unsigned EXCITE_CYCLES = 4,
  parameter int unsigned SETTLE_CYCLES = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  // to / from the PUF array
  output logic         excite,
  output logic         gate,
  output logic         clk_enable,
  input  logic [N-1:0] puf_in,
  // captured signature
  output logic         busy,
  output logic         valid,
  output logic [N-1:0] response
);

  typedef enum logic [2:0] {
    S_IDLE, S_EXCITE, S_GATE, S_ENABLE, S_RELEASE, S_HOLD, S_CAPTURE
  } state_e;

  localparam int unsigned MAXC = (EXCITE_CYCLES > SETTLE_CYCLES) ? EXCITE_CYCLES : SETTLE_CYCLES;
  localparam int unsigned CW   = $clog2(MAXC + 1);

  state_e        state_q;
  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      cnt_q    <= '0;
      valid    <= 1'b0;
      response <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_EXCITE;
          cnt_q   <= '0;
          valid   <= 1'b0;
        end
        S_EXCITE: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(EXCITE_CYCLES - 1)) state_q <= S_GATE;
        end
        S_GATE:   state_q <= S_ENABLE;
        S_ENABLE: begin
          state_q <= S_RELEASE;
          cnt_q   <= '0;
        end
        S_RELEASE: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == CW'(SETTLE_CYCLES - 1)) state_q <= S_HOLD;
        end
        S_HOLD:   state_q <= S_CAPTURE;
        S_CAPTURE: begin
          response <= puf_in;
          valid    <= 1'b1;
          state_q  <= S_IDLE;
        end
        default:  state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    excite     = state_q inside {S_EXCITE, S_GATE, S_ENABLE};
    gate       = state_q inside {S_GATE, S_ENABLE, S_RELEASE};
    clk_enable = state_q inside {S_ENABLE, S_RELEASE, S_HOLD};
    busy       = state_q != S_IDLE;
  end

endmodule
