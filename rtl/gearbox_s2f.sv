// gearbox_s2f: slow-to-fast gearbox of the spike computing engine.
//
// The engine runs on clk2x, a clock synchronous to clk at twice its frequency. A word of
// 2*HALF_W bits presented on the slow side in one clk cycle leaves on the fast side as two
// HALF_W-bit words in two consecutive clk2x cycles, low half first, so the bandwidth is the
// same on both sides (the paper: a multiplexer that halves the elements and doubles the rate).
// The slow side has no back-pressure: one word may enter every clk cycle.
// Timing: the fast side detects the slow edge with a toggle bit from the slow domain. The
// low half appears one clk2x cycle after the word is registered by clk, the high half in the
// next clk2x cycle. `f_valid` marks each half; `f_last` is set on both halves of a word whose
// s_last was set. Phase detection with a toggle flop is this design's choice.
module gearbox_s2f #(
  parameter int unsigned HALF_W = 256
) (
  input  logic              clk,
  input  logic              clk2x,
  input  logic              rst_n,
  input  logic              s_valid,
  input  logic              s_last,
  input  logic [2*HALF_W-1:0] s_data,
  output logic              f_valid,
  output logic              f_last,
  output logic              f_phase,   // 0: low half, 1: high half
  output logic [HALF_W-1:0] f_data
);
  // slow side register stage
  logic [2*HALF_W-1:0] s_q;
  logic                s_vq, s_lq, tog;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_q <= '0; s_vq <= 1'b0; s_lq <= 1'b0; tog <= 1'b0;
    end else begin
      s_q  <= s_data;
      s_vq <= s_valid;
      s_lq <= s_last;
      tog  <= ~tog;
    end
  end

  // fast side: the cycle in which tog differs from its fast copy is the first half
  logic tog_f, hi_pend, hi_last;
  logic [HALF_W-1:0] hi_q;
  always_ff @(posedge clk2x or negedge rst_n) begin
    if (!rst_n) begin
      tog_f <= 1'b0; hi_pend <= 1'b0; hi_last <= 1'b0; hi_q <= '0;
      f_valid <= 1'b0; f_last <= 1'b0; f_phase <= 1'b0; f_data <= '0;
    end else begin
      tog_f <= tog;
      if (tog != tog_f) begin
        f_valid <= s_vq;
        f_last  <= s_lq;
        f_phase <= 1'b0;
        f_data  <= s_q[HALF_W-1:0];
        hi_q    <= s_q[2*HALF_W-1:HALF_W];
        hi_pend <= s_vq;
        hi_last <= s_lq;
      end else begin
        f_valid <= hi_pend;
        f_last  <= hi_last;
        f_phase <= 1'b1;
        f_data  <= hi_q;
        hi_pend <= 1'b0;
      end
    end
  end
endmodule
