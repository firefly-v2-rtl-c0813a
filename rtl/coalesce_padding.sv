// coalesce_padding: widens every padded input row to a whole number of im2col bank lines.
//
// The im2col unit spreads the pixels of a row over N banks so that the N pixels of one read,
// at any stride, come from N different banks (see im2col). For that every row must hold the
// same number of pixels per bank and stride phase, and the reads of the last pixel group must
// stay inside the row. This unit therefore appends zero pixels to each row of the padded map
// (width Wp = Wi + 2P) until it is Wc = (cfg.wg + 1) * N * stride pixels wide. The paper names
// this step (memory coalescing padding against bank conflicts) without giving its rule; the
// rule here is this design's. Requires Kw <= N*stride + stride so that Wc >= Wp.
// Combinational pass-through with valid/ready; zero words are made without consuming input.
module coalesce_padding
  import ff2_pkg::*;
#(
  parameter int unsigned W = 64,
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  layer_cfg_t   cfg,
  input  logic         start,      // clears the row position for a new layer
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic [10:0] x, wp, wc;
  logic [15:0] k, wpp;
  logic        is_pad;
  assign wp  = 11'(cfg.wi) + 11'(2 * cfg.pad);
  assign wc  = 11'((int'(cfg.wg) + 1) * N * int'(cfg.stride));
  assign wpp = 16'(cfg.ci_tiles) * 16'(cfg.te_tiles);
  assign is_pad    = (x >= wp);
  assign out_valid = is_pad || in_valid;
  assign out_data  = is_pad ? '0 : in_data;
  assign in_ready  = !is_pad && out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; k <= '0;
    end else if (start) begin
      x <= '0; k <= '0;
    end else if (out_valid && out_ready) begin
      if (k == wpp - 1'b1) begin
        k <= '0;
        x <= (x == wc - 1'b1) ? '0 : x + 1'b1;
      end else k <= k + 1'b1;
    end
  end
endmodule
