// conv_padding: inserts the zero padding of a convolution into the input spike stream.
//
// The input stream carries an Hi x Wi feature map row by row; each pixel is cfg.ci_tiles *
// cfg.te_tiles words (all input-channel tiles, then all time tiles). The output stream is the
// (Hi+2P) x (Wi+2P) map with P = cfg.pad zero pixels on every side: for a padding position a
// zero word is emitted without consuming input. The whole map is sent once per output-channel
// tile (cfg.co_tiles times). `start` arms the unit for one layer; it goes idle after the last
// map, so no padding words leave it between layers. One word per cycle, combinational
// pass-through with valid/ready (no storage).
module conv_padding
  import ff2_pkg::*;
#(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  layer_cfg_t   cfg,
  input  logic         start,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  logic [10:0] y, x, hp, wp;
  logic [15:0] k, wpp;
  logic [7:0]  o;
  logic        is_pad, act;
  assign hp  = 11'(cfg.hi) + 11'(2 * cfg.pad);
  assign wp  = 11'(cfg.wi) + 11'(2 * cfg.pad);
  assign wpp = 16'(cfg.ci_tiles) * 16'(cfg.te_tiles);
  assign is_pad = (y < 11'(cfg.pad)) || (y >= 11'(cfg.pad) + 11'(cfg.hi)) ||
                  (x < 11'(cfg.pad)) || (x >= 11'(cfg.pad) + 11'(cfg.wi));
  assign out_valid = act && (is_pad || in_valid);
  assign out_data  = is_pad ? '0 : in_data;
  assign in_ready  = act && !is_pad && out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y <= '0; x <= '0; k <= '0; o <= '0; act <= 1'b0;
    end else if (start) begin
      y <= '0; x <= '0; k <= '0; o <= '0; act <= (cfg.co_tiles != 0);
    end else if (out_valid && out_ready) begin
      if (k == wpp - 1'b1) begin
        k <= '0;
        if (x == wp - 1'b1) begin
          x <= '0;
          if (y == hp - 1'b1) begin
            y <= '0;
            o <= o + 1'b1;
            if (o == cfg.co_tiles - 1'b1) act <= 1'b0;
          end else y <= y + 1'b1;
        end else x <= x + 1'b1;
      end else k <= k + 1'b1;
    end
  end
endmodule
