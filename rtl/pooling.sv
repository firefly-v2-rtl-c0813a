// pooling: optional 2x2 / stride-2 max or average pooling of the output spike stream.
//
// Input: one word per pixel and output time tile, M x S binary spikes (bit m*S+s), in the
// engine's order: output row h, pixel group wg, time tile t, pixel n (0..N-1). The unit
// counts h, wg and t itself from the layer configuration. Even rows are folded horizontally
// into a line buffer indexed by (x/2, t); odd rows complete the 2x2 window and emit N/2
// pixels per group. Max pooling ORs the four spikes; average pooling counts them (0..4, the
// 2x2 average shifted left by 2) and fits the count into 2 bits by saturating 4 to 3 or by
// shifting right (the saturate-or-shift rule), chosen per layer. With pooling off, words
// pass through. Output values are 4-bit fields (bits (m*S+s)*4) so that later stages can
// carry multi-bit spikes. Only 2x2 windows are built; the paper does not give the window
// sizes its pooling unit supports. Ho and the pixels per row (wg*N) must be even for pooling.
// Line buffer: MAX_WO/2 x MAX_TT entries. Valid/ready; output registered.
module pooling
  import ff2_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned N = 8,
  parameter int unsigned S = 4,
  parameter int unsigned MAX_WO = 256,
  parameter int unsigned MAX_TT = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [M*S-1:0]       in_spk,
  input  logic [$clog2(N)-1:0] in_pix,
  input  logic                 in_tile_last,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [M*S*4-1:0]     out_spk,
  output logic [$clog2(N)-1:0] out_pix,
  output logic                 out_tile_last
);
  localparam int unsigned LBW = MAX_WO / 2;
  logic [M*S*3-1:0] lb [LBW*MAX_TT];
  logic [M*S*3-1:0] hsum;                 // horizontal partial window of the current row
  logic [7:0] t_q, wg_q, to;
  logic [9:0] h_q;
  logic fire;
  assign to       = cfg.te_tiles / 8'(spk_rounds(cfg.spk_mode));
  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  int unsigned lidx;
  assign lidx = ((int'(wg_q) * N + int'(in_pix)) / 2) * MAX_TT + int'(t_q);

  logic [M*S*3-1:0] wsum, lbsum;
  always_comb begin
    for (int i = 0; i < M*S; i++) begin
      wsum[i*3 +: 3]  = (cfg.pool_mode == POOL_MAX) ? {2'b0, hsum[i*3] | in_spk[i]}
                                                    : hsum[i*3 +: 3] + {2'b0, in_spk[i]};
      lbsum[i*3 +: 3] = (cfg.pool_mode == POOL_MAX) ? {2'b0, lb[lidx][i*3] | wsum[i*3]}
                                                    : lb[lidx][i*3 +: 3] + wsum[i*3 +: 3];
    end
  end

  always_ff @(posedge clk) begin
    if (fire && cfg.pool_mode != POOL_NONE && !h_q[0] && in_pix[0]) lb[lidx] <= wsum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hsum <= '0; t_q <= '0; wg_q <= '0; h_q <= '0;
      out_valid <= 1'b0; out_spk <= '0; out_pix <= '0; out_tile_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (cfg.pool_mode == POOL_NONE) begin
          out_valid <= 1'b1;
          for (int i = 0; i < M*S; i++) out_spk[i*4 +: 4] <= {3'b0, in_spk[i]};
          out_pix <= in_pix;
          out_tile_last <= in_tile_last;
        end else begin
          if (!in_pix[0]) begin
            for (int i = 0; i < M*S; i++) hsum[i*3 +: 3] <= {2'b0, in_spk[i]};
          end else if (h_q[0]) begin
            out_valid <= 1'b1;
            for (int i = 0; i < M*S; i++)
              out_spk[i*4 +: 4] <= (cfg.pool_mode == POOL_MAX) ? {3'b0, lbsum[i*3]}
                                                             : fit4({2'b0, lbsum[i*3 +: 3]}, cfg.pool_fit);
            out_pix <= in_pix >> 1;
            out_tile_last <= in_tile_last;
          end
        end
        if (in_pix == ($clog2(N))'(N-1)) begin
          if (t_q == to - 1'b1) begin
            t_q <= '0;
            if (wg_q == cfg.wg - 1'b1) begin
              wg_q <= '0;
              h_q  <= (h_q == cfg.ho - 1'b1) ? '0 : h_q + 1'b1;
            end else wg_q <= wg_q + 1'b1;
          end else t_q <= t_q + 1'b1;
        end
      end
    end
  end
endmodule
