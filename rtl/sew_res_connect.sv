// sew_res_connect: spike-element-wise residual connection.
//
// Combines the binary spikes of the current backbone (4-bit fields, value 0 or 1) with the
// shortcut spikes read from memory. Shortcut spikes are 1, 2 or 4 bits wide (cfg.res_bits),
// packed densely into 128-bit beats, M*S values per pixel, value (m*S+s) first-come lowest.
//   RES_IAND : out = (NOT backbone) AND shortcut, binary shortcut only (SEW-ResNet's IAND);
//   RES_ADD  : out = backbone + shortcut, then kept at 4 bits (saturating at 15) or fitted to
//              2 bits by saturating or by shifting right (cfg.res_fit);
//   RES_NONE : the backbone passes and no shortcut is read.
// The operand order of IAND follows the SEW-ResNet definition; the paper names the function
// only. The shortcut data of one tile, N*M*S*res_bits bits per pixel group, fills whole
// 128-bit beats whenever N*M*S is a multiple of 128 (the default 8*16*4 is), so tiles need no
// padding. Output registered, valid/ready.
module sew_res_connect
  import ff2_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned S = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  layer_cfg_t         cfg,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [M*S*4-1:0]   in_spk,
  input  logic               in_tile_last,
  input  logic               sc_valid,
  output logic               sc_ready,
  input  logic [127:0]       sc_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [M*S*4-1:0]   out_spk,
  output logic               out_tile_last
);
  localparam int unsigned MC = M * S * 4;
  logic           u_valid, u_ready;
  logic [MC-1:0]  u_data;
  logic           use_sc, fire;
  logic [$clog2(MC+1)-1:0] nb;

  assign use_sc = (cfg.res_mode != RES_NONE);
  assign nb     = ($clog2(MC+1))'(M*S) * ($clog2(MC+1))'(cfg.res_bits);

  bit_unpacker #(.IN_W(128), .MAX_C(MC)) u_unpack (
    .clk, .rst_n, .nbits(nb),
    .in_valid(sc_valid), .in_ready(sc_ready), .in_data(sc_data),
    .out_valid(u_valid), .out_ready(u_ready), .out_data(u_data));

  assign in_ready = (!out_valid || out_ready) && (!use_sc || u_valid);
  assign fire     = in_valid && in_ready;
  assign u_ready  = fire && use_sc;

  logic [MC-1:0] res;
  always_comb begin
    for (int i = 0; i < M*S; i++) begin
      logic [3:0] a, b;
      a = in_spk[i*4 +: 4];
      case (cfg.res_bits)
        3'd1:    b = {3'b0, u_data[i]};
        3'd2:    b = {2'b0, u_data[i*2 +: 2]};
        default: b = u_data[i*4 +: 4];
      endcase
      case (cfg.res_mode)
        RES_IAND: res[i*4 +: 4] = {3'b0, ~a[0] & b[0]};
        RES_ADD:  res[i*4 +: 4] = fit4({1'b0, a} + {1'b0, b}, cfg.res_fit);
        default:  res[i*4 +: 4] = a;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_spk <= '0; out_tile_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1; out_spk <= res; out_tile_last <= in_tile_last;
      end
    end
  end
endmodule
