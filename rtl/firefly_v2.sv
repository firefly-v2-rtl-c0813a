// firefly_v2: top of the FireFly v2 spiking-convolution accelerator (the "FireFly v2 IP").
//
// One layer at a time is run from external memory: the host writes the layer configuration
// over AXI4-Lite and starts it; the data loader streams input spikes, shortcut spikes and
// parameters in through two read DataMovers, and the data saver streams results out through
// one write DataMover. Between them:
//   input spikes : 128-bit beats -> width adapter -> conv padding -> coalesce padding -> im2col
//   weights      : 128-bit beats -> width adapter -> streaming partial reuse FIFO
//   engine       : V x N x S spikes times M x V weights per clk cycle, computed on clk2x by an
//                  output-stationary DSP systolic array, M x N x S partial sums per fan-in
//   post         : partial-sum processor (multi-bit merge, bias) -> [partial sums out] or
//                  neurodynamics -> pooling -> SEW residual -> spike counter -> saver
// clk and clk2x must come from one clock source, clk2x at twice the frequency with rising
// edges aligned. The DataMovers, the clocking and the processor system are outside: their
// command/data streams are ports. Port conventions: *_cmd is a dm_cmd_t (address, bytes);
// read data arrive with tlast at the end of each command; the write DataMover reports one
// status per command on wsts_valid.
// Parameters default to the KV260 build of the paper (M, V, N, S) = (16, 16, 8, 4); buffer
// depths and the neuron model are this design's defaults.
module firefly_v2
  import ff2_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned V = 16,
  parameter int unsigned N = 8,
  parameter int unsigned S = 4,
  parameter int unsigned IM2COL_DEPTH = 2048,
  parameter int unsigned WFIFO_DEPTH  = 512,
  parameter int unsigned CACHE_DEPTH  = 128,
  parameter int unsigned POOL_MAX_WO  = 256,
  parameter int unsigned POOL_MAX_TT  = 2,
  parameter neuron_e     NEURON       = NEURON_IF
) (
  input  logic          clk,
  input  logic          clk2x,
  input  logic          rst_n,
  // AXI4-Lite control (from M-AXI-HPM)
  input  logic          s_awvalid,
  output logic          s_awready,
  input  logic [11:0]   s_awaddr,
  input  logic          s_wvalid,
  output logic          s_wready,
  input  logic [31:0]   s_wdata,
  output logic          s_bvalid,
  input  logic          s_bready,
  input  logic          s_arvalid,
  output logic          s_arready,
  input  logic [11:0]   s_araddr,
  output logic          s_rvalid,
  input  logic          s_rready,
  output logic [31:0]   s_rdata,
  // two read DataMovers
  output logic [1:0]    rcmd_valid,
  input  logic [1:0]    rcmd_ready,
  output dm_cmd_t       rcmd [2],
  input  logic [1:0]    rdata_valid,
  output logic [1:0]    rdata_ready,
  input  logic [127:0]  rdata [2],
  input  logic [1:0]    rdata_last,
  // write DataMover
  output logic          wcmd_valid,
  input  logic          wcmd_ready,
  output dm_cmd_t       wcmd,
  output logic          wdata_valid,
  input  logic          wdata_ready,
  output logic [127:0]  wdata,
  output logic          wdata_last,
  input  logic          wsts_valid,
  output logic          irq_done
);
  layer_cfg_t cfg;
  logic start, saver_done, started, layer_done;
  logic in_done, p_done, e_busy;

  ctrl_regs u_regs (
    .clk, .rst_n,
    .awvalid(s_awvalid), .awready(s_awready), .awaddr(s_awaddr),
    .wvalid(s_wvalid), .wready(s_wready), .wdata(s_wdata),
    .bvalid(s_bvalid), .bready(s_bready),
    .arvalid(s_arvalid), .arready(s_arready), .araddr(s_araddr),
    .rvalid(s_rvalid), .rready(s_rready), .rdata(s_rdata),
    .cfg, .start, .busy(started && !layer_done), .done(layer_done));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     started <= 1'b0;
    else if (start) started <= 1'b1;
  end
  // a layer is done when every result is written and both loaders and the engine are idle
  assign layer_done = started && saver_done && in_done && p_done && !e_busy;
  assign irq_done   = layer_done;

  // ---------------- data loader ----------------
  logic [1:0]   u_cmd_valid, u_cmd_ready, u_valid, u_ready, u_last;
  dm_cmd_t      u_cmd [2];
  logic [127:0] u_data [2];

  logic [31:0] in_base [2], in_stride [2], in_len [2];
  logic [1:0]  in_dv, in_dr;
  logic [127:0] in_dd [2];
  assign in_base   = '{cfg.in_base, cfg.res_base};
  assign in_stride = '{32'd0, cfg.res_len};
  assign in_len    = '{cfg.in_len, cfg.res_len};
  cmdgen_datacache #(.NSEG(2), .DEPTH(CACHE_DEPTH)) u_cg_spk (
    .clk, .rst_n, .start, .tiles(cfg.co_tiles), .seg_en({cfg.res_mode != RES_NONE, 1'b1}),
    .seg_base(in_base), .seg_stride(in_stride), .seg_len(in_len),
    .cmd_valid(u_cmd_valid[0]), .cmd_ready(u_cmd_ready[0]), .cmd(u_cmd[0]),
    .din_valid(u_valid[0]), .din_ready(u_ready[0]), .din_data(u_data[0]), .din_last(u_last[0]),
    .dout_valid(in_dv), .dout_ready(in_dr), .dout_data(in_dd), .done(in_done));

  localparam int unsigned PRM_B = M * 4;   // bytes of M 32-bit bias or threshold words
  logic [31:0] p_base [3], p_stride [3], p_len [3];
  logic [2:0]  p_dv, p_dr;
  logic [127:0] p_dd [3];
  assign p_base   = '{cfg.prm_base, cfg.prm_base + 32'(PRM_B), cfg.prm_base + 32'(2*PRM_B)};
  assign p_stride = '{cfg.prm_len, cfg.prm_len, cfg.prm_len};
  assign p_len    = '{32'(PRM_B), 32'(PRM_B), cfg.w_len};
  cmdgen_datacache #(.NSEG(3), .DEPTH(CACHE_DEPTH)) u_cg_prm (
    .clk, .rst_n, .start, .tiles(cfg.co_tiles), .seg_en({1'b1, cfg.out_mode != OUT_PSUM, 1'b1}),
    .seg_base(p_base), .seg_stride(p_stride), .seg_len(p_len),
    .cmd_valid(u_cmd_valid[1]), .cmd_ready(u_cmd_ready[1]), .cmd(u_cmd[1]),
    .din_valid(u_valid[1]), .din_ready(u_ready[1]), .din_data(u_data[1]), .din_last(u_last[1]),
    .dout_valid(p_dv), .dout_ready(p_dr), .dout_data(p_dd), .done(p_done));

  loader_arbiter u_arb (
    .clk, .rst_n,
    .u_cmd_valid, .u_cmd_ready, .u_cmd,
    .m_cmd_valid(rcmd_valid), .m_cmd_ready(rcmd_ready), .m_cmd(rcmd),
    .m_valid(rdata_valid), .m_ready(rdata_ready), .m_data(rdata), .m_last(rdata_last),
    .u_valid, .u_ready, .u_data, .u_last);

  // ---------------- input spike preprocessing ----------------
  logic           a_v, a_r, cp_v, cp_r, cc_v, cc_r, ic_v, ic_r, ic_last;
  logic [V*S-1:0] a_d, cp_d, cc_d;
  logic [V*N*S-1:0] ic_d;
  stream_adapter #(.IN_W(128), .OUT_W(V*S)) u_spk_adapt (
    .clk, .rst_n, .in_valid(in_dv[0]), .in_ready(in_dr[0]), .in_data(in_dd[0]),
    .out_valid(a_v), .out_ready(a_r), .out_data(a_d));
  conv_padding #(.W(V*S)) u_cpad (
    .clk, .rst_n, .cfg, .start, .in_valid(a_v), .in_ready(a_r), .in_data(a_d),
    .out_valid(cp_v), .out_ready(cp_r), .out_data(cp_d));
  coalesce_padding #(.W(V*S), .N(N)) u_coal (
    .clk, .rst_n, .cfg, .start, .in_valid(cp_v), .in_ready(cp_r), .in_data(cp_d),
    .out_valid(cc_v), .out_ready(cc_r), .out_data(cc_d));
  im2col #(.V(V), .N(N), .S(S), .DEPTH(IM2COL_DEPTH)) u_im2col (
    .clk, .rst_n, .cfg, .start, .in_valid(cc_v), .in_ready(cc_r), .in_data(cc_d),
    .out_valid(ic_v), .out_ready(ic_r), .out_data(ic_d), .out_last(ic_last));

  // ---------------- weight preprocessing ----------------
  logic             wa_v, wa_r, wr_v, wr_r;
  logic [M*V*8-1:0] wa_d, wr_d;
  stream_adapter #(.IN_W(128), .OUT_W(M*V*8)) u_w_adapt (
    .clk, .rst_n, .in_valid(p_dv[2]), .in_ready(p_dr[2]), .in_data(p_dd[2]),
    .out_valid(wa_v), .out_ready(wa_r), .out_data(wa_d));
  partial_reuse_fifo #(.W(M*V*8), .DEPTH(WFIFO_DEPTH)) u_reuse (
    .clk, .rst_n, .cfg, .start, .in_valid(wa_v), .in_ready(wa_r), .in_data(wa_d),
    .out_valid(wr_v), .out_ready(wr_r), .out_data(wr_d));

  // ---------------- spike computing engine ----------------
  logic                 e_v, e_r, e_gl;
  logic [M*S*12-1:0]    e_psum;
  logic [$clog2(N)-1:0] e_pix;
  spike_engine #(.M(M), .V(V), .N(N), .S(S)) u_engine (
    .clk, .clk2x, .rst_n,
    .spk_valid(ic_v), .spk_ready(ic_r), .spk_last(ic_last), .spk_data(ic_d),
    .w_valid(wr_v), .w_ready(wr_r), .w_data(wr_d),
    .out_valid(e_v), .out_ready(e_r), .out_psum(e_psum), .out_pix(e_pix), .out_grp_last(e_gl),
    .busy(e_busy));

  // ---------------- post-processing ----------------
  logic                 pp_v, pp_r, pp_first, pp_tl;
  logic [M*S*18-1:0]    pp_d;
  logic [$clog2(N)-1:0] pp_pix;
  psum_proc #(.M(M), .N(N)) u_psum (
    .clk, .rst_n, .cfg,
    .in_valid(e_v), .in_ready(e_r), .in_psum(e_psum), .in_pix(e_pix), .in_grp_last(e_gl),
    .bias_valid(p_dv[0]), .bias_ready(p_dr[0]), .bias_data(p_dd[0]),
    .out_valid(pp_v), .out_ready(pp_r), .out_vmem(pp_d), .out_pix(pp_pix),
    .out_first(pp_first), .out_tile_last(pp_tl));

  logic psum_out;
  assign psum_out = (cfg.out_mode == OUT_PSUM);

  logic                 nd_v, nd_r, nd_tl, nd_in_v, nd_in_r;
  logic [M*S-1:0]       nd_spk;
  logic [$clog2(N)-1:0] nd_pix;
  assign nd_in_v = pp_v && !psum_out;
  neuro_dynamic #(.M(M), .N(N), .S(S), .NEURON(NEURON)) u_neuro (
    .clk, .rst_n,
    .in_valid(nd_in_v), .in_ready(nd_in_r), .in_vmem(pp_d), .in_pix(pp_pix),
    .in_first(pp_first), .in_tile_last(pp_tl),
    .thr_valid(p_dv[1]), .thr_ready(p_dr[1]), .thr_data(p_dd[1]),
    .out_valid(nd_v), .out_ready(nd_r), .out_spk(nd_spk), .out_pix(nd_pix), .out_tile_last(nd_tl));

  logic                 pl_v, pl_r, pl_tl;
  logic [M*S*4-1:0]     pl_spk;
  logic [$clog2(N)-1:0] pl_pix;
  pooling #(.M(M), .N(N), .S(S), .MAX_WO(POOL_MAX_WO), .MAX_TT(POOL_MAX_TT)) u_pool (
    .clk, .rst_n, .cfg,
    .in_valid(nd_v), .in_ready(nd_r), .in_spk(nd_spk), .in_pix(nd_pix), .in_tile_last(nd_tl),
    .out_valid(pl_v), .out_ready(pl_r), .out_spk(pl_spk), .out_pix(pl_pix), .out_tile_last(pl_tl));

  logic             rs_v, rs_r, rs_tl;
  logic [M*S*4-1:0] rs_spk;
  sew_res_connect #(.M(M), .S(S)) u_res (
    .clk, .rst_n, .cfg,
    .in_valid(pl_v), .in_ready(pl_r), .in_spk(pl_spk), .in_tile_last(pl_tl),
    .sc_valid(in_dv[1]), .sc_ready(in_dr[1]), .sc_data(in_dd[1]),
    .out_valid(rs_v), .out_ready(rs_r), .out_spk(rs_spk), .out_tile_last(rs_tl));

  logic             ac_v, ac_r, ac_tl;
  logic [M*S*4-1:0] ac_d;
  spike_acc #(.M(M), .S(S)) u_acc (
    .clk, .rst_n, .cfg,
    .in_valid(rs_v), .in_ready(rs_r), .in_spk(rs_spk), .in_tile_last(rs_tl),
    .out_valid(ac_v), .out_ready(ac_r), .out_data(ac_d), .out_tile_last(ac_tl));

  // ---------------- data saver ----------------
  logic              sv_v, sv_r, sv_tl;
  logic [M*S*32-1:0] sv_d;
  logic [2:0]        ob;
  assign ob = out_bits(cfg);
  always_comb begin
    sv_d = '0;
    if (psum_out) begin
      for (int i = 0; i < M*S; i++) sv_d[i*32 +: 32] = 32'(signed'(pp_d[i*18 +: 18]));
    end else if (cfg.out_mode == OUT_COUNT) begin
      sv_d[M*S*4-1:0] = ac_d;
    end else begin
      for (int i = 0; i < M*S; i++)
        case (ob)
          3'd1:    sv_d[i]       = ac_d[i*4];
          3'd2:    sv_d[i*2 +: 2] = ac_d[i*4 +: 2];
          default: sv_d[i*4 +: 4] = ac_d[i*4 +: 4];
        endcase
    end
  end
  assign sv_v  = psum_out ? pp_v : ac_v;
  assign sv_tl = psum_out ? pp_tl : ac_tl;
  assign pp_r  = psum_out ? sv_r : nd_in_r;
  assign ac_r  = psum_out ? 1'b0 : sv_r;

  data_saver #(.M(M), .S(S)) u_saver (
    .clk, .rst_n, .cfg, .start,
    .in_valid(sv_v), .in_ready(sv_r), .in_data(sv_d), .in_tile_last(sv_tl),
    .cmd_valid(wcmd_valid), .cmd_ready(wcmd_ready), .cmd(wcmd),
    .dout_valid(wdata_valid), .dout_ready(wdata_ready), .dout_data(wdata), .dout_last(wdata_last),
    .sts_valid(wsts_valid), .done(saver_done));
endmodule
