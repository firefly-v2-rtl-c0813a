// spike_engine: spatiotemporal spike computing engine.
//
// Every clk cycle in which a spike tile and a weight tile are both offered (and the return
// FIFO has room) the engine takes one step of the fan-in loop: a V x N x S binary spike tile
// times an M x V weight matrix. Two slow-to-fast gearboxes halve both tiles along the input
// channels and feed them over two clk2x cycles to the systolic array, which accumulates in
// place. The tile flagged `last` closes the fan-in (Kh*Kw*Ci/V steps); its M x N x S sums are
// gathered, aligned and returned to clk, one pixel (M x S sums) per cycle.
// Tile layouts (this design's choice): spike of channel v, pixel n, step s at bit
// (n*S+s)*V+v; weight of output channel m from input channel v at byte v*M+m.
// Latency from the `last` step to its first output pixel is about 2 + (N + M/4 + V/4)/2 + 3
// clk cycles; the step rate is one per clk cycle.
module spike_engine #(
  parameter int unsigned M = 16,
  parameter int unsigned V = 16,
  parameter int unsigned N = 8,
  parameter int unsigned S = 4,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   clk2x,
  input  logic                   rst_n,
  input  logic                   spk_valid,
  output logic                   spk_ready,
  input  logic                   spk_last,
  input  logic [V*N*S-1:0]       spk_data,
  input  logic                   w_valid,
  output logic                   w_ready,
  input  logic [M*V*8-1:0]       w_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [M*S*12-1:0]      out_psum,
  output logic [$clog2(N)-1:0] out_pix,
  output logic                   out_grp_last,
  output logic                   busy          // groups in flight
);
  localparam int unsigned C   = M / 4;
  localparam int unsigned SHW = N * (V/2) * S;
  localparam int unsigned WHW = C * (V/2) * 32;

  logic [$clog2(FIFO_DEPTH+1)-1:0] inflight;
  logic fire, grp_done;
  assign fire      = spk_valid && w_valid && (inflight < ($clog2(FIFO_DEPTH+1))'(FIFO_DEPTH));
  assign spk_ready = fire;
  assign w_ready   = fire;
  assign busy      = (inflight != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + (fire && spk_last) - grp_done;
  end

  // rearrange into two halves along the input channels
  logic [2*SHW-1:0] spk_r;
  logic [2*WHW-1:0] w_r;
  always_comb begin
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < N; r++)
        for (int s = 0; s < S; s++)
          for (int v = 0; v < V/2; v++)
            spk_r[h*SHW + r*(V/2*S) + s*(V/2) + v] = spk_data[(r*S+s)*V + h*(V/2) + v];
    for (int h = 0; h < 2; h++)
      for (int c = 0; c < C; c++)
        for (int v = 0; v < V/2; v++)
          for (int ml = 0; ml < 4; ml++)
            w_r[h*WHW + c*(V/2*32) + (v*4+ml)*8 +: 8] = w_data[((h*(V/2)+v)*M + 4*c+ml)*8 +: 8];
  end

  logic             fs_valid, fs_last, fs_phase, fw_valid, fw_last, fw_phase;
  logic [SHW-1:0]   fs_data;
  logic [WHW-1:0]   fw_data;
  gearbox_s2f #(.HALF_W(SHW)) u_gb_spk (
    .clk, .clk2x, .rst_n, .s_valid(fire), .s_last(spk_last), .s_data(spk_r),
    .f_valid(fs_valid), .f_last(fs_last), .f_phase(fs_phase), .f_data(fs_data));
  gearbox_s2f #(.HALF_W(WHW)) u_gb_w (
    .clk, .clk2x, .rst_n, .s_valid(fire), .s_last(spk_last), .s_data(w_r),
    .f_valid(fw_valid), .f_last(fw_last), .f_phase(fw_phase), .f_data(fw_data));

  logic [N*C-1:0]      sum_valid;
  logic [N*C*S*48-1:0] sums;
  // `last` is applied to the high half only, so both halves of the last step are summed
  systolic_array #(.M(M), .V(V), .N(N), .S(S)) u_array (
    .clk2x, .rst_n, .in_valid(fs_valid), .in_last(fs_last && fs_phase),
    .spk_in(fs_data), .w_in(fw_data), .sum_valid, .sums);

  gather_fast2slow #(.M(M), .N(N), .S(S), .FIFO_DEPTH(FIFO_DEPTH)) u_gather (
    .clk, .clk2x, .rst_n, .sum_valid, .sums,
    .out_valid, .out_ready, .out_psum, .out_pix, .out_grp_last, .grp_done);

  // both gearboxes run in lock step
  assert property (@(posedge clk2x) disable iff (!rst_n) fs_valid == fw_valid && fs_phase == fw_phase && fs_last == fw_last);
endmodule
