// gather_fast2slow: "Mux-Gather, Shift-Align, Fast2Slow" stage behind the systolic array.
//
// PE(r,c) finishes its sums r+c cycles after PE(0,0). Each PE result is delayed by
// (N-1-r)+(M/4-1-c) clk2x cycles so that all N x M/4 results of one output group appear in the
// same cycle (shift-align). The aligned M x N x S partial sums (12 bits each) are written as one
// entry into a clock-crossing FIFO and read in the clk domain, where they are sent out one
// pixel per cycle (N cycles per group, the paper's "aggregate the partial sums N in a group").
// The writer never waits: the engine's issue logic keeps at most FIFO_DEPTH groups in flight
// using `grp_done`, a clk pulse for each group fully sent. Whole-group FIFO entries and the
// credit scheme are this design's choices.
// Output: psum has M*S 12-bit values, value (m*S+s) is channel m, time step s of pixel `pix`.
module gather_fast2slow #(
  parameter int unsigned M = 16,
  parameter int unsigned N = 8,
  parameter int unsigned S = 4,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     clk2x,
  input  logic                     rst_n,
  input  logic [N*(M/4)-1:0]       sum_valid,
  input  logic [N*(M/4)*S*48-1:0]  sums,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [M*S*12-1:0]        out_psum,
  output logic [$clog2(N)-1:0]   out_pix,
  output logic                     out_grp_last,
  output logic                     grp_done
);
  localparam int unsigned C  = M / 4;
  localparam int unsigned GW = N * C * S * 48;

  logic [N*C-1:0]  al_valid;
  logic [GW-1:0]   al_sums;
  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      localparam int unsigned D = (N-1-r) + (C-1-c);
      logic [S*48:0] dl [D+1];
      assign dl[0] = {sum_valid[r*C+c], sums[(r*C+c)*S*48 +: S*48]};
      for (genvar d = 1; d <= D; d++) begin : g_d
        always_ff @(posedge clk2x or negedge rst_n) begin
          if (!rst_n) dl[d] <= '0;
          else        dl[d] <= dl[d-1];
        end
      end
      assign {al_valid[r*C+c], al_sums[(r*C+c)*S*48 +: S*48]} = dl[D];
    end
  end

  logic         f_empty, f_full, f_ren;
  logic [GW-1:0] f_data;
  async_fifo #(.W(GW), .DEPTH(FIFO_DEPTH)) u_cdc (
    .wclk(clk2x), .rclk(clk), .rst_n,
    .w_en(al_valid[0]), .w_data(al_sums), .full(f_full),
    .r_en(f_ren), .r_data(f_data), .empty(f_empty)
  );

  // slow side: serialise one pixel (row r of the array) per cycle
  logic [$clog2(N)-1:0] pix;
  assign out_valid    = !f_empty;
  assign out_pix      = pix;
  assign out_grp_last = (pix == ($clog2(N))'(N-1));
  assign f_ren        = out_valid && out_ready && out_grp_last;
  assign grp_done     = f_ren;
  always_comb begin
    for (int c = 0; c < C; c++)
      for (int s = 0; s < S; s++)
        for (int ml = 0; ml < 4; ml++)
          out_psum[((4*c+ml)*S + s)*12 +: 12] = f_data[((int'(pix)*C + c)*S*48) + (s*4+ml)*12 +: 12];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pix <= '0;
    else if (out_valid && out_ready) pix <= out_grp_last ? '0 : pix + 1'b1;
  end
endmodule
