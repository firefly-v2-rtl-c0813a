// systolic_array: output-stationary array of N rows by M/4 columns of PEs (runs on clk2x).
//
// Weights enter at the top of each PE column and move down one PE per cycle; spikes enter at
// the left of each PE row and move right one PE per cycle. Row r serves output pixel r of the
// N-pixel group; column c serves output channels 4c..4c+3. Every PE keeps its own sums
// (output stationary). The input staircase (row r's spikes r cycles late, column c's weights
// c cycles late, the staged registers in front of the array) makes the two operands of a word
// meet in PE(r,c) r+c cycles after they enter, and the PE's result is ready PE_H = V/4 cycles
// later. The paper's Table II gives height M/4 and width N while its text sends weights down
// the columns and collects results from "M/4 PE columns"; the array here follows the text:
// M/4 columns share one weight stream each, N rows share one spike stream each.
// Interface: spk_in: row r at bits r*(V/2*S) (layout of pe.spk_in); w_in: column c at bits
// c*(V/2*32) (layout of pe.w_in); sums: PE(r,c) at bits (r*(M/4)+c)*S*48 with the valid bit
// at index r*(M/4)+c.
module systolic_array #(
  parameter int unsigned M = 16,
  parameter int unsigned V = 16,
  parameter int unsigned N = 8,
  parameter int unsigned S = 4
) (
  input  logic                      clk2x,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic [N*(V/2)*S-1:0]      spk_in,
  input  logic [(M/4)*(V/2)*32-1:0] w_in,
  output logic [N*(M/4)-1:0]        sum_valid,
  output logic [N*(M/4)*S*48-1:0]   sums
);
  localparam int unsigned C  = M / 4;
  localparam int unsigned SW = (V/2) * S;
  localparam int unsigned WW = (V/2) * 32;

  // left edge: row staircase for spikes, valid and last
  logic [SW-1:0] sp [N][C+1];
  logic          vl [N][C+1];
  logic          la [N][C+1];
  logic [WW-1:0] wt [N+1][C];

  for (genvar r = 0; r < N; r++) begin : g_rskew
    logic [SW+1:0] dl [r+1];
    assign dl[0] = {in_valid, in_last, spk_in[r*SW +: SW]};
    for (genvar d = 1; d <= r; d++) begin : g_d
      always_ff @(posedge clk2x or negedge rst_n) begin
        if (!rst_n) dl[d] <= '0;
        else        dl[d] <= dl[d-1];
      end
    end
    assign {vl[r][0], la[r][0], sp[r][0]} = dl[r];
  end

  for (genvar c = 0; c < C; c++) begin : g_cskew
    logic [WW-1:0] dl [c+1];
    assign dl[0] = w_in[c*WW +: WW];
    for (genvar d = 1; d <= c; d++) begin : g_d
      always_ff @(posedge clk2x or negedge rst_n) begin
        if (!rst_n) dl[d] <= '0;
        else        dl[d] <= dl[d-1];
      end
    end
    assign wt[0][c] = dl[c];
  end

  for (genvar r = 0; r < N; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      pe #(.V(V), .S(S)) u_pe (
        .clk2x, .rst_n,
        .in_valid(vl[r][c]), .in_last(la[r][c]), .spk_in(sp[r][c]), .w_in(wt[r][c]),
        .out_valid(vl[r][c+1]), .out_last(la[r][c+1]), .spk_out(sp[r][c+1]), .w_out(wt[r+1][c]),
        .sum_valid(sum_valid[r*C+c]), .sum(sums[(r*C+c)*S*48 +: S*48])
      );
    end
  end
endmodule
