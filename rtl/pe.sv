// pe: processing element of the output-stationary spatiotemporal systolic array.
//
// A PE holds PE_H = V/4 rows by S columns of DSP crossbars. Each DSP row takes two of the V/2
// input channels delivered per fast cycle; each DSP column is one time step. All DSPs of a row
// share the same weights (4 output channels x 2 input channels), each DSP has its own two
// spikes. Down a column the DSPs are chained through their cascade paths (the "dendrite"), and
// the bottom slice accumulates, so a column produces four 12-bit partial sums (4 output
// channels) for its time step. To line the cascade up, DSP row k sees its inputs k cycles late.
// Interface (all on clk2x): spk_in is V/2*S bits, bit s*(V/2)+v = spike of channel v at step s;
// w_in is 4*(V/2) bytes, byte v*4+m = weight of output channel m from input channel v. The
// inputs are passed on, one cycle later, to the PE on the right (spikes, valid, last) and
// below (weights). When the word flagged `in_last` has been added, `sum` holds the finished
// 4 x S sums (lane m of column s at bits (s*4+m)*12) for one cycle of `sum_valid`, PE_H
// cycles after that word entered; the accumulator restarts with the next valid word.
module pe #(
  parameter int unsigned V = 16,
  parameter int unsigned S = 4
) (
  input  logic                  clk2x,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_last,
  input  logic [V/2*S-1:0]      spk_in,
  input  logic [V/2*32-1:0]     w_in,
  output logic                  out_valid,
  output logic                  out_last,
  output logic [V/2*S-1:0]      spk_out,
  output logic [V/2*32-1:0]     w_out,
  output logic                  sum_valid,
  output logic [S*48-1:0]       sum
);
  localparam int unsigned PH = V / 4;

  // systolic forwarding registers
  always_ff @(posedge clk2x or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; spk_out <= '0; w_out <= '0;
    end else begin
      out_valid <= in_valid; out_last <= in_last; spk_out <= spk_in; w_out <= w_in;
    end
  end

  // input skew for the cascade: row k uses inputs delayed by k cycles
  logic [V/2*S-1:0]  spk_d [PH];
  logic [V/2*32-1:0] w_d   [PH];
  logic              v_d   [PH];
  logic              l_d   [PH];
  assign spk_d[0] = spk_in;
  assign w_d[0]   = w_in;
  assign v_d[0]   = in_valid;
  assign l_d[0]   = in_last;
  for (genvar k = 1; k < PH; k++) begin : g_skew
    always_ff @(posedge clk2x or negedge rst_n) begin
      if (!rst_n) begin
        spk_d[k] <= '0; w_d[k] <= '0; v_d[k] <= 1'b0; l_d[k] <= 1'b0;
      end else begin
        spk_d[k] <= spk_d[k-1]; w_d[k] <= w_d[k-1]; v_d[k] <= v_d[k-1]; l_d[k] <= l_d[k-1];
      end
    end
  end

  // restart flag of the accumulating slices: set after a word with `last`
  logic restart;
  always_ff @(posedge clk2x or negedge rst_n) begin
    if (!rst_n)              restart <= 1'b1;
    else if (v_d[PH-1])      restart <= l_d[PH-1];
  end

  logic [47:0] p [PH][S];
  for (genvar s = 0; s < S; s++) begin : g_col
    for (genvar k = 0; k < PH; k++) begin : g_row
      logic [1:0] spk2;
      assign spk2 = {spk_d[k][s*(V/2) + 2*k + 1], spk_d[k][s*(V/2) + 2*k]} & {2{v_d[k]}};
      dsp_crossbar #(.ACC(k == PH-1)) u_dsp (
        .clk(clk2x), .rst_n, .en(v_d[k]), .restart,
        .spk(spk2),
        .w0(w_d[k][(2*k)*32 +: 32]),
        .w1(w_d[k][(2*k+1)*32 +: 32]),
        .pcin((k == 0) ? 48'd0 : p[(k == 0) ? 0 : k-1][s]),
        .p(p[k][s])
      );
    end
    assign sum[s*48 +: 48] = p[PH-1][s];
  end

  // the bottom slices hold the finished sum in the cycle after the last word
  always_ff @(posedge clk2x or negedge rst_n) begin
    if (!rst_n) sum_valid <= 1'b0;
    else        sum_valid <= v_d[PH-1] && l_d[PH-1];
  end
endmodule
