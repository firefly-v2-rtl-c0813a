// neuro_dynamic: two-phase neurodynamics unit (M channels, S time steps per cycle).
//
// For each pixel and channel the unit receives the merged synaptic currents P0..P(S-1) of S
// consecutive time steps and must emit S spikes per cycle. A plain step-by-step update would
// chain S integrate/compare/reset stages. Instead, as in a carry look-ahead adder:
//  phase 1 (registered): from the currents alone, every membrane value that could occur is
//          computed: for each step t and each possible "last reset before step j", the sum
//          P_j + ... + P_t is compared with the threshold (spike candidates), and the
//          threshold minus the prefix sums is prepared for the carried-in potential.
//  phase 2: the spikes are selected step by step from the candidates with a chain of
//          multiplexers driven by the spikes already chosen, and the carried-in potential P'
//          is compared with the prepared values. The state kept per pixel and channel is P',
//          the potential of the last step before any reset, and S', the last spike.
// NEURON selects the neuron model at build time (static reconfiguration):
//   NEURON_IF  : integrate and fire, hard reset to zero (the paper's Fig. 8 case);
//   NEURON_LIF : as IF, plus leak V -= V >>> LEAK_SHIFT before each integration (leak form
//                and factor are this design's choice);
//   NEURON_RMP : residual membrane potential, soft reset by subtracting the threshold; here
//                P' is the potential after reset and the candidates are indexed by the number
//                of spikes already fired in the batch.
// A spike fires when the membrane is strictly greater than the threshold. State is cleared
// (P' = 0, S' = 0) on the first time tile of a pixel (`in_first`). Thresholds: M signed
// 32-bit words (low 18 bits used) per output-channel tile from the 128-bit threshold stream,
// loaded before the tile's first word; `in_tile_last` ends the tile.
// Timing: one word per cycle; the result is registered, two cycles after the input.
module neuro_dynamic
  import ff2_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned N = 8,
  parameter int unsigned S = 4,
  parameter neuron_e     NEURON = NEURON_IF,
  parameter int unsigned LEAK_SHIFT = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [M*S*18-1:0]      in_vmem,
  input  logic [$clog2(N)-1:0] in_pix,
  input  logic                   in_first,
  input  logic                   in_tile_last,
  input  logic                   thr_valid,
  output logic                   thr_ready,
  input  logic [127:0]           thr_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [M*S-1:0]         out_spk,     // bit m*S+s
  output logic [$clog2(N)-1:0] out_pix,
  output logic                   out_tile_last
);
  localparam int unsigned BEATS = (M * 32 + 127) / 128;
  localparam int unsigned VW = 22;   // internal width for sums of S 18-bit values

  // ---------------- threshold loading ----------------
  logic [M*32-1:0] thr_q;
  logic [$clog2(BEATS+1)-1:0] tcnt;
  logic thr_ok;
  assign thr_ready = !thr_ok;

  // ---------------- phase 1 ----------------
  typedef logic signed [VW-1:0] v_t;
  v_t  p1_p    [M][S];        // currents
  v_t  p1_thr  [M];
  logic p1_cand [M][S][S];    // IF/LIF: [t][j] spike if reset just before step j (j<=t)
  v_t  p1_seg  [M][S][S];     // IF/LIF: [t][j] membrane at step t after a reset before step j
  v_t  p1_need [M][S];        // IF: thresh - (P0+..+Pt) ; RMP: (k+1)*thresh is built in phase 2
  logic p1_valid, p1_first, p1_tlast;
  logic [$clog2(N)-1:0] p1_pix;

  logic adv1, adv2;
  assign adv2     = !out_valid || out_ready;
  assign adv1     = !p1_valid || adv2;
  assign in_ready = thr_ok && adv1;

  function automatic v_t leak(input v_t v);
    return (NEURON == NEURON_LIF) ? v - (v >>> LEAK_SHIFT) : v;
  endfunction

  v_t  c_p [M][S];
  logic c_cand [M][S][S];
  v_t  c_seg [M][S][S];
  v_t  c_need [M][S];
  always_comb begin
    for (int m = 0; m < M; m++) begin
      v_t th, acc;
      th = v_t'(signed'(thr_q[m*32 +: 18]));
      for (int s = 0; s < S; s++) c_p[m][s] = v_t'(signed'(in_vmem[(m*S+s)*18 +: 18]));
      for (int j = 0; j < S; j++) begin
        acc = '0;
        for (int t = 0; t < S; t++) begin
          c_cand[m][t][j] = 1'b0;
          c_seg[m][t][j]  = '0;
          if (t >= j) begin
            acc = (t == j) ? c_p[m][t] : leak(acc) + c_p[m][t];
            c_cand[m][t][j] = acc > th;
            c_seg[m][t][j]  = acc;
          end
        end
      end
      acc = '0;
      for (int t = 0; t < S; t++) begin
        acc = acc + c_p[m][t];
        c_need[m][t] = th - acc;
      end
    end
  end

  // ---------------- phase 2 ----------------
  v_t   st_p [N][M];   // P'
  logic st_s [N][M];   // S'
  logic [M*S-1:0] spk2;
  v_t   nxt_p [M];
  logic nxt_s [M];
  v_t   pp [M];
  logic sp [M];
  v_t   vcarry [M][S+1];   // IF/LIF: membrane if no reset happened in this batch
  v_t   vrmp   [M][S+1];   // RMP: membrane after soft reset
  logic [$clog2(S+1)-1:0] lr [M][S+1];   // first step after last reset; S = carry P'
  always_comb begin
    for (int m = 0; m < M; m++) begin
      pp[m] = p1_first ? '0 : st_p[p1_pix][m];
      sp[m] = p1_first ? 1'b0 : st_s[p1_pix][m];
      lr[m][0]     = sp[m] ? '0 : ($clog2(S+1))'(S);
      vcarry[m][0] = pp[m];
      vrmp[m][0]   = pp[m];
      nxt_p[m]     = '0;
      for (int t = 0; t < S; t++) begin
        logic s_t;
        vcarry[m][t+1] = leak(vcarry[m][t]) + p1_p[m][t];
        if (NEURON == NEURON_RMP) begin
          s_t = (vrmp[m][t] + p1_p[m][t]) > p1_thr[m];
          vrmp[m][t+1] = vrmp[m][t] + p1_p[m][t] - (s_t ? p1_thr[m] : '0);
          nxt_p[m] = vrmp[m][t+1];
        end else begin
          vrmp[m][t+1] = '0;
          if (lr[m][t] == ($clog2(S+1))'(S)) begin
            s_t = (NEURON == NEURON_IF) ? (pp[m] > p1_need[m][t]) : (vcarry[m][t+1] > p1_thr[m]);
            nxt_p[m] = vcarry[m][t+1];
          end else begin
            s_t = p1_cand[m][t][lr[m][t][$clog2(S)-1:0]];
            nxt_p[m] = p1_seg[m][t][lr[m][t][$clog2(S)-1:0]];
          end
        end
        lr[m][t+1] = s_t ? ($clog2(S+1))'(t+1) : lr[m][t];
        spk2[m*S+t] = s_t;
      end
      nxt_s[m] = spk2[m*S+S-1];
    end
  end

  always_ff @(posedge clk) begin
    if (p1_valid && adv2)
      for (int m = 0; m < M; m++) begin
        st_p[p1_pix][m] <= nxt_p[m];
        st_s[p1_pix][m] <= nxt_s[m];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr_q <= '0; tcnt <= '0; thr_ok <= 1'b0;
      p1_valid <= 1'b0; p1_first <= 1'b0; p1_tlast <= 1'b0; p1_pix <= '0;
      for (int m = 0; m < M; m++) begin
        p1_thr[m] <= '0;
        for (int s = 0; s < S; s++) begin
          p1_p[m][s] <= '0; p1_need[m][s] <= '0;
          for (int j = 0; j < S; j++) begin
            p1_cand[m][s][j] <= 1'b0; p1_seg[m][s][j] <= '0;
          end
        end
      end
      out_valid <= 1'b0; out_spk <= '0; out_pix <= '0; out_tile_last <= 1'b0;
    end else begin
      if (thr_valid && thr_ready) begin
        thr_q[tcnt*128 +: 128] <= thr_data;
        if (tcnt == ($clog2(BEATS+1))'(BEATS-1)) begin
          tcnt <= '0; thr_ok <= 1'b1;
        end else tcnt <= tcnt + 1'b1;
      end
      if (adv1) begin
        p1_valid <= in_valid && in_ready;
        if (in_valid && in_ready) begin
          p1_first <= in_first; p1_tlast <= in_tile_last; p1_pix <= in_pix;
          p1_p <= c_p; p1_cand <= c_cand; p1_seg <= c_seg; p1_need <= c_need;
          for (int m = 0; m < M; m++) p1_thr[m] <= v_t'(signed'(thr_q[m*32 +: 18]));
          if (in_tile_last) thr_ok <= 1'b0;
        end
      end
      if (adv2) begin
        out_valid <= p1_valid;
        if (p1_valid) begin
          out_spk <= spk2; out_pix <= p1_pix; out_tile_last <= p1_tlast;
        end
      end
    end
  end
endmodule
