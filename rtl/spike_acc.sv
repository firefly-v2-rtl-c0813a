// spike_acc: optional spike counter (firing rates of a classification layer).
//
// With cfg.out_mode == OUT_COUNT every spike value of a tile is added to a 16-bit counter of
// its output channel (over all pixels and time steps); at the word marked tile_last one
// word with the M counts (count m at bits m*16) is sent and the counters are cleared.
// Otherwise words pass through unchanged. The counter width is this design's choice.
// Output registered, valid/ready; `out_is_count` marks a count word.
module spike_acc
  import ff2_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned S = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [M*S*4-1:0] in_spk,
  input  logic             in_tile_last,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [M*S*4-1:0] out_data,
  output logic             out_tile_last
);
  logic [15:0] cnt [M];
  logic [15:0] nxt [M];
  logic fire, counting;
  assign counting = (cfg.out_mode == OUT_COUNT);
  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  always_comb begin
    for (int m = 0; m < M; m++) begin
      nxt[m] = cnt[m];
      for (int s = 0; s < S; s++) nxt[m] = nxt[m] + 16'(in_spk[(m*S+s)*4 +: 4]);
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++) cnt[m] <= '0;
      out_valid <= 1'b0; out_data <= '0; out_tile_last <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (!counting) begin
          out_valid <= 1'b1; out_data <= in_spk; out_tile_last <= in_tile_last;
        end else if (in_tile_last) begin
          out_valid <= 1'b1; out_tile_last <= 1'b1;
          out_data <= '0;
          for (int m = 0; m < M; m++) begin
            out_data[m*16 +: 16] <= nxt[m];
            cnt[m] <= '0;
          end
        end else begin
          for (int m = 0; m < M; m++) cnt[m] <= nxt[m];
        end
      end
    end
  end
  if (S * 4 < 16) begin : g_chk
    $error("spike_acc needs S*4 >= 16 to hold the counts");
  end
endmodule
