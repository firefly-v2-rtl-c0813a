// partial_reuse_fifo: streaming weight FIFO that replays each weight window.
//
// In the spatiotemporal loop order the weights of one output-channel tile, the window of
// L = Kh*Kw*Ci/V words of M x V weights, are needed again for every output row, pixel group
// and time tile, R = Ho * Wo/N * T/S times. The FIFO keeps the window, reads it out R times in
// order, and only then frees it. Writes continue into the free space meanwhile, so the next
// tile's window streams in while the current one is replayed (capacity DEPTH words, L <= DEPTH;
// with L <= DEPTH/2 loading fully overlaps). The paper takes this block from the first FireFly
// and gives no insides; this circular-buffer form is this design's. `start` empties it.
// Valid/ready on both sides; the head word is read combinationally.
module partial_reuse_fifo
  import ff2_pkg::*;
#(
  parameter int unsigned W     = 2048,
  parameter int unsigned DEPTH = 512
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
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, base;     // write pointer, start of the current window
  logic [15:0]   off;          // read offset inside the window
  logic [31:0]   rep;          // replays done
  logic [15:0]   len;
  logic [31:0]   reps;
  logic [AW:0]   rd;
  assign len  = 16'(cfg.kh) * 16'(cfg.kw) * 16'(cfg.ci_tiles);
  assign reps = 32'(cfg.ho) * 32'(cfg.wg) * 32'(cfg.te_tiles);
  assign rd   = base + (AW+1)'(off);
  assign in_ready  = ((wp - base) < (AW+1)'(DEPTH));
  assign out_valid = ((wp - base) > (AW+1)'(off));
  assign out_data  = mem[rd[AW-1:0]];

  always_ff @(posedge clk) if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; base <= '0; off <= '0; rep <= '0;
    end else if (start) begin
      wp <= '0; base <= '0; off <= '0; rep <= '0;
    end else begin
      if (in_valid && in_ready) wp <= wp + 1'b1;
      if (out_valid && out_ready) begin
        if (off == len - 1'b1) begin
          off <= '0;
          if (rep == reps - 1'b1) begin
            rep  <= '0;
            base <= base + (AW+1)'(len);
          end else rep <= rep + 1'b1;
        end else off <= off + 1'b1;
      end
    end
  end
  assert property (@(posedge clk) disable iff (!rst_n) len <= 16'(DEPTH));
endmodule
