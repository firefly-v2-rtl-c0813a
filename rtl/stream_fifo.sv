// stream_fifo: synchronous first-in first-out buffer for a valid/ready stream.
//
// Used as the "FIFO" in front of the stream adapters of the input spike and weight paths and
// as the data cache of the loader. Storage is a plain array; the head word is read
// combinationally from it, so a word written in one cycle can be popped in the next.
// Interface: in_* is the write side, out_* the read side; both transfer when valid && ready.
// `count` is the number of stored words. DEPTH must be a power of two. The buffer sizes of
// the paper's design are not given; every user picks its own depth.
module stream_fifo #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [W-1:0]              in_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [W-1:0]              out_data,
  output logic [$clog2(DEPTH):0]    count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wp, rp;

  assign count     = wp - rp;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
