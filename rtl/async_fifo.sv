// async_fifo: clock-domain-crossing FIFO with Gray-coded pointers.
//
// Write side on wclk, read side on rclk; each pointer is passed to the other side through
// two synchronising flip-flops, so `full` and `empty` are conservative by two cycles of the
// receiving clock. The head word is read combinationally from the storage array.
// DEPTH must be a power of two. Used to return partial sums from clk2x to clk.
module async_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 4
) (
  input  logic         wclk,
  input  logic         rclk,
  input  logic         rst_n,
  input  logic         w_en,
  input  logic [W-1:0] w_data,
  output logic         full,
  input  logic         r_en,
  output logic [W-1:0] r_data,
  output logic         empty
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wb, rb, wg, rg, wg_s1, wg_s2, rg_s1, rg_s2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wg = b2g(wb);
  assign rg = b2g(rb);
  assign full  = (wg == {~rg_s2[AW:AW-1], rg_s2[AW-2:0]});
  assign empty = (rg == wg_s2);
  assign r_data = mem[rb[AW-1:0]];

  always_ff @(posedge wclk) if (w_en && !full) mem[wb[AW-1:0]] <= w_data;

  always_ff @(posedge wclk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= '0; rg_s1 <= '0; rg_s2 <= '0;
    end else begin
      if (w_en && !full) wb <= wb + 1'b1;
      rg_s1 <= rg; rg_s2 <= rg_s1;
    end
  end
  always_ff @(posedge rclk or negedge rst_n) begin
    if (!rst_n) begin
      rb <= '0; wg_s1 <= '0; wg_s2 <= '0;
    end else begin
      if (r_en && !empty) rb <= rb + 1'b1;
      wg_s1 <= wg; wg_s2 <= wg_s1;
    end
  end

  assert property (@(posedge wclk) disable iff (!rst_n) !(w_en && full));
endmodule
