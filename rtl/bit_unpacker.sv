// bit_unpacker: splits a stream of IN_W-bit beats into chunks of a run-time number of bits.
//
// Bits are kept in a reservoir of IN_W + MAX_C bits, least significant bit first. A beat is
// taken when it fits; a chunk of `nbits` (1..MAX_C) is offered when that many bits are held,
// in the low bits of out_data (upper bits zero). Valid/ready on both sides.
module bit_unpacker #(
  parameter int unsigned IN_W  = 128,
  parameter int unsigned MAX_C = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(MAX_C+1)-1:0] nbits,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [IN_W-1:0]            in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [MAX_C-1:0]           out_data
);
  localparam int unsigned RW = IN_W + MAX_C;
  localparam int unsigned CW = $clog2(RW + 1);
  logic [RW-1:0] res;
  logic [CW-1:0] cnt, cnt_after_pop;
  logic pop;
  assign out_valid = cnt >= CW'(nbits) && nbits != '0;
  assign pop       = out_valid && out_ready;
  assign cnt_after_pop = pop ? cnt - CW'(nbits) : cnt;
  assign in_ready  = (32'(cnt_after_pop) + 32'(IN_W) <= 32'(RW));
  always_comb begin
    out_data = '0;
    for (int i = 0; i < MAX_C; i++) if (i < int'(nbits)) out_data[i] = res[i];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res <= '0; cnt <= '0;
    end else begin
      logic [RW-1:0] r;
      r = pop ? (res >> nbits) : res;
      if (in_valid && in_ready) r = r | (RW'(in_data) << cnt_after_pop);
      res <= r;
      cnt <= cnt_after_pop + ((in_valid && in_ready) ? CW'(IN_W) : '0);
    end
  end
endmodule
