// bit_packer: packs chunks of a run-time number of bits into OUT_W-bit beats.
//
// Each accepted chunk adds its low `nbits` bits above the bits already held (least
// significant first). A full beat is sent as soon as OUT_W bits are held. A chunk marked
// `in_last` closes the packet: the remaining bits are sent zero-padded in a final beat, which
// carries out_last. Valid/ready on both sides.
module bit_packer #(
  parameter int unsigned OUT_W = 128,
  parameter int unsigned MAX_C = 2048
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(MAX_C+1)-1:0] nbits,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [MAX_C-1:0]           in_data,
  input  logic                       in_last,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [OUT_W-1:0]           out_data,
  output logic                       out_last
);
  localparam int unsigned RW = OUT_W + MAX_C;
  localparam int unsigned CW = $clog2(RW + 1);
  logic [RW-1:0] res;
  logic [CW-1:0] cnt;
  logic          closing;   // a last chunk has been taken, drain everything
  logic [MAX_C-1:0] masked;
  always_comb begin
    masked = '0;
    for (int i = 0; i < MAX_C; i++) if (i < int'(nbits)) masked[i] = in_data[i];
  end
  assign out_valid = (cnt >= CW'(OUT_W)) || (closing && cnt != '0);
  assign out_data  = res[OUT_W-1:0];
  assign out_last  = closing && (cnt <= CW'(OUT_W));
  assign in_ready  = !closing && (cnt < CW'(OUT_W));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res <= '0; cnt <= '0; closing <= 1'b0;
    end else begin
      logic [RW-1:0] r;
      logic [CW-1:0] c;
      r = res; c = cnt;
      if (out_valid && out_ready) begin
        r = r >> OUT_W;
        c = (c > CW'(OUT_W)) ? c - CW'(OUT_W) : '0;
        if (out_last) closing <= 1'b0;
      end
      if (in_valid && in_ready) begin
        r = r | (RW'(masked) << c);
        c = c + CW'(nbits);
        if (in_last) closing <= 1'b1;
      end
      res <= r; cnt <= c;
    end
  end
endmodule
