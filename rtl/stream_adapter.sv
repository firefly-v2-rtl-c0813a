// stream_adapter: width adapter between a stream of IN_W-bit beats and OUT_W-bit words.
//
// One of the two widths must be an integer multiple of the other. When widening, RATIO input
// beats are packed into one output word, the first beat in the least significant bits. When
// narrowing, each input beat is sent out as RATIO words, least significant part first. This
// matches the "Stream Adapter" boxes of the input spike and weight paths; the packing order
// is this design's choice. Valid/ready on both sides; one beat per cycle on the narrow side.
module stream_adapter #(
  parameter int unsigned IN_W  = 128,
  parameter int unsigned OUT_W = 2048
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data
);
  if (OUT_W >= IN_W) begin : g_widen
    localparam int unsigned RATIO = OUT_W / IN_W;
    localparam int unsigned CW = (RATIO > 1) ? $clog2(RATIO) : 1;
    logic [OUT_W-1:0] buf_q;
    logic [CW-1:0]    cnt;
    logic             full;
    assign in_ready  = !full || out_ready;
    assign out_valid = full;
    assign out_data  = buf_q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        buf_q <= '0;
        cnt   <= '0;
        full  <= 1'b0;
      end else begin
        if (full && out_ready) full <= 1'b0;
        if (in_valid && in_ready) begin
          buf_q[cnt*IN_W +: IN_W] <= in_data;
          if (cnt == CW'(RATIO-1)) begin
            cnt  <= '0;
            full <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      end
    end
  end else begin : g_narrow
    localparam int unsigned RATIO = IN_W / OUT_W;
    localparam int unsigned CW = $clog2(RATIO);
    logic [CW-1:0] cnt;
    assign out_valid = in_valid;
    assign out_data  = in_data[cnt*OUT_W +: OUT_W];
    assign in_ready  = out_ready && (cnt == CW'(RATIO-1));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) cnt <= '0;
      else if (out_valid && out_ready) cnt <= (cnt == CW'(RATIO-1)) ? '0 : cnt + 1'b1;
    end
  end
endmodule
