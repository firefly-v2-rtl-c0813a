// cmdgen_datacache: command generator and data cache of one read channel of the data loader.
//
// For every output-channel tile o (cfg.co_tiles of them) and every enabled segment d
// (NSEG <= 3, e.g. input spikes and shortcut spikes, or bias, thresholds and weights) the unit
// reads seg_len[d] bytes starting at seg_base[d] + o*seg_stride[d]. The reads are cut into
// address/length commands of at most CHUNK beats (16 bytes each) for an AXI DataMover. A
// command is only issued when the destination's cache FIFO has room for all of its beats
// (space is reserved at issue), so returning data never stalls the DataMover. Returned beats
// are steered to the cache FIFO of the command's segment; the order of outstanding commands
// is kept in a small tag FIFO and advanced at each tlast. The paper gives the function of the
// unit, not its insides. Lengths must be multiples of 16 bytes. `start` begins a layer; `done`
// rises when every command has been issued and all of its data received.
module cmdgen_datacache
  import ff2_pkg::*;
#(
  parameter int unsigned NSEG  = 3,
  parameter int unsigned DEPTH = 128,
  parameter int unsigned CHUNK = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [7:0]          tiles,
  input  logic [NSEG-1:0]     seg_en,
  input  logic [31:0]         seg_base   [NSEG],
  input  logic [31:0]         seg_stride [NSEG],
  input  logic [31:0]         seg_len    [NSEG],
  output logic                cmd_valid,
  input  logic                cmd_ready,
  output dm_cmd_t             cmd,
  input  logic                din_valid,
  output logic                din_ready,
  input  logic [127:0]        din_data,
  input  logic                din_last,
  output logic [NSEG-1:0]     dout_valid,
  input  logic [NSEG-1:0]     dout_ready,
  output logic [127:0]        dout_data [NSEG],
  output logic                done
);
  localparam int unsigned CW = $clog2(DEPTH) + 1;
  localparam int unsigned SW = (NSEG > 1) ? $clog2(NSEG) : 1;

  // ---------------- command generation ----------------
  logic        active;
  logic [7:0]  o;
  logic [SW-1:0] d;
  logic [31:0] off;
  logic [31:0] rem, bytes;
  logic [CW-1:0] beats;
  logic [CW-1:0] cnt  [NSEG];
  logic [CW-1:0] resv [NSEG];
  logic        room, tag_ready, last_cmd_of_seg;
  logic [31:0] outstanding;

  assign rem   = seg_len[d] - off;
  assign bytes = (rem > 32'(CHUNK * 16)) ? 32'(CHUNK * 16) : rem;
  assign beats = CW'(bytes >> 4);
  assign room  = (32'(cnt[d]) + 32'(resv[d]) + 32'(beats)) <= 32'(DEPTH);
  assign cmd_valid = active && seg_en[d] && (seg_len[d] != 0) && room && tag_ready;
  assign cmd.addr  = seg_base[d] + 32'(o) * seg_stride[d] + off;
  assign cmd.btt   = 23'(bytes);
  assign last_cmd_of_seg = (bytes == rem);

  logic skip;   // current segment is disabled or empty
  assign skip = active && (!seg_en[d] || seg_len[d] == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; o <= '0; d <= '0; off <= '0;
    end else if (start) begin
      active <= (tiles != 0); o <= '0; d <= '0; off <= '0;
    end else if ((cmd_valid && cmd_ready) || skip) begin
      if (skip || last_cmd_of_seg) begin
        off <= '0;
        if (d == SW'(NSEG-1)) begin
          d <= '0;
          if (o == tiles - 1'b1) active <= 1'b0;
          else o <= o + 1'b1;
        end else d <= d + 1'b1;
      end else off <= off + bytes;
    end
  end

  // ---------------- tag FIFO: destination of each outstanding command ----------------
  logic          tag_valid;
  logic [SW-1:0] tag;
  logic          pop_tag;
  stream_fifo #(.W(SW), .DEPTH(16)) u_tags (
    .clk, .rst_n, .in_valid(cmd_valid && cmd_ready), .in_ready(tag_ready), .in_data(d),
    .out_valid(tag_valid), .out_ready(pop_tag), .out_data(tag), .count());

  // ---------------- data caches ----------------
  logic [NSEG-1:0] c_in_ready;
  assign din_ready = tag_valid && c_in_ready[tag];
  assign pop_tag   = din_valid && din_ready && din_last;
  for (genvar i = 0; i < NSEG; i++) begin : g_cache
    logic [CW-1:0] c;
    stream_fifo #(.W(128), .DEPTH(DEPTH)) u_cache (
      .clk, .rst_n,
      .in_valid(din_valid && tag_valid && tag == SW'(i)), .in_ready(c_in_ready[i]), .in_data(din_data),
      .out_valid(dout_valid[i]), .out_ready(dout_ready[i]), .out_data(dout_data[i]), .count(c));
    assign cnt[i] = c;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) resv[i] <= '0;
      else resv[i] <= resv[i] + ((cmd_valid && cmd_ready && d == SW'(i)) ? beats : '0)
                              - CW'(din_valid && din_ready && tag == SW'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else outstanding <= outstanding + 32'(cmd_valid && cmd_ready) - 32'(pop_tag);
  end
  assign done = !active && (outstanding == 0);
endmodule
