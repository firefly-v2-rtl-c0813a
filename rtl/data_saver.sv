// data_saver: write-side CmdGen-DataCache of the data loader/saver.
//
// Results of the post-processing chain (spikes of 1, 2 or 4 bits, 18-bit partial sums, or
// spike counts) are packed densely into 128-bit beats, value 0 lowest, and buffered in a
// cache FIFO. For each output-channel tile o one write command (cfg.out_base + o*cfg.out_len,
// cfg.out_len bytes) goes to the write-only AXI DataMover, followed by the tile's beats; the
// beat ending the tile carries tlast (the last beat is zero-padded). cfg.out_len must equal the
// packed size of a tile rounded up to 16 bytes. `done` rises when the DataMover has reported
// completion (one status per command) for all tiles. Word widths per mode: spikes M*S*bits,
// partial sums M*S*32 (18-bit values sign-extended), counts M*16.
module data_saver
  import ff2_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned S = 4,
  parameter int unsigned DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             start,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [M*S*32-1:0] in_data,   // values packed at their own width, lowest first
  input  logic             in_tile_last,
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output dm_cmd_t          cmd,
  output logic             dout_valid,
  input  logic             dout_ready,
  output logic [127:0]     dout_data,
  output logic             dout_last,
  input  logic             sts_valid,
  output logic             done
);
  localparam int unsigned MC = M * S * 32;
  logic [$clog2(MC+1)-1:0] nb;
  always_comb begin
    case (cfg.out_mode)
      OUT_PSUM:  nb = ($clog2(MC+1))'(M*S*32);
      OUT_COUNT: nb = ($clog2(MC+1))'(M*16);
      default:   nb = ($clog2(MC+1))'(M*S) * ($clog2(MC+1))'(out_bits(cfg));
    endcase
  end

  logic         p_valid, p_ready, p_last;
  logic [127:0] p_data;
  bit_packer #(.OUT_W(128), .MAX_C(MC)) u_pack (
    .clk, .rst_n, .nbits(nb), .in_valid, .in_ready, .in_data, .in_last(in_tile_last),
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data), .out_last(p_last));

  stream_fifo #(.W(129), .DEPTH(DEPTH)) u_cache (
    .clk, .rst_n, .in_valid(p_valid), .in_ready(p_ready), .in_data({p_last, p_data}),
    .out_valid(dout_valid), .out_ready(dout_ready), .out_data({dout_last, dout_data}), .count());

  logic [7:0] o, sts_cnt;
  logic       active;
  assign cmd_valid = active;
  assign cmd.addr  = cfg.out_base + 32'(o) * cfg.out_len;
  assign cmd.btt   = 23'(cfg.out_len);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o <= '0; active <= 1'b0; sts_cnt <= '0; done <= 1'b1;
    end else if (start) begin
      o <= '0; active <= (cfg.co_tiles != 0); sts_cnt <= '0; done <= (cfg.co_tiles == 0);
    end else begin
      if (cmd_valid && cmd_ready) begin
        if (o == cfg.co_tiles - 1'b1) active <= 1'b0;
        o <= o + 1'b1;
      end
      if (sts_valid) begin
        sts_cnt <= sts_cnt + 1'b1;
        if (sts_cnt == cfg.co_tiles - 1'b1) done <= 1'b1;
      end
    end
  end
endmodule
