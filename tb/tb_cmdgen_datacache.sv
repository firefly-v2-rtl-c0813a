// tb_cmdgen_datacache: checks command generation, reservation and data steering of a loader.
//
// A 3-segment unit with small caches (16 beats, chunks of at most 4 beats) reads three tiles
// (one segment disabled in the second run). A DataMover model accepts the commands and returns
// the addressed beats of a memory model after random delays. Each segment's output stream is
// drained with random back-pressure and must hold, per tile, the bytes seg_base + o*stride ..
// + len in order. The test checks every command (address, length <= 4 beats), that returning
// data is never refused (space is reserved before a command goes out) and that `done` rises
// at the end and not before.
module tb_cmdgen_datacache;
  import ff2_pkg::*;
  localparam int NSEG = 3, D = 16, CH = 4, TILES = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, cmd_valid, cmd_ready, din_valid, din_ready, din_last, done;
  logic [7:0] tiles;
  logic [NSEG-1:0] seg_en, dout_valid, dout_ready;
  logic [31:0] seg_base [NSEG], seg_stride [NSEG], seg_len [NSEG];
  dm_cmd_t cmd;
  logic [127:0] din_data, dout_data [NSEG];
  cmdgen_datacache #(.NSEG(NSEG), .DEPTH(D), .CHUNK(CH)) dut (.*);

  function automatic logic [127:0] memw(int addr);   // memory content: a function of the address
    return {addr, ~addr, addr * 7, addr ^ 32'h5a5a5a5a};
  endfunction

  dm_cmd_t cq [$];
  logic [127:0] exp_q [NSEG][$];
  int refused = 0, pos = 0, delay = 0, ncmd = 0;
  assign cmd_ready = (cq.size() < 3);
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready) begin
      cq.push_back(cmd); ncmd++;
      checks++;
      if (cmd.btt == 0 || cmd.btt > CH*16 || cmd.btt % 16 != 0) begin
        failures++; $display("FAIL command length %0d", cmd.btt);
      end
    end
    if (din_valid && !din_ready) refused++;
    if (din_valid && din_ready) begin
      if (din_last) begin void'(cq.pop_front()); pos = 0; end
      else pos++;
    end
  end
  always @(negedge clk) begin
    if (cq.size() > 0 && (!din_valid || din_ready || 1)) begin
      if (delay > 0) begin delay--; din_valid = 0; end
      else begin
        din_valid = 1;
        din_data  = memw((cq[0].addr >> 4) + pos);
        din_last  = (pos + 1) * 16 >= cq[0].btt;
        if (din_last) delay = $urandom % 4;
      end
    end else din_valid = 0;
  end

  int got [NSEG];
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < NSEG; i++)
      if (dout_valid[i] && dout_ready[i]) begin
        checks++;
        if (exp_q[i].size() == 0 || dout_data[i] !== exp_q[i][0]) begin
          failures++; if (failures < 10) $display("FAIL segment %0d beat %0d", i, got[i]);
        end
        if (exp_q[i].size() > 0) void'(exp_q[i].pop_front());
        got[i]++;
      end

  task automatic run(logic [NSEG-1:0] en);
    seg_en = en; tiles = TILES;
    seg_base = '{32'h1000, 32'h8000, 32'h20000};
    seg_stride = '{32'h0, 32'h400, 32'h1000};
    seg_len = '{32'h80, 32'h40, 32'h130};
    for (int o = 0; o < TILES; o++)
      for (int i = 0; i < NSEG; i++)
        if (en[i])
          for (int b = 0; b < seg_len[i] / 16; b++)
            exp_q[i].push_back(memw(((seg_base[i] + o * seg_stride[i]) >> 4) + b));
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(posedge clk);
    checks++;
    if (done) begin failures++; $display("FAIL done too early"); end
    while (!(exp_q[0].size() == 0 && exp_q[1].size() == 0 && exp_q[2].size() == 0)) @(posedge clk);
    repeat (3) @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL done missing"); end
  endtask

  initial begin
    start = 0; din_valid = 0; din_last = 0; din_data = 0; dout_ready = '0; tiles = 0; seg_en = 0;
    foreach (got[i]) got[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin run(3'b111); run(3'b101); end
      forever begin @(negedge clk); dout_ready = 3'($urandom) & 3'($urandom); end
    join_any
    disable fork;
    checks++;
    if (refused != 0) begin failures++; $display("FAIL data refused %0d times", refused); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
