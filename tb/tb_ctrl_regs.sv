// tb_ctrl_regs: checks the AXI4-Lite command and status registers.
//
// Random configuration words are written to every CFG register and read back, and the packed
// `cfg` output must equal the written words. Writing CTRL bit 0 must give a one-cycle `start`
// pulse (and writing 0 none). STATUS must show the busy and done inputs. Every write must get
// exactly one response; the host drops BREADY and RREADY at random.
module tb_ctrl_regs;
  import ff2_pkg::*;
  localparam int NCFG = ($bits(layer_cfg_t) + 31) / 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [11:0] awaddr, araddr;
  logic [31:0] wdata, rdata;
  layer_cfg_t cfg;
  logic start, busy, done;
  ctrl_regs dut (.*);

  int starts = 0, resp = 0, writes = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) starts++;
    if (bvalid && bready) resp++;
  end
  always @(negedge clk) begin bready = $urandom % 2; rready = $urandom % 2; end

  task automatic wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); awvalid = 1; wvalid = 1; awaddr = a; wdata = d;
    @(posedge clk); while (!(awready && wready)) @(posedge clk);
    @(negedge clk); awvalid = 0; wvalid = 0;
    writes++;
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] d);
    @(negedge clk); arvalid = 1; araddr = a;
    @(posedge clk); while (!arready) @(posedge clk);
    @(negedge clk); arvalid = 0;
    @(posedge clk); while (!(rvalid && rready)) @(posedge clk);
    d = rdata;
  endtask

  initial begin
    logic [NCFG*32-1:0] img;
    logic [31:0] d;
    awvalid = 0; wvalid = 0; arvalid = 0; awaddr = 0; araddr = 0; wdata = 0; busy = 0; done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      for (int k = 0; k < NCFG; k++) begin
        img[k*32 +: 32] = $urandom;
        wr(12'(8 + 4*k), img[k*32 +: 32]);
      end
      for (int k = 0; k < NCFG; k++) begin
        rd(12'(8 + 4*k), d);
        checks++;
        if (d !== img[k*32 +: 32]) begin failures++; $display("FAIL CFG[%0d] read back", k); end
      end
      checks++;
      if (cfg !== layer_cfg_t'(img[$bits(layer_cfg_t)-1:0])) begin failures++; $display("FAIL cfg output"); end
      starts = 0;
      wr(12'h0, 32'h0);
      wr(12'h0, 32'h1);
      repeat (3) @(posedge clk);
      checks++;
      if (starts != 1) begin failures++; $display("FAIL %0d start pulses", starts); end
      busy = rep[0]; done = rep[1];
      rd(12'h4, d);
      checks++;
      if (d !== {30'd0, done, busy}) begin failures++; $display("FAIL status %h", d); end
    end
    repeat (5) @(posedge clk);
    bready = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (resp != writes) begin failures++; $display("FAIL %0d responses for %0d writes", resp, writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
