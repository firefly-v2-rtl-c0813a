// ctrl_regs: command and status registers on the AXI4-Lite port from the host (M-AXI-HPM).
//
// Register map (byte addresses, 32-bit registers):
//   0x00 CTRL    write bit 0 = 1 starts a layer (one-cycle `start` pulse)
//   0x04 STATUS  bit 0 busy, bit 1 done (done stays set until the next start)
//   0x08+4k CFG[k]  word k of the packed layer configuration (layer_cfg_t, bit 0 in CFG[0])
// Writes need AW and W together; one response per write, one outstanding read. The paper
// only names a command register and a status register; the map and protocol details here
// are this design's choice.
module ctrl_regs
  import ff2_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        awvalid,
  output logic        awready,
  input  logic [11:0] awaddr,
  input  logic        wvalid,
  output logic        wready,
  input  logic [31:0] wdata,
  output logic        bvalid,
  input  logic        bready,
  input  logic        arvalid,
  output logic        arready,
  input  logic [11:0] araddr,
  output logic        rvalid,
  input  logic        rready,
  output logic [31:0] rdata,
  output layer_cfg_t  cfg,
  output logic        start,
  input  logic        busy,
  input  logic        done
);
  localparam int unsigned NCFG = ($bits(layer_cfg_t) + 31) / 32;
  logic [NCFG*32-1:0] cfg_q;
  assign cfg = layer_cfg_t'(cfg_q[$bits(layer_cfg_t)-1:0]);

  logic wr;
  assign wr      = awvalid && wvalid && !bvalid;
  assign awready = wr;
  assign wready  = wr;
  assign arready = !rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0; start <= 1'b0; bvalid <= 1'b0; rvalid <= 1'b0; rdata <= '0;
    end else begin
      start <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (wr) begin
        bvalid <= 1'b1;
        if (awaddr[11:2] == 10'd0) start <= wdata[0];
        else if (awaddr[11:2] >= 10'd2 && awaddr[11:2] < 10'(NCFG + 2))
          cfg_q[(int'(awaddr[11:2]) - 2)*32 +: 32] <= wdata;
      end
      if (rvalid && rready) rvalid <= 1'b0;
      if (arvalid && arready) begin
        rvalid <= 1'b1;
        if (araddr[11:2] == 10'd1) rdata <= {30'd0, done, busy};
        else if (araddr[11:2] >= 10'd2 && araddr[11:2] < 10'(NCFG + 2))
          rdata <= cfg_q[(int'(araddr[11:2]) - 2)*32 +: 32];
        else rdata <= '0;
      end
    end
  end
endmodule
