// tb_stream_adapter: checks the width adapter in both directions.
//
// A widening instance (128-bit beats to 512-bit words) and a narrowing instance (128-bit beats
// to 32-bit words) are fed random beats with random valid and ready. The widening output must
// be four consecutive beats with the first in the low bits; the narrowing output must be each
// beat's four 32-bit parts, least significant first. Nothing may be lost or reordered.
module tb_stream_adapter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wi_v, wi_r, wo_v, wo_r, ni_v, ni_r, no_v, no_r;
  logic [127:0] wi_d, ni_d;
  logic [511:0] wo_d;
  logic [31:0] no_d;
  stream_adapter #(.IN_W(128), .OUT_W(512)) u_wide (
    .clk, .rst_n, .in_valid(wi_v), .in_ready(wi_r), .in_data(wi_d),
    .out_valid(wo_v), .out_ready(wo_r), .out_data(wo_d));
  stream_adapter #(.IN_W(128), .OUT_W(32)) u_narrow (
    .clk, .rst_n, .in_valid(ni_v), .in_ready(ni_r), .in_data(ni_d),
    .out_valid(no_v), .out_ready(no_r), .out_data(no_d));

  logic [127:0] wq [$];
  logic [31:0] nq [$];
  logic [31:0] ngot [$];
  int wout = 0, nout = 0;
  always @(posedge clk) if (rst_n) begin
    if (wi_v && wi_r) wq.push_back(wi_d);
    if (ni_v && ni_r) for (int k = 0; k < 4; k++) nq.push_back(ni_d[k*32 +: 32]);
    if (wo_v && wo_r) begin
      checks++;
      if (wq.size() < 4 || wo_d !== {wq[3], wq[2], wq[1], wq[0]}) begin
        failures++; if (failures < 10) $display("FAIL widen word %0d", wout);
      end
      repeat (4) if (wq.size() > 0) void'(wq.pop_front());
      wout++;
    end
    if (no_v && no_r) begin
      ngot.push_back(no_d);   // compared with the accepted beats at the end
      nout++;
    end
  end
  initial begin
    wi_v = 0; ni_v = 0; wo_r = 0; no_r = 0; wi_d = 0; ni_d = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      logic wt, nt;
      @(posedge clk);
      wt = wi_v && wi_r; nt = ni_v && ni_r;     // taken at this edge
      @(negedge clk);
      // a valid beat is held until it is taken (valid/ready rule)
      if (!wi_v || wt) begin
        wi_v = $urandom % 3 != 0; wi_d = {$urandom, $urandom, $urandom, $urandom};
      end
      if (!ni_v || nt) begin
        ni_v = $urandom % 5 == 0; ni_d = {$urandom, $urandom, $urandom, $urandom};
      end
      wo_r = $urandom % 6 == 0; no_r = $urandom % 3 != 0;
    end
    for (int k = 0; k < nq.size(); k++) begin
      checks++;
      if (k >= ngot.size() || ngot[k] !== nq[k]) begin
        failures++; if (failures < 10) $display("FAIL narrow word %0d", k);
      end
    end
    checks++;
    if (wout < 100 || nout < 100) begin failures++; $display("FAIL too few outputs"); end
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
