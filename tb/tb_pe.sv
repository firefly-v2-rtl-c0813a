// tb_pe: checks one processing element (V/4 x S crossbar DSPs) on its own.
//
// Random groups of 1..12 words (spikes and weights) are fed with random idle cycles between
// words. For every group the reference sum of each (output channel, time step) lane is the
// 12-bit wrapped sum over the group's words of weight x spike. The test checks the four x S
// sums, that `sum_valid` comes exactly V/4 cycles after the last word went in (the latency
// of the cascade), and that spikes/weights leave one cycle after they enter.
module tb_pe;
  localparam int V = 16, S = 4, PH = V / 4;
  logic clk2x = 0, rst_n = 0;
  always #5 clk2x = ~clk2x;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk2x) cyc <= cyc + 1;

  logic in_valid, in_last, out_valid, out_last, sum_valid;
  logic [V/2*S-1:0] spk_in, spk_out;
  logic [V/2*32-1:0] w_in, w_out;
  logic [S*48-1:0] sum;
  pe #(.V(V), .S(S)) dut (.*);

  logic [11:0] ref_q [$][4][S];
  longint last_q [$];
  logic [11:0] acc [4][S];

  // pass-through check
  logic [V/2*S-1:0] spk_d;
  logic [V/2*32-1:0] w_d;
  logic v_d;
  always @(posedge clk2x) begin
    spk_d <= spk_in; w_d <= w_in; v_d <= in_valid && rst_n;
    if (rst_n && v_d) begin
      checks++;
      if (!out_valid || spk_out !== spk_d || w_out !== w_d) begin
        failures++; $display("FAIL pass-through");
      end
    end
    if (rst_n && sum_valid) begin
      checks += 2;
      if (ref_q.size() == 0) begin
        failures++; $display("FAIL unexpected sum");
      end else begin
        if (cyc - last_q[0] != PH) begin
          failures++; $display("FAIL latency %0d", cyc - last_q[0]);
        end
        for (int m = 0; m < 4; m++)
          for (int s = 0; s < S; s++)
            if (sum[(s*4+m)*12 +: 12] !== ref_q[0][m][s]) begin
              failures++;
              if (failures < 10) $display("FAIL sum m%0d s%0d: %h expected %h", m, s,
                                          sum[(s*4+m)*12 +: 12], ref_q[0][m][s]);
            end
        void'(ref_q.pop_front()); void'(last_q.pop_front());
      end
    end
  end

  initial begin
    in_valid = 0; in_last = 0; spk_in = 0; w_in = 0;
    repeat (3) @(posedge clk2x);
    rst_n = 1;
    for (int g = 0; g < 300; g++) begin
      int len;
      len = 1 + $urandom % 12;
      foreach (acc[m, s]) acc[m][s] = 0;
      for (int i = 0; i < len; i++) begin
        while ($urandom % 3 == 0) begin
          @(negedge clk2x); in_valid = 0; spk_in = $urandom; w_in = {8{$urandom}};
        end
        @(negedge clk2x);
        in_valid = 1; in_last = (i == len - 1);
        for (int k = 0; k < V/2*S/32 + 1; k++) spk_in[k*32 +: 32] = $urandom;
        for (int k = 0; k < V/2; k++) w_in[k*32 +: 32] = $urandom;
        for (int m = 0; m < 4; m++)
          for (int s = 0; s < S; s++)
            for (int v = 0; v < V/2; v++)
              if (spk_in[s*(V/2)+v]) acc[m][s] += 12'(signed'(w_in[(v*4+m)*8 +: 8]));
        if (in_last) begin
          ref_q.push_back(acc);
          last_q.push_back(cyc);
        end
      end
    end
    @(negedge clk2x); in_valid = 0;
    repeat (20) @(posedge clk2x);
    checks++;
    if (ref_q.size() != 0) begin failures++; $display("FAIL %0d sums missing", ref_q.size()); end
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
