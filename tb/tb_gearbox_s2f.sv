// tb_gearbox_s2f: checks the slow-to-fast gearbox with clk and clk2x aligned.
//
// Random words (random valid, random last) enter on clk. On clk2x each word must come out as
// its low half (f_phase 0) and then its high half (f_phase 1) in two consecutive cycles, with
// `last` copied to both halves, nothing lost, duplicated or reordered, and with the same fixed
// latency (at most three clk2x cycles from the clk edge that takes the word) for every word,
// also when words arrive back to back at the full slow rate.
module tb_gearbox_s2f;
  localparam int HW = 256;
  logic clk = 0, clk2x = 0, rst_n = 0;
  initial forever begin
    #1 clk2x = 1; clk = 1; #1 clk2x = 0; #1 clk2x = 1; clk = 0; #1 clk2x = 0;
  end
  int checks = 0, failures = 0;
  longint fcyc = 0;
  always @(posedge clk2x) fcyc <= fcyc + 1;

  logic s_valid, s_last, f_valid, f_last, f_phase;
  logic [2*HW-1:0] s_data;
  logic [HW-1:0] f_data;
  gearbox_s2f #(.HALF_W(HW)) dut (.*);

  logic [2*HW:0] exp_q [$];
  longint t_q [$];
  longint lat0 = -1;
  int sent = 0, got = 0;
  logic expect_hi = 0;
  longint lo_t;

  always @(posedge clk) if (rst_n && s_valid) begin
    exp_q.push_back({s_last, s_data});
    t_q.push_back(fcyc);
    sent++;
  end

  always @(posedge clk2x) if (rst_n) begin
    if (expect_hi) begin
      checks++;
      if (!f_valid || !f_phase || fcyc != lo_t + 1) begin
        failures++; $display("FAIL high half missing");
      end else begin
        if (f_data !== exp_q[0][2*HW-1:HW] || f_last !== exp_q[0][2*HW]) begin
          failures++; $display("FAIL high half data");
        end
        void'(exp_q.pop_front()); void'(t_q.pop_front());
        got++;
      end
      expect_hi = 0;
    end else if (f_valid) begin
      checks++;
      if (f_phase || exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected fast word");
      end else begin
        longint lat;
        lat = fcyc - t_q[0];
        if (lat0 < 0) lat0 = lat;
        if (lat != lat0 || lat > 3) begin
          failures++; $display("FAIL latency %0d (first %0d)", lat, lat0);
        end
        if (f_data !== exp_q[0][HW-1:0] || f_last !== exp_q[0][2*HW]) begin
          failures++; $display("FAIL low half data");
        end
        expect_hi = 1; lo_t = fcyc;
      end
    end
  end

  initial begin
    s_valid = 0; s_last = 0; s_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      s_valid = (i < 1000) ? 1'b1 : ($urandom % 3 != 0);
      s_last  = 1'($urandom);
      for (int k = 0; k < 2*HW/32; k++) s_data[k*32 +: 32] = $urandom;
    end
    @(negedge clk); s_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (got != sent || got == 0) begin
      failures++; $display("FAIL sent %0d got %0d", sent, got);
    end
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
