// tb_dsp_crossbar: checks the 2x4 crossbar DSP slice in both of its roles.
//
// A Mux-Add slice (ACC=0) and a Mux-Acc slice (ACC=1) get random spikes, weights and cascade
// inputs. A reference model builds the four 12-bit lane sums (sign-extended weights, lanes
// wrapping independently) and, for the Mux-Acc slice, keeps the running sum that `restart`
// clears. P must show the result one clock after the inputs and hold while `en` is low.
module tb_dsp_crossbar;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        en, restart;
  logic [1:0]  spk;
  logic [31:0] w0, w1;
  logic [47:0] pcin, p_add, p_acc;

  dsp_crossbar #(.ACC(1'b0)) u_add (.clk, .rst_n, .en, .restart, .spk, .w0, .w1, .pcin, .p(p_add));
  dsp_crossbar #(.ACC(1'b1)) u_acc (.clk, .rst_n, .en, .restart, .spk, .w0, .w1, .pcin, .p(p_acc));

  function automatic logic [47:0] lanes(logic [1:0] s, logic [31:0] a, logic [31:0] b,
                                        logic [47:0] c, logic [47:0] d);
    logic [47:0] r;
    for (int l = 0; l < 4; l++)
      r[12*l +: 12] = (s[0] ? 12'(signed'(a[8*l +: 8])) : 12'd0) +
                      (s[1] ? 12'(signed'(b[8*l +: 8])) : 12'd0) + c[12*l +: 12] + d[12*l +: 12];
    return r;
  endfunction

  logic [47:0] exp_add, exp_acc;
  initial begin
    en = 0; restart = 0; spk = 0; w0 = 0; w1 = 0; pcin = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    exp_add = '0; exp_acc = '0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      en = ($urandom % 4) != 0; restart = ($urandom % 8) == 0;
      spk = 2'($urandom); w0 = $urandom; w1 = $urandom; pcin = {$urandom, $urandom};
      if (en) begin
        exp_add = lanes(spk, w0, w1, pcin, '0);
        exp_acc = lanes(spk, w0, w1, pcin, restart ? '0 : exp_acc);
      end
      @(posedge clk); #1;
      checks += 2;
      if (p_add !== exp_add) begin
        failures++;
        if (failures < 10) $display("FAIL add: %h expected %h", p_add, exp_add);
      end
      if (p_acc !== exp_acc) begin
        failures++;
        if (failures < 10) $display("FAIL acc: %h expected %h", p_acc, exp_acc);
      end
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
