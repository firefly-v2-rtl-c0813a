// tb_loader_arbiter: checks the sharing of two read DataMovers between two loader units.
//
// Both units issue random commands (1..4 beats, unit id and a sequence number coded in the
// address). Two DataMover models with different, random speeds return the addressed beats.
// Each unit must receive the data of its own commands, in its command order, with tlast on
// each command's last beat; both DataMovers must be used, commands must go to the DataMover
// with fewer outstanding commands, and every command must complete (no deadlock) while the
// units take data with random back-pressure.
module tb_loader_arbiter;
  import ff2_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] u_cmd_valid, u_cmd_ready, m_cmd_valid, m_cmd_ready, m_valid, m_ready, m_last;
  logic [1:0] u_valid, u_ready, u_last;
  dm_cmd_t u_cmd [2], m_cmd [2];
  logic [127:0] m_data [2], u_data [2];
  loader_arbiter dut (.*);

  localparam int NC = 200;
  int issued [2], per_dm [2];
  dm_cmd_t mq [2][$];
  dm_cmd_t uq [2][$];
  int mpos [2], upos [2], done_cmds [2];

  function automatic logic [127:0] beat(dm_cmd_t c, int b);
    return {c.addr, 32'(b), c.addr ^ 32'hdeadbeef, 32'(c.btt)};
  endfunction

  // units: commands
  for (genvar u = 0; u < 2; u++) begin : g_u
    always @(negedge clk) begin
      if (!u_cmd_valid[u] || u_cmd_ready_q[u]) begin
        if (issued[u] < NC && $urandom % 2 == 0) begin
          u_cmd_valid[u] = 1;
          u_cmd[u].addr = {u[0], 15'd0, 16'(issued[u])} << 4;
          u_cmd[u].btt = 23'(16 * (1 + $urandom % 4));
        end else u_cmd_valid[u] = 0;
      end
    end
  end
  logic [1:0] u_cmd_ready_q;
  always @(posedge clk) begin
    u_cmd_ready_q = u_cmd_valid & u_cmd_ready;
    if (rst_n)
      for (int u = 0; u < 2; u++)
        if (u_cmd_valid[u] && u_cmd_ready[u]) begin uq[u].push_back(u_cmd[u]); issued[u]++; end
  end

  // DataMovers
  always @(posedge clk) if (rst_n) begin
    int sz [2];
    sz[0] = mq[0].size(); sz[1] = mq[1].size();
    for (int i = 0; i < 2; i++) begin
      if (m_cmd_valid[i] && m_cmd_ready[i]) begin
        checks++;
        if ((i == 1) ? (sz[1] >= sz[0]) : (sz[0] > sz[1])) begin
          failures++; $display("FAIL command sent to the busier DataMover");
        end
        mq[i].push_back(m_cmd[i]); per_dm[i]++;
      end
      if (m_valid[i] && m_ready[i]) begin
        if (m_last[i]) begin void'(mq[i].pop_front()); mpos[i] = 0; end
        else mpos[i]++;
      end
    end
  end
  always @(negedge clk)
    for (int i = 0; i < 2; i++) begin
      m_cmd_ready[i] = (mq[i].size() < 4);
      if (mq[i].size() > 0 && ($urandom % (i + 2) == 0 || m_valid[i])) begin
        m_valid[i] = 1;
        m_data[i] = beat(mq[i][0], mpos[i]);
        m_last[i] = (mpos[i] + 1) * 16 >= mq[i][0].btt;
      end else m_valid[i] = 0;
    end

  // units: data
  always @(posedge clk) if (rst_n)
    for (int u = 0; u < 2; u++)
      if (u_valid[u] && u_ready[u]) begin
        checks++;
        if (uq[u].size() == 0 || u_data[u] !== beat(uq[u][0], upos[u]) ||
            u_last[u] != ((upos[u] + 1) * 16 >= uq[u][0].btt)) begin
          failures++; if (failures < 10) $display("FAIL unit %0d data", u);
        end
        if (u_last[u]) begin
          if (uq[u].size() > 0) void'(uq[u].pop_front());
          upos[u] = 0; done_cmds[u]++;
        end else upos[u]++;
      end
  always @(negedge clk) u_ready = 2'($urandom) | 2'($urandom);

  initial begin
    u_cmd_valid = 0; m_valid = 0; m_last = 0; u_ready = 0;
    foreach (issued[i]) begin issued[i] = 0; per_dm[i] = 0; mpos[i] = 0; upos[i] = 0; done_cmds[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (!(done_cmds[0] == NC && done_cmds[1] == NC)) @(posedge clk);
    checks += 2;
    if (per_dm[0] == 0 || per_dm[1] == 0) begin failures++; $display("FAIL one DataMover unused"); end
    if (uq[0].size() + uq[1].size() != 0) failures++;
    $display("DataMover use: %0d / %0d commands", per_dm[0], per_dm[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    $display("FAIL watchdog (done %0d / %0d)", done_cmds[0], done_cmds[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
