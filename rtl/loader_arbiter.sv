// loader_arbiter: shares two read DataMovers between two CmdGen-DataCache units.
//
// Depending on the layer, the input-spike unit or the parameter unit needs more bandwidth, so
// instead of a fixed unit-to-DataMover pairing each command goes to whichever DataMover has
// fewer commands outstanding (ties to DataMover 0); the two units are served round robin.
// Commands are handed out one at a time, so all queues share one global order. Every
// DataMover keeps a queue of the owners of its outstanding commands and every unit a queue of
// the DataMovers serving its commands; a DataMover's data stream is connected to a unit while
// both queue heads agree, and both queues advance at tlast. This returns each unit its data in
// command order, lets both DataMovers deliver at once, and (thanks to the global order)
// cannot deadlock. The paper gives the arbiter's purpose, not its insides.
module loader_arbiter
  import ff2_pkg::*;
#(
  parameter int unsigned QDEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // command side: units 0 and 1
  input  logic [1:0]    u_cmd_valid,
  output logic [1:0]    u_cmd_ready,
  input  dm_cmd_t       u_cmd [2],
  // command side: DataMovers 0 and 1
  output logic [1:0]    m_cmd_valid,
  input  logic [1:0]    m_cmd_ready,
  output dm_cmd_t       m_cmd [2],
  // data from DataMovers
  input  logic [1:0]    m_valid,
  output logic [1:0]    m_ready,
  input  logic [127:0]  m_data [2],
  input  logic [1:0]    m_last,
  // data to units
  output logic [1:0]    u_valid,
  input  logic [1:0]    u_ready,
  output logic [127:0]  u_data [2],
  output logic [1:0]    u_last
);
  localparam int unsigned CW = $clog2(QDEPTH) + 1;
  logic       rr;             // unit with priority
  logic       sel_u, sel_m, go;
  logic [CW-1:0] outst [2];
  logic [1:0] oq_ready, uq_ready, oq_valid, uq_valid;
  logic       oq_head [2];    // owner (unit) of each DataMover's oldest command
  logic       uq_head [2];    // DataMover of each unit's oldest command

  always_comb begin
    sel_u = (u_cmd_valid[rr]) ? rr : !rr;
    sel_m = (outst[1] < outst[0]) ? 1'b1 : 1'b0;
    go = u_cmd_valid[sel_u] && m_cmd_ready[sel_m] && oq_ready[sel_m] && uq_ready[sel_u];
    u_cmd_ready = '0;
    m_cmd_valid = '0;
    u_cmd_ready[sel_u] = go;
    m_cmd_valid[sel_m] = u_cmd_valid[sel_u] && oq_ready[sel_m] && uq_ready[sel_u];
    m_cmd[0] = u_cmd[sel_u];
    m_cmd[1] = u_cmd[sel_u];
  end

  logic [1:0] m_pop, u_pop;
  for (genvar i = 0; i < 2; i++) begin : g_q
    logic [CW-1:0] oc;
    stream_fifo #(.W(1), .DEPTH(QDEPTH)) u_oq (
      .clk, .rst_n, .in_valid(go && sel_m == 1'(i)), .in_ready(oq_ready[i]), .in_data(sel_u),
      .out_valid(oq_valid[i]), .out_ready(m_pop[i]), .out_data(oq_head[i]), .count(oc));
    assign outst[i] = oc;
    stream_fifo #(.W(1), .DEPTH(QDEPTH)) u_uq (
      .clk, .rst_n, .in_valid(go && sel_u == 1'(i)), .in_ready(uq_ready[i]), .in_data(sel_m),
      .out_valid(uq_valid[i]), .out_ready(u_pop[i]), .out_data(uq_head[i]), .count());
  end

  // data routing: unit u takes DataMover uq_head[u] when that DataMover's head owner is u
  always_comb begin
    m_ready = '0;
    for (int u = 0; u < 2; u++) begin
      logic mm;
      mm = uq_head[u];
      u_valid[u] = uq_valid[u] && oq_valid[mm] && (oq_head[mm] == 1'(u)) && m_valid[mm];
      u_data[u]  = m_data[mm];
      u_last[u]  = m_last[mm];
      u_pop[u]   = u_valid[u] && u_ready[u] && m_last[mm];
      if (uq_valid[u] && oq_valid[mm] && oq_head[mm] == 1'(u)) m_ready[mm] = u_ready[u];
    end
    for (int i = 0; i < 2; i++)
      m_pop[i] = m_valid[i] && m_ready[i] && m_last[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rr <= 1'b0;
    else if (go) rr <= !sel_u;
  end
endmodule
