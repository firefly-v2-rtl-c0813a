// psum_proc: flexible partial-sum processing unit (M identical lanes, S = 4).
//
// Multi-bit spikes are fed to the engine bit-serially: a B-bit spike of one time step becomes B
// consecutive equivalent time steps, lowest bit first. This unit undoes the decomposition by
// shift-add on the four 12-bit partial sums P0..P3 of one engine output:
//   1-bit spikes : P0..P3 are passed on (bypass path).
//   2-bit spikes : Q0 = P0 + (P1<<1), Q1 = P2 + (P3<<1); two rounds give 4 time steps.
//   4-bit spikes : R0 = Q0 + (Q1<<2); four rounds give 4 time steps.
//   8-bit pixels : R1 = R0 + (R0'<<4), R0' the R0 of the previous round (so the high nibble of
//                  the pixel is sent first); R1 is replicated to all 4 steps (static image).
// The merged value gets the channel's bias and an optional left shift by one (undoing a right
// shift of the previous layer's spikes), and leaves as 18 bits, wrapping like the paper's
// 18-bit datapath. A round is one engine output for the same pixel: rounds of one pixel are
// N engine outputs apart, so the partly merged values are kept per pixel.
// Bias: for each output-channel tile, M signed 32-bit words (low 18 bits used) are taken from
// the 128-bit bias stream before the tile's first output. Counters over the output rows, pixel
// groups and time tiles mark the last output of a tile (`out_tile_last`) and the first time
// tile of a pixel (`out_first`). Output: one registered word per output time tile and pixel,
// value (m*4+s) at bits (m*4+s)*18, with valid/ready.
module psum_proc
  import ff2_pkg::*;
#(
  parameter int unsigned M = 16,
  parameter int unsigned N = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  layer_cfg_t             cfg,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [M*4*12-1:0]      in_psum,
  input  logic [$clog2(N)-1:0] in_pix,
  input  logic                   in_grp_last,
  input  logic                   bias_valid,
  output logic                   bias_ready,
  input  logic [127:0]           bias_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [M*4*18-1:0]      out_vmem,
  output logic [$clog2(N)-1:0] out_pix,
  output logic                   out_first,
  output logic                   out_tile_last
);
  localparam int unsigned BEATS = (M * 32 + 127) / 128;

  // bias loading
  logic [M*32-1:0]        bias_q;
  logic [$clog2(BEATS+1)-1:0] bcnt;
  logic                   bias_ok;
  assign bias_ready = !bias_ok;

  // loop position of the incoming group
  logic [7:0] t_q, wg_q;
  logic [9:0] h_q;
  logic [3:0] rounds;
  logic [7:0] rnd, otile;
  always_comb begin
    case (cfg.spk_mode)
      SPK_2B:  rounds = 4'd2;
      SPK_4B:  rounds = 4'd4;
      PIX_8B:  rounds = 4'd2;
      default: rounds = 4'd1;
    endcase
    rnd   = t_q % 8'(rounds);
    otile = t_q / 8'(rounds);
  end
  logic grp_end_tile;
  assign grp_end_tile = in_grp_last && (t_q == cfg.te_tiles - 1'b1) &&
                        (wg_q == cfg.wg - 1'b1) && (h_q == cfg.ho - 1'b1);

  logic fire;
  assign in_ready = bias_ok && (!out_valid || out_ready);
  assign fire     = in_valid && in_ready;

  // per-pixel merge storage: 4 slots of 18 bits per channel
  logic [17:0] slot [N][M][4];

  logic [17:0] res [M][4];
  logic [17:0] nxt [M][4];
  logic        emit;
  always_comb begin
    emit = (rnd == 8'(rounds - 1'b1));
    for (int m = 0; m < M; m++) begin
      logic signed [17:0] p [4];
      logic signed [17:0] q0, q1, r0, r1;
      for (int s = 0; s < 4; s++) p[s] = 18'(signed'(in_psum[(m*4+s)*12 +: 12]));
      q0 = p[0] + (p[1] <<< 1);
      q1 = p[2] + (p[3] <<< 1);
      r0 = q0 + (q1 <<< 2);
      r1 = r0 + (signed'(slot[in_pix][m][0]) <<< 4);
      for (int s = 0; s < 4; s++) nxt[m][s] = slot[in_pix][m][s];
      case (cfg.spk_mode)
        SPK_2B: begin
          nxt[m][2*rnd[0]]   = q0;
          nxt[m][2*rnd[0]+1] = q1;
        end
        SPK_4B:  nxt[m][rnd[1:0]] = r0;
        PIX_8B:  if (rnd[0]) for (int s = 0; s < 4; s++) nxt[m][s] = r1;
                 else nxt[m][0] = r0;
        default: for (int s = 0; s < 4; s++) nxt[m][s] = p[s];
      endcase
      for (int s = 0; s < 4; s++) begin
        logic [17:0] b;
        b = nxt[m][s] + bias_q[m*32 +: 18];
        res[m][s] = cfg.psum_shl ? (b << 1) : b;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire)
      for (int m = 0; m < M; m++)
        for (int s = 0; s < 4; s++) slot[in_pix][m][s] <= nxt[m][s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias_q <= '0; bcnt <= '0; bias_ok <= 1'b0;
      t_q <= '0; wg_q <= '0; h_q <= '0;
      out_valid <= 1'b0; out_vmem <= '0; out_pix <= '0; out_first <= 1'b0; out_tile_last <= 1'b0;
    end else begin
      if (bias_valid && bias_ready) begin
        bias_q[bcnt*128 +: 128] <= bias_data;
        if (bcnt == ($clog2(BEATS+1))'(BEATS-1)) begin
          bcnt <= '0; bias_ok <= 1'b1;
        end else bcnt <= bcnt + 1'b1;
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        if (emit) begin
          out_valid <= 1'b1;
          for (int m = 0; m < M; m++)
            for (int s = 0; s < 4; s++) out_vmem[(m*4+s)*18 +: 18] <= res[m][s];
          out_pix       <= in_pix;
          out_first     <= (otile == 8'd0);
          out_tile_last <= grp_end_tile;
        end
        if (in_grp_last) begin
          if (t_q == cfg.te_tiles - 1'b1) begin
            t_q <= '0;
            if (wg_q == cfg.wg - 1'b1) begin
              wg_q <= '0;
              h_q  <= (h_q == cfg.ho - 1'b1) ? '0 : h_q + 1'b1;
            end else wg_q <= wg_q + 1'b1;
          end else t_q <= t_q + 1'b1;
          if (grp_end_tile) bias_ok <= 1'b0;
        end
      end
    end
  end
endmodule
