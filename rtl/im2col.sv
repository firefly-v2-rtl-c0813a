// im2col: N-bank input line buffer with a strided, conflict-free read address generator.
//
// Write side: the padded, coalesced input map arrives row by row (Wc pixels per row, each
// pixel ci_tiles*te_tiles words of V*S spikes, bit s*V+v), once per output-channel tile.
// Rows are kept in a ring of R = Kh+1 rows, so the next row can be written while the Kh rows
// of the current output row are read. Pixel x of a row goes to bank (x/stride) mod N at pixel
// slot (x mod stride)*XG + (x/stride)/N, XG = wg+1 pixels per bank and stride phase.
// Read side: the spatiotemporal loop nest
//     for o < Co/M, h < Ho, wg < Wo/N, t < T/S, kh < Kh, kw < Kw, c < Ci/V
// issues one V x N x S spike tile per cycle: pixel n reads input column
// x = (wg*N+n)*stride + kw of row h*stride+kh. Those N columns have N consecutive values of
// x/stride, hence lie in N different banks: bank b serves pixel (b - kw/stride) mod N, and an
// N-port crossbar rotates the bank outputs back to pixel order. The tile with c, kw and kh
// at their ends carries `out_last` (end of the fan-in of one output group). `start` rearms
// the unit for a new layer; after the last tile it stays idle.
// An output row is read only when its Kh input rows are complete; a row is written only
// when its ring slot is no longer needed. Capacity: R * (Wc/N) * ci_tiles * te_tiles <= DEPTH
// words per bank. The paper gives the N banks, the strided generator and the crossbar; the
// bank mapping and ring are this design's. Output tile: bit (n*S+s)*V+v, registered read.
module im2col
  import ff2_pkg::*;
#(
  parameter int unsigned V = 16,
  parameter int unsigned N = 8,
  parameter int unsigned S = 4,
  parameter int unsigned DEPTH = 2048
) (
  input  logic             clk,
  input  logic             rst_n,
  input  layer_cfg_t       cfg,
  input  logic             start,      // clears all counters for a new layer
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [V*S-1:0]   in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [V*N*S-1:0] out_data,
  output logic             out_last
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [V*S-1:0] bank [N][DEPTH];

  // ---------------- common geometry ----------------
  logic [15:0] wpp, rwb, hp, wc;
  logic [4:0]  ring;
  logic [7:0]  xg;
  assign wpp  = 16'(cfg.ci_tiles) * 16'(cfg.te_tiles);
  assign xg   = cfg.wg + 1'b1;
  assign wc   = 16'(int'(xg) * N * int'(cfg.stride));
  assign rwb  = 16'(int'(wc) / N) * wpp;           // words per bank per row
  assign hp   = 16'(cfg.hi) + 16'(2 * cfg.pad);
  assign ring = 5'(cfg.kh) + 5'd1;

  // ---------------- write side ----------------
  logic [31:0] wr_row;        // global input row index being written
  logic [15:0] wx, wk;        // pixel in row, word in pixel
  logic [31:0] rd_base;       // global index of the first input row of the current output row
  logic        wr_ok;
  assign wr_ok    = (wr_row < rd_base + 32'(ring));
  assign in_ready = wr_ok;

  int unsigned w_bank, w_addr;
  always_comb begin
    int unsigned xs, slot;
    xs     = int'(wx) / int'(cfg.stride);
    w_bank = xs % N;
    slot   = (int'(wx) % int'(cfg.stride)) * int'(xg) + xs / N;
    w_addr = (int'(wr_row) % int'(ring)) * int'(rwb) + slot * int'(wpp) + int'(wk);
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) bank[w_bank][AW'(w_addr)] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_row <= '0; wx <= '0; wk <= '0;
    end else if (start) begin
      wr_row <= '0; wx <= '0; wk <= '0;
    end else if (in_valid && in_ready) begin
      if (wk == wpp - 1'b1) begin
        wk <= '0;
        if (wx == wc - 1'b1) begin
          wx <= '0;
          wr_row <= wr_row + 1'b1;
        end else wx <= wx + 1'b1;
      end else wk <= wk + 1'b1;
    end
  end

  // ---------------- read side: loop nest ----------------
  logic [7:0] o, wgc, t, c;
  logic [9:0] h;
  logic [3:0] kh, kw;
  logic       rd_ok, fire, lst, done_all;
  logic [31:0] tile_base;     // global row of this tile's padded row 0
  assign rd_base = tile_base + 32'(int'(h) * int'(cfg.stride));
  assign rd_ok   = (wr_row >= rd_base + 32'(cfg.kh)) && !done_all;
  assign fire    = rd_ok && (!out_valid || out_ready);
  assign lst     = (c == cfg.ci_tiles - 1'b1) && (kw == cfg.kw - 1'b1) && (kh == cfg.kh - 1'b1);

  logic [V*S-1:0] rdata [N];
  always_comb begin
    int unsigned k2, row_off, ph;
    k2      = int'(kw) / int'(cfg.stride);
    ph      = int'(kw) % int'(cfg.stride);
    row_off = ((int'(rd_base) + int'(kh)) % int'(ring)) * int'(rwb);
    for (int b = 0; b < N; b++) begin
      int unsigned j, a;
      j = int'(wgc) + ((b >= int'(k2 % N)) ? 0 : 1) + k2 / N;
      a = row_off + (ph * int'(xg) + j) * int'(wpp) + int'(c) * int'(cfg.te_tiles) + int'(t);
      rdata[b] = bank[b][AW'(a)];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o <= '0; h <= '0; wgc <= '0; t <= '0; kh <= '0; kw <= '0; c <= '0;
      tile_base <= '0; done_all <= 1'b0;
      out_valid <= 1'b0; out_data <= '0; out_last <= 1'b0;
    end else if (start) begin
      o <= '0; h <= '0; wgc <= '0; t <= '0; kh <= '0; kw <= '0; c <= '0;
      tile_base <= '0; done_all <= 1'b0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        int unsigned k2;
        k2 = int'(kw) / int'(cfg.stride);
        out_valid <= 1'b1;
        out_last  <= lst;
        for (int n = 0; n < N; n++) out_data[n*V*S +: V*S] <= rdata[(n + k2) % N];
        // advance the loop nest, innermost first
        if (c != cfg.ci_tiles - 1'b1) c <= c + 1'b1;
        else begin
          c <= '0;
          if (kw != cfg.kw - 1'b1) kw <= kw + 1'b1;
          else begin
            kw <= '0;
            if (kh != cfg.kh - 1'b1) kh <= kh + 1'b1;
            else begin
              kh <= '0;
              if (t != cfg.te_tiles - 1'b1) t <= t + 1'b1;
              else begin
                t <= '0;
                if (wgc != cfg.wg - 1'b1) wgc <= wgc + 1'b1;
                else begin
                  wgc <= '0;
                  if (h != cfg.ho - 1'b1) h <= h + 1'b1;
                  else begin
                    h <= '0;
                    tile_base <= tile_base + 32'(hp);
                    if (o != cfg.co_tiles - 1'b1) o <= o + 1'b1;
                    else begin
                      o <= '0;
                      done_all <= 1'b1;
                    end
                  end
                end
              end
            end
          end
        end
      end
    end
  end
endmodule
