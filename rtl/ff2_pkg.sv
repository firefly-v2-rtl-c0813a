// ff2_pkg: types and constants shared by the FireFly v2 spiking-convolution accelerator.
//
// The default parallelism follows the KV260 (xczu5ev) build used for the main benchmark
// results: M=16 output channels, V=16 input channels, N=8 pixels and S=4 time steps per
// cycle of the slow clock. Partial sums leave the systolic array as 12-bit values and are
// widened to 18 bits by the partial-sum processor. Everything else here (field widths of the
// layer configuration, encodings of the modes) is this design's own choice.
package ff2_pkg;

  localparam int unsigned PSUM_W = 12;   // partial sum precision out of the engine
  localparam int unsigned VMEM_W = 18;   // precision after shift-merge and bias
  localparam int unsigned WGT_W  = 8;    // synaptic weight precision
  localparam int unsigned AXI_W  = 128;  // S-AXI-HP / DataMover stream width

  // Bit width of the input spikes of a layer (bit-serial decomposition).
  typedef enum logic [1:0] {SPK_1B = 2'd0, SPK_2B = 2'd1, SPK_4B = 2'd2, PIX_8B = 2'd3} spk_mode_e;
  typedef enum logic [1:0] {POOL_NONE = 2'd0, POOL_MAX = 2'd1, POOL_AVG = 2'd2} pool_mode_e;
  typedef enum logic [1:0] {RES_NONE = 2'd0, RES_IAND = 2'd1, RES_ADD = 2'd2} res_mode_e;
  // How a multi-bit result is squeezed: keep 4 bits, saturate to 2 bits, or shift right by 1.
  typedef enum logic [1:0] {FIT_EXT4 = 2'd0, FIT_SAT2 = 2'd1, FIT_SHIFT2 = 2'd2} fit_mode_e;
  typedef enum logic [1:0] {OUT_SPIKE = 2'd0, OUT_PSUM = 2'd1, OUT_COUNT = 2'd2} out_mode_e;
  typedef enum logic [1:0] {NEURON_IF = 2'd0, NEURON_LIF = 2'd1, NEURON_RMP = 2'd2} neuron_e;

  // Per-layer configuration written by the host through the command registers.
  typedef struct packed {
    logic [9:0]  hi;          // input feature map height (unpadded)
    logic [9:0]  wi;          // input feature map width (unpadded)
    logic [2:0]  pad;         // zero padding on each side
    logic [1:0]  stride;      // convolution stride, 1..3
    logic [3:0]  kh;          // kernel height
    logic [3:0]  kw;          // kernel width
    logic [7:0]  ci_tiles;    // Ci / V
    logic [7:0]  te_tiles;    // equivalent time steps / S (B*T/S)
    logic [7:0]  co_tiles;    // Co / M
    logic [9:0]  ho;          // output rows
    logic [7:0]  wg;          // output pixel groups per row, ceil(Wo / N)
    spk_mode_e   spk_mode;    // input spike bit width
    logic        psum_shl;    // left shift merged partial sums by one
    pool_mode_e  pool_mode;
    fit_mode_e   pool_fit;    // average pooling: FIT_SAT2 or FIT_SHIFT2
    res_mode_e   res_mode;
    logic [2:0]  res_bits;    // shortcut spike width: 1, 2 or 4
    fit_mode_e   res_fit;     // ADD result: FIT_EXT4, FIT_SAT2 or FIT_SHIFT2
    out_mode_e   out_mode;
    logic [31:0] in_base;     // input spikes, re-read for every output-channel tile
    logic [31:0] in_len;      // bytes of one input read
    logic [31:0] res_base;    // shortcut spikes
    logic [31:0] res_len;     // bytes per output-channel tile
    logic [31:0] prm_base;    // bias, thresholds and weights of each output-channel tile
    logic [31:0] prm_len;     // bytes per output-channel tile
    logic [31:0] w_len;       // bytes of weights inside prm_len
    logic [31:0] out_base;
    logic [31:0] out_len;     // bytes per output-channel tile
  } layer_cfg_t;

  // Command to an AXI DataMover: byte address and byte count (BTT).
  typedef struct packed {
    logic [31:0] addr;
    logic [22:0] btt;
  } dm_cmd_t;

  function automatic logic [3:0] fit4(input logic [4:0] v, input fit_mode_e mode);
    // Saturate-or-shift of Sec. III: ext4 saturates at 15, sat2 clips at 3, shift2 halves.
    case (mode)
      FIT_SAT2:   fit4 = (v > 5'd3) ? 4'd3 : v[3:0];
      FIT_SHIFT2: fit4 = (v[4:1] > 4'd3) ? 4'd3 : v[4:1];
      default:    fit4 = (v > 5'd15) ? 4'd15 : v[3:0];
    endcase
  endfunction

  // Equivalent time steps per actual time step of the input spikes.
  function automatic logic [3:0] spk_rounds(input spk_mode_e mode);
    case (mode)
      SPK_2B, PIX_8B: spk_rounds = 4'd2;
      SPK_4B:         spk_rounds = 4'd4;
      default:        spk_rounds = 4'd1;
    endcase
  endfunction

  // Bits per output spike value as written to memory.
  function automatic logic [2:0] out_bits(input layer_cfg_t c);
    if (c.res_mode == RES_ADD)        out_bits = (c.res_fit == FIT_EXT4) ? 3'd4 : 3'd2;
    else if (c.pool_mode == POOL_AVG) out_bits = 3'd2;
    else                              out_bits = 3'd1;
  endfunction

endpackage
