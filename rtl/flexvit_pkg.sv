// flexvit_pkg: shared constants and types of the FlexViT GEMM accelerator.
//
// The tile sizes are the published configuration of the accelerator: every core
// computes a 64 x 64 output tile (T_N x T_M), the on-chip buffers hold a
// reduction depth of 1024 (T_K), three cores run in parallel (C) and each core
// multiplies 16 INT8 pairs per cycle (K_f). The layer configuration packet
// layout, its encodings and the stream width of 32 bits (four INT8 values per
// word) are the design's own choices where the published description gives
// only the content of the packet (layer dimensions, mode flags and
// quantization parameters).
package flexvit_pkg;

  parameter int unsigned TN_DEF = 64;    // per-core row tile
  parameter int unsigned TM_DEF = 64;    // per-core output-channel tile
  parameter int unsigned TK_DEF = 1024;  // maximum buffered reduction depth
  parameter int unsigned C_DEF  = 3;     // number of GEMM cores
  parameter int unsigned KF_DEF = 16;    // SIMD width along K
  parameter int unsigned AXIS_W = 32;    // AXI-stream data width
  parameter int unsigned BYTES_PER_WORD = AXIS_W / 8;
  parameter int unsigned PPU_LAT_DEF = 29; // PPU latency (cycles)
  parameter int unsigned PPU_II_DEF  = 2;  // PPU initiation interval
  parameter int unsigned CFG_WORDS = 5;    // words in a layer configuration packet

  // Dataflow mode, chosen per layer by the host.
  typedef enum logic {
    MODE_IB = 1'b0,   // Input-Broadcast: input tile shared, weights partitioned
    MODE_WB = 1'b1    // Weight-Broadcast: weight tile shared, inputs partitioned
  } mode_e;

  // Layer type; selects per-tensor (FC) or per-channel (CONV) requantization.
  typedef enum logic {
    LAYER_FC   = 1'b0,
    LAYER_CONV = 1'b1
  } layer_e;

  // Decoded layer configuration packet.
  //   word 0: [0] mode, [1] layer, [2] has_bias
  //   word 1: [15:0] padded N (rows)
  //   word 2: [15:0] padded M (output channels)
  //   word 3: [15:0] padded K (reduction depth)
  //   word 4: [7:0] output zero point, [15:8] activation min, [23:16] activation max
  typedef struct packed {
    mode_e             mode;
    layer_e            layer;
    logic              has_bias;
    logic [15:0]       n;
    logic [15:0]       m;
    logic [15:0]       k;
    logic signed [7:0] out_zp;
    logic signed [7:0] act_min;
    logic signed [7:0] act_max;
  } layer_cfg_t;

  // Requantization parameters of one output channel.
  typedef struct packed {
    logic signed [31:0] bias;
    logic signed [31:0] mult;
    logic [5:0]         shift;
  } qparam_t;

endpackage
