// tile_buffer: banked on-chip tile buffer of one GEMM core (input or weight).
//
// Holds ROWS rows of up to DEPTH_K INT8 values each. Element k of a row lives
// in bank (k mod KF) at word address {row, k / KF}: consecutive elements are
// spread cyclically over KF banks, so the core reads the KF operands of one
// SIMD step from all banks in the same cycle without a bank conflict (cyclic
// partitioning, as published). The write side takes one 32-bit stream word,
// four consecutive elements starting at a multiple of four, per cycle; it
// writes four banks at once. The read side returns KF elements one cycle after
// the address (registered read, as a block RAM does). Widths and the 4-byte
// write port follow from the 32-bit streams; the rest is this design's choice.
module tile_buffer
  import flexvit_pkg::*;
#(
  parameter int unsigned ROWS    = TN_DEF,
  parameter int unsigned DEPTH_K = TK_DEF,
  parameter int unsigned KF      = KF_DEF
) (
  input  logic                               clk,
  // write port: one 32-bit word = elements k .. k+3 of row wr_row
  input  logic                               wr_en,
  input  logic [$clog2(ROWS)-1:0]            wr_row,
  input  logic [$clog2(DEPTH_K)-1:0]         wr_k,
  input  logic [AXIS_W-1:0]                  wr_data,
  // read port: KF elements k = rd_kk*KF .. rd_kk*KF+KF-1 of row rd_row
  input  logic [$clog2(ROWS)-1:0]            rd_row,
  input  logic [$clog2(DEPTH_K/KF)-1:0]      rd_kk,
  output logic [KF-1:0][7:0]                 rd_data
);
  localparam int unsigned WPR   = DEPTH_K / KF;          // words per row per bank
  localparam int unsigned DEPTH = ROWS * WPR;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned GRP   = KF / BYTES_PER_WORD;    // groups of four banks

  initial begin
    assert (2**$clog2(ROWS) == ROWS && 2**$clog2(DEPTH_K) == DEPTH_K && 2**$clog2(KF) == KF)
      else $error("tile_buffer: sizes must be powers of two");
    assert (KF >= BYTES_PER_WORD) else $error("tile_buffer: KF must be at least 4");
  end

  logic [AW-1:0] wr_addr, rd_addr;
  logic [$clog2(GRP > 1 ? GRP : 2)-1:0] wr_grp;

  assign wr_addr = AW'({wr_row, wr_k[$clog2(DEPTH_K)-1:$clog2(KF)]});
  assign rd_addr = AW'({rd_row, rd_kk});
  assign wr_grp  = $bits(wr_grp)'(wr_k[$clog2(KF)-1:0] / BYTES_PER_WORD);

  for (genvar b = 0; b < KF; b++) begin : g_bank
    logic [7:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && (GRP == 1 || 32'(wr_grp) == b / BYTES_PER_WORD))
        mem[wr_addr] <= wr_data[8*(b % BYTES_PER_WORD) +: 8];
      rd_data[b] <= mem[rd_addr];
    end
  end

endmodule
