// gemm_core: one of the C parallel GEMM cores.
//
// On `start` the core computes a full TN x TM output tile
//   R[r][m] = sum_{k < k_len} X[r][k] * W[m][k]
// from its own input buffer (rows r, TN of them) and weight buffer (rows m, TM
// of them). The walk is output-stationary: for each output (r, m), row-major,
// it issues k_len/KF consecutive SIMD beats to its PE (simd_mac), one beat per
// cycle, and the PE keeps the running sum in its accumulator register. The
// finished 32-bit dot product is written into the core's result store at
// address r*TM + m, where the post-processing unit reads it later through the
// `res_rd_*` port (registered read, one cycle).
//
// Timing: issuing takes TN*TM*k_len/KF cycles back to back; `done` pulses when
// the last dot product has been written, 4 + log2(KF) cycles after `start`
// plus the issue time. The row-major walk order, the result store and the
// start/done handshake are this design's choices; the single SIMD PE per core,
// the K_f = 16 unrolling and the 32-bit local accumulation follow the paper.
module gemm_core
  import flexvit_pkg::*;
#(
  parameter int unsigned TN = TN_DEF,
  parameter int unsigned TM = TM_DEF,
  parameter int unsigned TK = TK_DEF,
  parameter int unsigned KF = KF_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(TK):0]           k_len,     // multiple of KF, KF..TK
  output logic                          busy,
  output logic                          done,
  // operand buffers
  output logic [$clog2(TN)-1:0]         inp_rd_row,
  output logic [$clog2(TM)-1:0]         wgt_rd_row,
  output logic [$clog2(TK/KF)-1:0]      rd_kk,
  input  logic [KF-1:0][7:0]            inp_data,
  input  logic [KF-1:0][7:0]            wgt_data,
  // result store read port
  input  logic [$clog2(TN*TM)-1:0]      res_rd_addr,
  output logic signed [31:0]            res_rd_data
);
  localparam int unsigned RW  = $clog2(TN);
  localparam int unsigned MW  = $clog2(TM);
  localparam int unsigned KKW = $clog2(TK/KF);
  localparam int unsigned TAG_W = RW + MW;

  logic                issuing;
  logic [RW-1:0]       r;
  logic [MW-1:0]       m;
  logic [KKW-1:0]      kk;
  logic [KKW:0]        kk_last;
  logic                beat_first, beat_last, tile_last;

  assign kk_last    = (KKW+1)'(32'(k_len) / KF - 1);
  assign beat_first = (kk == '0);
  assign beat_last  = ({1'b0, kk} == kk_last);
  assign tile_last  = beat_last && (r == RW'(TN-1)) && (m == MW'(TM-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0;
      busy    <= 1'b0;
      r <= '0; m <= '0; kk <= '0;
    end else begin
      if (start && !busy) begin
        issuing <= 1'b1;
        busy    <= 1'b1;
        r <= '0; m <= '0; kk <= '0;
      end else if (issuing) begin
        if (beat_last) begin
          kk <= '0;
          if (m == MW'(TM-1)) begin
            m <= '0;
            r <= r + 1'b1;
          end else begin
            m <= m + 1'b1;
          end
          if (tile_last) issuing <= 1'b0;
        end else begin
          kk <= kk + 1'b1;
        end
      end
      if (done) busy <= 1'b0;
    end
  end

  assign inp_rd_row = r;
  assign wgt_rd_row = m;
  assign rd_kk      = kk;

  // align the beat's control with the buffer read latency (one cycle)
  logic             b_valid, b_first, b_last;
  logic [TAG_W-1:0] b_tag;
  logic             b_tile_last;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0; b_first <= 1'b0; b_last <= 1'b0; b_tag <= '0; b_tile_last <= 1'b0;
    end else begin
      b_valid     <= issuing;
      b_first     <= beat_first;
      b_last      <= beat_last;
      b_tag       <= {r, m};
      b_tile_last <= issuing && tile_last;
    end
  end

  // the final beat of the tile is tracked to raise `done` when it retires
  logic             mac_valid;
  logic [TAG_W-1:0] mac_tag;
  logic signed [31:0] mac_acc;
  logic [TAG_W-1:0] last_tag;
  logic             last_seen;

  simd_mac #(.KF(KF), .TAG_W(TAG_W)) u_pe (
    .clk, .rst_n,
    .in_valid (b_valid),
    .in_first (b_first),
    .in_last  (b_last),
    .in_tag   (b_tag),
    .in_act   (inp_data),
    .in_wgt   (wgt_data),
    .out_valid(mac_valid),
    .out_tag  (mac_tag),
    .acc      (mac_acc)
  );

  assign last_tag = {RW'(TN-1), MW'(TM-1)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_seen <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (b_tile_last) last_seen <= 1'b1;
      if (mac_valid && mac_tag == last_tag && (last_seen || b_tile_last)) begin
        done      <= 1'b1;
        last_seen <= 1'b0;
      end
    end
  end

  // result store: one 32-bit accumulator result per output of the tile
  logic signed [31:0] res_mem [TN*TM];
  always_ff @(posedge clk) begin
    if (mac_valid) res_mem[mac_tag] <= mac_acc;
    res_rd_data <= res_mem[res_rd_addr];
  end

endmodule
