// gemm_engine: the C parallel GEMM cores with their input and weight buffers.
//
// Every core c owns one input tile_buffer, one weight tile_buffer and one
// gemm_core. The read units write the buffers through per-core write enables:
// a broadcast tile is written to all cores' buffers in the same cycle (the
// same data replicated), a partitioned tile only to one core's buffer. Which of
// the two happens is decided by the read units, so the engine itself is the
// same in both dataflow modes, as the paper states.
//
// `start` launches the cores selected in `core_mask` together; `done` pulses
// once all of them have finished their tile (they run in lock step, so this is
// TN*TM*k_len/KF + 9 cycles after `start` at KF = 16). The post-processing
// unit reads the results of core `res_core` at `res_addr`; the data arrives one
// cycle later.
module gemm_engine
  import flexvit_pkg::*;
#(
  parameter int unsigned C  = C_DEF,
  parameter int unsigned TN = TN_DEF,
  parameter int unsigned TM = TM_DEF,
  parameter int unsigned TK = TK_DEF,
  parameter int unsigned KF = KF_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // input buffer write port (from ReadInp)
  input  logic [C-1:0]                  inp_wr_en,
  input  logic [$clog2(TN)-1:0]         inp_wr_row,
  input  logic [$clog2(TK)-1:0]         inp_wr_k,
  input  logic [AXIS_W-1:0]             inp_wr_data,
  // weight buffer write port (from ReadWgt)
  input  logic [C-1:0]                  wgt_wr_en,
  input  logic [$clog2(TM)-1:0]         wgt_wr_row,
  input  logic [$clog2(TK)-1:0]         wgt_wr_k,
  input  logic [AXIS_W-1:0]             wgt_wr_data,
  // control
  input  logic                          start,
  input  logic [C-1:0]                  core_mask,
  input  logic [$clog2(TK):0]           k_len,
  output logic                          busy,
  output logic                          done,
  // result read port (to the PPU)
  input  logic [$clog2(C > 1 ? C : 2)-1:0] res_core,
  input  logic [$clog2(TN*TM)-1:0]      res_addr,
  output logic signed [31:0]            res_data
);
  logic [C-1:0]         core_busy, core_done;
  logic signed [31:0]   core_res [C];
  logic [C-1:0]         mask_q, done_seen;
  logic [$bits(res_core)-1:0] res_core_q;

  for (genvar c = 0; c < C; c++) begin : g_core
    logic [$clog2(TN)-1:0]    inp_rd_row;
    logic [$clog2(TM)-1:0]    wgt_rd_row;
    logic [$clog2(TK/KF)-1:0] rd_kk;
    logic [KF-1:0][7:0]       inp_data, wgt_data;

    tile_buffer #(.ROWS(TN), .DEPTH_K(TK), .KF(KF)) u_inp_buf (
      .clk,
      .wr_en  (inp_wr_en[c]),
      .wr_row (inp_wr_row),
      .wr_k   (inp_wr_k),
      .wr_data(inp_wr_data),
      .rd_row (inp_rd_row),
      .rd_kk  (rd_kk),
      .rd_data(inp_data)
    );

    tile_buffer #(.ROWS(TM), .DEPTH_K(TK), .KF(KF)) u_wgt_buf (
      .clk,
      .wr_en  (wgt_wr_en[c]),
      .wr_row (wgt_wr_row),
      .wr_k   (wgt_wr_k),
      .wr_data(wgt_wr_data),
      .rd_row (wgt_rd_row),
      .rd_kk  (rd_kk),
      .rd_data(wgt_data)
    );

    gemm_core #(.TN(TN), .TM(TM), .TK(TK), .KF(KF)) u_core (
      .clk, .rst_n,
      .start      (start && core_mask[c]),
      .k_len,
      .busy       (core_busy[c]),
      .done       (core_done[c]),
      .inp_rd_row,
      .wgt_rd_row,
      .rd_kk,
      .inp_data,
      .wgt_data,
      .res_rd_addr(res_addr),
      .res_rd_data(core_res[c])
    );
  end

  // completion: all cores that were started have reported done
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      mask_q    <= '0;
      done_seen <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= (core_mask != '0);
        done      <= (core_mask == '0);
        mask_q    <= core_mask;
        done_seen <= '0;
      end else if (busy) begin
        if (((done_seen | core_done) & mask_q) == mask_q) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        done_seen <= done_seen | core_done;
      end
    end
  end

  // a core must not be restarted while it is still working on a tile
  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> ((core_busy & core_mask) == '0));

  always_ff @(posedge clk) res_core_q <= res_core;
  assign res_data = core_res[res_core_q];

endmodule
