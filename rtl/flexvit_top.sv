// flexvit_top: the FlexViT accelerator, an INT8 GEMM engine for the fully
// connected and (im2col-lowered) convolution layers of vision transformers.
//
// The host sends, per layer, a configuration packet on the metadata stream and
// then the operand tiles on three further streams (inputs, weights, bias and
// scales), in the order the scheduler asks for them (see scheduler.sv and the
// read units for the word layouts). The accelerator returns the requantized
// INT8 outputs, four per 32-bit word, on the output stream, tile by tile and,
// within a tile, core by core and row by row; `out_tlast` marks the layer's
// last word. Structure:
//   scheduler  -> start/done handshakes with every unit below
//   read_unit  (ReadInp)  -> input buffers of the C cores
//   read_unit  (ReadWgt)  -> weight buffers of the C cores
//   read_bias  (ReadBias) -> two-bank bias/scale store
//   gemm_engine: C x (input buffer, weight buffer, gemm_core with SIMD PE)
//   ppu        -> bias, requantization, packing, output stream
// The four input streams and one output stream follow the paper; the AXI DMA
// engines and DRAM on the other side of the streams are not part of this RTL.
module flexvit_top
  import flexvit_pkg::*;
#(
  parameter int unsigned C       = C_DEF,
  parameter int unsigned TN      = TN_DEF,
  parameter int unsigned TM      = TM_DEF,
  parameter int unsigned TK      = TK_DEF,
  parameter int unsigned KF      = KF_DEF,
  parameter int unsigned PPU_LAT = PPU_LAT_DEF,
  parameter int unsigned PPU_II  = PPU_II_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  // layer metadata stream
  input  logic [AXIS_W-1:0]   cfg_tdata,
  input  logic                cfg_tvalid,
  output logic                cfg_tready,
  // input stream
  input  logic [AXIS_W-1:0]   inp_tdata,
  input  logic                inp_tvalid,
  output logic                inp_tready,
  // weight stream
  input  logic [AXIS_W-1:0]   wgt_tdata,
  input  logic                wgt_tvalid,
  output logic                wgt_tready,
  // bias and requantization stream
  input  logic [AXIS_W-1:0]   bias_tdata,
  input  logic                bias_tvalid,
  output logic                bias_tready,
  // output stream
  output logic [AXIS_W-1:0]   out_tdata,
  output logic                out_tvalid,
  output logic                out_tlast,
  input  logic                out_tready,
  // status
  output logic                busy,
  output logic                layer_done,
  output logic                cfg_error
);
  localparam int unsigned CW = $clog2(C > 1 ? C : 2);

  logic [$clog2(TK):0]      k_len;
  logic                     inp_start, inp_bcast, inp_done, inp_busy;
  logic [$clog2(C+1)-1:0]   inp_ntiles, wgt_ntiles, ppu_ncores;
  logic                     wgt_start, wgt_bcast, wgt_done, wgt_busy;
  logic                     bias_start, bias_bank, bias_has, bias_pc, bias_done, bias_busy;
  logic [$clog2(C*TM+1)-1:0] bias_nch;
  logic                     eng_start, eng_done, eng_busy;
  logic [C-1:0]             eng_mask;
  logic                     ppu_start, ppu_bank, ppu_last, ppu_busy, ppu_done;
  mode_e                    ppu_mode;
  layer_e                   ppu_layer;
  logic signed [7:0]        ppu_zp, ppu_amin, ppu_amax;

  logic [C-1:0]             inp_wr_en, wgt_wr_en;
  logic [$clog2(TN)-1:0]    inp_wr_row;
  logic [$clog2(TM)-1:0]    wgt_wr_row;
  logic [$clog2(TK)-1:0]    inp_wr_k, wgt_wr_k;
  logic [AXIS_W-1:0]        inp_wr_data, wgt_wr_data;

  logic [CW-1:0]            res_core;
  logic [$clog2(TN*TM)-1:0] res_addr;
  logic signed [31:0]       res_data;
  logic                     q_bank, q_pc;
  logic [$clog2(C*TM)-1:0]  q_ch;
  qparam_t                  q;

  scheduler #(.C(C), .TN(TN), .TM(TM), .TK(TK), .KF(KF)) u_sched (
    .clk, .rst_n,
    .s_cfg_tdata (cfg_tdata), .s_cfg_tvalid(cfg_tvalid), .s_cfg_tready(cfg_tready),
    .k_len,
    .inp_start, .inp_broadcast(inp_bcast), .inp_ntiles, .inp_done,
    .wgt_start, .wgt_broadcast(wgt_bcast), .wgt_ntiles, .wgt_done,
    .bias_start, .bias_bank, .bias_nch, .bias_has, .bias_per_channel(bias_pc), .bias_done,
    .eng_start, .eng_mask, .eng_done,
    .ppu_start, .ppu_mode, .ppu_layer, .ppu_ncores, .ppu_bank,
    .ppu_out_zp(ppu_zp), .ppu_act_min(ppu_amin), .ppu_act_max(ppu_amax),
    .ppu_last, .ppu_busy,
    .busy, .layer_done, .cfg_error
  );

  read_unit #(.C(C), .ROWS(TN), .TK(TK)) u_read_inp (
    .clk, .rst_n,
    .start(inp_start), .broadcast(inp_bcast), .n_tiles(inp_ntiles), .k_len,
    .busy(inp_busy), .done(inp_done),
    .s_tdata(inp_tdata), .s_tvalid(inp_tvalid), .s_tready(inp_tready),
    .wr_en(inp_wr_en), .wr_row(inp_wr_row), .wr_k(inp_wr_k), .wr_data(inp_wr_data)
  );

  read_unit #(.C(C), .ROWS(TM), .TK(TK)) u_read_wgt (
    .clk, .rst_n,
    .start(wgt_start), .broadcast(wgt_bcast), .n_tiles(wgt_ntiles), .k_len,
    .busy(wgt_busy), .done(wgt_done),
    .s_tdata(wgt_tdata), .s_tvalid(wgt_tvalid), .s_tready(wgt_tready),
    .wr_en(wgt_wr_en), .wr_row(wgt_wr_row), .wr_k(wgt_wr_k), .wr_data(wgt_wr_data)
  );

  read_bias #(.C(C), .TM(TM)) u_read_bias (
    .clk, .rst_n,
    .start(bias_start), .bank(bias_bank), .n_ch(bias_nch), .has_bias(bias_has),
    .per_channel(bias_pc), .busy(bias_busy), .done(bias_done),
    .s_tdata(bias_tdata), .s_tvalid(bias_tvalid), .s_tready(bias_tready),
    .rd_bank(q_bank), .rd_ch(q_ch), .rd_per_channel(q_pc), .rd_q(q)
  );

  gemm_engine #(.C(C), .TN(TN), .TM(TM), .TK(TK), .KF(KF)) u_engine (
    .clk, .rst_n,
    .inp_wr_en, .inp_wr_row, .inp_wr_k, .inp_wr_data,
    .wgt_wr_en, .wgt_wr_row, .wgt_wr_k, .wgt_wr_data,
    .start(eng_start), .core_mask(eng_mask), .k_len,
    .busy(eng_busy), .done(eng_done),
    .res_core, .res_addr, .res_data
  );

  ppu #(.C(C), .TN(TN), .TM(TM), .PPU_LAT(PPU_LAT), .PPU_II(PPU_II)) u_ppu (
    .clk, .rst_n,
    .start(ppu_start), .mode(ppu_mode), .layer(ppu_layer), .n_cores(ppu_ncores),
    .q_bank_in(ppu_bank), .out_zp(ppu_zp), .act_min(ppu_amin), .act_max(ppu_amax),
    .last_tile(ppu_last), .busy(ppu_busy), .done(ppu_done),
    .res_core, .res_addr, .res_data,
    .q_bank, .q_ch, .q_per_channel(q_pc), .q,
    .m_tdata(out_tdata), .m_tvalid(out_tvalid), .m_tlast(out_tlast), .m_tready(out_tready)
  );

  // units are only started when idle
  a_read_free: assert property (@(posedge clk) disable iff (!rst_n)
    (inp_start |-> !inp_busy) and (wgt_start |-> !wgt_busy) and (bias_start |-> !bias_busy));
  a_engine_free: assert property (@(posedge clk) disable iff (!rst_n)
    eng_start |-> !eng_busy && !ppu_busy);
  a_ppu_done_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ppu_done |-> !ppu_start);

endmodule
