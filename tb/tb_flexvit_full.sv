// tb_flexvit_full: end-to-end test of the accelerator in its full-size
// configuration (C = 3, T_N = T_M = 64, T_K = 1024, K_f = 16: the top's own
// defaults, nothing overridden).
//
// The host model (flexvit_host, LIST = 1) runs an FC layer of N = 128, M = 256,
// K = 1024 (Input-Broadcast, a full and a partial core group per row tile) and
// a CONV layer of N = 256, M = 64, K = 256 (Weight-Broadcast); every output word
// is compared with a reference GEMM + requantization. The bench also counts how often each mechanism of the design actually happened
// and counts a failure for any that never did: Input-Broadcast and
// Weight-Broadcast steps, input reuse (IB step without an input load), weight
// reuse (WB step without a weight load), a partial core group, PPU work
// overlapping operand reads, a stream source stalling (tvalid low while the
// unit waits), output back-pressure, and clamped
// outputs.
module tb_flexvit_full;
  import flexvit_pkg::*;
  localparam int unsigned C = C_DEF, TN = TN_DEF, TM = TM_DEF, TK = TK_DEF, KF = KF_DEF;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n;
  logic [31:0] cfg_tdata, inp_tdata, wgt_tdata, bias_tdata, out_tdata;
  logic        cfg_tvalid, inp_tvalid, wgt_tvalid, bias_tvalid, out_tvalid, out_tlast;
  logic        cfg_tready, inp_tready, wgt_tready, bias_tready, out_tready;
  logic        busy, layer_done, cfg_error, finished;
  int          h_checks, h_failures, n_clamped, n_layers_ok;

  flexvit_top dut (
    .clk, .rst_n,
    .cfg_tdata, .cfg_tvalid, .cfg_tready,
    .inp_tdata, .inp_tvalid, .inp_tready,
    .wgt_tdata, .wgt_tvalid, .wgt_tready,
    .bias_tdata, .bias_tvalid, .bias_tready,
    .out_tdata, .out_tvalid, .out_tlast, .out_tready,
    .busy, .layer_done, .cfg_error
  );

  flexvit_host #(.C(C), .TN(TN), .TM(TM), .TK(TK), .KF(KF), .LIST(1)) host (
    .clk, .rst_n,
    .cfg_tdata, .cfg_tvalid, .cfg_tready,
    .inp_tdata, .inp_tvalid, .inp_tready,
    .wgt_tdata, .wgt_tvalid, .wgt_tready,
    .bias_tdata, .bias_tvalid, .bias_tready,
    .out_tdata, .out_tvalid, .out_tlast, .out_tready,
    .layer_done, .cfg_error, .finished,
    .checks(h_checks), .failures(h_failures), .n_clamped, .n_layers_ok
  );

  // ---------------- mechanism counters ----------------
  int n_ib_steps, n_wb_steps, n_inp_reuse, n_wgt_reuse, n_partial, n_overlap;
  int n_src_stall, n_backpressure, n_cfg_err, n_fc_tiles, n_conv_tiles;
  always @(posedge clk) if (rst_n) begin
    if (dut.eng_start) begin
      if (dut.u_sched.cfg.mode == 1'b0) n_ib_steps++; else n_wb_steps++;
      if (dut.eng_mask != '1) n_partial++;
    end
    if (dut.u_sched.state == 3'd2) begin
      if (dut.u_sched.cfg.mode == 1'b0 && !dut.inp_start) n_inp_reuse++;
      if (dut.u_sched.cfg.mode == 1'b1 && !dut.wgt_start) n_wgt_reuse++;
    end
    if (dut.ppu_busy && (dut.inp_busy || dut.wgt_busy || dut.bias_busy)) n_overlap++;
    if (inp_tready && !inp_tvalid) n_src_stall++;
    if (out_tvalid && !out_tready) n_backpressure++;
    if (layer_done && cfg_error) n_cfg_err++;
    if (dut.ppu_start) begin
      if (dut.ppu_layer == 1'b0) n_fc_tiles++; else n_conv_tiles++;
    end
  end

  int checks, failures;
  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never happened: %s", what);
    end else $display("mechanism %-28s %0d", what, n);
  endtask

  initial begin
    checks = 0; failures = 0;
    @(posedge rst_n);
    wait (finished === 1'b1);
    need("Input-Broadcast step", n_ib_steps);
    need("Weight-Broadcast step", n_wb_steps);
    need("input tile reuse (IB)", n_inp_reuse);
    need("weight tile reuse (WB)", n_wgt_reuse);
    need("partial core group", n_partial);
    need("PPU overlapping reads", n_overlap);
    need("input stream stall", n_src_stall);
    need("output back-pressure", n_backpressure);
    need("FC per-tensor tile", n_fc_tiles);
    need("CONV per-channel tile", n_conv_tiles);
    need("clamped output", n_clamped);
    checks++;
    if (n_layers_ok != 2) failures++;
    checks += h_checks; failures += h_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("watchdog: end-to-end test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures + 1);
    $finish;
  end

endmodule
