// tb_flexvit_workloads: runs layer shapes of the evaluated vision transformers
// through the accelerator in its full-size configuration (C = 3,
// T_N = T_M = 64, T_K = 1024, K_f = 16: the top's own defaults).
//
// The host model (flexvit_host, LIST = 2) pads each layer to the tile sizes,
// picks its mode with the per-layer rule, streams it with random gaps and
// back-pressure and compares every output word with a reference GEMM and
// requantization. The layers:
//   ViT-T / DeiT-T QKV projection    FC    N = 256 (197), M = 576,  K = 192   -> IB
//   ViT-T / DeiT-T MLP fc2           FC    N = 256 (197), M = 192,  K = 768   -> IB
//   MobileViT-S 3x3 conv, 64 ch      CONV  N = 1024,      M = 64,   K = 576   -> WB
//   Swin-T patch embedding           CONV  N = 3136,      M = 128 (96), K = 48 -> WB
//   EfficientViT-b1 classifier       FC    K = 1536 > T_K: must be refused
// The layer sizes come from the published model definitions; padded rows and
// channels carry random data here instead of zeros, which changes nothing for
// the hardware. The bench counts IB and WB steps, partial core groups and the
// refused packet, and fails if any of them never happened or if fewer than four
// layers completed.
module tb_flexvit_workloads;
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

  flexvit_host #(.C(C), .TN(TN), .TM(TM), .TK(TK), .KF(KF), .LIST(2)) host (
    .clk, .rst_n,
    .cfg_tdata, .cfg_tvalid, .cfg_tready,
    .inp_tdata, .inp_tvalid, .inp_tready,
    .wgt_tdata, .wgt_tvalid, .wgt_tready,
    .bias_tdata, .bias_tvalid, .bias_tready,
    .out_tdata, .out_tvalid, .out_tlast, .out_tready,
    .layer_done, .cfg_error, .finished,
    .checks(h_checks), .failures(h_failures), .n_clamped, .n_layers_ok
  );

  int n_ib_steps, n_wb_steps, n_partial, n_cfg_err;
  longint n_cycles;
  always @(posedge clk) if (rst_n) begin
    n_cycles++;
    if (dut.eng_start) begin
      if (dut.u_sched.cfg.mode == 1'b0) n_ib_steps++; else n_wb_steps++;
      if (dut.eng_mask != '1) n_partial++;
    end
    if (layer_done && cfg_error) n_cfg_err++;
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
    checks = 0; failures = 0; n_cycles = 0;
    @(posedge rst_n);
    wait (finished === 1'b1);
    need("Input-Broadcast step", n_ib_steps);
    need("Weight-Broadcast step", n_wb_steps);
    need("partial core group", n_partial);
    need("refused K > T_K layer", n_cfg_err);
    checks++;
    if (n_layers_ok != 4) failures++;
    $display("workloads: %0d layers in %0d cycles", n_layers_ok, n_cycles);
    checks += h_checks; failures += h_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    $display("watchdog: workload test did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks + h_checks, failures + h_failures + 1);
    $finish;
  end

endmodule
