// tb_gemm_engine: self-checking test of the three-core GEMM engine with its
// banked buffers.
//
// Reduced tiles (4 x 4, depth 32). The input tile is written once to all
// cores' buffers (broadcast enables), each core gets its own weight tile
// (one-hot enables), exactly as the Input-Broadcast read units do; then the
// cores run and every core's 16 results are compared with a reference GEMM. A
// second run starts only two cores (a partial group) after loading new
// per-core inputs and one shared weight tile (the Weight-Broadcast pattern) and
// checks that core 2 keeps its old results. The engine's `done` must come
// TN*TM*K/KF + 5 + log2(KF) cycles after `start`.
module tb_gemm_engine;
  localparam int unsigned C = 3, TN = 4, TM = 4, TK = 32, KF = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done;
  logic [C-1:0] inp_wr_en, wgt_wr_en, core_mask;
  logic [$clog2(TN)-1:0] inp_wr_row;
  logic [$clog2(TM)-1:0] wgt_wr_row;
  logic [$clog2(TK)-1:0] inp_wr_k, wgt_wr_k;
  logic [31:0] inp_wr_data, wgt_wr_data;
  logic [$clog2(TK):0] k_len;
  logic [1:0] res_core;
  logic [$clog2(TN*TM)-1:0] res_addr;
  logic signed [31:0] res_data;
  byte x [C][TN][TK];
  byte w [C][TM][TK];
  int  expv [C][TN*TM];
  int checks = 0, failures = 0, cycle = 0;

  gemm_engine #(.C(C), .TN(TN), .TM(TM), .TK(TK), .KF(KF)) dut (.*);
  always @(posedge clk) cycle++;

  task automatic load_inp(logic [C-1:0] en, int core);
    for (int r = 0; r < TN; r++)
      for (int k = 0; k < TK; k += 4) begin
        logic [31:0] d; d = $urandom;
        @(negedge clk);
        inp_wr_en = en; inp_wr_row = r[$clog2(TN)-1:0]; inp_wr_k = k[$clog2(TK)-1:0]; inp_wr_data = d;
        for (int c = 0; c < C; c++) if (en[c]) for (int b = 0; b < 4; b++) x[c][r][k+b] = byte'(d[8*b +: 8]);
      end
    @(negedge clk); inp_wr_en = '0;
  endtask
  task automatic load_wgt(logic [C-1:0] en);
    for (int r = 0; r < TM; r++)
      for (int k = 0; k < TK; k += 4) begin
        logic [31:0] d; d = $urandom;
        @(negedge clk);
        wgt_wr_en = en; wgt_wr_row = r[$clog2(TM)-1:0]; wgt_wr_k = k[$clog2(TK)-1:0]; wgt_wr_data = d;
        for (int c = 0; c < C; c++) if (en[c]) for (int b = 0; b < 4; b++) w[c][r][k+b] = byte'(d[8*b +: 8]);
      end
    @(negedge clk); wgt_wr_en = '0;
  endtask

  task automatic run(logic [C-1:0] mask, int k);
    int c0;
    for (int c = 0; c < C; c++) if (mask[c])
      for (int r = 0; r < TN; r++)
        for (int m = 0; m < TM; m++) begin
          int s; s = 0;
          for (int kk = 0; kk < k; kk++) s += int'(x[c][r][kk]) * int'(w[c][m][kk]);
          expv[c][r*TM+m] = s;
        end
    @(negedge clk);
    core_mask = mask; k_len = ($clog2(TK)+1)'(k); start = 1; c0 = cycle;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cycle - c0 != TN*TM*k/KF + 5 + $clog2(KF)) begin
      failures++;
      $display("engine took %0d cycles, expected %0d", cycle - c0, TN*TM*k/KF + 5 + $clog2(KF));
    end
    for (int c = 0; c < C; c++)
      for (int a = 0; a < TN*TM; a++) begin
        res_core = 2'(c); res_addr = $clog2(TN*TM)'(a);
        @(negedge clk);
        checks++;
        if (res_data !== expv[c][a]) begin
          failures++;
          $display("core %0d result %0d = %0d, expected %0d", c, a, res_data, expv[c][a]);
        end
      end
  endtask

  initial begin
    rst_n = 0; start = 0; inp_wr_en = 0; wgt_wr_en = 0; core_mask = 0; k_len = 0;
    res_core = 0; res_addr = 0; inp_wr_row = 0; inp_wr_k = 0; inp_wr_data = 0;
    wgt_wr_row = 0; wgt_wr_k = 0; wgt_wr_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Input-Broadcast pattern: one input tile for all, a weight tile per core
    load_inp('1, 0);
    for (int c = 0; c < C; c++) load_wgt(C'(1) << c);
    run('1, TK);
    // Weight-Broadcast pattern, partial group: per-core inputs, shared weights
    for (int c = 0; c < 2; c++) load_inp(C'(1) << c, c);
    load_wgt(3'b011);
    run(3'b011, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
