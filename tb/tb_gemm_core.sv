// tb_gemm_core: self-checking test of one GEMM core.
//
// The core's input and weight buffers are modelled here as arrays with a
// registered (one-cycle) read, like tile_buffer. For a reduced 4 x 4 tile it
// runs several depths K (16, 48, 64), compares all 16 outputs read back
// through the result port with a reference dot product, and checks the time
// from `start` to `done`: TN*TM*K/KF issue cycles plus 4 + log2(KF) cycles of
// pipeline (8 at KF = 16), counted from the cycle in which start is high.
module tb_gemm_core;
  localparam int unsigned TN = 4, TM = 4, TK = 64, KF = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done;
  logic [$clog2(TK):0] k_len;
  logic [$clog2(TN)-1:0] inp_rd_row;
  logic [$clog2(TM)-1:0] wgt_rd_row;
  logic [$clog2(TK/KF)-1:0] rd_kk;
  logic [KF-1:0][7:0] inp_data, wgt_data;
  logic [$clog2(TN*TM)-1:0] res_rd_addr;
  logic signed [31:0] res_rd_data;
  byte x [TN][TK];
  byte w [TM][TK];
  int checks = 0, failures = 0, cycle = 0;

  gemm_core #(.TN(TN), .TM(TM), .TK(TK), .KF(KF)) dut (.*);

  always @(posedge clk) begin
    cycle++;
    for (int l = 0; l < KF; l++) begin
      inp_data[l] <= x[inp_rd_row][rd_kk*KF + l];
      wgt_data[l] <= w[wgt_rd_row][rd_kk*KF + l];
    end
  end

  task automatic run(int k);
    int c0;
    foreach (x[i, j]) x[i][j] = byte'($urandom);
    foreach (w[i, j]) w[i][j] = byte'($urandom);
    @(negedge clk);
    k_len = ($clog2(TK)+1)'(k); start = 1; c0 = cycle;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (cycle - c0 != TN*TM*k/KF + 4 + $clog2(KF)) begin
      failures++;
      $display("K=%0d: %0d cycles, expected %0d", k, cycle - c0, TN*TM*k/KF + 4 + $clog2(KF));
    end
    for (int r = 0; r < TN; r++)
      for (int m = 0; m < TM; m++) begin
        int s; s = 0;
        for (int kk = 0; kk < k; kk++) s += int'(x[r][kk]) * int'(w[m][kk]);
        res_rd_addr = $clog2(TN*TM)'(r*TM + m);
        @(negedge clk);
        checks++;
        if (res_rd_data !== s) begin
          failures++;
          $display("K=%0d out[%0d][%0d] = %0d, expected %0d", k, r, m, res_rd_data, s);
        end
      end
  endtask

  initial begin
    rst_n = 0; start = 0; k_len = 0; res_rd_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(16); run(48); run(64); run(32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
