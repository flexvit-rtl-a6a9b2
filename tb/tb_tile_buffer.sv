// tb_tile_buffer: self-checking test of the banked tile buffer.
//
// Fills a reduced buffer (8 rows x 64 elements, 16 banks) word by word with
// random data kept in a reference array, then reads every SIMD vector back and
// compares all 16 lanes, also checking the one-cycle read latency (the vector
// for an address is on rd_data one clock edge after the address). A second pass
// overwrites a few words and checks that only those elements changed.
module tb_tile_buffer;
  localparam int unsigned ROWS = 8, DK = 64, KF = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      wr_en;
  logic [$clog2(ROWS)-1:0]   wr_row, rd_row;
  logic [$clog2(DK)-1:0]     wr_k;
  logic [31:0]               wr_data;
  logic [$clog2(DK/KF)-1:0]  rd_kk;
  logic [KF-1:0][7:0]        rd_data;
  logic [7:0]                ref_mem [ROWS][DK];
  int checks = 0, failures = 0;

  tile_buffer #(.ROWS(ROWS), .DEPTH_K(DK), .KF(KF)) dut (.*);

  task automatic write_word(int r, int k, logic [31:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_row = r[$clog2(ROWS)-1:0]; wr_k = k[$clog2(DK)-1:0]; wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
    for (int b = 0; b < 4; b++) ref_mem[r][k+b] = d[8*b +: 8];
  endtask

  task automatic check_all();
    for (int r = 0; r < ROWS; r++)
      for (int kk = 0; kk < DK/KF; kk++) begin
        @(negedge clk);
        rd_row = r[$clog2(ROWS)-1:0]; rd_kk = kk[$clog2(DK/KF)-1:0];
        @(posedge clk);   // address sampled here
        #1;
        checks++;
        for (int l = 0; l < KF; l++)
          if (rd_data[l] !== ref_mem[r][kk*KF+l]) begin
            failures++;
            $display("mismatch row %0d k %0d: %h vs %h", r, kk*KF+l, rd_data[l], ref_mem[r][kk*KF+l]);
            break;
          end
      end
  endtask

  initial begin
    wr_en = 0; rd_row = 0; rd_kk = 0; wr_row = 0; wr_k = 0; wr_data = 0;
    @(posedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < DK; k += 4) write_word(r, k, $urandom);
    check_all();
    for (int i = 0; i < 10; i++) write_word($urandom % ROWS, ($urandom % (DK/4)) * 4, $urandom);
    check_all();
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
