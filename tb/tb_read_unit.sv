// tb_read_unit: self-checking test of ReadInp/ReadWgt.
//
// Reduced sizes (3 cores, 4 rows, depth 32). The bench mirrors the buffer
// writes into one array per core. It checks a broadcast tile (same data
// reaching all three cores), a partitioned load of two tiles (tile t reaching
// only core t, core 2 untouched) and a partitioned load of three tiles, each
// with a stream that pauses at random. It also checks the transfer time with an
// uninterrupted stream: `done` rises ROWS*K/4*tiles + 1 cycles after `start`,
// and that tready is low while the unit is idle.
module tb_read_unit;
  localparam int unsigned C = 3, ROWS = 4, TK = 32;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, broadcast, busy, done;
  logic [$clog2(C+1)-1:0] n_tiles;
  logic [$clog2(TK):0] k_len;
  logic [31:0] s_tdata;
  logic s_tvalid, s_tready;
  logic [C-1:0] wr_en;
  logic [$clog2(ROWS)-1:0] wr_row;
  logic [$clog2(TK)-1:0] wr_k;
  logic [31:0] wr_data;
  logic [31:0] buf_m [C][ROWS][TK/4];
  logic [31:0] src_q[$];
  bit gaps;
  int checks = 0, failures = 0, cycle = 0;

  read_unit #(.C(C), .ROWS(ROWS), .TK(TK)) dut (.*);

  always @(posedge clk) begin
    cycle++;
    for (int c = 0; c < C; c++) if (wr_en[c]) buf_m[c][wr_row][wr_k/4] <= wr_data;
    if (s_tvalid && s_tready) void'(src_q.pop_front());
    if (!(s_tvalid && !s_tready)) begin
      s_tvalid <= (src_q.size() > 0) && (!gaps || $urandom % 3 != 0);
      s_tdata  <= (src_q.size() > 0) ? src_q[0] : 32'h0;
    end
  end

  task automatic run(bit bc, int nt, int k, bit with_gaps);
    logic [31:0] words [$];
    int c0, tiles;
    gaps = with_gaps;
    tiles = bc ? 1 : nt;
    for (int c = 0; c < C; c++) for (int r = 0; r < ROWS; r++) for (int i = 0; i < TK/4; i++) buf_m[c][r][i] = 32'hdead_beef;
    for (int i = 0; i < tiles * ROWS * k / 4; i++) words.push_back($urandom);
    @(negedge clk);
    checks++;
    if (s_tready) begin failures++; $display("tready high while idle"); end
    foreach (words[i]) src_q.push_back(words[i]);
    broadcast = bc; n_tiles = ($clog2(C+1))'(nt); k_len = ($clog2(TK)+1)'(k); start = 1; c0 = cycle;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    if (!with_gaps) begin
      checks++;
      if (cycle - c0 != tiles * ROWS * k / 4 + 1) begin
        failures++;
        $display("load took %0d cycles, expected %0d", cycle - c0, tiles * ROWS * k / 4 + 1);
      end
    end
    @(negedge clk);
    for (int c = 0; c < C; c++)
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < k / 4; i++) begin
          logic [31:0] e;
          if (bc) e = words[r*k/4 + i];
          else if (c < nt) e = words[(c*ROWS + r)*k/4 + i];
          else e = 32'hdead_beef;
          checks++;
          if (buf_m[c][r][i] !== e) begin
            failures++;
            $display("bc=%0d core %0d row %0d word %0d: %h expected %h", bc, c, r, i, buf_m[c][r][i], e);
          end
        end
  endtask

  initial begin
    rst_n = 0; start = 0; broadcast = 0; n_tiles = 0; k_len = 0; s_tvalid = 0; s_tdata = 0; gaps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1, 0, 32, 1);
    run(0, 2, 16, 1);
    run(0, 3, 32, 0);
    run(1, 3, 8, 0);
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
