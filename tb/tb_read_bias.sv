// tb_read_bias: self-checking test of ReadBias and its two-bank parameter store.
//
// Reduced sizes (3 cores x 4 channels). Bank 0 is loaded as a CONV layer with
// bias (12 biases, 12 multipliers, 12 shifts), bank 1 as an FC layer without
// bias (a single multiplier and shift). Every channel of both banks is then
// read back, per-channel for bank 0 and per-tensor for bank 1 (scale taken
// from channel 0 whatever channel is asked for, bias read as 0). Bank 0 is
// read once more after bank 1 was written, to show that loading one bank
// leaves the other alone. The stream pauses at random; the number of words
// taken per load is checked.
module tb_read_bias;
  import flexvit_pkg::*;
  localparam int unsigned C = 3, TM = 4, NCH = C * TM;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, bank, has_bias, per_channel, busy, done;
  logic [$clog2(NCH+1)-1:0] n_ch;
  logic [31:0] s_tdata;
  logic s_tvalid, s_tready;
  logic rd_bank, rd_per_channel;
  logic [$clog2(NCH)-1:0] rd_ch;
  qparam_t rd_q;
  logic [31:0] src_q[$];
  int taken;
  int checks = 0, failures = 0;
  int b0_bias[NCH], b0_mult[NCH], b0_shift[NCH];
  int b1_mult, b1_shift;

  read_bias #(.C(C), .TM(TM)) dut (.*);

  always @(posedge clk) begin
    if (s_tvalid && s_tready) begin void'(src_q.pop_front()); taken++; end
    if (!(s_tvalid && !s_tready)) begin
      s_tvalid <= (src_q.size() > 0) && ($urandom % 3 != 0);
      s_tdata  <= (src_q.size() > 0) ? src_q[0] : 32'h0;
    end
  end

  task automatic load(bit bk, int nch, bit hb, bit pc, int expect_words);
    taken = 0;
    @(negedge clk);
    bank = bk; n_ch = ($clog2(NCH+1))'(nch); has_bias = hb; per_channel = pc; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (taken != expect_words || src_q.size() != 0) begin
      failures++;
      $display("load took %0d words, expected %0d", taken, expect_words);
    end
  endtask

  task automatic check(bit bk, bit pc, int ch, int eb, int em, int es);
    @(negedge clk);
    rd_bank = bk; rd_per_channel = pc; rd_ch = ($clog2(NCH))'(ch);
    @(negedge clk);
    checks++;
    if (rd_q.bias !== eb || rd_q.mult !== em || 32'(rd_q.shift) !== es) begin
      failures++;
      $display("bank %0d ch %0d: %0d/%0d/%0d expected %0d/%0d/%0d", bk, ch,
               rd_q.bias, rd_q.mult, rd_q.shift, eb, em, es);
    end
  endtask

  initial begin
    rst_n = 0; start = 0; bank = 0; n_ch = 0; has_bias = 0; per_channel = 0;
    s_tvalid = 0; s_tdata = 0; rd_bank = 0; rd_ch = 0; rd_per_channel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NCH; i++) begin
      b0_bias[i] = int'($urandom); b0_mult[i] = int'($urandom); b0_shift[i] = int'($urandom % 64);
    end
    foreach (b0_bias[i])  src_q.push_back(b0_bias[i]);
    foreach (b0_mult[i])  src_q.push_back(b0_mult[i]);
    foreach (b0_shift[i]) src_q.push_back(b0_shift[i]);
    load(0, NCH, 1, 1, 3*NCH);
    for (int i = 0; i < NCH; i++) check(0, 1, i, b0_bias[i], b0_mult[i], b0_shift[i]);
    b1_mult = int'($urandom); b1_shift = 33;
    src_q.push_back(b1_mult); src_q.push_back(b1_shift);
    load(1, TM, 0, 0, 2);
    for (int i = 0; i < TM; i++) check(1, 0, i, 0, b1_mult, b1_shift);
    for (int i = 0; i < NCH; i++) check(0, 1, i, b0_bias[i], b0_mult[i], b0_shift[i]);
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
