// tb_simd_mac: self-checking test of the SIMD PE (multiplier, adder tree,
// accumulator).
//
// Feeds random dot products of 1 to 8 beats of 16 signed INT8 pairs back to
// back (one beat per cycle, initiation interval 1), including extreme values
// (-128 * -128), and compares every finished accumulator value and its tag with
// a reference sum. It also checks the latency: a dot product's result appears
// 2 + log2(KF) = 6 cycles after its last beat enters the PE, which with the
// one-cycle buffer read in front of it is the published 7-cycle MAC latency.
module tb_simd_mac;
  localparam int unsigned KF = 16, TAG_W = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_first, in_last, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [KF-1:0][7:0] in_act, in_wgt;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  longint exp_q[$];
  int     tag_q[$];
  int     cyc_q[$];
  int     cycle = 0;

  simd_mac #(.KF(KF), .TAG_W(TAG_W)) dut (.*);

  always @(posedge clk) cycle++;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      longint e; int t; int c;
      e = exp_q.pop_front(); t = tag_q.pop_front(); c = cyc_q.pop_front();
      if (acc !== 32'(e) || out_tag !== TAG_W'(t)) begin
        failures++;
        $display("dot product %0d: got %0d exp %0d", t, acc, e);
      end
      checks++;
      if (cycle - c != 2 + $clog2(KF)) begin
        failures++;
        $display("latency %0d, expected %0d", cycle - c, 2 + $clog2(KF));
      end
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; in_first = 0; in_last = 0; in_tag = 0; in_act = '0; in_wgt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int d = 0; d < 40; d++) begin
      int nb; longint s;
      nb = 1 + $urandom % 8; s = 0;
      for (int b = 0; b < nb; b++) begin
        for (int l = 0; l < KF; l++) begin
          in_act[l] = (d == 0) ? 8'h80 : 8'($urandom);
          in_wgt[l] = (d == 0) ? 8'h80 : 8'($urandom);
          s += longint'($signed(in_act[l])) * longint'($signed(in_wgt[l]));
        end
        in_valid = 1; in_first = (b == 0); in_last = (b == nb - 1); in_tag = TAG_W'(d);
        if (b == nb - 1) begin exp_q.push_back(s); tag_q.push_back(d); cyc_q.push_back(cycle); end
        @(negedge clk);
      end
      in_valid = 0;
      if (d % 5 == 4) @(negedge clk);  // idle gaps between some products
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
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
