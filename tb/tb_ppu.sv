// tb_ppu: self-checking test of the post-processing unit.
//
// Reduced tile (2 rows x 4 channels, 3 cores). The cores' result stores and
// ReadBias' parameter store are modelled here as arrays with a registered
// read. Jobs: an FC job (per-tensor scale) in Input-Broadcast mode over three
// cores, a CONV job (per-channel scales) in Weight-Broadcast mode over two
// cores with a narrow activation range, and the FC job again under random
// output back-pressure. Every output word is compared with a reference
// (bias add, 64-bit product, round-half-up shift, zero point, clamp), with
// tlast expected on the job's last word only when `last_tile` is set. With
// tready held high it also checks the published timing: one result every
// PPU_II = 2 cycles (a word every 8 cycles) and a first word 1 + 3*PPU_II +
// PPU_LAT = 36 cycles after `start`.
module tb_ppu;
  import flexvit_pkg::*;
  localparam int unsigned C = 3, TN = 2, TM = 4, LAT = 29, II = 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, q_bank_in, last_tile, busy, done;
  mode_e mode;
  layer_e layer;
  logic [$clog2(C+1)-1:0] n_cores;
  logic signed [7:0] out_zp, act_min, act_max;
  logic [1:0] res_core;
  logic [$clog2(TN*TM)-1:0] res_addr;
  logic signed [31:0] res_data;
  logic q_bank, q_per_channel;
  logic [$clog2(C*TM)-1:0] q_ch;
  qparam_t q;
  logic [31:0] m_tdata;
  logic m_tvalid, m_tlast, m_tready;
  bit bp;

  int res_m [C][TN*TM];
  int bias_m [2][C*TM], mult_m [2][C*TM], shift_m [2][C*TM];
  logic [32:0] exp_q[$];
  int checks = 0, failures = 0, cycle = 0, first_word, last_word, n_words;

  ppu #(.C(C), .TN(TN), .TM(TM), .PPU_LAT(LAT), .PPU_II(II)) dut (
    .clk, .rst_n, .start, .mode, .layer, .n_cores, .q_bank_in, .out_zp, .act_min, .act_max,
    .last_tile, .busy, .done, .res_core, .res_addr, .res_data, .q_bank, .q_ch,
    .q_per_channel, .q, .m_tdata, .m_tvalid, .m_tlast, .m_tready);

  always @(posedge clk) begin
    cycle++;
    res_data <= res_m[res_core][res_addr];
    q.bias   <= bias_m[q_bank][q_ch];
    q.mult   <= mult_m[q_bank][q_per_channel ? q_ch : 0];
    q.shift  <= 6'(shift_m[q_bank][q_per_channel ? q_ch : 0]);
    m_tready <= !bp || ($urandom % 3 != 0);
  end

  always @(negedge clk) if (rst_n && m_tvalid && m_tready) begin
    logic [32:0] e;
    checks++;
    if (n_words == 0) first_word = cycle;
    last_word = cycle;
    n_words++;
    e = (exp_q.size() > 0) ? exp_q.pop_front() : 33'h1_ffff_ffff;
    if ({m_tlast, m_tdata} !== e) begin
      failures++;
      $display("word %0d: %b/%h expected %b/%h", n_words, m_tlast, m_tdata, e[32], e[31:0]);
    end
  end

  function automatic logic [7:0] rq(int acc, int b, int mu, int sh, int zp, int lo, int hi);
    longint p;
    p = longint'(acc + b) * longint'(mu);
    if (sh > 0) p += 64'sd1 <<< (sh - 1);
    p = (p >>> sh) + zp;
    if (p < lo) p = lo;
    if (p > hi) p = hi;
    return 8'(p);
  endfunction

  task automatic job(mode_e md, layer_e ly, int nc, bit bk, int zp, int lo, int hi, bit lt, bit with_bp);
    int c0;
    bp = with_bp;
    for (int c = 0; c < nc; c++)
      for (int e = 0; e < TN*TM; e += 4) begin
        logic [31:0] wd;
        for (int b = 0; b < 4; b++) begin
          int ch, sc;
          ch = (md == MODE_IB ? c*TM : 0) + (e + b) % TM;
          sc = (ly == LAYER_CONV) ? ch : 0;
          wd[8*b +: 8] = rq(res_m[c][e+b], bias_m[bk][ch], mult_m[bk][sc], shift_m[bk][sc], zp, lo, hi);
        end
        exp_q.push_back({lt && (c == nc-1) && (e == TN*TM-4), wd});
      end
    n_words = 0;
    @(negedge clk);
    mode = md; layer = ly; n_cores = ($clog2(C+1))'(nc); q_bank_in = bk; out_zp = 8'(zp);
    act_min = 8'(lo); act_max = 8'(hi); last_tile = lt; start = 1; c0 = cycle;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d words missing", exp_q.size()); end
    if (!with_bp) begin
      checks += 2;
      if (first_word - c0 != 1 + 3*II + LAT) begin
        failures++;
        $display("first word after %0d cycles, expected %0d", first_word - c0, 1 + 3*II + LAT);
      end
      if (last_word - first_word != (nc*TN*TM/4 - 1) * 4 * II) begin
        failures++;
        $display("words span %0d cycles, expected %0d", last_word - first_word, (nc*TN*TM/4 - 1) * 4 * II);
      end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; mode = MODE_IB; layer = LAYER_FC; n_cores = 0; q_bank_in = 0;
    out_zp = 0; act_min = 0; act_max = 0; last_tile = 0; bp = 0; n_words = 0;
    foreach (res_m[c, e]) res_m[c][e] = int'($urandom % 200001) - 100000;
    foreach (bias_m[b, i]) begin
      bias_m[b][i]  = int'($urandom % 2001) - 1000;
      mult_m[b][i]  = int'(32'h4000_0000 | ($urandom & 32'h3fff_ffff));
      shift_m[b][i] = 36 + int'($urandom % 4);
    end
    shift_m[1][2] = 0;   // a channel without a shift saturates
    repeat (3) @(negedge clk);
    rst_n = 1;
    job(MODE_IB, LAYER_FC,   3, 0, 5,  -128, 127, 1, 0);
    job(MODE_WB, LAYER_CONV, 2, 1, -3, -20,  20,  0, 0);
    job(MODE_IB, LAYER_CONV, 3, 1, 0,  -128, 127, 1, 1);
    job(MODE_WB, LAYER_FC,   1, 0, 7,  0,    127, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
