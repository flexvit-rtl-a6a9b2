// tb_scheduler: self-checking test of the scheduler on its own.
//
// The read units, GEMM engine and PPU are replaced by models that answer each
// start pulse with a done pulse after a random delay (the PPU model stays busy
// for a random time). Reduced tiles (T_N = T_M = 8, T_K = 64, C = 3). For an
// Input-Broadcast layer (N = 16, M = 40: two row tiles, channel groups of 3
// and 2 tiles), a Weight-Broadcast layer (N = 40, M = 16) and a refused packet
// (K not a multiple of K_f), the bench derives the expected tile schedule and
// compares step by step: which read units start and with how many tiles,
// broadcast flags, bias channel counts, core masks, PPU job sizes and the
// last-tile flag. It also checks the handshake rules: cores start only after
// all loads of the step are done and the PPU is idle, bias banks alternate
// and the PPU gets the bank just loaded, loads of step t+1 start while the PPU
// still works on tile t (overlap), and layer_done follows the last PPU job.
module tb_scheduler;
  import flexvit_pkg::*;
  localparam int unsigned C = 3, TN = 8, TM = 8, TK = 64, KF = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n;
  logic [31:0] s_cfg_tdata;
  logic s_cfg_tvalid, s_cfg_tready;
  logic [$clog2(TK):0] k_len;
  logic inp_start, inp_broadcast, inp_done, wgt_start, wgt_broadcast, wgt_done;
  logic [$clog2(C+1)-1:0] inp_ntiles, wgt_ntiles, ppu_ncores;
  logic bias_start, bias_bank, bias_has, bias_per_channel, bias_done;
  logic [$clog2(C*TM+1)-1:0] bias_nch;
  logic eng_start, eng_done;
  logic [C-1:0] eng_mask;
  logic ppu_start, ppu_bank, ppu_last, ppu_busy;
  mode_e ppu_mode;
  layer_e ppu_layer;
  logic signed [7:0] ppu_out_zp, ppu_act_min, ppu_act_max;
  logic busy, layer_done, cfg_error;

  scheduler #(.C(C), .TN(TN), .TM(TM), .TK(TK), .KF(KF)) dut (.*);

  // ---------------- unit models ----------------
  int inp_t, wgt_t, bias_t, eng_t, ppu_t;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inp_t <= 0; wgt_t <= 0; bias_t <= 0; eng_t <= 0; ppu_t <= 0;
      inp_done <= 0; wgt_done <= 0; bias_done <= 0; eng_done <= 0; ppu_busy <= 0;
    end else begin
      inp_done  <= (inp_t == 1);  inp_t  <= inp_start  ? 2 + $urandom % 12 : (inp_t  > 0 ? inp_t  - 1 : 0);
      wgt_done  <= (wgt_t == 1);  wgt_t  <= wgt_start  ? 2 + $urandom % 12 : (wgt_t  > 0 ? wgt_t  - 1 : 0);
      bias_done <= (bias_t == 1); bias_t <= bias_start ? 2 + $urandom % 12 : (bias_t > 0 ? bias_t - 1 : 0);
      eng_done  <= (eng_t == 1);  eng_t  <= eng_start  ? 2 + $urandom % 6  : (eng_t  > 0 ? eng_t  - 1 : 0);
      ppu_t     <= ppu_start ? 5 + $urandom % 25 : (ppu_t > 0 ? ppu_t - 1 : 0);
      ppu_busy  <= ppu_start || ppu_t > 1;
    end
  end

  // ---------------- observed schedule ----------------
  typedef struct { bit i; bit ib; int in; bit w; bit wb; int wn; bit b; int bn; } load_t;
  typedef struct { int mask; int nc; bit last; bit mode; } run_t;
  load_t loads[$];
  run_t  runs[$];
  int checks = 0, failures = 0;
  int n_overlap, bank_last, n_bias_loads;

  always @(posedge clk) if (rst_n) begin
    if (inp_start || wgt_start || bias_start) begin
      loads.push_back('{inp_start, inp_broadcast, int'(inp_ntiles), wgt_start, wgt_broadcast,
                        int'(wgt_ntiles), bias_start, int'(bias_nch)});
      if (ppu_busy) n_overlap++;
    end
    if (bias_start) begin
      checks++;
      if (n_bias_loads > 0 && bias_bank == 1'(bank_last)) begin
        failures++; $display("bias bank did not alternate");
      end
      bank_last = int'(bias_bank); n_bias_loads++;
    end
    if (eng_start) begin
      checks++;
      if (inp_t != 0 || wgt_t != 0 || bias_t != 0 || inp_done || wgt_done || bias_done || ppu_busy) begin
        failures++; $display("cores started before loads were done or while the PPU was busy");
      end
    end
    if (ppu_start) begin
      runs.push_back('{int'(eng_mask), int'(ppu_ncores), ppu_last, ppu_mode});
      checks++;
      if (ppu_bank !== 1'(bank_last)) begin failures++; $display("PPU got the wrong bias bank"); end
    end
  end

  task automatic send_cfg(bit wb, bit conv, int n, int m, int k);
    logic [31:0] w [5];
    w[0] = {29'd0, 1'b1, conv, wb}; w[1] = n; w[2] = m; w[3] = k; w[4] = 32'h007f_8000;
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      while ($urandom % 3 == 0) begin s_cfg_tvalid = 0; @(negedge clk); end
      s_cfg_tvalid = 1; s_cfg_tdata = w[i];
      @(posedge clk);
      while (!s_cfg_tready) @(posedge clk);
    end
    @(negedge clk);
    s_cfg_tvalid = 0;
  endtask

  task automatic layer(bit wb, bit conv, int n, int m, int k);
    int nt, mt, on, inn, ld, rn;
    loads.delete(); runs.delete();
    send_cfg(wb, conv, n, m, k);
    @(posedge clk iff layer_done);
    checks++;
    if (ppu_busy || cfg_error) begin failures++; $display("layer_done while PPU busy or error"); end
    nt = n / TN; mt = m / TM;
    on = wb ? mt : nt; inn = wb ? nt : mt;
    ld = 0; rn = 0;
    for (int o = 0; o < on; o++)
      for (int base = 0; base < inn; base += C) begin
        int act; load_t e; run_t r;
        act = (inn - base >= C) ? C : inn - base;
        e.i = wb || base == 0;  e.ib = !wb; e.in = act;
        e.w = !wb || base == 0; e.wb = wb;  e.wn = act;
        e.b = e.w; e.bn = (wb ? 1 : act) * TM;
        r.mask = (1 << act) - 1; r.nc = act; r.mode = wb;
        r.last = (o == on - 1) && (base + C >= inn);
        checks += 2;
        if (ld >= loads.size() || loads[ld].i != e.i || loads[ld].w != e.w || loads[ld].b != e.b ||
            (e.i && (loads[ld].ib != e.ib || (!e.ib && loads[ld].in != e.in))) ||
            (e.w && (loads[ld].wb != e.wb || (!e.wb && loads[ld].wn != e.wn))) ||
            (e.b && loads[ld].bn != e.bn)) begin
          failures++; $display("step o=%0d base=%0d: wrong loads", o, base);
        end
        if (rn >= runs.size() || runs[rn] != r) begin
          failures++; $display("step o=%0d base=%0d: wrong core run / PPU job", o, base);
        end
        ld++; rn++;
      end
    checks++;
    if (loads.size() != ld || runs.size() != rn) begin
      failures++; $display("%0d loads / %0d runs, expected %0d / %0d", loads.size(), runs.size(), ld, rn);
    end
  endtask

  initial begin
    rst_n = 0; s_cfg_tvalid = 0; s_cfg_tdata = 0;
    n_overlap = 0; n_bias_loads = 0; bank_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    layer(0, 0, 16, 40, 48);   // IB
    layer(1, 1, 40, 16, 64);   // WB
    layer(0, 1, 24, 24, 32);   // IB, exactly one full group
    send_cfg(0, 0, 16, 16, 24); // K not a multiple of KF: refused
    @(posedge clk iff layer_done);
    checks++;
    if (!cfg_error) begin failures++; $display("bad packet not refused"); end
    checks++;
    if (n_overlap == 0) begin failures++; $display("loads never overlapped PPU work"); end
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
