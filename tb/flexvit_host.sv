// flexvit_host: behavioural model of the host side of the accelerator, used by
// the end-to-end testbenches (not synthesizable).
//
// For each layer of its test list it draws random INT8 inputs X[N][K] and
// weights W[M][K], int32 biases and requantization scales, picks the dataflow
// mode with the per-layer selection rule (FC: Input-Broadcast when M >= C*TM;
// CONV: the mode with fewer estimated transferred bytes), then fills four
// stream queues (configuration, inputs, weights, bias/scales) in the order the
// scheduler consumes them, and an expected-output queue computed here from the
// integer GEMM and the requantization formula. Four source processes send the
// queues with random gaps (tvalid low), a sink process takes output words with
// random back-pressure (tready low) and compares them, and `tlast` and
// `layer_done` are checked at the end of each layer. The transfer-byte
// estimate counts, for IB, all inputs once plus the weights once per row tile,
// and for WB, all weights once plus the inputs once per channel tile.
//
// LIST = 0 runs the reduced-size test list, LIST = 1 two layers sized for the
// full T_N = T_M = 64, T_K = 1024 configuration, and LIST = 2 layer shapes taken
// from the evaluated models (after padding to the tile sizes) at the full
// configuration: the ViT-T/DeiT-T QKV projection and MLP down-projection, a
// MobileViT-S 3x3 convolution, the Swin-T patch embedding, and the
// EfficientViT-b1 classifier, which is deeper than T_K and must be refused.
module flexvit_host #(
  parameter int unsigned C    = 3,
  parameter int unsigned TN   = 64,
  parameter int unsigned TM   = 64,
  parameter int unsigned TK   = 1024,
  parameter int unsigned KF   = 16,
  parameter int unsigned LIST = 0
) (
  input  logic        clk,
  output logic        rst_n,
  output logic [31:0] cfg_tdata,  output logic cfg_tvalid,  input logic cfg_tready,
  output logic [31:0] inp_tdata,  output logic inp_tvalid,  input logic inp_tready,
  output logic [31:0] wgt_tdata,  output logic wgt_tvalid,  input logic wgt_tready,
  output logic [31:0] bias_tdata, output logic bias_tvalid, input logic bias_tready,
  input  logic [31:0] out_tdata,  input  logic out_tvalid,  input logic out_tlast,
  output logic        out_tready,
  input  logic        layer_done,
  input  logic        cfg_error,
  output logic        finished,
  output int          checks,
  output int          failures,
  output int          n_clamped,
  output int          n_layers_ok
);
  logic [31:0] cfg_q[$], inp_q[$], wgt_q[$], bias_q[$];
  logic [32:0] exp_q[$];            // {tlast, word}
  int          words_seen;

  // ---------------- stream sources ----------------
  always @(posedge clk) begin
    if (cfg_tvalid && cfg_tready) void'(cfg_q.pop_front());
    if (!(cfg_tvalid && !cfg_tready)) begin
      cfg_tvalid <= (cfg_q.size() > 0) && ($urandom % 4 != 0);
      cfg_tdata  <= (cfg_q.size() > 0) ? cfg_q[0] : 32'h0;
    end
  end
  always @(posedge clk) begin
    if (inp_tvalid && inp_tready) void'(inp_q.pop_front());
    if (!(inp_tvalid && !inp_tready)) begin
      inp_tvalid <= (inp_q.size() > 0) && ($urandom % 8 != 0);
      inp_tdata  <= (inp_q.size() > 0) ? inp_q[0] : 32'h0;
    end
  end
  always @(posedge clk) begin
    if (wgt_tvalid && wgt_tready) void'(wgt_q.pop_front());
    if (!(wgt_tvalid && !wgt_tready)) begin
      wgt_tvalid <= (wgt_q.size() > 0) && ($urandom % 8 != 0);
      wgt_tdata  <= (wgt_q.size() > 0) ? wgt_q[0] : 32'h0;
    end
  end
  always @(posedge clk) begin
    if (bias_tvalid && bias_tready) void'(bias_q.pop_front());
    if (!(bias_tvalid && !bias_tready)) begin
      bias_tvalid <= (bias_q.size() > 0) && ($urandom % 4 != 0);
      bias_tdata  <= (bias_q.size() > 0) ? bias_q[0] : 32'h0;
    end
  end

  // ---------------- output sink ----------------
  always @(posedge clk) begin
    out_tready <= ($urandom % 5 != 0);
    if (rst_n && out_tvalid && out_tready) begin
      words_seen++;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("host: unexpected output word %h", out_tdata);
      end else begin
        logic [32:0] e;
        e = exp_q.pop_front();
        if ({out_tlast, out_tdata} !== e) begin
          failures++;
          if (failures < 10)
            $display("host: output mismatch got %b/%h exp %b/%h", out_tlast, out_tdata, e[32], e[31:0]);
        end
      end
    end
  end

  // ---------------- reference model ----------------
  function automatic logic [7:0] requant(longint acc, longint bias, longint mult, int shift,
                                         int zp, int amin, int amax);
    longint v, p;
    p = (64'(signed'(32'(acc + bias)))) * mult;   // the accumulator path is 32-bit
    if (shift > 0) p = p + (64'sd1 <<< (shift - 1));
    v = (p >>> shift) + zp;
    if (v < amin) v = amin;
    if (v > amax) v = amax;
    return 8'(v);
  endfunction

  // Per-layer mode selection on the host (FC rule and CONV transfer estimate)
  function automatic bit pick_wb(bit conv, int n, int m, int k);
    longint b_ib, b_wb;
    if (!conv) return !(m >= C * TM);
    b_ib = longint'(n) * k + longint'(n / TN) * m * k;
    b_wb = longint'(m) * k + longint'(m / TM) * n * k;
    return !(b_ib <= b_wb);
  endfunction

  task automatic run_layer(bit conv, int n, int m, int k, bit has_bias, output bit wb);
    byte    x[], w[];
    int     bias[], mult[], shift[];
    int     zp, amin, amax, nt, mt, n_sc;
    bit     last;
    wb = pick_wb(conv, n, m, k);
    nt = n / TN; mt = m / TM;
    x = new[n * k]; w = new[m * k];
    bias = new[m]; mult = new[m]; shift = new[m];
    foreach (x[i]) x[i] = byte'($urandom);
    foreach (w[i]) w[i] = byte'($urandom);
    foreach (bias[i]) bias[i] = has_bias ? (int'($urandom % 8192) - 4096) : 0;
    foreach (mult[i]) begin
      mult[i]  = int'(32'h4000_0000 | ($urandom & 32'h3fff_ffff));
      shift[i] = 38 + int'($urandom % 3) + ((k > 256) ? 3 : 0);
    end
    if (!conv) for (int i = 1; i < m; i++) begin mult[i] = mult[0]; shift[i] = shift[0]; end
    zp   = int'($urandom % 21) - 10;
    amin = ($urandom % 2) ? -128 : -100;
    amax = ($urandom % 2) ? 127 : 90;
    // configuration packet
    cfg_q.push_back({29'd0, has_bias, conv, wb});
    cfg_q.push_back(32'(n)); cfg_q.push_back(32'(m)); cfg_q.push_back(32'(k));
    cfg_q.push_back({8'd0, 8'(amax), 8'(amin), 8'(zp)});
    // operand streams and expected output, in scheduler order
    for (int o = 0; o < (wb ? mt : nt); o++) begin
      for (int base = 0; base < (wb ? nt : mt); base += C) begin
        int act;
        act = ((wb ? nt : mt) - base >= C) ? C : (wb ? nt : mt) - base;
        last = (o == (wb ? mt : nt) - 1) && (base + C >= (wb ? nt : mt));
        // inputs
        if (!wb && base == 0)
          for (int r = 0; r < TN; r++)
            for (int kk = 0; kk < k; kk += 4)
              inp_q.push_back({x[(o*TN+r)*k+kk+3], x[(o*TN+r)*k+kk+2], x[(o*TN+r)*k+kk+1], x[(o*TN+r)*k+kk]});
        if (wb)
          for (int t = 0; t < act; t++)
            for (int r = 0; r < TN; r++)
              for (int kk = 0; kk < k; kk += 4) begin
                int row; row = (base + t) * TN + r;
                inp_q.push_back({x[row*k+kk+3], x[row*k+kk+2], x[row*k+kk+1], x[row*k+kk]});
              end
        // weights, bias and scales
        if (!wb || base == 0) begin
          int t0, nti;
          t0  = wb ? o : base;
          nti = wb ? 1 : act;
          for (int t = 0; t < nti; t++)
            for (int r = 0; r < TM; r++)
              for (int kk = 0; kk < k; kk += 4) begin
                int row; row = (t0 + t) * TM + r;
                wgt_q.push_back({w[row*k+kk+3], w[row*k+kk+2], w[row*k+kk+1], w[row*k+kk]});
              end
          if (has_bias) for (int ch = t0*TM; ch < (t0+nti)*TM; ch++) bias_q.push_back(bias[ch]);
          n_sc = conv ? nti * TM : 1;
          for (int i = 0; i < n_sc; i++) bias_q.push_back(mult[t0*TM + i]);
          for (int i = 0; i < n_sc; i++) bias_q.push_back(32'(shift[t0*TM + i]));
        end
        // expected outputs: core by core, row by row, four channels per word
        for (int c = 0; c < act; c++)
          for (int r = 0; r < TN; r++)
            for (int mm = 0; mm < TM; mm += 4) begin
              logic [31:0] wd;
              int row, col0;
              row  = wb ? (base + c) * TN + r : o * TN + r;
              col0 = wb ? o * TM + mm : (base + c) * TM + mm;
              for (int b = 0; b < 4; b++) begin
                longint acc;
                logic [7:0] y;
                acc = 0;
                for (int kk = 0; kk < k; kk++) acc += longint'(x[row*k+kk]) * longint'(w[(col0+b)*k+kk]);
                y = requant(acc, bias[col0+b], mult[col0+b], shift[col0+b], zp, amin, amax);
                if ($signed(y) == amin || $signed(y) == amax) n_clamped++;
                wd[8*b +: 8] = y;
              end
              exp_q.push_back({last && (c == act-1) && (r == TN-1) && (mm == TM-4), wd});
            end
      end
    end
    // wait for the accelerator to finish the layer
    @(posedge clk iff layer_done);
    repeat (3) @(posedge clk);
    checks++;
    if (cfg_error || exp_q.size() != 0 || inp_q.size() != 0 || wgt_q.size() != 0 || bias_q.size() != 0) begin
      failures++;
      $display("host: layer conv=%0d N=%0d M=%0d K=%0d wb=%0d incomplete (err=%0d out left %0d, in %0d, w %0d, b %0d)",
               conv, n, m, k, wb, cfg_error, exp_q.size(), inp_q.size(), wgt_q.size(), bias_q.size());
    end else begin
      n_layers_ok++;
      $display("host: layer conv=%0d N=%0d M=%0d K=%0d mode=%s done", conv, n, m, k, wb ? "WB" : "IB");
    end
  endtask

  // A packet the accelerator must refuse: depth above TK
  task automatic run_bad_layer(int k = TK + KF);
    cfg_q.push_back(32'd0);
    cfg_q.push_back(32'(TN)); cfg_q.push_back(32'(TM)); cfg_q.push_back(32'(k));
    cfg_q.push_back({8'd127, 8'h80, 8'd0, 8'd0});
    @(posedge clk iff layer_done);
    @(posedge clk);
    checks++;
    if (!cfg_error) begin
      failures++;
      $display("host: oversize layer was not refused");
    end
  endtask

  initial begin
    bit wb;
    checks = 0; failures = 0; n_clamped = 0; n_layers_ok = 0; words_seen = 0;
    finished = 0;
    cfg_tvalid = 0; inp_tvalid = 0; wgt_tvalid = 0; bias_tvalid = 0; out_tready = 0;
    cfg_tdata = 0; inp_tdata = 0; wgt_tdata = 0; bias_tdata = 0;
    rst_n = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    if (LIST == 0) begin
      run_layer(0, 2*TN, 5*TM, 3*KF, 1, wb);   // FC, wide: IB, partial core group
      run_layer(1, 5*TN, 2*TM, TK,   1, wb);   // CONV, tall: WB, partial group
      run_bad_layer();
      run_layer(0, 3*TN, TM,   KF,   0, wb);   // FC, narrow, no bias: WB
      run_layer(1, TN,   4*TM, 2*KF, 1, wb);   // CONV, wide: IB
    end else if (LIST == 1) begin
      run_layer(0, 2*TN, 4*TM, TK,   1, wb);   // FC at full depth: IB
      run_layer(1, 4*TN, TM,   TK/4, 1, wb);   // CONV: WB
    end else begin
      // sizes below assume T_N = T_M = 64, T_K = 1024, K_f = 16
      run_layer(0, 256,  576, 192, 1, wb);     // ViT-T QKV: 197 tokens, 192 -> 3x192
      run_layer(0, 256,  192, 768, 1, wb);     // ViT-T MLP fc2: 768 -> 192
      run_layer(1, 1024, 64,  576, 1, wb);     // MobileViT-S 3x3 conv, 64 ch at 32x32
      run_layer(1, 3136, 128, 48,  1, wb);     // Swin-T patch embed 4x4x3 -> 96 (pad 128)
      run_bad_layer(1536);                     // EfficientViT-b1 classifier, K = 1536
    end
    finished = 1;
  end

endmodule
