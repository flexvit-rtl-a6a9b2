// scheduler: central control of the accelerator.
//
// It takes a layer configuration packet (CFG_WORDS 32-bit words, layout in
// flexvit_pkg::layer_cfg_t) from the metadata AXI-stream, checks it and then
// walks the padded GEMM of N x M outputs over a depth K tile by tile:
//   Input-Broadcast  (IB): outer loop over the N/TN row tiles, inner loop over
//     the M/TM channel tiles in groups of C. The input tile is loaded once per
//     outer step and shared by all cores; each core gets its own weight tile.
//   Weight-Broadcast (WB): outer loop over the M/TM channel tiles, inner loop
//     over the N/TN row tiles in groups of C. The weight tile (and its bias and
//     scales) is loaded once per outer step and shared; each core gets its own
//     input tile.
// A group at the end of the inner loop may hold fewer than C tiles; only that
// many cores are started. Every unit is driven by a one-cycle start pulse and
// answers with a one-cycle done pulse when its own work is finished, so the
// scheduler never depends on how long a memory transfer takes.
//
// Per step: start the needed read units together (LOAD), wait for their done
// pulses and for the PPU to have released the result stores, run the cores
// (COMP), then hand the results to the PPU and go straight on to the next
// step's loads, so post-processing of tile t overlaps the reads of tile t+1.
// Bias/scale sets alternate between the two banks of ReadBias for the same
// reason. When the last tile's PPU job has finished, `layer_done` pulses and
// the next packet is read. A packet whose sizes are not multiples of the tile
// sizes, or whose depth exceeds TK, sets `cfg_error` and is skipped (such a
// layer stays on the host). The loop orders and the broadcast/partition choice
// are the paper's; the states, the handshake signals and the error check are
// this design's.
module scheduler
  import flexvit_pkg::*;
#(
  parameter int unsigned C  = C_DEF,
  parameter int unsigned TN = TN_DEF,
  parameter int unsigned TM = TM_DEF,
  parameter int unsigned TK = TK_DEF,
  parameter int unsigned KF = KF_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration AXI-stream
  input  logic [AXIS_W-1:0]             s_cfg_tdata,
  input  logic                          s_cfg_tvalid,
  output logic                          s_cfg_tready,
  // shared depth of the current layer
  output logic [$clog2(TK):0]           k_len,
  // ReadInp
  output logic                          inp_start,
  output logic                          inp_broadcast,
  output logic [$clog2(C+1)-1:0]        inp_ntiles,
  input  logic                          inp_done,
  // ReadWgt
  output logic                          wgt_start,
  output logic                          wgt_broadcast,
  output logic [$clog2(C+1)-1:0]        wgt_ntiles,
  input  logic                          wgt_done,
  // ReadBias
  output logic                          bias_start,
  output logic                          bias_bank,
  output logic [$clog2(C*TM+1)-1:0]     bias_nch,
  output logic                          bias_has,
  output logic                          bias_per_channel,
  input  logic                          bias_done,
  // GEMM engine
  output logic                          eng_start,
  output logic [C-1:0]                  eng_mask,
  input  logic                          eng_done,
  // PPU
  output logic                          ppu_start,
  output mode_e                         ppu_mode,
  output layer_e                        ppu_layer,
  output logic [$clog2(C+1)-1:0]        ppu_ncores,
  output logic                          ppu_bank,
  output logic signed [7:0]             ppu_out_zp,
  output logic signed [7:0]             ppu_act_min,
  output logic signed [7:0]             ppu_act_max,
  output logic                          ppu_last,
  input  logic                          ppu_busy,
  // status
  output logic                          busy,
  output logic                          layer_done,
  output logic                          cfg_error
);
  localparam int unsigned CNW = $clog2(C+1);

  typedef enum logic [2:0] {
    S_CFG, S_CHECK, S_LOAD, S_LOAD_WAIT, S_COMP, S_COMP_WAIT, S_PPU, S_DRAIN
  } state_e;

  state_e       state;
  layer_cfg_t   cfg;
  logic [$clog2(CFG_WORDS)-1:0] wcnt;
  logic [15:0]  outer, outer_n;     // outer loop index and count
  logic [15:0]  base, inner_n;      // first tile of the inner group, inner tile count
  logic [CNW-1:0] active;           // tiles (cores) in this group
  logic         cur_bank;
  logic         pend_inp, pend_wgt, pend_bias;
  logic         first_inner, last_inner, last_step;
  logic         load_inp, load_wgt, load_bias;
  logic [15:0]  n_tiles_r, m_tiles_r;

  assign n_tiles_r   = 16'(32'(cfg.n) / TN);
  assign m_tiles_r   = 16'(32'(cfg.m) / TM);
  assign first_inner = (base == 16'd0);
  assign last_inner  = (32'(base) + C >= 32'(inner_n));
  assign last_step   = last_inner && (outer == outer_n - 16'd1);
  assign active      = (32'(inner_n) - 32'(base) >= C) ? CNW'(C) : CNW'(inner_n - base);

  // which operands the current step loads
  assign load_inp  = (cfg.mode == MODE_WB) || first_inner;
  assign load_wgt  = (cfg.mode == MODE_IB) || first_inner;
  assign load_bias = load_wgt;

  // ---------------- configuration packet ----------------
  assign s_cfg_tready = (state == S_CFG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CFG; cfg <= '0; wcnt <= '0;
      outer <= '0; outer_n <= '0; base <= '0; inner_n <= '0;
      cur_bank <= 1'b0; pend_inp <= 1'b0; pend_wgt <= 1'b0; pend_bias <= 1'b0;
      layer_done <= 1'b0; cfg_error <= 1'b0;
    end else begin
      layer_done <= 1'b0;
      unique case (state)
        S_CFG: if (s_cfg_tvalid) begin
          unique case (32'(wcnt))
            0: begin
              cfg.mode     <= mode_e'(s_cfg_tdata[0]);
              cfg.layer    <= layer_e'(s_cfg_tdata[1]);
              cfg.has_bias <= s_cfg_tdata[2];
            end
            1: cfg.n <= s_cfg_tdata[15:0];
            2: cfg.m <= s_cfg_tdata[15:0];
            3: cfg.k <= s_cfg_tdata[15:0];
            default: begin
              cfg.out_zp  <= s_cfg_tdata[7:0];
              cfg.act_min <= s_cfg_tdata[15:8];
              cfg.act_max <= s_cfg_tdata[23:16];
            end
          endcase
          if (32'(wcnt) == CFG_WORDS - 1) begin
            wcnt  <= '0;
            state <= S_CHECK;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end

        S_CHECK: begin
          if (cfg.n == 0 || cfg.m == 0 || cfg.k == 0 ||
              32'(cfg.n) % TN != 0 || 32'(cfg.m) % TM != 0 ||
              32'(cfg.k) % KF != 0 || 32'(cfg.k) > TK) begin
            cfg_error  <= 1'b1;
            layer_done <= 1'b1;
            state      <= S_CFG;
          end else begin
            cfg_error <= 1'b0;
            outer     <= '0;
            base      <= '0;
            outer_n   <= (cfg.mode == MODE_IB) ? n_tiles_r : m_tiles_r;
            inner_n   <= (cfg.mode == MODE_IB) ? m_tiles_r : n_tiles_r;
            state     <= S_LOAD;
          end
        end

        S_LOAD: begin
          pend_inp  <= load_inp;
          pend_wgt  <= load_wgt;
          pend_bias <= load_bias;
          if (load_bias) cur_bank <= ~cur_bank;
          state <= S_LOAD_WAIT;
        end

        S_LOAD_WAIT: begin
          if (inp_done)  pend_inp  <= 1'b0;
          if (wgt_done)  pend_wgt  <= 1'b0;
          if (bias_done) pend_bias <= 1'b0;
          if (!(pend_inp && !inp_done) && !(pend_wgt && !wgt_done) &&
              !(pend_bias && !bias_done) && !ppu_busy)
            state <= S_COMP;
        end

        S_COMP: state <= S_COMP_WAIT;

        S_COMP_WAIT: if (eng_done) state <= S_PPU;

        S_PPU: begin
          if (last_inner) begin
            base  <= '0;
            outer <= outer + 16'd1;
          end else begin
            base <= base + 16'(C);
          end
          state <= last_step ? S_DRAIN : S_LOAD;
        end

        default: begin // S_DRAIN
          if (!ppu_busy) begin
            layer_done <= 1'b1;
            state      <= S_CFG;
          end
        end
      endcase
    end
  end

  // ---------------- unit control ----------------
  assign k_len = ($clog2(TK)+1)'(cfg.k);

  assign inp_start     = (state == S_LOAD) && load_inp;
  assign inp_broadcast = (cfg.mode == MODE_IB);
  assign inp_ntiles    = active;

  assign wgt_start     = (state == S_LOAD) && load_wgt;
  assign wgt_broadcast = (cfg.mode == MODE_WB);
  assign wgt_ntiles    = active;

  assign bias_start       = (state == S_LOAD) && load_bias;
  assign bias_bank        = ~cur_bank;
  assign bias_nch         = $bits(bias_nch)'(32'(cfg.mode == MODE_IB ? active : CNW'(1)) * TM);
  assign bias_has         = cfg.has_bias;
  assign bias_per_channel = (cfg.layer == LAYER_CONV);

  assign eng_start = (state == S_COMP);
  always_comb begin
    eng_mask = '0;
    for (int c = 0; c < C; c++) eng_mask[c] = (c < 32'(active));
  end

  assign ppu_start   = (state == S_PPU);
  assign ppu_mode    = cfg.mode;
  assign ppu_layer   = cfg.layer;
  assign ppu_ncores  = active;
  assign ppu_bank    = cur_bank;
  assign ppu_out_zp  = cfg.out_zp;
  assign ppu_act_min = cfg.act_min;
  assign ppu_act_max = cfg.act_max;
  assign ppu_last    = last_step;

  assign busy = (state != S_CFG);

  // a unit is only started when it is free again
  a_ppu_free: assert property (@(posedge clk) disable iff (!rst_n)
    ppu_start |-> !ppu_busy);

endmodule
