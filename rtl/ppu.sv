// ppu: post-processing unit, the point where the cores' results converge.
//
// On `start` it walks the result stores of the first `n_cores` cores, core by
// core, each row-major over its TN x TM tile, and for every 32-bit accumulator
// value `acc` of output channel `ch` computes
//   y = clamp( round( (acc + bias[ch]) * mult * 2^-shift ) + out_zp,
//              act_min, act_max )
// with round-half-up on the arithmetic right shift. In Input-Broadcast mode
// core c holds channels c*TM .. c*TM+TM-1 of the parameter store, in
// Weight-Broadcast mode all cores share channels 0 .. TM-1. The `layer` input
// selects the requantization path: FC uses the single per-tensor scale, CONV
// the per-channel scale of each output channel. Bias/parameter lookup runs as
// a path of its own, in parallel with the accumulator read (both addressed in
// the same cycle), rather than in series with it.
//
// Four consecutive INT8 results (same row, lowest channel in the lowest byte)
// are packed into one 32-bit word and sent on the output AXI-stream; `m_tlast`
// marks the final word of a job started with `last_tile`. Timing, as in the
// paper: one result enters every PPU_II = 2 cycles and a word leaves PPU_LAT =
// 29 cycles after its last result was read. A small output FIFO and a credit
// counter make back-pressure from the stream stop the reading of new results
// instead of the pipeline, so the pipeline itself never stalls. `done` pulses
// when the job's last word has left the FIFO. The arithmetic follows the
// paper's fixed-point rescaling (32-bit multiply, then right shift); the
// rounding, the clamp, the word order and the FIFO are this design's choices.
module ppu
  import flexvit_pkg::*;
#(
  parameter int unsigned C       = C_DEF,
  parameter int unsigned TN      = TN_DEF,
  parameter int unsigned TM      = TM_DEF,
  parameter int unsigned PPU_LAT = PPU_LAT_DEF,
  parameter int unsigned PPU_II  = PPU_II_DEF,
  parameter int unsigned FIFO_D  = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // job control from the scheduler
  input  logic                          start,
  input  mode_e                         mode,
  input  layer_e                        layer,
  input  logic [$clog2(C+1)-1:0]        n_cores,
  input  logic                          q_bank_in,
  input  logic signed [7:0]             out_zp,
  input  logic signed [7:0]             act_min,
  input  logic signed [7:0]             act_max,
  input  logic                          last_tile,
  output logic                          busy,
  output logic                          done,
  // result stores of the GEMM engine
  output logic [$clog2(C > 1 ? C : 2)-1:0] res_core,
  output logic [$clog2(TN*TM)-1:0]      res_addr,
  input  logic signed [31:0]            res_data,
  // parameter store of ReadBias
  output logic                          q_bank,
  output logic [$clog2(C*TM)-1:0]       q_ch,
  output logic                          q_per_channel,
  input  qparam_t                       q,
  // output AXI-stream master
  output logic [AXIS_W-1:0]             m_tdata,
  output logic                          m_tvalid,
  output logic                          m_tlast,
  input  logic                          m_tready
);
  localparam int unsigned CW   = $clog2(C > 1 ? C : 2);
  localparam int unsigned EW   = $clog2(TN*TM);
  localparam int unsigned ARITH = 5;               // stages through the clamp
  localparam int unsigned PAD   = PPU_LAT - 1 - ARITH;
  localparam int unsigned CREDITS = FIFO_D * BYTES_PER_WORD;

  initial begin
    assert (PPU_LAT >= ARITH + 2) else $error("ppu: PPU_LAT too small");
    assert (TM % BYTES_PER_WORD == 0) else $error("ppu: TM must be a multiple of 4");
  end

  // ---------------- job state and read issue ----------------
  mode_e             mode_q;
  layer_e            layer_q;
  logic [CW:0]       ncores_q;
  logic              bank_q, last_tile_q;
  logic signed [7:0] zp_q, amin_q, amax_q;
  logic              issuing;
  logic [CW-1:0]     core;
  logic [EW-1:0]     elem;
  logic [$clog2(PPU_II > 1 ? PPU_II : 2)-1:0] ii_cnt;
  logic [$clog2(CREDITS+1)-1:0] credits;
  logic              issue, issue_last;
  logic              pop;

  assign issue      = issuing && (ii_cnt == '0) && (credits != '0);
  assign issue_last = (elem == EW'(TN*TM-1)) && ({1'b0, core} == ncores_q - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; core <= '0; elem <= '0; ii_cnt <= '0;
      mode_q <= MODE_IB; layer_q <= LAYER_FC; ncores_q <= '0; bank_q <= 1'b0;
      last_tile_q <= 1'b0; zp_q <= '0; amin_q <= '0; amax_q <= '0;
    end else begin
      if (start && !busy) begin
        issuing     <= (n_cores != '0);
        core        <= '0;
        elem        <= '0;
        ii_cnt      <= '0;
        mode_q      <= mode;
        layer_q     <= layer;
        ncores_q    <= (CW+1)'(n_cores);
        bank_q      <= q_bank_in;
        last_tile_q <= last_tile;
        zp_q <= out_zp; amin_q <= act_min; amax_q <= act_max;
      end else if (issuing) begin
        if (ii_cnt != '0) ii_cnt <= ii_cnt - 1'b1;
        if (issue) begin
          ii_cnt <= $bits(ii_cnt)'(PPU_II - 1);
          if (issue_last) begin
            issuing <= 1'b0;
          end else if (elem == EW'(TN*TM-1)) begin
            elem <= '0;
            core <= core + 1'b1;
          end else begin
            elem <= elem + 1'b1;
          end
        end
      end
    end
  end

  // element -> read addresses; the bias path is addressed in the same cycle
  logic [$clog2(TM)-1:0] col;
  assign col           = $clog2(TM)'(elem % TM);
  assign res_core      = core;
  assign res_addr      = elem;
  assign q_bank        = bank_q;
  assign q_ch          = $bits(q_ch)'((mode_q == MODE_IB ? 32'(core) * TM : 0) + 32'(col));
  assign q_per_channel = (layer_q == LAYER_CONV);

  // credits: one per result slot in the output FIFO, returned four at a time
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credits <= $bits(credits)'(CREDITS);
    else credits <= credits - $bits(credits)'(issue)
                            + (pop ? $bits(credits)'(BYTES_PER_WORD) : '0);
  end

  // ---------------- requantization pipeline ----------------
  // stage 1: data from the result store and the parameter store
  logic [ARITH+PAD:1] v_sr, l_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0; l_sr <= '0;
    end else begin
      v_sr <= {v_sr[ARITH+PAD-1:1], issue};
      l_sr <= {l_sr[ARITH+PAD-1:1], issue && issue_last};
    end
  end

  logic signed [31:0] s2_sum, s2_mult;
  logic [5:0]         s2_shift, s3_shift;
  logic signed [63:0] s3_prod, s4_rnd;
  logic signed [7:0]  s5_byte;
  logic signed [63:0] s4_v;
  assign s4_v = s4_rnd + 64'(zp_q);
  always_ff @(posedge clk) begin
    // stage 2: bias add (the accumulator path meets the bias path)
    s2_sum   <= res_data + q.bias;
    s2_mult  <= q.mult;
    s2_shift <= q.shift;
    // stage 3: 32 x 32 multiply
    s3_prod  <= 64'(s2_sum) * 64'(s2_mult);
    s3_shift <= s2_shift;
    // stage 4: rounding right shift, S = mult * 2^-shift
    s4_rnd   <= (s3_prod + ((s3_shift == 0) ? 64'sd0 : (64'sd1 <<< (s3_shift - 1)))) >>> s3_shift;
    // stage 5: output zero point and activation clamp
    if (s4_v < 64'(amin_q))      s5_byte <= amin_q;
    else if (s4_v > 64'(amax_q)) s5_byte <= amax_q;
    else                         s5_byte <= 8'(s4_v);
  end

  // delay line up to stage PPU_LAT-1
  logic [7:0] dly [PAD+1];
  always_ff @(posedge clk) begin
    dly[0] <= s5_byte;
    for (int i = 1; i <= PAD; i++) dly[i] <= dly[i-1];
  end
  logic [7:0] out_byte;
  logic       out_v, out_l;
  assign out_byte = (PAD == 0) ? s5_byte : dly[PAD-1];
  assign out_v    = v_sr[ARITH+PAD];
  assign out_l    = l_sr[ARITH+PAD];

  // ---------------- packing and output FIFO ----------------
  logic [1:0]              nbytes;
  logic [23:0]             part;
  logic                    push;
  logic [AXIS_W:0]         fifo [FIFO_D];
  logic [$clog2(FIFO_D)-1:0] wp, rp;
  logic [$clog2(FIFO_D+1)-1:0] cnt;

  assign push = out_v && (nbytes == 2'd3);
  assign pop  = m_tvalid && m_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbytes <= '0; part <= '0; wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (out_v) begin
        nbytes <= nbytes + 1'b1;
        part   <= {out_byte, part[23:8]};
      end
      if (push) wp <= (wp == $bits(wp)'(FIFO_D-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == $bits(rp)'(FIFO_D-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + $bits(cnt)'(push) - $bits(cnt)'(pop);
    end
  end
  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= {out_l && last_tile_q, out_byte, part};
  end

  assign m_tvalid = (cnt != '0);
  assign m_tdata  = fifo[rp][AXIS_W-1:0];
  assign m_tlast  = fifo[rp][AXIS_W];

  // job completion: the last word of the job has been taken by the stream
  logic last_pushed;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; last_pushed <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy        <= 1'b1;
        last_pushed <= 1'b0;
        if (n_cores == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (busy) begin
        if (push && out_l) last_pushed <= 1'b1;
        if (last_pushed && cnt == $bits(cnt)'(1) && pop) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (cnt < $bits(cnt)'(FIFO_D)) || pop);
  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule
