// read_bias: ReadBias, the unit that fetches bias and requantization parameters.
//
// On `start` it reads, from its own 32-bit AXI-stream, the parameters of the
// `n_ch` output channels of the coming tile(s) into bank `bank` of a
// two-bank parameter store:
//   1. n_ch bias words (int32), only if has_bias; otherwise the bank reads as
//      bias 0 for every channel;
//   2. the multiplier words (int32): n_ch of them when per_channel (CONV
//      layers), a single one for the whole tensor otherwise (FC layers);
//   3. the shift words ([5:0] = right shift n), as many as multipliers.
// The requantization scale is S = mult * 2^-shift. The bias is expected with
// the zero-point correction of the layer already folded in, so the PPU's bias
// path only adds one term per output.
//
// The PPU reads the store through `rd_*` (registered, one cycle); with
// rd_per_channel low the scale comes from channel 0 whatever rd_ch is, which
// is how the per-tensor (FC) and per-channel (CONV) paths share one store. It
// reads while the next
// tile's parameters are written into the other bank, so parameter fetch for
// tile t+1 overlaps post-processing of tile t. `done` pulses after the last
// word has been stored. The word order, the two banks and the pre-folded
// zero-point correction are this design's choices; the paper gives only that
// ReadBias reads the bias when the layer has one and the requantization
// parameters, including zero-point correction terms, for the PPU.
module read_bias
  import flexvit_pkg::*;
#(
  parameter int unsigned C  = C_DEF,
  parameter int unsigned TM = TM_DEF
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic                              bank,
  input  logic [$clog2(C*TM+1)-1:0]         n_ch,
  input  logic                              has_bias,
  input  logic                              per_channel,
  output logic                              busy,
  output logic                              done,
  // AXI-stream slave
  input  logic [AXIS_W-1:0]                 s_tdata,
  input  logic                              s_tvalid,
  output logic                              s_tready,
  // parameter store read port (PPU); per-tensor parameters are at channel 0
  input  logic                              rd_bank,
  input  logic [$clog2(C*TM)-1:0]           rd_ch,
  input  logic                              rd_per_channel, // 0: scale at channel 0
  output qparam_t                           rd_q
);
  localparam int unsigned NCH = C * TM;
  localparam int unsigned CHW = $clog2(NCH);

  typedef enum logic [1:0] {PH_IDLE, PH_BIAS, PH_MULT, PH_SHIFT} phase_e;
  phase_e                  phase;
  logic                    bank_q, pc_q;
  logic [CHW:0]            nch_q, idx, idx_last;
  logic [1:0]              has_bias_bank;
  logic                    beat, ph_end;

  logic signed [31:0] bias_mem  [2*NCH];
  logic signed [31:0] mult_mem  [2*NCH];
  logic [5:0]         shift_mem [2*NCH];

  assign busy     = (phase != PH_IDLE);
  assign s_tready = busy;
  assign beat     = s_tvalid && s_tready;
  assign idx_last = (phase == PH_BIAS || pc_q) ? nch_q - 1'b1 : '0;
  assign ph_end   = (idx == idx_last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; done <= 1'b0;
      bank_q <= 1'b0; pc_q <= 1'b0; nch_q <= '0; idx <= '0;
      has_bias_bank <= '0;
    end else begin
      done <= 1'b0;
      if (phase == PH_IDLE) begin
        if (start) begin
          phase  <= has_bias ? PH_BIAS : PH_MULT;
          bank_q <= bank;
          pc_q   <= per_channel;
          nch_q  <= (CHW+1)'(n_ch);
          idx    <= '0;
          has_bias_bank[bank] <= has_bias;
        end
      end else if (beat) begin
        idx <= ph_end ? '0 : idx + 1'b1;
        if (ph_end) begin
          unique case (phase)
            PH_BIAS:  phase <= PH_MULT;
            PH_MULT:  phase <= PH_SHIFT;
            default: begin
              phase <= PH_IDLE;
              done  <= 1'b1;
            end
          endcase
        end
      end
    end
  end

  // bank b, channel i lives at b*NCH + i (NCH need not be a power of two)
  localparam int unsigned AW = $clog2(2*NCH);
  logic [AW-1:0] wr_a, rd_a;
  assign wr_a = AW'(bank_q) * AW'(NCH) + AW'(idx);
  logic [AW-1:0] rd_s;
  assign rd_a = AW'(rd_bank) * AW'(NCH) + AW'(rd_ch);
  assign rd_s = AW'(rd_bank) * AW'(NCH) + (rd_per_channel ? AW'(rd_ch) : AW'(0));

  always_ff @(posedge clk) begin
    if (beat) begin
      unique case (phase)
        PH_BIAS:  bias_mem[wr_a]  <= s_tdata;
        PH_MULT:  mult_mem[wr_a]  <= s_tdata;
        PH_SHIFT: shift_mem[wr_a] <= s_tdata[5:0];
        default: ;
      endcase
    end
    rd_q.bias  <= has_bias_bank[rd_bank] ? bias_mem[rd_a] : 32'sd0;
    rd_q.mult  <= mult_mem[rd_s];
    rd_q.shift <= shift_mem[rd_s];
  end

  a_axis_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_tvalid && !s_tready |=> s_tvalid && $stable(s_tdata));

endmodule
