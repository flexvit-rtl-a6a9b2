// simd_mac: the processing element (PE) of a GEMM core.
//
// Each cycle it takes KF signed INT8 activations and KF signed INT8 weights,
// multiplies them pairwise (the "Multiplier"), reduces the KF products in a
// pipelined binary adder tree and adds the sum to a 32-bit accumulator (the
// "Accumulator"). A dot product over K = n*KF elements is fed as n beats with
// `first` on the first beat and `last` on the final one; the accumulator
// restarts from zero on `first` (A0 = 0, A_i = A_(i-1) + M_i), so partial sums
// never leave the PE (output-stationary). One beat is accepted every cycle
// (initiation interval 1). Latency: products one stage, adder tree log2(KF)
// stages, accumulator one stage, so a beat's result is in `acc` 2+log2(KF)
// cycles after it enters; with the one-cycle buffer read in front of the PE
// this gives the published MAC latency of 7 cycles at KF = 16. `tag` travels
// with the beat so the caller knows where the finished dot product belongs.
//
// The lower half of the lanes is marked for LUT multipliers and the upper half
// for DSP multipliers, this design's reading of the published split of the
// multiply work between fabric logic and DSP slices. The attributes are hints
// for the FPGA tool only; the arithmetic is the same.
module simd_mac
  import flexvit_pkg::*;
#(
  parameter int unsigned KF    = KF_DEF,
  parameter int unsigned TAG_W = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [TAG_W-1:0]          in_tag,
  input  logic [KF-1:0][7:0]        in_act,
  input  logic [KF-1:0][7:0]        in_wgt,
  output logic                      out_valid,   // finished dot product in acc
  output logic [TAG_W-1:0]          out_tag,
  output logic signed [31:0]        acc
);
  localparam int unsigned LV    = $clog2(KF);       // adder tree levels
  localparam int unsigned DEPTH = LV + 1;           // products + tree

  initial assert (2**LV == KF) else $error("simd_mac: KF must be a power of two");

  // stage 1: products, split between LUT and DSP lanes
  (* use_dsp = "no" *)  logic signed [15:0] prod_lo [KF/2];
  (* use_dsp = "yes" *) logic signed [15:0] prod_hi [KF/2];

  always_ff @(posedge clk) begin
    for (int i = 0; i < KF/2; i++) begin
      prod_lo[i] <= $signed(in_act[i])        * $signed(in_wgt[i]);
      prod_hi[i] <= $signed(in_act[i + KF/2]) * $signed(in_wgt[i + KF/2]);
    end
  end

  // adder tree: level l holds KF >> l partial sums
  logic signed [31:0] tree [LV+1][KF];
  always_comb begin
    for (int i = 0; i < KF; i++) tree[0][i] = 32'sd0;
    for (int i = 0; i < KF/2; i++) begin
      tree[0][i]        = 32'(prod_lo[i]);
      tree[0][i + KF/2] = 32'(prod_hi[i]);
    end
  end
  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk) begin
      for (int i = 0; i < KF; i++)
        tree[l+1][i] <= (i < (KF >> (l+1))) ? tree[l][2*i] + tree[l][2*i+1] : 32'sd0;
    end
  end

  // control travels alongside the data
  logic [DEPTH-1:0] v_sr, f_sr, l_sr;
  logic [TAG_W-1:0] t_sr [DEPTH];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0; f_sr <= '0; l_sr <= '0;
    end else begin
      v_sr <= {v_sr[DEPTH-2:0], in_valid};
      f_sr <= {f_sr[DEPTH-2:0], in_first};
      l_sr <= {l_sr[DEPTH-2:0], in_last};
    end
  end
  always_ff @(posedge clk) begin
    t_sr[0] <= in_tag;
    for (int i = 1; i < DEPTH; i++) t_sr[i] <= t_sr[i-1];
  end

  // accumulator stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= v_sr[DEPTH-1] & l_sr[DEPTH-1];
      out_tag   <= t_sr[DEPTH-1];
      if (v_sr[DEPTH-1])
        acc <= (f_sr[DEPTH-1] ? 32'sd0 : acc) + tree[LV][0];
    end
  end

endmodule
