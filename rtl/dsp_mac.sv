// dsp_mac -- one DSP slice: pre-adder, signed multiplier and accumulator.
//
// Portable description of the DSP48E2-style slice the DSP-based convolution IPs
// are built on, written so that a synthesis tool maps it onto a single DSP
// block: p = (a + d) * b, either alone (in_acc = 0 or in_first = 1) or added to
// the previous p (in_acc = 1 and in_first = 0). The pre-adder result is A_W bits
// and wraps like the hard block's; the accumulator is P_W bits.
//
// Timing: three register stages (input registers, multiplier register,
// accumulator register), fully pipelined. Operands sampled with in_valid at
// edge n drive p and p_valid after edge n+2, so the next register takes them at
// edge n+3 (latency 3). Reset is synchronous, active
// high, and clears only the valid pipeline. Port widths follow the UltraScale+
// DSP slice; the pipeline depth is this design's choice.
module dsp_mac #(
  parameter int unsigned A_W = conv_pkg::DSP_A_W,
  parameter int unsigned B_W = conv_pkg::DSP_B_W,
  parameter int unsigned P_W = conv_pkg::DSP_P_W
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  in_valid,
  input  logic                  in_first,
  input  logic                  in_acc,
  input  logic signed [A_W-1:0] a,
  input  logic signed [A_W-1:0] d,
  input  logic signed [B_W-1:0] b,
  output logic                  p_valid,
  output logic signed [P_W-1:0] p
);

  // Stage 1: input registers
  logic signed [A_W-1:0] a_q, d_q;
  logic signed [B_W-1:0] b_q;
  logic                  v1, first1, acc1;
  // Stage 2: pre-add and multiply
  logic signed [A_W-1:0]     ad;
  logic signed [A_W+B_W-1:0] m_q;
  logic                      v2, first2, acc2;

  assign ad = a_q + d_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1      <= 1'b0;
      v2      <= 1'b0;
      p_valid <= 1'b0;
    end else begin
      v1      <= in_valid;
      v2      <= v1;
      p_valid <= v2;
    end
    if (in_valid) begin
      a_q    <= a;
      d_q    <= d;
      b_q    <= b;
      first1 <= in_first;
      acc1   <= in_acc;
    end
    if (v1) begin
      m_q    <= ad * b_q;
      first2 <= first1;
      acc2   <= acc1;
    end
    if (v2) begin
      if (acc2 && !first2) p <= p + P_W'(m_q);
      else                 p <= P_W'(m_q);
    end
  end

endmodule
