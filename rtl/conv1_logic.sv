// conv1_logic -- Conv_1: KxK convolution in LUT logic only, no DSP slice.
//
// For FPGAs that have few or no DSP slices left. The IP performs one
// multiply-accumulate per clock with a shift-and-add multiplier (logic_mult), so
// one KxK convolution takes K*K coefficient cycles.
//
// Interface (shared by all four IPs of the library):
//   * Kernel coefficients arrive serially on coef/coef_valid, in row-major
//     order, one per cycle; gaps (coef_valid low) are allowed. The IP keeps no
//     copy of the kernel, so it needs no coefficient memory.
//   * The pixel window arrives in parallel on win[0..K*K-1] (row-major, same
//     order as the coefficients). win[k] is read in the cycle coefficient k is
//     valid, so the source holds the window, or at least pixel k, until then.
//   * After the K*K-th coefficient, res_valid pulses for one cycle with the
//     exact signed sum res = sum_k win[k] * coef_k (ACC_W bits). Fixed-point
//     scaling is left to the user: res has the fractional bits of data plus
//     those of the coefficients.
// An assertion checks that results never come in consecutive cycles.
// Timing: product register, then result register: CONV1_LATENCY = 2 (if edge n
// samples the last coefficient, res_valid is high after edge n+1). Windows may follow
// back to back. Reset (synchronous, active high) restarts at tap 0.
// Serial coefficients, parallel data, logic-only arithmetic and the 3x3/8-bit
// defaults follow the library's description; the pipeline and the streaming
// tap protocol are this design's choices.
(* use_dsp = "no" *)
module conv1_logic #(
  parameter int unsigned K      = conv_pkg::K_DEFAULT,
  parameter int unsigned DATA_W = conv_pkg::DATA_W_DEFAULT,
  parameter int unsigned COEF_W = conv_pkg::COEF_W_DEFAULT,
  parameter int unsigned ACC_W  = conv_pkg::acc_width(DATA_W, COEF_W, K*K)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     coef_valid,
  input  logic signed [COEF_W-1:0] coef,
  input  logic signed [DATA_W-1:0] win [K*K],
  output logic                     res_valid,
  output logic signed [ACC_W-1:0]  res
);

  localparam int unsigned TAPS  = K * K;
  localparam int unsigned TAP_W = conv_pkg::tap_width(TAPS);
  localparam int unsigned PRD_W = DATA_W + COEF_W;

  logic [TAP_W-1:0]        tap;
  logic signed [PRD_W-1:0] prod;
  logic signed [PRD_W-1:0] prod_q;
  logic                    v1, first1, last1;
  logic signed [ACC_W-1:0] acc, acc_next;

  logic_mult #(.A_W(DATA_W), .B_W(COEF_W)) u_mult (
    .a(win[tap]),
    .b(coef),
    .p(prod)
  );

  assign acc_next = first1 ? ACC_W'(prod_q) : acc + ACC_W'(prod_q);

  always_ff @(posedge clk) begin
    if (rst) begin
      tap       <= '0;
      v1        <= 1'b0;
      res_valid <= 1'b0;
    end else begin
      v1        <= coef_valid;
      res_valid <= v1 && last1;
      if (coef_valid) tap <= (tap == TAP_W'(TAPS - 1)) ? '0 : tap + 1'b1;
    end
    if (coef_valid) begin
      prod_q <= prod;
      first1 <= (tap == '0);
      last1  <= (tap == TAP_W'(TAPS - 1));
    end
    if (v1) begin
      acc <= acc_next;
      if (last1) res <= acc_next;
    end
  end

  // A window takes K*K coefficient cycles, so two results are never in
  // consecutive cycles.
  if (TAPS > 1) begin : g_result_spacing
    a_result_spacing: assert property (@(posedge clk) disable iff (rst)
                                       res_valid |=> !res_valid)
      else $error("conv1_logic: results in consecutive cycles");
  end

endmodule
