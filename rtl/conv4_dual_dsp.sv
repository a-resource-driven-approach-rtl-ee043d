// conv4_dual_dsp -- Conv_4: two KxK convolutions in parallel on two DSP slices.
//
// For FPGAs with plenty of DSP slices and a need for parallelism. Two windows A
// and B are convolved with the same serially loaded kernel; each window has its
// own DSP slice (dsp_mac) that multiplies and accumulates internally, so the
// logic outside the DSPs is only the shared tap counter, the two window
// multiplexers and the last-tap tag pipeline. Unlike the packed single-DSP IP,
// operands may use the full DSP port widths (data up to 27 bits, coefficients
// up to 18 bits), which gives more precision.
//
// Interface: as conv3_dsp_packed -- coefficients serial on coef/coef_valid, two
// parallel windows win_a/win_b, results res_a/res_b with a shared res_valid.
// An assertion checks that results never come in consecutive cycles.
// Timing: CONV4_LATENCY = 3 (if edge n samples the last coefficient, res_valid
// is high after edge n+2); one pair of convolutions per K*K coefficient cycles.
// Two DSPs, two parallel convolutions and the wider operands follow the
// library's description; the shared kernel, pipeline and protocol are this
// design's choices.
module conv4_dual_dsp #(
  parameter int unsigned K      = conv_pkg::K_DEFAULT,
  parameter int unsigned DATA_W = conv_pkg::DATA_W_DEFAULT,
  parameter int unsigned COEF_W = conv_pkg::COEF_W_DEFAULT,
  parameter int unsigned ACC_W  = conv_pkg::acc_width(DATA_W, COEF_W, K*K)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     coef_valid,
  input  logic signed [COEF_W-1:0] coef,
  input  logic signed [DATA_W-1:0] win_a [K*K],
  input  logic signed [DATA_W-1:0] win_b [K*K],
  output logic                     res_valid,
  output logic signed [ACC_W-1:0]  res_a,
  output logic signed [ACC_W-1:0]  res_b
);

  import conv_pkg::DSP_A_W;
  import conv_pkg::DSP_B_W;
  import conv_pkg::DSP_P_W;
  import conv_pkg::DSP_LATENCY;

  localparam int unsigned TAPS  = K * K;
  localparam int unsigned TAP_W = conv_pkg::tap_width(TAPS);

  if (DATA_W > DSP_A_W || COEF_W > DSP_B_W || ACC_W > DSP_P_W) begin : g_width_check
    $error("conv4_dual_dsp: operands exceed the DSP slice widths");
  end

  logic [TAP_W-1:0]          tap;
  logic                      is_last, is_first;
  logic [DSP_LATENCY-1:0]    last_pipe;
  logic                      pa_valid, pb_valid;
  logic signed [DSP_P_W-1:0] pa, pb;

  assign is_last  = (tap == TAP_W'(TAPS - 1));
  assign is_first = (tap == '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      tap       <= '0;
      last_pipe <= '0;
    end else begin
      last_pipe <= {last_pipe[DSP_LATENCY-2:0], coef_valid && is_last};
      if (coef_valid) tap <= is_last ? '0 : tap + 1'b1;
    end
  end

  dsp_mac u_dsp_a (
    .clk     (clk),
    .rst     (rst),
    .in_valid(coef_valid),
    .in_first(is_first),
    .in_acc  (1'b1),
    .a       (DSP_A_W'(win_a[tap])),
    .d       ('0),
    .b       (DSP_B_W'(coef)),
    .p_valid (pa_valid),
    .p       (pa)
  );

  dsp_mac u_dsp_b (
    .clk     (clk),
    .rst     (rst),
    .in_valid(coef_valid),
    .in_first(is_first),
    .in_acc  (1'b1),
    .a       (DSP_A_W'(win_b[tap])),
    .d       ('0),
    .b       (DSP_B_W'(coef)),
    .p_valid (pb_valid),
    .p       (pb)
  );

  assign res_valid = pa_valid && pb_valid && last_pipe[DSP_LATENCY-1];
  assign res_a     = pa[ACC_W-1:0];
  assign res_b     = pb[ACC_W-1:0];

  // A window takes K*K coefficient cycles, so two results are never in
  // consecutive cycles.
  if (TAPS > 1) begin : g_result_spacing
    a_result_spacing: assert property (@(posedge clk) disable iff (rst)
                                       res_valid |=> !res_valid)
      else $error("conv4_dual_dsp: results in consecutive cycles");
  end

endmodule
