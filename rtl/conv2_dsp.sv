// conv2_dsp -- Conv_2: KxK convolution on a single DSP slice.
//
// For FPGAs with DSP slices to spare but little logic. Each cycle the pixel
// selected by the tap counter and the incoming coefficient enter one DSP slice
// (dsp_mac) that multiplies and accumulates internally, so the only logic left
// outside the DSP is the tap counter, the window multiplexer and a short tag
// pipeline marking the last tap. One convolution per K*K coefficient cycles.
//
// Interface: as conv1_logic -- coefficients serial on coef/coef_valid (row-major,
// gaps allowed), window parallel on win[], win[k] read in the cycle coefficient
// k is valid; res_valid pulses with the exact sum res = sum_k win[k]*coef_k.
// An assertion checks that results never come in consecutive cycles.
// Timing: CONV2_LATENCY = 3, the DSP's three register stages (if edge n samples
// the last coefficient, res_valid is high after edge n+2); res is taken straight from
// the DSP accumulator. Operands up to 27 (data) x 18 (coefficient) bits.
// The one-DSP budget, serial coefficients and parallel data follow the
// library's description; the pipeline and protocol are this design's choices.
module conv2_dsp #(
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

  import conv_pkg::DSP_A_W;
  import conv_pkg::DSP_B_W;
  import conv_pkg::DSP_P_W;
  import conv_pkg::DSP_LATENCY;

  localparam int unsigned TAPS  = K * K;
  localparam int unsigned TAP_W = conv_pkg::tap_width(TAPS);

  if (DATA_W > DSP_A_W || COEF_W > DSP_B_W || ACC_W > DSP_P_W) begin : g_width_check
    $error("conv2_dsp: operands exceed the DSP slice widths");
  end

  logic [TAP_W-1:0]         tap;
  logic                     is_last;
  logic [DSP_LATENCY-1:0]   last_pipe;
  logic                     p_valid;
  logic signed [DSP_P_W-1:0] p;

  assign is_last = (tap == TAP_W'(TAPS - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      tap       <= '0;
      last_pipe <= '0;
    end else begin
      last_pipe <= {last_pipe[DSP_LATENCY-2:0], coef_valid && is_last};
      if (coef_valid) tap <= is_last ? '0 : tap + 1'b1;
    end
  end

  dsp_mac u_dsp (
    .clk     (clk),
    .rst     (rst),
    .in_valid(coef_valid),
    .in_first(tap == '0),
    .in_acc  (1'b1),
    .a       (DSP_A_W'(win[tap])),
    .d       ('0),
    .b       (DSP_B_W'(coef)),
    .p_valid (p_valid),
    .p       (p)
  );

  assign res_valid = p_valid && last_pipe[DSP_LATENCY-1];
  assign res       = p[ACC_W-1:0];

  // A window takes K*K coefficient cycles, so two results are never in
  // consecutive cycles.
  if (TAPS > 1) begin : g_result_spacing
    a_result_spacing: assert property (@(posedge clk) disable iff (rst)
                                       res_valid |=> !res_valid)
      else $error("conv2_dsp: results in consecutive cycles");
  end

endmodule
