// conv_ip_library -- the four resource-adaptive convolution IPs side by side.
//
// The library offers four implementations of the same KxK fixed-point
// convolution, each for a different resource budget:
//   Conv_1 (conv1_logic)      no DSP, logic multiplier, one convolution at a time
//   Conv_2 (conv2_dsp)        one DSP, little logic, one convolution at a time
//   Conv_3 (conv3_dsp_packed) one DSP, two convolutions at once, 8-bit operands
//   Conv_4 (conv4_dual_dsp)   two DSPs, two convolutions at once, wider operands
// This top instantiates all four on one shared input: a serial coefficient
// stream (coef/coef_valid, row-major, one coefficient per cycle) and two
// parallel pixel windows win_a and win_b (win_x[k] read in the cycle coefficient
// k is valid). Conv_1 and Conv_2 convolve win_a; Conv_3 and Conv_4 convolve
// both windows with the same kernel. Each IP has its own result port and
// res_valid pulse. A system that has to fit a resource budget keeps only the
// instance it needs; the others are then removed by synthesis as unloaded logic.
// Result latencies in register stages after the edge sampling the last
// coefficient (see conv_pkg): Conv_1 2, Conv_2 3, Conv_3 4, Conv_4 3. Reset: synchronous, active high.
// The four IPs and their shared serial-kernel/parallel-data interface follow
// the library's description; putting them on one bus is this design's choice.
module conv_ip_library #(
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
  // Conv_1
  output logic                     c1_valid,
  output logic signed [ACC_W-1:0]  c1_res,
  // Conv_2
  output logic                     c2_valid,
  output logic signed [ACC_W-1:0]  c2_res,
  // Conv_3
  output logic                     c3_valid,
  output logic signed [ACC_W-1:0]  c3_res_a,
  output logic signed [ACC_W-1:0]  c3_res_b,
  // Conv_4
  output logic                     c4_valid,
  output logic signed [ACC_W-1:0]  c4_res_a,
  output logic signed [ACC_W-1:0]  c4_res_b
);

  conv1_logic #(.K(K), .DATA_W(DATA_W), .COEF_W(COEF_W), .ACC_W(ACC_W)) u_conv1 (
    .clk, .rst, .coef_valid, .coef,
    .win      (win_a),
    .res_valid(c1_valid),
    .res      (c1_res)
  );

  conv2_dsp #(.K(K), .DATA_W(DATA_W), .COEF_W(COEF_W), .ACC_W(ACC_W)) u_conv2 (
    .clk, .rst, .coef_valid, .coef,
    .win      (win_a),
    .res_valid(c2_valid),
    .res      (c2_res)
  );

  conv3_dsp_packed #(.K(K), .DATA_W(DATA_W), .COEF_W(COEF_W), .ACC_W(ACC_W)) u_conv3 (
    .clk, .rst, .coef_valid, .coef, .win_a, .win_b,
    .res_valid(c3_valid),
    .res_a    (c3_res_a),
    .res_b    (c3_res_b)
  );

  conv4_dual_dsp #(.K(K), .DATA_W(DATA_W), .COEF_W(COEF_W), .ACC_W(ACC_W)) u_conv4 (
    .clk, .rst, .coef_valid, .coef, .win_a, .win_b,
    .res_valid(c4_valid),
    .res_a    (c4_res_a),
    .res_b    (c4_res_b)
  );

endmodule
