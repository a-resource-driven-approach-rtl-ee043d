// conv3_dsp_packed -- Conv_3: two KxK convolutions in parallel on ONE DSP slice.
//
// For designs that need two convolutions per pass but can spend only one DSP.
// Two windows A and B are convolved with the same kernel. In each cycle the DSP
// pre-adder packs the two pixels into one 27-bit operand,
//     packed = a_k * 2^18 + b_k,
// and multiplies it by the shared coefficient c_k, giving
//     P = (a_k*c_k) * 2^18 + (b_k*c_k).
// With 8-bit signed operands b_k*c_k lies in [-16256, 16384] and fits a signed
// 18-bit field, so logic after the DSP splits P back into its two products:
//     lo = P[17:0] read as signed          (= b_k*c_k)
//     hi = P[47:18] + P[17]                 (= a_k*c_k; +P[17] undoes the borrow
//                                            a negative lo took from the top)
// and accumulates each in its own fabric accumulator. Accumulating inside the
// DSP is not possible: nine low products need 19 signed bits and would spill
// into the upper field. This is why the IP is limited to 8-bit operands and
// needs more logic than the single-convolution DSP IP.
//
// Interface: as conv2_dsp, with two windows win_a/win_b and two results
// res_a/res_b that share res_valid. Timing: the DSP's three stages plus the
// accumulator register: CONV3_LATENCY = 4 (if edge n samples the last
// coefficient, res_valid is high after edge n+3). An assertion checks that
// results never come in consecutive cycles.
// One DSP, two parallel convolutions and the 8-bit limit follow the library's
// description; the packing offset, the split-and-accumulate scheme and the
// pipeline are this design's choices.
module conv3_dsp_packed #(
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
  import conv_pkg::PACK_SHIFT;

  localparam int unsigned TAPS  = K * K;
  localparam int unsigned TAP_W = conv_pkg::tap_width(TAPS);
  localparam int unsigned HI_W  = DSP_P_W - PACK_SHIFT;

  if (DATA_W > 8 || COEF_W > 8) begin : g_width_check
    $error("conv3_dsp_packed: operands are limited to 8 bits");
  end

  logic [TAP_W-1:0]          tap;
  logic                      is_last;
  logic [DSP_LATENCY-1:0]    last_pipe, first_pipe;
  logic                      p_valid;
  logic signed [DSP_P_W-1:0] p;
  logic signed [PACK_SHIFT-1:0] lo;
  logic signed [HI_W-1:0]       hi;
  logic signed [ACC_W-1:0]   acc_a, acc_b, acc_a_next, acc_b_next;
  logic                      p_first, p_last;

  assign is_last = (tap == TAP_W'(TAPS - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      tap        <= '0;
      last_pipe  <= '0;
      first_pipe <= '0;
    end else begin
      last_pipe  <= {last_pipe[DSP_LATENCY-2:0],  coef_valid && is_last};
      first_pipe <= {first_pipe[DSP_LATENCY-2:0], coef_valid && (tap == '0)};
      if (coef_valid) tap <= is_last ? '0 : tap + 1'b1;
    end
  end

  dsp_mac u_dsp (
    .clk     (clk),
    .rst     (rst),
    .in_valid(coef_valid),
    .in_first(1'b1),
    .in_acc  (1'b0),
    .a       (DSP_A_W'(win_b[tap])),
    .d       (DSP_A_W'(win_a[tap]) <<< PACK_SHIFT),
    .b       (DSP_B_W'(coef)),
    .p_valid (p_valid),
    .p       (p)
  );

  // Split the packed product into its two fields
  assign p_first = first_pipe[DSP_LATENCY-1];
  assign p_last  = last_pipe[DSP_LATENCY-1];
  assign lo      = p[PACK_SHIFT-1:0];
  assign hi      = p[DSP_P_W-1:PACK_SHIFT] + HI_W'(p[PACK_SHIFT-1]);

  assign acc_a_next = p_first ? ACC_W'(hi) : acc_a + ACC_W'(hi);
  assign acc_b_next = p_first ? ACC_W'(lo) : acc_b + ACC_W'(lo);

  always_ff @(posedge clk) begin
    if (rst) res_valid <= 1'b0;
    else     res_valid <= p_valid && p_last;
    if (p_valid) begin
      acc_a <= acc_a_next;
      acc_b <= acc_b_next;
      if (p_last) begin
        res_a <= acc_a_next;
        res_b <= acc_b_next;
      end
    end
  end

  // A window takes K*K coefficient cycles, so two results are never in
  // consecutive cycles.
  if (TAPS > 1) begin : g_result_spacing
    a_result_spacing: assert property (@(posedge clk) disable iff (rst)
                                       res_valid |=> !res_valid)
      else $error("conv3_dsp_packed: results in consecutive cycles");
  end

endmodule
