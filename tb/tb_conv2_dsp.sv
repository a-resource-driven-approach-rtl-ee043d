// tb_conv2_dsp -- self-checking testbench of Conv_2 (single-DSP convolution).
//
// Streams random 5x5 kernels of 10-bit coefficients and 12-bit windows (plus
// all-extreme windows such as full-scale negative values
// on every tap) through conv2_dsp: coefficients serially, one per
// cycle, windows held in parallel. Phase 0 has no gaps in coef_valid; phase 1
// inserts random gaps. Each result is compared with the sum of products computed
// here in plain integers, and must be captured exactly CONV2_LATENCY edges after the
// edge that samples the last coefficient of its window. In the gap-free phase results must be exactly
// K*K cycles apart (one convolution per K*K coefficient cycles).
module tb_conv2_dsp;
  import conv_pkg::*;

  localparam int unsigned K      = 5;   // non-default sizes: the IPs are parameterised
  localparam int unsigned TAPS   = K * K;
  localparam int unsigned DATA_W = 12;
  localparam int unsigned COEF_W = 10;
  localparam int unsigned ACC_W  = acc_width(DATA_W, COEF_W, TAPS);
  localparam int unsigned LAT    = CONV2_LATENCY;
  localparam int unsigned NWIN   = 150;

  logic clk = 1'b0;
  logic rst;
  logic coef_valid;
  logic signed [COEF_W-1:0] coef;
  logic signed [DATA_W-1:0] win [TAPS];
  logic res_valid;
  logic signed [ACC_W-1:0] res;

  int checks = 0, failures = 0;
  int cycle = 0;
  int phase = 0;
  int last_res_cycle = -1;
  int n_res = 0;

  conv2_dsp #(.K(K), .DATA_W(DATA_W), .COEF_W(COEF_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  longint exp_q[$];
  int     due_q[$];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && res_valid) begin
      checks++;
      n_res++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected result at cycle %0d", cycle);
      end else begin
        longint e;
        int     due;
        e   = exp_q.pop_front();
        due = due_q.pop_front();
        if (longint'(res) != e || cycle != due) begin
          failures++;
          $display("FAIL: cycle %0d res=%0d expected %0d due %0d", cycle, res, e, due);
        end
      end
      if (phase == 0 && last_res_cycle >= 0) begin
        checks++;
        if (cycle - last_res_cycle != int'(TAPS)) begin
          failures++;
          $display("FAIL: results %0d cycles apart, expected %0d", cycle - last_res_cycle, TAPS);
        end
      end
      last_res_cycle = cycle;
    end
  end

  initial begin
    logic signed [COEF_W-1:0] kern [TAPS];
    rst = 1'b1; coef_valid = 1'b0; coef = '0;
    foreach (win[k]) win[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(negedge clk);
    for (phase = 0; phase < 2; phase++) begin
      for (int w = 0; w < int'(NWIN); w++) begin
        longint sum;
        sum = 0;
        for (int k = 0; k < int'(TAPS); k++) begin
          case (w % 10)
            0:       begin kern[k] = {1'b1, {(COEF_W-1){1'b0}}}; end
            1:       begin kern[k] = {1'b0, {(COEF_W-1){1'b1}}}; end
            default: kern[k] = COEF_W'($urandom);
          endcase
        end
        for (int k = 0; k < int'(TAPS); k++) begin
          case (w % 10)
            0:       win[k] = {1'b1, {(DATA_W-1){1'b0}}};
            1:       win[k] = {1'b1, {(DATA_W-1){1'b0}}};
            default: win[k] = DATA_W'($urandom);
          endcase
          sum += longint'(win[k]) * longint'(kern[k]);
        end
        for (int k = 0; k < int'(TAPS); k++) begin
          if (phase == 1) begin
            while ($urandom_range(0, 2) == 0) begin
              coef_valid = 1'b0;
              coef       = COEF_W'($urandom);
              @(negedge clk);
            end
          end
          coef_valid = 1'b1;
          coef       = kern[k];
          if (k == int'(TAPS) - 1) begin
            exp_q.push_back(sum);
            due_q.push_back(cycle + int'(LAT));
          end
          @(negedge clk);
        end
        coef_valid = 1'b0;
        if (phase == 0 && w == int'(NWIN) - 1) begin
          repeat (LAT + 2) @(negedge clk);
        end
      end
    end
    coef_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_res != 2 * int'(NWIN)) begin
      failures++;
      $display("FAIL: %0d results, %0d missing", n_res, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
