// tb_conv3_dsp_packed -- self-checking testbench of Conv_3 (two convolutions on one DSP).
//
// Streams random 3x3 kernels and two 8-bit windows A and B (plus extreme windows:
// -128 * -128 on every tap, and B products of mixed sign, which exercise the
// borrow correction between the two packed fields) through conv3_dsp_packed:
// coefficients serially, one per cycle, windows held in parallel. Phase 0 has no gaps in coef_valid; phase 1
// inserts random gaps. Each result is compared with the sum of products computed
// here in plain integers, and must be captured exactly CONV3_LATENCY edges after the
// edge that samples the last coefficient of its window. In the gap-free phase results must be exactly
// K*K cycles apart (one convolution per K*K coefficient cycles).
module tb_conv3_dsp_packed;
  import conv_pkg::*;

  localparam int unsigned K      = 3;
  localparam int unsigned TAPS   = K * K;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned COEF_W = 8;
  localparam int unsigned ACC_W  = acc_width(DATA_W, COEF_W, TAPS);
  localparam int unsigned LAT    = CONV3_LATENCY;
  localparam int unsigned NWIN   = 150;

  logic clk = 1'b0;
  logic rst;
  logic coef_valid;
  logic signed [COEF_W-1:0] coef;
  logic signed [DATA_W-1:0] win_a [TAPS];
  logic signed [DATA_W-1:0] win_b [TAPS];
  logic res_valid;
  logic signed [ACC_W-1:0] res_a, res_b;

  int checks = 0, failures = 0;
  int cycle = 0;
  int phase = 0;
  int last_res_cycle = -1;
  int n_res = 0;

  conv3_dsp_packed #(.K(K), .DATA_W(DATA_W), .COEF_W(COEF_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  longint exp_q[$];
  longint expb_q[$];
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
        longint e, eb;
        int     due;
        e   = exp_q.pop_front();
        eb  = expb_q.pop_front();
        due = due_q.pop_front();
        if (longint'(res_a) != e || longint'(res_b) != eb || cycle != due) begin
          failures++;
          $display("FAIL: cycle %0d res=%0d/%0d expected %0d/%0d due %0d",
                   cycle, res_a, res_b, e, eb, due);
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
    foreach (win_a[k]) win_a[k] = '0;
    foreach (win_b[k]) win_b[k] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(negedge clk);
    for (phase = 0; phase < 2; phase++) begin
      for (int w = 0; w < int'(NWIN); w++) begin
        longint sum, sumb;
        sum = 0;
        sumb = 0;
        for (int k = 0; k < int'(TAPS); k++) begin
          case (w % 10)
            0:       begin kern[k] = {1'b1, {(COEF_W-1){1'b0}}}; end
            1:       begin kern[k] = {1'b0, {(COEF_W-1){1'b1}}}; end
            default: kern[k] = COEF_W'($urandom);
          endcase
        end
        for (int k = 0; k < int'(TAPS); k++) begin
          case (w % 10)
            0:       begin win_a[k] = {1'b1, {(DATA_W-1){1'b0}}}; win_b[k] = {1'b1, {(DATA_W-1){1'b0}}}; end
            1:       begin win_a[k] = {1'b1, {(DATA_W-1){1'b0}}}; win_b[k] = {1'b0, {(DATA_W-1){1'b1}}}; end
            2:       begin win_a[k] = {1'b0, {(DATA_W-1){1'b1}}}; win_b[k] = (k % 2 == 0) ? DATA_W'(-1) : DATA_W'(1); end
            default: begin win_a[k] = DATA_W'($urandom); win_b[k] = DATA_W'($urandom); end
          endcase
          sum  += longint'(win_a[k]) * longint'(kern[k]);
          sumb += longint'(win_b[k]) * longint'(kern[k]);
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
            expb_q.push_back(sumb);
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
