// tb_conv_ip_library -- end-to-end testbench of the convolution IP library.
//
// Runs conv_ip_library at its default sizes (3x3 kernel, 8-bit data and
// coefficients), so it is also the full-size test. One stimulus feeds all four
// IPs: random kernels streamed serially and two random windows in parallel.
// For every window the testbench computes both sums of products itself and
// checks each IP's results (Conv_1 and Conv_2: window A; Conv_3 and Conv_4:
// windows A and B) and the edge at which each is captured (2, 3, 4, 3 edges
// after the edge sampling the last coefficient).
// It also counts the situations the design has to handle and fails if one never
// occurred: gaps in the coefficient stream, windows back to back without a gap,
// packed products in Conv_3 whose low field is negative (the borrow that the
// field split must undo), full-scale operands (-128 * -128), and a synchronous
// reset in the middle of a window, after which every IP must restart at tap 0.
module tb_conv_ip_library;
  import conv_pkg::*;

  localparam int unsigned K      = K_DEFAULT;
  localparam int unsigned TAPS   = K * K;
  localparam int unsigned DATA_W = DATA_W_DEFAULT;
  localparam int unsigned COEF_W = COEF_W_DEFAULT;
  localparam int unsigned ACC_W  = acc_width(DATA_W, COEF_W, TAPS);
  localparam int unsigned NWIN   = 400;

  logic clk = 1'b0;
  logic rst;
  logic coef_valid;
  logic signed [COEF_W-1:0] coef;
  logic signed [DATA_W-1:0] win_a [TAPS];
  logic signed [DATA_W-1:0] win_b [TAPS];
  logic c1_valid, c2_valid, c3_valid, c4_valid;
  logic signed [ACC_W-1:0] c1_res, c2_res, c3_res_a, c3_res_b, c4_res_a, c4_res_b;

  conv_ip_library dut (.*);

  int checks = 0, failures = 0;
  int cycle = 0;
  // mechanism counters
  int n_gap = 0, n_b2b = 0, n_borrow = 0, n_fullscale = 0, n_midreset = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // one expected-result queue per IP: {sum_a, sum_b, due cycle}
  typedef struct {
    longint a;
    longint b;
    int     due;
  } exp_t;
  exp_t q [4][$];
  int   n_res [4];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_ip(int ip, logic signed [ACC_W-1:0] ra, logic signed [ACC_W-1:0] rb,
                          bit dual);
    exp_t e;
    checks++;
    n_res[ip]++;
    if (q[ip].size() == 0) begin
      failures++;
      $display("FAIL: Conv_%0d unexpected result at cycle %0d", ip + 1, cycle);
      return;
    end
    e = q[ip].pop_front();
    if (longint'(ra) != e.a || (dual && longint'(rb) != e.b) || cycle != e.due) begin
      failures++;
      $display("FAIL: Conv_%0d cycle %0d got %0d/%0d expected %0d/%0d due %0d",
               ip + 1, cycle, ra, rb, e.a, e.b, e.due);
    end
  endtask

  always @(posedge clk) begin
    if (!rst) begin
      if (c1_valid) check_ip(0, c1_res,   c1_res,   1'b0);
      if (c2_valid) check_ip(1, c2_res,   c2_res,   1'b0);
      if (c3_valid) check_ip(2, c3_res_a, c3_res_b, 1'b1);
      if (c4_valid) check_ip(3, c4_res_a, c4_res_b, 1'b1);
    end
  end

  function automatic logic signed [DATA_W-1:0] rand_data(int mode);
    if (mode == 0) return {1'b1, {(DATA_W-1){1'b0}}};
    return DATA_W'($urandom);
  endfunction

  initial begin
    logic signed [COEF_W-1:0] kern [TAPS];
    bit gaps, prev_gap;
    int lat [4];
    lat[0] = CONV1_LATENCY; lat[1] = CONV2_LATENCY;
    lat[2] = CONV3_LATENCY; lat[3] = CONV4_LATENCY;
    rst = 1'b1; coef_valid = 1'b0; coef = '0;
    foreach (win_a[k]) begin win_a[k] = '0; win_b[k] = '0; end
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(negedge clk);
    prev_gap = 1'b1;
    for (int w = 0; w < int'(NWIN); w++) begin
      longint sa, sb;
      bit fullscale;
      int mode;
      sa = 0; sb = 0;
      mode = (w % 16 == 3) ? 0 : 1;
      fullscale = (mode == 0);
      gaps = (w % 4 == 2);            // a quarter of the windows arrive with gaps
      for (int k = 0; k < int'(TAPS); k++) begin
        kern[k]  = fullscale ? {1'b1, {(COEF_W-1){1'b0}}} : COEF_W'($urandom);
        win_a[k] = rand_data(mode);
        win_b[k] = rand_data(mode);
        sa += longint'(win_a[k]) * longint'(kern[k]);
        sb += longint'(win_b[k]) * longint'(kern[k]);
        if (longint'(win_b[k]) * longint'(kern[k]) < 0) n_borrow++;
      end
      if (fullscale) n_fullscale++;
      if (!prev_gap && !gaps) n_b2b++;
      // a reset in the middle of a window: the partial window is dropped
      if (w % 50 == 25) begin
        for (int k = 0; k < 4; k++) begin
          coef_valid = 1'b1;
          coef       = kern[k];
          @(negedge clk);
        end
        coef_valid = 1'b0;
        rst = 1'b1;
        @(negedge clk);
        rst = 1'b0;
        // results still in flight from the previous window are lost with the reset
        for (int ip = 0; ip < 4; ip++) q[ip].delete();
        repeat (6) @(negedge clk);
        n_midreset++;
      end
      for (int k = 0; k < int'(TAPS); k++) begin
        if (gaps) begin
          while ($urandom_range(0, 1) == 0) begin
            coef_valid = 1'b0;
            coef       = COEF_W'($urandom);
            n_gap++;
            @(negedge clk);
          end
        end
        coef_valid = 1'b1;
        coef       = kern[k];
        if (k == int'(TAPS) - 1) begin
          for (int ip = 0; ip < 4; ip++) begin
            exp_t e;
            e.a   = sa;
            e.b   = sb;
            e.due = cycle + lat[ip];
            q[ip].push_back(e);
          end
        end
        @(negedge clk);
      end
      coef_valid = 1'b0;
      prev_gap   = gaps;
      if (w % 50 == 24) begin
        repeat (8) @(negedge clk);    // drain before the reset that follows
      end
    end
    coef_valid = 1'b0;
    repeat (10) @(posedge clk);
    for (int ip = 0; ip < 4; ip++) begin
      checks++;
      if (q[ip].size() != 0) begin
        failures++;
        $display("FAIL: Conv_%0d has %0d results missing", ip + 1, q[ip].size());
      end
    end
    $display("mechanisms: gap cycles %0d, back-to-back windows %0d, negative low fields %0d, full-scale windows %0d, mid-window resets %0d",
             n_gap, n_b2b, n_borrow, n_fullscale, n_midreset);
    $display("results: Conv_1 %0d, Conv_2 %0d, Conv_3 %0d, Conv_4 %0d",
             n_res[0], n_res[1], n_res[2], n_res[3]);
    checks++; if (n_gap == 0)       begin failures++; $display("FAIL: no coefficient gaps"); end
    checks++; if (n_b2b == 0)       begin failures++; $display("FAIL: no back-to-back windows"); end
    checks++; if (n_borrow == 0)    begin failures++; $display("FAIL: no negative low fields"); end
    checks++; if (n_fullscale == 0) begin failures++; $display("FAIL: no full-scale windows"); end
    checks++; if (n_midreset == 0)  begin failures++; $display("FAIL: no mid-window reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
