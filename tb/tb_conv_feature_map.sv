// tb_conv_feature_map -- workload test: one 3x3 convolution layer over an image.
//
// Convolves a random 16x16 image of 8-bit signed pixels with a random 3x3 kernel
// of 8-bit coefficients (stride 1, no padding, 14x14 output feature map) using
// conv_ip_library at its default sizes, and checks the complete feature map of
// every IP against one computed here.
//   Pass 1 slides over the image two output pixels at a time: win_a is the
//   window of output (y, x), win_b that of (y, x+1). Conv_3 and Conv_4 compute
//   both, so they finish the whole map in this pass; Conv_1 and Conv_2, which
//   take only win_a, compute the even columns.
//   Pass 2 presents the odd-column windows on win_a, completing the map for
//   Conv_1 and Conv_2 (Conv_3 and Conv_4 also compute in this pass; their
//   results are not needed and are dropped).
// The kernel is replayed from the testbench for every window, as the IPs keep
// no copy of it. The testbench also checks the throughput: the two-convolution
// IPs complete the 196-pixel map in 98 windows of 9 coefficient cycles, half the
// coefficient cycles the one-convolution IPs need.
module tb_conv_feature_map;
  import conv_pkg::*;

  localparam int unsigned K      = K_DEFAULT;
  localparam int unsigned TAPS   = K * K;
  localparam int unsigned DATA_W = DATA_W_DEFAULT;
  localparam int unsigned COEF_W = COEF_W_DEFAULT;
  localparam int unsigned ACC_W  = acc_width(DATA_W, COEF_W, TAPS);
  localparam int          IMG    = 16;
  localparam int          OUT    = IMG - int'(K) + 1;

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

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  logic signed [DATA_W-1:0] img  [IMG][IMG];
  logic signed [COEF_W-1:0] kern [TAPS];
  longint ref_map [OUT][OUT];
  longint map [4][OUT][OUT];        // feature map produced by each IP
  bit     done [4][OUT][OUT];
  int     pos_q [4][$];             // y*OUT+x of the results each IP owes
  int     coef_cycles [2];          // coefficient cycles spent in each pass

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Store a result (and, for the two-window IPs, its right-hand neighbour) at
  // the position the IP owes next; a negative position marks a result the
  // feature map does not use.
  task automatic store(int ip, logic signed [ACC_W-1:0] ra, logic signed [ACC_W-1:0] rb,
                       bit dual);
    int pos, y, x;
    if (pos_q[ip].size() == 0) begin
      failures++;
      $display("FAIL: Conv_%0d produced an unexpected result", ip + 1);
      return;
    end
    pos = pos_q[ip].pop_front();
    if (pos < 0) return;
    y = pos / OUT;
    x = pos % OUT;
    map[ip][y][x]  = longint'(ra);
    done[ip][y][x] = 1'b1;
    if (dual) begin
      map[ip][y][x+1]  = longint'(rb);
      done[ip][y][x+1] = 1'b1;
    end
  endtask

  always @(posedge clk) begin
    if (!rst) begin
      if (c1_valid) store(0, c1_res,   c1_res,   1'b0);
      if (c2_valid) store(1, c2_res,   c2_res,   1'b0);
      if (c3_valid) store(2, c3_res_a, c3_res_b, 1'b1);
      if (c4_valid) store(3, c4_res_a, c4_res_b, 1'b1);
    end
  end

  // Present the window of output (y, x) on one of the two window inputs
  task automatic load_window(int y, int x, bit on_b);
    for (int i = 0; i < int'(K); i++)
      for (int j = 0; j < int'(K); j++)
        if (on_b) win_b[i*int'(K)+j] = img[y+i][x+j];
        else      win_a[i*int'(K)+j] = img[y+i][x+j];
  endtask

  task automatic stream_kernel(int pass);
    for (int k = 0; k < int'(TAPS); k++) begin
      coef_valid = 1'b1;
      coef       = kern[k];
      coef_cycles[pass]++;
      @(negedge clk);
    end
    coef_valid = 1'b0;
  endtask

  initial begin
      for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) img[y][x] = DATA_W'($urandom);
    foreach (kern[k]) kern[k] = COEF_W'($urandom);
    for (int y = 0; y < OUT; y++)
      for (int x = 0; x < OUT; x++) begin
        ref_map[y][x] = 0;
        for (int i = 0; i < int'(K); i++)
          for (int j = 0; j < int'(K); j++)
            ref_map[y][x] += longint'(img[y+i][x+j]) * longint'(kern[i*int'(K)+j]);
      end
    foreach (done[ip, y, x]) done[ip][y][x] = 1'b0;
    coef_cycles[0] = 0;
    coef_cycles[1] = 0;

    rst = 1'b1; coef_valid = 1'b0; coef = '0;
    foreach (win_a[k]) begin win_a[k] = '0; win_b[k] = '0; end
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    @(negedge clk);

    // Pass 1: pairs of neighbouring outputs
    for (int y = 0; y < OUT; y++)
      for (int x = 0; x < OUT; x += 2) begin
        load_window(y, x, 1'b0);
        load_window(y, x + 1, 1'b1);
        for (int ip = 0; ip < 4; ip++) pos_q[ip].push_back(y * OUT + x);
        stream_kernel(0);
      end
    repeat (8) @(negedge clk);

    // Pass 2: odd columns for the single-window IPs
    for (int y = 0; y < OUT; y++)
      for (int x = 1; x < OUT; x += 2) begin
        load_window(y, x, 1'b0);
        for (int ip = 0; ip < 2; ip++) pos_q[ip].push_back(y * OUT + x);
        for (int ip = 2; ip < 4; ip++) pos_q[ip].push_back(-1);   // not needed
        stream_kernel(1);
      end
    repeat (8) @(negedge clk);

    // Compare the four feature maps with the reference
    for (int ip = 0; ip < 4; ip++) begin
      int bad = 0;
      for (int y = 0; y < OUT; y++)
        for (int x = 0; x < OUT; x++) begin
          checks++;
          if (!done[ip][y][x] || map[ip][y][x] != ref_map[y][x]) begin
            failures++;
            bad++;
            if (bad <= 3)
              $display("FAIL: Conv_%0d output (%0d,%0d) = %0d, expected %0d%s", ip + 1, y, x,
                       map[ip][y][x], ref_map[y][x], done[ip][y][x] ? "" : " (missing)");
          end
        end
      $display("Conv_%0d: %0d of %0d feature-map pixels correct", ip + 1, OUT * OUT - bad, OUT * OUT);
    end

    // Throughput: the two-convolution IPs need only the pass-1 coefficient cycles
    $display("coefficient cycles: two-convolution IPs %0d, one-convolution IPs %0d",
             coef_cycles[0], coef_cycles[0] + coef_cycles[1]);
    checks++;
    if (coef_cycles[0] != OUT * OUT / 2 * int'(TAPS) ||
        coef_cycles[0] + coef_cycles[1] != OUT * OUT * int'(TAPS)) begin
      failures++;
      $display("FAIL: unexpected coefficient-cycle counts");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
