// tb_dsp_mac -- self-checking testbench of the DSP slice model.
//
// Drives random 27x18-bit operand streams through dsp_mac in three modes
// (product only, accumulate, accumulate with a restart on in_first) with random
// gaps in in_valid, and compares p with a reference computed here in
// 64-bit integers: (a + d) wrapped to 27 bits, times b, then either alone or
// added to the running sum. It also checks that every result appears exactly
// DSP_LATENCY = 3: captured three edges after the edge sampling its operands.
module tb_dsp_mac;
  import conv_pkg::*;

  localparam int unsigned N = 400;

  logic clk = 1'b0;
  logic rst;
  logic in_valid, in_first, in_acc;
  logic signed [DSP_A_W-1:0] a, d;
  logic signed [DSP_B_W-1:0] b;
  logic p_valid;
  logic signed [DSP_P_W-1:0] p;

  int checks = 0, failures = 0;
  int cycle = 0;

  dsp_mac dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // expected-result queue with the cycle at which each result is due
  longint exp_q[$];
  int     due_q[$];
  longint run_sum = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) begin
    if (!rst && p_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected p_valid at cycle %0d", cycle);
      end else begin
        longint e;
        int     due;
        e   = exp_q.pop_front();
        due = due_q.pop_front();
        if (longint'(p) != e || cycle != due) begin
          failures++;
          $display("FAIL: cycle %0d p=%0d expected %0d (due %0d)", cycle, p, e, due);
        end
      end
    end
  end

  function automatic longint wrap27(longint x);
    logic signed [DSP_A_W-1:0] t;
    t = x[DSP_A_W-1:0];
    return longint'(t);
  endfunction

  initial begin
    rst = 1'b1; in_valid = 0; in_first = 0; in_acc = 0; a = '0; d = '0; b = '0;
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;
    for (int mode = 0; mode < 3; mode++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 3) != 0);
        in_acc   = (mode != 0);
        in_first = (i == 0) || (mode == 2 && $urandom_range(0, 7) == 0);
        a = DSP_A_W'($urandom);
        d = (mode == 0) ? DSP_A_W'($urandom) : DSP_A_W'(0);
        b = DSP_B_W'($urandom);
        if (i < 4) begin           // extreme operands
          a = {1'b1, {(DSP_A_W-1){1'b0}}};
          b = {1'b1, {(DSP_B_W-1){1'b0}}};
          d = '0;
        end
        if (in_valid) begin
          longint prod;
          prod = wrap27(longint'(a) + longint'(d)) * longint'(b);
          if (in_acc && !in_first) run_sum = run_sum + prod;
          else                     run_sum = prod;
          // 48-bit wrap of the reference
          run_sum = longint'($signed(run_sum[DSP_P_W-1:0]));
          exp_q.push_back(run_sum);
          due_q.push_back(cycle + DSP_LATENCY);  // checker sees the sampling edge as cycle
        end else if (i == 0) begin
          // make sure the first sample of a mode restarts the sum
          in_valid = 1'b1;
          begin
            longint prod;
            prod = wrap27(longint'(a) + longint'(d)) * longint'(b);
            run_sum = prod;
            exp_q.push_back(run_sum);
            due_q.push_back(cycle + DSP_LATENCY);
          end
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never appeared", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
