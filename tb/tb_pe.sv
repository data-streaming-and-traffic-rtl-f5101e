// tb_pe: feeds random operand streams into one PE and checks every partial
// sum against a reference dot product, the ReLU option, the T_MAC latency
// from the last operand to the result, and back-to-back rounds with a slow
// consumer of the results.
module tb_pe;
  localparam int T_MAC = 5;
  logic clk = 0, rst_n = 0;
  logic [15:0] k_len;
  logic relu_en, in_valid, in_ready, ps_valid, ps_ready;
  logic signed [15:0] in_a, in_w;
  logic signed [31:0] ps;
  int checks = 0, failures = 0;
  int cycle = 0;

  pe #(.T_MAC(T_MAC)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  longint exp_q[$];
  int     last_cycle_q[$];

  // reference model on the accepted operands
  longint acc = 0;
  int     cnt = 0;
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    acc += longint'(in_a) * longint'(in_w);
    cnt++;
    if (cnt == int'(k_len)) begin
      longint r;
      r = (relu_en && acc < 0) ? 0 : acc;
      exp_q.push_back(r);
      last_cycle_q.push_back(cycle);
      acc = 0;
      cnt = 0;
    end
  end

  // result checker
  logic prev_ps_valid = 0;
  int   slow_consumer = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ps_valid && !prev_ps_valid || ps_valid && ps_ready) ; // fallthrough
      if (ps_valid && ps_ready) begin
        longint e;
        checks++;
        e = exp_q.pop_front();
        if (longint'(ps) != e) begin
          failures++;
          $display("FAIL ps=%0d expected %0d", ps, e);
        end
      end
      if (ps_valid && !prev_ps_valid) begin
        int lc;
        lc = last_cycle_q.pop_front();
        checks++;
        if (!slow_consumer && cycle - lc != T_MAC) begin
          failures++;
          $display("FAIL latency %0d expected %0d", cycle - lc, T_MAC);
        end
      end
      prev_ps_valid <= ps_valid && !ps_ready;
    end
  end

  task automatic run_rounds(input int k, input int rounds, input bit relu, input bit gaps);
    k_len = 16'(k);
    relu_en = relu;
    for (int r = 0; r < rounds * k; ) begin
      in_valid <= gaps ? 1'($urandom_range(0, 1)) : 1'b1;
      in_a     <= 16'($urandom_range(0, 65535));
      in_w     <= 16'($urandom_range(0, 65535));
      @(posedge clk);
      if (in_valid && in_ready) r++;
    end
    in_valid <= 1'b0;
    repeat (20) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; in_a = 0; in_w = 0; ps_ready = 1; k_len = 9; relu_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_rounds(9, 4, 0, 0);
    run_rounds(1, 6, 0, 0);
    run_rounds(27, 3, 1, 1);
    // slow consumer: results wait, the PE must hold the next last operand
    slow_consumer = 1;
    fork
      run_rounds(3, 8, 0, 0);
      repeat (200) begin @(posedge clk); ps_ready <= 1'($urandom_range(0, 3) == 0); end
    join
    ps_ready <= 1;
    repeat (30) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
