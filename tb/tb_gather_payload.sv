// tb_gather_payload: checks the Gather Payload block: the delta timeout
// (hand-back exactly delta+1 cycles after the entry reaches the head), a
// claim by the router followed by the upload pulse, the timer restart when
// a full packet passes, claim winning over a simultaneous timeout, and
// the queue filling up.
module tb_gather_payload;
  import noc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, uploaded, init_valid, init_ready;
  logic rt_valid, rt_commit, rt_done, rt_full_seen;
  logic [31:0] in_data, init_data, rt_data;
  coord_t in_dst, init_dst, rt_dst;
  logic [15:0] delta;
  int checks = 0, failures = 0;

  gather_payload #(.N_PE(1), .Q_DEPTH(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  task automatic push(input logic [31:0] d);
    in_valid <= 1; in_data <= d; in_dst <= '{y: 5'(1), x: 5'(8)};
    @(posedge clk);
    in_valid <= 0;
    #1;
  endtask

  initial begin
    int waited;
    in_valid = 0; init_ready = 0; rt_commit = 0; rt_done = 0; rt_full_seen = 0;
    in_data = 0; in_dst = '0; delta = 16'd5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // 1. timeout: entry at head from the cycle after the push
    push(32'hA1);
    check(rt_valid && rt_data == 32'hA1 && rt_dst.x == 8, "entry offered to router");
    waited = 0;
    while (!init_valid && waited < 50) begin @(posedge clk); #1; waited++; end
    check(waited == 6, $sformatf("timeout after delta+1 cycles (got %0d)", waited));
    check(!rt_valid && init_data == 32'hA1, "handed back, no longer offered");
    init_ready <= 1; @(posedge clk); init_ready <= 0;
    @(posedge clk);
    check(!init_valid && !rt_valid, "entry popped after hand-back");

    // 2. claim, then upload
    push(32'hB2);
    @(posedge clk);
    rt_commit <= 1; @(posedge clk); rt_commit <= 0; #1;
    check(!rt_valid && !init_valid, "claimed entry is not offered again");
    repeat (10) @(posedge clk);
    check(!init_valid, "claimed entry never times out");
    rt_done <= 1; #1; check(uploaded, "upload pulse with rt_done");
    @(posedge clk); rt_done <= 0; #1;
    check(!uploaded && !rt_valid, "entry popped after upload");

    // 3. full packet seen: the timer restarts, hand-back delta+1 cycles later
    delta = 16'd8;
    push(32'hC3);
    repeat (5) @(posedge clk);
    rt_full_seen <= 1; @(posedge clk); rt_full_seen <= 0; #1;
    check(!init_valid, "no immediate hand-back after a full packet");
    waited = 0;
    while (!init_valid && waited < 50) begin @(posedge clk); #1; waited++; end
    check(waited == 9 && init_data == 32'hC3, $sformatf("hand-back delta+1 cycles after the full packet (%0d)", waited));
    init_ready <= 1; @(posedge clk); init_ready <= 0;

    // 4. claim and timeout in the same cycle: claim wins
    delta = 16'd2;
    push(32'hD4);
    @(posedge clk); @(posedge clk);   // timer reaches delta in this cycle
    rt_commit <= 1; @(posedge clk); rt_commit <= 0; #1;
    check(!init_valid, "claim wins over timeout");
    rt_done <= 1; @(posedge clk); rt_done <= 0;

    // 5. queue depth: two entries fit, third waits
    delta = 16'd1000;
    push(32'hE5); push(32'hE6); #1;
    check(!in_ready, "queue full after two entries");
    check(rt_data == 32'hE5, "oldest entry first");
    @(posedge clk);
    rt_commit <= 1; @(posedge clk); rt_commit <= 0; rt_done <= 1; @(posedge clk); rt_done <= 0; #1;
    check(in_ready && rt_data == 32'hE6 && rt_valid, "second entry moves to the head");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
