// tb_stream_unit: fills the memory element, streams a block to three
// destinations modelled as 4-entry queues and checks: the data order, one
// word per cycle when every destination keeps up, that a slow destination
// stalls the whole bus without any queue overflowing, and the done pulse.
module tb_stream_unit;
  localparam int ND = 3, CR = 4, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic wr_en, start, busy, done, stall, bus_valid;
  logic [5:0] wr_addr, base;
  logic [6:0] count;
  logic [15:0] wr_data, bus_data;
  logic [ND-1:0] credit_in;
  int checks = 0, failures = 0;

  stream_unit #(.WORD_W(16), .N_DEST(ND), .DEPTH(DEPTH), .CREDITS(CR)) dut (.*);
  always #5 clk = ~clk;

  logic [15:0] ref_mem [DEPTH];
  int q_len [ND];
  int rate  [ND];     // destination d pops with probability 1/rate
  int exp_addr, got, stall_cycles, sent_cycles, max_q;

  // destinations: queue model, pop randomly, return a credit per pop
  always @(posedge clk) begin
    if (rst_n) begin
      for (int d = 0; d < ND; d++) begin
        automatic bit p = q_len[d] > 0 && $urandom_range(1, rate[d]) == 1;
        credit_in[d] <= p;
        q_len[d] = q_len[d] - (p ? 1 : 0) + (bus_valid ? 1 : 0);
        if (q_len[d] > max_q) max_q = q_len[d];
      end
      if (bus_valid) begin
        checks++;
        if (bus_data !== ref_mem[exp_addr]) begin
          failures++;
          $display("FAIL word %0d = %h expected %h", got, bus_data, ref_mem[exp_addr]);
        end
        exp_addr++;
        got++;
      end
      if (stall) stall_cycles++;
      if (busy && !stall) sent_cycles++;
    end
  end

  task automatic stream(input int b, input int n, output int cycles);
    exp_addr = b; got = 0;
    base <= 6'(b); count <= 7'(n); start <= 1;
    @(posedge clk); start <= 0;
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int cyc;
    wr_en = 0; start = 0; credit_in = 0; base = 0; count = 0; wr_addr = 0; wr_data = 0;
    for (int d = 0; d < ND; d++) begin q_len[d] = 0; rate[d] = 1; end
    max_q = 0; stall_cycles = 0; sent_cycles = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      ref_mem[a] = 16'($urandom);
      wr_en <= 1; wr_addr <= 6'(a); wr_data <= ref_mem[a];
      @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);

    // every destination pops at once: full rate
    stream(5, 20, cyc);
    checks++;
    if (got != 20) begin failures++; $display("FAIL got %0d words", got); end
    checks++;
    // one cycle to take the start pulse, then one word per cycle
    if (cyc != 21) begin failures++; $display("FAIL 20 words took %0d cycles", cyc); end

    // one slow destination: the bus stalls, nothing overflows
    rate[1] = 4;
    stall_cycles = 0;
    stream(30, 30, cyc);
    checks++;
    if (got != 30) begin failures++; $display("FAIL got %0d words", got); end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL no stall with a slow destination"); end
    checks++;
    if (max_q > CR) begin failures++; $display("FAIL queue overflow %0d", max_q); end
    $display("slow-destination run: %0d cycles, %0d stall cycles", cyc, stall_cycles);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
