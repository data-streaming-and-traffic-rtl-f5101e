// tb_ni: network interface with two PEs per router (N_PE = 2, 5-flit gather
// packets). Checks: stream words reach the PEs in order, activation i to
// PE i and the weight to both, only when both queues hold a word, with one
// credit returned per word; partial sums become one gather payload entry;
// a handed-back entry becomes a correctly formed gather packet (header
// fields, payload in the first slots, zeros elsewhere, tail flit) injected
// on a single VC without exceeding the router's credits; ejected flits are
// delivered and credited.
module tb_ni;
  import noc_pkg::*;
  localparam int N_PE = 2, GF = 2 * N_PE + 1, CAP = (GF - 1) * SLOTS;
  logic clk = 0, rst_n = 0;
  coord_t my_xy, gather_dst, gp_dst, init_dst;
  logic act_valid, act_credit, wgt_valid, wgt_credit;
  logic [31:0] act_data;
  logic [15:0] wgt_data, pe_wgt;
  logic pe_valid, pe_ready, ps_ready, gp_valid, gp_ready, init_valid, init_ready;
  logic [31:0] pe_act;
  logic [1:0] ps_valid;
  logic [63:0] ps_data, gp_data, init_data;
  flit_t inj_flit, ej_flit, rx_flit;
  logic [NUM_VC-1:0] inj_credit, ej_credit;
  logic rx_valid, rx_ready;
  int checks = 0, failures = 0;

  ni #(.N_PE(N_PE), .GATHER_FLITS(GF)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s @%0t", msg, $time); end
  endtask

  // stream side model with credits (4 per bus)
  int act_cred = 4, wgt_cred = 4, act_sent = 0, wgt_sent = 0, credits_back = 0;
  logic [31:0] act_ref [$];
  logic [15:0] wgt_ref [$];
  int n_stream = 0;
  always @(posedge clk) if (rst_n) begin
    act_cred += int'(act_credit);
    wgt_cred += int'(wgt_credit);
    credits_back += int'(act_credit);
    act_valid <= 0; wgt_valid <= 0;
    if (act_sent < n_stream && act_cred > 0 && $urandom_range(0, 1)) begin
      logic [31:0] d = $urandom;
      act_valid <= 1; act_data <= d; act_ref.push_back(d); act_cred--; act_sent++;
    end
    if (wgt_sent < n_stream && wgt_cred > 0 && $urandom_range(0, 2) == 0) begin
      logic [15:0] d = 16'($urandom);
      wgt_valid <= 1; wgt_data <= d; wgt_ref.push_back(d); wgt_cred--; wgt_sent++;
    end
  end

  // PE model: random ready, check every accepted pair
  int fed = 0;
  always @(posedge clk) if (rst_n) begin
    if (pe_valid && pe_ready) begin
      logic [31:0] a; logic [15:0] w;
      a = act_ref.pop_front(); w = wgt_ref.pop_front();
      check(pe_act == a && pe_wgt == w, "PE operands in order");
      fed++;
    end
    pe_ready <= 1'($urandom_range(0, 1));
  end

  // router local input model: credits returned 0..3 cycles later
  int rcred [NUM_VC];
  int rq [NUM_VC][$];
  int cyc = 0;
  flit_t injected [$];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int v = 0; v < NUM_VC; v++) begin
      inj_credit[v] <= 0;
      if (rq[v].size() > 0 && rq[v][0] <= cyc) begin inj_credit[v] <= 1; void'(rq[v].pop_front()); end
    end
    if (inj_flit.valid) begin
      rcred[inj_flit.vc]--;
      check(rcred[inj_flit.vc] >= 0, "router credits respected");
      rq[inj_flit.vc].push_back(cyc + $urandom_range(1, 4));
      injected.push_back(inj_flit);
    end
    for (int v = 0; v < NUM_VC; v++) if (inj_credit[v]) rcred[v]++;
  end

  initial begin
    hdr_t h;
    int ej_cr_cnt;
    my_xy = '{y: COORD_W'(3), x: COORD_W'(1)};
    gather_dst = '{y: COORD_W'(3), x: COORD_W'(8)};
    act_valid = 0; wgt_valid = 0; act_data = 0; wgt_data = 0; pe_ready = 0;
    ps_valid = 0; ps_data = 0; gp_ready = 0; init_valid = 0; init_data = 0; init_dst = '0;
    inj_credit = 0; ej_flit = '0; rx_ready = 1;
    for (int v = 0; v < NUM_VC; v++) rcred[v] = 4;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // streams
    n_stream = 40;
    repeat (400) @(posedge clk);
    check(fed == 40, $sformatf("all 40 stream words fed (%0d)", fed));
    check(credits_back == 40, "one credit per word");

    // partial sums -> gather payload
    ps_valid <= 2'b01; ps_data <= {32'h2222, 32'h1111}; gp_ready <= 1;
    @(posedge clk); #1;
    check(!gp_valid, "no payload until every PE has a sum");
    ps_valid <= 2'b11;
    @(posedge clk); #1;
    check(gp_valid && gp_data == {32'h2222, 32'h1111} && gp_dst == gather_dst && ps_ready,
          "payload entry formed from both sums");
    ps_valid <= 0;

    // own gather packet, twice, with random credit return
    for (int k = 0; k < 2; k++) begin
      injected.delete();
      @(posedge clk);
      init_valid <= 1; init_data <= {32'hBBBB0000 + 32'(k), 32'hAAAA0000 + 32'(k)}; init_dst <= gather_dst;
      @(posedge clk);
      while (!init_ready) @(posedge clk);
      init_valid <= 0;
      repeat (40) @(posedge clk);
      check(injected.size() == GF, $sformatf("packet of %0d flits (%0d)", GF, injected.size()));
      if (injected.size() == GF) begin
        h = hdr_t'(injected[0].data);
        check(injected[0].ft == FT_HEAD && h.pt == PT_GATHER && h.aspace == ASPACE_W'(CAP - N_PE)
              && h.src == my_xy && h.dst == gather_dst, "gather header fields");
        check(injected[1].ft == FT_BODY && injected[1].data == {64'h0, 32'hBBBB0000 + 32'(k), 32'hAAAA0000 + 32'(k)},
              "own payload in the first slots");
        check(injected[GF-1].ft == FT_TAIL && injected[GF-1].data == '0, "tail flit, empty");
        for (int i = 1; i < GF; i++) check(injected[i].vc == injected[0].vc, "one VC per packet");
      end
    end

    // ejection
    ej_cr_cnt = 0;
    fork
      repeat (6) @(posedge clk) ej_cr_cnt += $countones(ej_credit);
      begin
        ej_flit <= '{valid: 1, ft: FT_HEAD, vc: 1'b1, data: 128'h55};
        @(posedge clk); #1;
        check(rx_valid && rx_flit.data == 128'h55, "ejected flit delivered");
        ej_flit <= '0;
      end
    join
    check(ej_cr_cnt == 1, "ejected flit credited");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
