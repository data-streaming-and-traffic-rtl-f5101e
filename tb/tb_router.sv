// tb_router: one router at (x=2, y=2) with traffic sources on all five
// input ports and credit-returning sinks on all five outputs.
// Checks: the head-flit latency through an idle router (4 router cycles +
// 1 link cycle), XY routing to every output, random unicast traffic from all
// inputs with random credit return (every packet arrives once, whole, in
// order, on one VC, at the XY output), and gather support: a payload
// written into a passing gather packet at the first free slot with ASpace
// decremented, a full packet passed unchanged and reported (the payload
// keeps waiting for its timeout),
// a packet for another destination ignored, and the delta timeout.
module tb_router;
  import noc_pkg::*;
  localparam int MX = 2, MY = 2, GF = 3, CAP = (GF - 1) * SLOTS;
  logic clk = 0, rst_n = 0;
  coord_t my_xy;
  flit_t [NPORTS-1:0] in_flit, out_flit;
  logic [NPORTS-1:0][NUM_VC-1:0] in_credit, out_credit;
  logic gp_in_valid, gp_in_ready, gp_uploaded, gp_init_valid, gp_init_ready, gp_full_seen;
  int n_full_seen = 0;
  logic [31:0] gp_in_data, gp_init_data;
  coord_t gp_in_dst, gp_init_dst;
  logic [15:0] delta;
  int checks = 0, failures = 0, cycle = 0;

  router #(.N_PE(1), .GATHER_FLITS(GF)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin cycle++; if (gp_full_seen) n_full_seen++; end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (cycle %0d)", msg, cycle); end
  endtask

  function automatic int xy_port(input int dx, input int dy);
    if (dx > MX) return P_E;
    if (dx < MX) return P_W;
    if (dy > MY) return P_S;
    if (dy < MY) return P_N;
    return P_L;
  endfunction

  // ---------------- sources ----------------
  typedef struct { flit_t f[$]; } pkt_t;
  flit_t src_q [NPORTS][$];          // flits to send, per input port
  int    src_cred [NPORTS][NUM_VC];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        for (int v = 0; v < NUM_VC; v++) src_cred[p][v] += int'(in_credit[p][v]);
        in_flit[p] <= '0;
        if (src_q[p].size() > 0 && src_cred[p][src_q[p][0].vc] > 0) begin
          in_flit[p] <= src_q[p][0];
          src_cred[p][src_q[p][0].vc]--;
          void'(src_q[p].pop_front());
        end
      end
    end
  end

  // ---------------- sinks ----------------
  int   sink_delay_max = 0;
  int   cr_pending [NPORTS][NUM_VC][$];   // cycles at which to return a credit
  flit_t got [NPORTS][$];
  int   head_seen_cycle [NPORTS];

  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        for (int v = 0; v < NUM_VC; v++) begin
          out_credit[p][v] <= 1'b0;
          if (cr_pending[p][v].size() > 0 && cr_pending[p][v][0] <= cycle) begin
            out_credit[p][v] <= 1'b1;
            void'(cr_pending[p][v].pop_front());
          end
        end
        if (out_flit[p].valid) begin
          got[p].push_back(out_flit[p]);
          cr_pending[p][out_flit[p].vc].push_back(cycle + $urandom_range(0, sink_delay_max));
        end
      end
    end
  end

  // time stamp in the middle of the cycle in which a head flit is on a link
  always @(negedge clk)
    for (int p = 0; p < NPORTS; p++)
      if (out_flit[p].valid && out_flit[p].ft == FT_HEAD) head_seen_cycle[p] = cycle;

  // ---------------- packet builders ----------------
  function automatic int hdr_rsv(input logic [FLIT_W-1:0] d);
    hdr_t h = hdr_t'(d);
    return int'(h.rsv);
  endfunction
  function automatic logic [ASPACE_W-1:0] hdr_aspace(input logic [FLIT_W-1:0] d);
    hdr_t h = hdr_t'(d);
    return h.aspace;
  endfunction
  function automatic flit_t head(input pt_e pt, input int dx, input int dy, input int aspace,
                                 input int id, input int vc);
    hdr_t h; flit_t f;
    h = '0; h.pt = pt; h.dst = '{y: COORD_W'(dy), x: COORD_W'(dx)}; h.aspace = ASPACE_W'(aspace);
    h.src = '{y: COORD_W'(7), x: COORD_W'(0)}; h.rsv = RSV_W'(id);
    f.valid = 1; f.ft = FT_HEAD; f.vc = VC_W'(vc); f.data = FLIT_W'(h);
    return f;
  endfunction
  function automatic flit_t body(input ft_e ft, input int vc, input logic [FLIT_W-1:0] d);
    flit_t f;
    f.valid = 1; f.ft = ft; f.vc = VC_W'(vc); f.data = d;
    return f;
  endfunction
  function automatic logic [FLIT_W-1:0] pat(input int id, input int k);
    return {4{32'(id * 16 + k)}};
  endfunction

  task automatic wait_idle(input int n);
    repeat (n) @(posedge clk);
  endtask

  // ---------------- tests ----------------
  initial begin
    int expect_port [int];
    int pkt_count, t0;
    for (int p = 0; p < NPORTS; p++) for (int v = 0; v < NUM_VC; v++) src_cred[p][v] = 4;
    my_xy = '{y: COORD_W'(MY), x: COORD_W'(MX)};
    in_flit = '0; out_credit = '0;
    gp_in_valid = 0; gp_in_data = 0; gp_in_dst = '0; gp_init_ready = 0; delta = 16'd1000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // 1. latency through an idle router
    src_q[P_W].push_back(head(PT_UNICAST, 5, 2, 0, 1, 0));
    src_q[P_W].push_back(body(FT_TAIL, 0, pat(1, 0)));
    @(negedge clk);
    while (!in_flit[P_W].valid) @(negedge clk);
    t0 = cycle;                   // cycle in which the head flit is on the input link
    wait_idle(15);
    check(got[P_E].size() == 2, "unicast packet leaves on E");
    check(head_seen_cycle[P_E] - t0 == 5, $sformatf("head latency %0d, expected 5 (4 stages + link)", head_seen_cycle[P_E] - t0));
    got[P_E].delete();

    // 2. XY routing to every output
    begin
      int dsts [5][2] = '{'{2, 0}, '{6, 0}, '{2, 5}, '{0, 4}, '{2, 2}};
      int exp_p [5] = '{P_N, P_E, P_S, P_W, P_L};
      for (int k = 0; k < 5; k++) begin
        src_q[P_L == k ? P_N : P_L].push_back(head(PT_UNICAST, dsts[k][0], dsts[k][1], 0, 10 + k, 1));
        src_q[P_L == k ? P_N : P_L].push_back(body(FT_TAIL, 1, pat(10 + k, 0)));
        wait_idle(12);
        check(got[exp_p[k]].size() == 2 && got[exp_p[k]][1].data == pat(10 + k, 0),
              $sformatf("route to (%0d,%0d) on port %0d", dsts[k][0], dsts[k][1], exp_p[k]));
        for (int p = 0; p < NPORTS; p++) got[p].delete();
      end
    end

    // 3. random unicast traffic from every input, slow sinks
    sink_delay_max = 3;
    pkt_count = 0;
    for (int n = 0; n < 300; n++) begin
      int p, dx, dy, vc, len, id;
      p = $urandom_range(0, NPORTS - 1);
      // keep XY-legal turns: a packet entering from N/S keeps going in y
      dx = (p == P_N || p == P_S) ? MX : $urandom_range(0, 5);
      dy = $urandom_range(0, 5);
      if (p == P_N && dx == MX && dy < MY) dy = MY + 1;
      if (p == P_S && dx == MX && dy > MY) dy = MY - 1;
      if (p == P_W && dx < MX) dx = MX + 1;
      if (p == P_E && dx > MX) dx = MX - 1;
      if (p != P_L && dx == MX && dy == MY) dy = (p == P_N) ? MY + 1 : MY - 1;
      if (p == P_N && dx == MX && dy == MY - 1) dy = MY + 1;
      vc = $urandom_range(0, 1);
      len = $urandom_range(2, 5);
      id = 100 + n;
      expect_port[id] = xy_port(dx, dy);
      src_q[p].push_back(head(PT_UNICAST, dx, dy, 0, id, vc));
      for (int k = 1; k < len; k++)
        src_q[p].push_back(body(k == len - 1 ? FT_TAIL : FT_BODY, vc, pat(id, k)));
      pkt_count++;
    end
    wait_idle(3000);
    begin
      int seen = 0;
      for (int p = 0; p < NPORTS; p++) begin
        int   cur_id [NUM_VC];
        int   k_exp  [NUM_VC];
        for (int v = 0; v < NUM_VC; v++) cur_id[v] = -1;
        foreach (got[p][i]) begin
          flit_t f;
          int v, id;
          f = got[p][i];
          v = int'(f.vc);
          if (f.ft == FT_HEAD) begin
            id = hdr_rsv(f.data);
            check(cur_id[v] == -1, "head only after previous tail on this VC");
            check(expect_port.exists(id) && expect_port[id] == p,
                  $sformatf("packet %0d on port %0d", id, p));
            cur_id[v] = id; k_exp[v] = 1;
            if (expect_port.exists(id)) expect_port.delete(id);
            seen++;
          end else begin
            check(cur_id[v] != -1 && f.data == pat(cur_id[v], k_exp[v]), "body flit data and order");
            k_exp[v]++;
            if (f.ft == FT_TAIL) cur_id[v] = -1;
          end
        end
        got[p].delete();
      end
      check(seen == pkt_count && expect_port.size() == 0,
            $sformatf("%0d of %0d packets delivered", seen, pkt_count));
    end
    sink_delay_max = 0;

    // 4. gather packet picks up the payload
    gp_in_valid <= 1; gp_in_data <= 32'hCAFE0001; gp_in_dst <= '{y: COORD_W'(2), x: COORD_W'(8)};
    @(posedge clk); gp_in_valid <= 0;
    wait_idle(3);
    src_q[P_W].push_back(head(PT_GATHER, 8, 2, CAP - 3, 500, 0));     // 3 slots used
    src_q[P_W].push_back(body(FT_BODY, 0, {32'h0, 32'h13, 32'h12, 32'h11}));
    src_q[P_W].push_back(body(FT_TAIL, 0, '0));
    fork
      begin : watch_up
        int w = 0;
        while (!gp_uploaded && w < 40) begin @(posedge clk); w++; end
        check(gp_uploaded, "upload reported");
      end
    join
    wait_idle(12);
    check(got[P_E].size() == 3, "gather packet forwarded east");
    if (got[P_E].size() == 3) begin
      check(hdr_aspace(got[P_E][0].data) == ASPACE_W'(CAP - 4), "ASpace decremented by one payload");
      check(got[P_E][1].data == {32'hCAFE0001, 32'h13, 32'h12, 32'h11}, "payload in first free slot");
      check(got[P_E][2].data == '0, "tail untouched");
    end
    check(!gp_init_valid, "no own packet after upload");
    got[P_E].delete();

    // 5. payload in slot 1 of the second body flit (5 used)
    gp_in_valid <= 1; gp_in_data <= 32'hCAFE0002;
    @(posedge clk); gp_in_valid <= 0;
    wait_idle(2);
    src_q[P_W].push_back(head(PT_GATHER, 8, 2, CAP - 5, 501, 1));
    src_q[P_W].push_back(body(FT_BODY, 1, {32'h14, 32'h13, 32'h12, 32'h11}));
    src_q[P_W].push_back(body(FT_TAIL, 1, {32'h0, 32'h0, 32'h0, 32'h15}));
    wait_idle(15);
    check(got[P_E].size() == 3 && got[P_E][2].data == {32'h0, 32'h0, 32'hCAFE0002, 32'h15},
          "payload in the tail flit slot 1");
    got[P_E].delete();

    // 6. packet to another destination is ignored, full packet is handed back
    gp_in_valid <= 1; gp_in_data <= 32'hCAFE0003;
    @(posedge clk); gp_in_valid <= 0;
    wait_idle(2);
    src_q[P_W].push_back(head(PT_GATHER, 8, 3, CAP - 1, 502, 0));     // row 3: other destination
    src_q[P_W].push_back(body(FT_BODY, 0, '0));
    src_q[P_W].push_back(body(FT_TAIL, 0, '0));
    wait_idle(15);
    check(got[P_E].size() == 3 && hdr_aspace(got[P_E][0].data) == ASPACE_W'(CAP - 1),
          "other destination passes unchanged");
    check(!gp_init_valid && !gp_uploaded, "payload still waiting");
    got[P_E].delete();
    src_q[P_W].push_back(head(PT_GATHER, 8, 2, 0, 503, 0));            // full
    src_q[P_W].push_back(body(FT_BODY, 0, {4{32'h77}}));
    src_q[P_W].push_back(body(FT_TAIL, 0, {4{32'h77}}));
    wait_idle(15);
    check(got[P_E].size() == 3 && got[P_E][1].data == {4{32'h77}} && got[P_E][2].data == {4{32'h77}},
          "full packet passes unchanged");
    check(n_full_seen == 1, "full packet reported once");
    check(!gp_init_valid, "payload keeps waiting after a full packet");
    delta <= 16'd0;
    wait_idle(3);
    check(gp_init_valid && gp_init_data == 32'hCAFE0003, "payload handed back on timeout");
    gp_init_ready <= 1; @(posedge clk); gp_init_ready <= 0;
    got[P_E].delete();

    // 7. timeout
    delta <= 16'd20;
    gp_in_valid <= 1; gp_in_data <= 32'hCAFE0004;
    @(posedge clk); gp_in_valid <= 0; t0 = cycle;
    while (!gp_init_valid && cycle - t0 < 100) @(posedge clk);
    check(cycle - t0 == 22, $sformatf("timeout hand-back after %0d cycles (push + delta + 1 = 22)", cycle - t0));
    gp_init_ready <= 1; @(posedge clk); gp_init_ready <= 0;

    wait_idle(5);
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
