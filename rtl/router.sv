// router: five-port virtual-channel mesh router with gather support.
//
// Ports N, E, S, W and L (local, to the network interface). Each input port
// has NUM_VC virtual channels, each with a BUF_DEPTH-flit buffer. A packet
// passes four pipeline stages:
//   RC  route computation, head flit only: dimension-order XY routing (first
//       along x to the destination column, then along y);
//   VA  virtual-channel allocation, head flit only: a round-robin arbiter per
//       output port hands the lowest free output VC to one waiting input VC;
//   SA  switch allocation, every flit: a round-robin arbiter per input port
//       picks one VC that has a flit and a downstream credit, then a
//       round-robin arbiter per output port picks one input port;
//   ST  switch traversal: the flit crosses the crossbar into the output
//       register, which drives the link.
// Flow control is credit based: one credit per downstream buffer slot, a
// credit pulse goes back upstream (in_credit) whenever a flit leaves an input
// buffer. A head flit written into a buffer in cycle c is in RC in c+1, VA in
// c+2, SA in c+3, ST in c+4 and on the link into the next router in c+5:
// four router cycles plus one link cycle per hop when nothing blocks it.
//
// Gather support. In RC the Gather Load Generator of every non-local input VC
// checks the head flit; if it is a gather packet for the same destination as
// the payload waiting in the Gather Payload block and has room, that VC
// claims the payload (Load = 1). When the head flit leaves through SA its
// ASpace field carries the decremented count. When the body and tail flits of
// the packet pass SA the router writes its payload words into the first free
// slots of the packet (slot = capacity - ASpace on arrival), so the packet
// never waits and no stage is added. Once the last payload word is in, the
// Gather Payload block is told (rt_done). A matching gather head with too
// little room raises rt_full_seen instead (gp_full_seen outside).
//
// From the paper: the four stages and their order, XY routing, 2 VCs,
// 4-flit buffers, credit-based flow control, the Gather Load Generator and
// Gather Payload blocks and where the payload is inserted. Own choices: the
// allocator structure (separable round robin), lowest-free output VC,
// capacity = (GATHER_FLITS-1)*4 slots, and inserting the payload while the
// flit is read out for switch traversal rather than in a separate stage
// (the same cycles as the paper's pipeline figure, no extra latency).
// Multicast packets (PT = M) are routed like unicast packets to Dst: the
// paper carries multicast traffic on the streaming buses and does not give a
// multicast routing algorithm for the mesh.
module router
  import noc_pkg::*;
#(
  parameter int unsigned BUF_DEPTH    = 4,
  parameter int unsigned N_PE         = 1,
  parameter int unsigned GATHER_FLITS = 2 * N_PE + 1,
  parameter int unsigned GP_DEPTH     = 2,
  parameter int unsigned DELTA_W      = 16
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  coord_t                              my_xy,
  // links
  input  flit_t [NPORTS-1:0]                  in_flit,
  output logic  [NPORTS-1:0][NUM_VC-1:0]      in_credit,
  output flit_t [NPORTS-1:0]                  out_flit,
  input  logic  [NPORTS-1:0][NUM_VC-1:0]      out_credit,
  // gather payload, PE side
  input  logic                                gp_in_valid,
  output logic                                gp_in_ready,
  input  logic [N_PE*PAYLOAD_W-1:0]           gp_in_data,
  input  coord_t                              gp_in_dst,
  input  logic [DELTA_W-1:0]                  delta,
  output logic                                gp_uploaded,
  output logic                                gp_init_valid,
  input  logic                                gp_init_ready,
  output logic [N_PE*PAYLOAD_W-1:0]           gp_init_data,
  output coord_t                              gp_init_dst,
  output logic                                gp_full_seen
);
  localparam int unsigned NIV   = NPORTS * NUM_VC;
  localparam int unsigned CAP   = (GATHER_FLITS - 1) * SLOTS;
  localparam int unsigned CNT_W = $clog2(BUF_DEPTH + 1);

  typedef enum logic [1:0] {VS_IDLE, VS_VA, VS_ACTIVE} vstate_e;

  // ---------------- input buffers ----------------
  buf_entry_t        head_e [NIV];
  logic [NIV-1:0]    buf_empty, pop;

  for (genvar i = 0; i < NIV; i++) begin : g_buf
    localparam int unsigned P = i / NUM_VC;
    localparam int unsigned V = i % NUM_VC;
    fifo #(.T(buf_entry_t), .DEPTH(BUF_DEPTH)) u_buf (
      .clk, .rst_n,
      .wr_en  (in_flit[P].valid && in_flit[P].vc == VC_W'(V)),
      .wr_data('{ft: in_flit[P].ft, data: in_flit[P].data}),
      .rd_en  (pop[i]),
      .rd_data(head_e[i]),
      .empty  (buf_empty[i]),
      .full   (),
      .count  ()
    );
  end

  // ---------------- per input-VC state ----------------
  vstate_e             vstate     [NIV];
  logic [2:0]          route      [NIV];
  logic [VC_W-1:0]     ovc        [NIV];
  logic [NIV-1:0]      load, ldone;
  logic [ASPACE_W-1:0] slot_base  [NIV];
  logic [ASPACE_W-1:0] fidx       [NIV];
  logic [ASPACE_W-1:0] aspace_nxt [NIV];

  // ---------------- gather payload block ----------------
  logic                      rt_valid, rt_commit, rt_done, rt_full_seen;
  logic [N_PE*PAYLOAD_W-1:0] rt_data;
  coord_t                    rt_dst;

  gather_payload #(.N_PE(N_PE), .Q_DEPTH(GP_DEPTH), .DELTA_W(DELTA_W)) u_gp (
    .clk, .rst_n,
    .in_valid (gp_in_valid), .in_ready (gp_in_ready),
    .in_data  (gp_in_data),  .in_dst   (gp_in_dst),
    .delta,
    .uploaded (gp_uploaded),
    .init_valid(gp_init_valid), .init_ready(gp_init_ready),
    .init_data(gp_init_data), .init_dst(gp_init_dst),
    .rt_valid, .rt_data, .rt_dst, .rt_commit, .rt_done, .rt_full_seen
  );

  // ---------------- RC stage + gather load generation ----------------
  logic [NIV-1:0]      rc_fire, lg_load, lg_full, claim;
  logic [ASPACE_W-1:0] lg_aspace [NIV];
  logic [2:0]          rc_route  [NIV];
  hdr_t                head_h    [NIV];

  function automatic logic [2:0] xy_route(coord_t here, coord_t dst);
    if      (dst.x > here.x) return 3'(P_E);
    else if (dst.x < here.x) return 3'(P_W);
    else if (dst.y > here.y) return 3'(P_S);
    else if (dst.y < here.y) return 3'(P_N);
    else                     return 3'(P_L);
  endfunction

  for (genvar i = 0; i < NIV; i++) begin : g_lg
    gather_load_gen u_lg (
      .flit_valid(rc_fire[i] && (i / NUM_VC) != P_L),
      .flit_ft   (head_e[i].ft),
      .flit_data (head_e[i].data),
      .pl_valid  (rt_valid),
      .pl_dst    (rt_dst),
      .pl_size   (ASPACE_W'(N_PE)),
      .load      (lg_load[i]),
      .full      (lg_full[i]),
      .aspace_new(lg_aspace[i])
    );
  end

  always_comb begin
    for (int i = 0; i < NIV; i++) begin
      head_h[i]   = hdr_t'(head_e[i].data);
      rc_fire[i]  = vstate[i] == VS_IDLE && !buf_empty[i] && head_e[i].ft == FT_HEAD;
      rc_route[i] = xy_route(my_xy, head_h[i].dst);
    end
    // at most one input VC can claim the waiting payload: lowest index wins
    claim = '0;
    for (int i = 0; i < NIV; i++)
      if (lg_load[i] && claim == '0) claim[i] = 1'b1;
  end
  assign rt_commit    = claim != '0;
  assign rt_full_seen = lg_full != '0;
  assign gp_full_seen = rt_full_seen;

  // ---------------- VA stage ----------------
  logic [NPORTS-1:0][NUM_VC-1:0] ovc_busy;
  logic [NPORTS-1:0][NIV-1:0]    va_req, va_gnt;
  logic [NPORTS-1:0]             va_has_free;
  logic [VC_W-1:0]               va_free_vc [NPORTS];
  logic [NIV-1:0]                va_win;
  logic [VC_W-1:0]               va_win_vc  [NIV];

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      va_has_free[o] = 1'b0;
      va_free_vc[o]  = '0;
      for (int v = NUM_VC - 1; v >= 0; v--)
        if (!ovc_busy[o][v]) begin
          va_has_free[o] = 1'b1;
          va_free_vc[o]  = VC_W'(v);
        end
      for (int i = 0; i < NIV; i++)
        va_req[o][i] = vstate[i] == VS_VA && route[i] == 3'(o) && va_has_free[o];
    end
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_va
    rr_arbiter #(.N(NIV)) u_arb (
      .clk, .rst_n, .req(va_req[o]), .update(1'b1), .grant(va_gnt[o])
    );
  end

  always_comb begin
    va_win = '0;
    for (int i = 0; i < NIV; i++) begin
      va_win_vc[i] = '0;
      for (int o = 0; o < NPORTS; o++)
        if (va_gnt[o][i]) begin
          va_win[i]    = 1'b1;
          va_win_vc[i] = va_free_vc[o];
        end
    end
  end

  // ---------------- SA stage ----------------
  logic [CNT_W-1:0]              credits [NPORTS][NUM_VC];
  logic [NPORTS-1:0][NUM_VC-1:0] sa_vc_req, sa_vc_gnt;
  logic [NPORTS-1:0][NPORTS-1:0] sa_out_req, sa_out_gnt;   // [out][in]
  logic [NPORTS-1:0]             sa_in_won;
  logic [NIV-1:0]                send;
  logic [2:0]                    in_route [NPORTS];
  logic [VC_W-1:0]               in_vc    [NPORTS];

  always_comb begin
    for (int p = 0; p < NPORTS; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        automatic int i = p * NUM_VC + v;
        sa_vc_req[p][v] = vstate[i] == VS_ACTIVE && !buf_empty[i]
                          && credits[route[i]][ovc[i]] != '0;
      end
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_sa_in
    rr_arbiter #(.N(NUM_VC)) u_arb (
      .clk, .rst_n, .req(sa_vc_req[p]), .update(sa_in_won[p]), .grant(sa_vc_gnt[p])
    );
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      in_route[p] = '0;
      in_vc[p]    = '0;
      for (int v = 0; v < NUM_VC; v++)
        if (sa_vc_gnt[p][v]) begin
          in_route[p] = route[p * NUM_VC + v];
          in_vc[p]    = VC_W'(v);
        end
    end
    for (int o = 0; o < NPORTS; o++)
      for (int p = 0; p < NPORTS; p++)
        sa_out_req[o][p] = sa_vc_gnt[p] != '0 && in_route[p] == 3'(o);
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_sa_out
    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(sa_out_req[o]), .update(1'b1), .grant(sa_out_gnt[o])
    );
  end

  always_comb begin
    send = '0;
    for (int p = 0; p < NPORTS; p++) begin
      sa_in_won[p] = 1'b0;
      for (int o = 0; o < NPORTS; o++)
        if (sa_out_gnt[o][p]) sa_in_won[p] = 1'b1;
      if (sa_in_won[p]) send[p * NUM_VC + int'(in_vc[p])] = 1'b1;
    end
  end
  assign pop = send;

  // ---------------- flit rewrite for gather (header ASpace, payload fill) ----------------
  logic [FLIT_W-1:0] out_data [NIV];
  logic [NIV-1:0]    fill_last;

  always_comb begin
    for (int i = 0; i < NIV; i++) begin
      automatic hdr_t h = hdr_t'(head_e[i].data);
      out_data[i]  = head_e[i].data;
      fill_last[i] = 1'b0;
      if (load[i] && head_e[i].ft == FT_HEAD) begin
        h.aspace    = aspace_nxt[i];
        out_data[i] = FLIT_W'(h);
      end else if (load[i] && !ldone[i]) begin
        for (int s = 0; s < SLOTS; s++) begin
          automatic int g = int'(fidx[i]) * SLOTS + s;
          automatic int k = g - int'(slot_base[i]);
          if (k >= 0 && k < N_PE)
            out_data[i][s*PAYLOAD_W +: PAYLOAD_W] = rt_data[k*PAYLOAD_W +: PAYLOAD_W];
        end
        fill_last[i] = int'(slot_base[i]) + N_PE <= (int'(fidx[i]) + 1) * SLOTS;
      end
    end
  end

  always_comb begin
    rt_done = 1'b0;
    for (int i = 0; i < NIV; i++)
      if (send[i] && fill_last[i]) rt_done = 1'b1;
  end

  // ---------------- state registers ----------------
  flit_t [NPORTS-1:0] st_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NIV; i++) begin
        vstate[i]     <= VS_IDLE;
        route[i]      <= '0;
        ovc[i]        <= '0;
        slot_base[i]  <= '0;
        fidx[i]       <= '0;
        aspace_nxt[i] <= '0;
      end
      load     <= '0;
      ldone    <= '0;
      ovc_busy <= '0;
      st_reg   <= '0;
      out_flit <= '0;
      in_credit <= '0;
      for (int o = 0; o < NPORTS; o++)
        for (int v = 0; v < NUM_VC; v++) credits[o][v] <= CNT_W'(BUF_DEPTH);
    end else begin
      // RC
      for (int i = 0; i < NIV; i++) begin
        if (rc_fire[i]) begin
          vstate[i]     <= VS_VA;
          route[i]      <= rc_route[i];
          load[i]       <= claim[i];
          ldone[i]      <= 1'b0;
          fidx[i]       <= '0;
          aspace_nxt[i] <= lg_aspace[i];
          slot_base[i]  <= ASPACE_W'(CAP) - head_h[i].aspace;
        end
        // VA
        if (va_win[i]) begin
          vstate[i] <= VS_ACTIVE;
          ovc[i]    <= va_win_vc[i];
          ovc_busy[route[i]][va_win_vc[i]] <= 1'b1;
        end
      end
      // SA
      for (int i = 0; i < NIV; i++) begin
        if (send[i]) begin
          if (head_e[i].ft != FT_HEAD) fidx[i] <= fidx[i] + 1'b1;
          if (fill_last[i]) ldone[i] <= 1'b1;
          if (head_e[i].ft == FT_TAIL) begin
            vstate[i] <= VS_IDLE;
            load[i]   <= 1'b0;
            ovc_busy[route[i]][ovc[i]] <= 1'b0;
          end
        end
      end
      // credits toward the next routers
      for (int o = 0; o < NPORTS; o++)
        for (int v = 0; v < NUM_VC; v++) begin
          automatic logic dec = 1'b0;
          for (int i = 0; i < NIV; i++)
            if (send[i] && route[i] == 3'(o) && ovc[i] == VC_W'(v)) dec = 1'b1;
          credits[o][v] <= credits[o][v] + CNT_W'(out_credit[o][v]) - CNT_W'(dec);
        end
      // ST: crossbar into the switch-traversal register, then onto the link
      for (int o = 0; o < NPORTS; o++) begin
        st_reg[o] <= '0;
        for (int i = 0; i < NIV; i++)
          if (send[i] && route[i] == 3'(o)) begin
            st_reg[o].valid <= 1'b1;
            st_reg[o].ft    <= head_e[i].ft;
            st_reg[o].vc    <= ovc[i];
            st_reg[o].data  <= out_data[i];
          end
      end
      out_flit <= st_reg;
      // credit back to the upstream router for every flit leaving a buffer
      for (int p = 0; p < NPORTS; p++)
        for (int v = 0; v < NUM_VC; v++) in_credit[p][v] <= send[p * NUM_VC + v];
    end
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      a_credit_range: assert property (@(posedge clk) disable iff (!rst_n)
        credits[o][v] <= CNT_W'(BUF_DEPTH));
    end
  end
endmodule
