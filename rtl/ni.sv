// ni: network interface between a router, the two streaming buses and the
// N_PE processing elements of a node.
//
// Stream side: the row bus brings N_PE input activations per word, the
// column bus one filter weight per word (the "PEs of a column share a
// router" grouping). Each goes into its own incoming queue of SQ_DEPTH words;
// a credit pulse goes back to the streaming unit for each word taken out.
// The control logic takes one word from each queue when both have one and
// all PEs are ready, and hands activation i to PE i and the weight to all.
//
// Result side (packet format): when all PEs have a partial sum, the N_PE sums
// become one gather payload entry for the router's Gather Payload block,
// addressed to the global buffer of this row (gather_dst). If the Gather
// Payload block hands the entry back (timeout, or the passing gather packet
// was full), the control logic builds a new gather packet: a head flit with
// PT = G, Src = this node, Dst = gather_dst and ASpace = capacity - N_PE,
// then GATHER_FLITS-1 body/tail flits with this node's sums in the first
// slots and zeros elsewhere. Flits go through the outgoing queue into the
// router's local input port under credit flow control; a packet picks a
// virtual channel with a free slot at its head flit and keeps it.
//
// Router side, incoming: flits ejected at this node go into the incoming
// queue and are shown on rx_*; a credit goes back to the router for each one
// taken.
//
// From the paper: the NI parts (incoming and outgoing queues, control logic,
// packet format unit, demultiplexing to the PEs) and the credit-based stream
// flow control. Own choices: separate queues for the two buses and for
// router traffic (the paper draws one incoming queue behind a multiplexer),
// queue depths, and the fixed gather packet length GATHER_FLITS = 2*N_PE+1
// (the paper's 3/5/9/17 flits for 1/2/4/8 PEs per router).
module ni
  import noc_pkg::*;
#(
  parameter int unsigned N_PE         = 1,
  parameter int unsigned DATA_W       = 16,
  parameter int unsigned SQ_DEPTH     = 4,
  parameter int unsigned OQ_DEPTH     = 4,
  parameter int unsigned BUF_DEPTH    = 4,
  parameter int unsigned GATHER_FLITS = 2 * N_PE + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  coord_t                      my_xy,
  input  coord_t                      gather_dst,
  // streaming buses
  input  logic                        act_valid,
  input  logic [N_PE*DATA_W-1:0]      act_data,
  output logic                        act_credit,
  input  logic                        wgt_valid,
  input  logic [DATA_W-1:0]           wgt_data,
  output logic                        wgt_credit,
  // PEs
  output logic                        pe_valid,
  input  logic                        pe_ready,
  output logic [N_PE*DATA_W-1:0]      pe_act,
  output logic [DATA_W-1:0]           pe_wgt,
  input  logic [N_PE-1:0]             ps_valid,
  input  logic [N_PE*PAYLOAD_W-1:0]   ps_data,
  output logic                        ps_ready,
  // router gather payload block
  output logic                        gp_valid,
  input  logic                        gp_ready,
  output logic [N_PE*PAYLOAD_W-1:0]   gp_data,
  output coord_t                      gp_dst,
  input  logic                        init_valid,
  output logic                        init_ready,
  input  logic [N_PE*PAYLOAD_W-1:0]   init_data,
  input  coord_t                      init_dst,
  // router local port
  output flit_t                       inj_flit,
  input  logic [NUM_VC-1:0]           inj_credit,
  input  flit_t                       ej_flit,
  output logic [NUM_VC-1:0]           ej_credit,
  // flits delivered to this node
  output logic                        rx_valid,
  input  logic                        rx_ready,
  output flit_t                       rx_flit
);
  localparam int unsigned CAP = (GATHER_FLITS - 1) * SLOTS;
  localparam int unsigned CW  = $clog2(BUF_DEPTH + 1);
  localparam int unsigned FW  = $clog2(GATHER_FLITS + 1);

  // ---------------- stream queues and PE feed ----------------
  logic [N_PE*DATA_W-1:0] aq_head;
  logic [DATA_W-1:0]      wq_head;
  logic aq_empty, wq_empty, feed;

  fifo #(.T(logic [N_PE*DATA_W-1:0]), .DEPTH(SQ_DEPTH)) u_act_q (
    .clk, .rst_n, .wr_en(act_valid), .wr_data(act_data), .rd_en(feed),
    .rd_data(aq_head), .empty(aq_empty), .full(), .count()
  );
  fifo #(.T(logic [DATA_W-1:0]), .DEPTH(SQ_DEPTH)) u_wgt_q (
    .clk, .rst_n, .wr_en(wgt_valid), .wr_data(wgt_data), .rd_en(feed),
    .rd_data(wq_head), .empty(wq_empty), .full(), .count()
  );

  assign pe_valid = !aq_empty && !wq_empty;
  assign feed     = pe_valid && pe_ready;
  assign pe_act   = aq_head;
  assign pe_wgt   = wq_head;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_credit <= 1'b0;
      wgt_credit <= 1'b0;
    end else begin
      act_credit <= feed;
      wgt_credit <= feed;
    end
  end

  // ---------------- packet format: partial sums to gather payload ----------------
  assign gp_valid = &ps_valid;
  assign gp_data  = ps_data;
  assign gp_dst   = gather_dst;
  assign ps_ready = gp_valid && gp_ready;

  // ---------------- control logic: build an own gather packet ----------------
  logic                      building;
  logic [FW-1:0]             fcnt;
  logic [N_PE*PAYLOAD_W-1:0] pkt_data;
  coord_t                    pkt_dst;
  buf_entry_t                oq_in, oq_head;
  logic                      oq_full, oq_empty, oq_push, oq_pop;

  assign init_ready = !building;

  always_comb begin
    hdr_t h;
    h        = '0;
    h.pt     = PT_GATHER;
    h.aspace = ASPACE_W'(CAP - N_PE);
    h.src    = my_xy;
    h.dst    = pkt_dst;
    oq_in    = '0;
    if (fcnt == '0) begin
      oq_in.ft   = FT_HEAD;
      oq_in.data = FLIT_W'(h);
    end else begin
      oq_in.ft = (fcnt == FW'(GATHER_FLITS - 1)) ? FT_TAIL : FT_BODY;
      for (int s = 0; s < SLOTS; s++) begin
        automatic int k = (int'(fcnt) - 1) * SLOTS + s;
        if (k < N_PE) oq_in.data[s*PAYLOAD_W +: PAYLOAD_W] = pkt_data[k*PAYLOAD_W +: PAYLOAD_W];
      end
    end
  end
  assign oq_push = building && !oq_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      building <= 1'b0;
      fcnt     <= '0;
      pkt_data <= '0;
      pkt_dst  <= '0;
    end else begin
      if (init_valid && init_ready) begin
        building <= 1'b1;
        fcnt     <= '0;
        pkt_data <= init_data;
        pkt_dst  <= init_dst;
      end else if (oq_push) begin
        fcnt <= fcnt + 1'b1;
        if (fcnt == FW'(GATHER_FLITS - 1)) building <= 1'b0;
      end
    end
  end

  fifo #(.T(buf_entry_t), .DEPTH(OQ_DEPTH)) u_out_q (
    .clk, .rst_n, .wr_en(oq_push), .wr_data(oq_in), .rd_en(oq_pop),
    .rd_data(oq_head), .empty(oq_empty), .full(oq_full), .count()
  );

  // ---------------- injection into the router, credit flow control ----------------
  logic [CW-1:0]   cred [NUM_VC];
  logic            locked;
  logic [VC_W-1:0] cur_vc, pick_vc;
  logic            pick_ok;

  always_comb begin
    pick_ok = 1'b0;
    pick_vc = '0;
    for (int v = NUM_VC - 1; v >= 0; v--)
      if (cred[v] != '0) begin
        pick_ok = 1'b1;
        pick_vc = VC_W'(v);
      end
  end
  assign oq_pop = !oq_empty && (locked ? cred[cur_vc] != '0 : (oq_head.ft == FT_HEAD && pick_ok));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked   <= 1'b0;
      cur_vc   <= '0;
      inj_flit <= '0;
      for (int v = 0; v < NUM_VC; v++) cred[v] <= CW'(BUF_DEPTH);
    end else begin
      automatic logic [VC_W-1:0] vc = locked ? cur_vc : pick_vc;
      inj_flit <= '0;
      if (oq_pop) begin
        inj_flit.valid <= 1'b1;
        inj_flit.ft    <= oq_head.ft;
        inj_flit.vc    <= vc;
        inj_flit.data  <= oq_head.data;
        cur_vc         <= vc;
        locked         <= oq_head.ft != FT_TAIL;
      end
      for (int v = 0; v < NUM_VC; v++)
        cred[v] <= cred[v] + CW'(inj_credit[v]) - CW'(oq_pop && vc == VC_W'(v));
    end
  end

  // ---------------- ejection: incoming queue ----------------
  logic ejq_empty, ejq_pop;
  flit_t ejq_head;

  fifo #(.T(flit_t), .DEPTH(NUM_VC * BUF_DEPTH)) u_in_q (
    .clk, .rst_n, .wr_en(ej_flit.valid), .wr_data(ej_flit), .rd_en(ejq_pop),
    .rd_data(ejq_head), .empty(ejq_empty), .full(), .count()
  );
  assign rx_valid = !ejq_empty;
  assign rx_flit  = ejq_head;
  assign ejq_pop  = rx_valid && rx_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ej_credit <= '0;
    else for (int v = 0; v < NUM_VC; v++) ej_credit[v] <= ejq_pop && ejq_head.vc == VC_W'(v);
  end

  a_stream_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(act_valid && u_act_q.full) && !(wgt_valid && u_wgt_q.full));
endmodule
