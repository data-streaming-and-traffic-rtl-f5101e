// node: one mesh node: router, network interface and N_PE PEs.
//
// The streaming buses enter the network interface, which feeds the PEs; the
// PEs' partial sums go through the network interface into the router's
// Gather Payload block; packets the node starts itself are built by the
// network interface and injected through the router's local port. All
// timing is that of the three parts. uploaded pulses when this node's
// payload left in a passing gather packet, initiated when the node handed
// its payload to a gather packet of its own, saw_full when a gather packet
// for the same destination passed too full to take the payload. Flits delivered to the node are
// consumed at once (rx_valid shows them).
module node
  import noc_pkg::*;
#(
  parameter int unsigned N_PE         = 1,
  parameter int unsigned DATA_W       = 16,
  parameter int unsigned BUF_DEPTH    = 4,
  parameter int unsigned GATHER_FLITS = 2 * N_PE + 1,
  parameter int unsigned SQ_DEPTH     = 4,
  parameter int unsigned DELTA_W      = 16,
  parameter int unsigned K_W          = 16,
  parameter int unsigned T_MAC        = 5
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  coord_t                         my_xy,
  input  coord_t                         gather_dst,
  input  logic [DELTA_W-1:0]             delta,
  input  logic [K_W-1:0]                 k_len,
  input  logic                           relu_en,
  input  flit_t [NPORTS-1:0]             in_flit,
  output logic  [NPORTS-1:0][NUM_VC-1:0] in_credit,
  output flit_t [NPORTS-1:0]             out_flit,
  input  logic  [NPORTS-1:0][NUM_VC-1:0] out_credit,
  input  logic                           act_valid,
  input  logic [N_PE*DATA_W-1:0]         act_data,
  output logic                           act_credit,
  input  logic                           wgt_valid,
  input  logic [DATA_W-1:0]              wgt_data,
  output logic                           wgt_credit,
  output logic                           uploaded,
  output logic                           initiated,
  output logic                           saw_full,
  output logic                           rx_valid
);
  flit_t [NPORTS-1:0]             rin, rout;
  logic  [NPORTS-1:0][NUM_VC-1:0] rin_cr, rout_cr;
  flit_t                          inj_flit, ej_flit, rx_flit;
  logic  [NUM_VC-1:0]             inj_cr, ej_cr;

  logic                      gp_valid, gp_ready, init_valid, init_ready;
  logic [N_PE*PAYLOAD_W-1:0] gp_data, init_data;
  coord_t                    gp_dst, init_dst;

  logic                      pe_valid, ps_ready;
  logic [N_PE-1:0]           pe_ready, ps_valid;
  logic [N_PE*DATA_W-1:0]    pe_act;
  logic [DATA_W-1:0]         pe_wgt;
  logic [N_PE*PAYLOAD_W-1:0] ps_data;

  // router ports: mesh links on N/E/S/W, network interface on L
  always_comb begin
    rin          = in_flit;
    rin[P_L]     = inj_flit;
    rout_cr      = out_credit;
    rout_cr[P_L] = ej_cr;
    out_flit     = rout;
    out_flit[P_L] = '0;
    in_credit    = rin_cr;
    in_credit[P_L] = '0;
  end
  assign inj_cr    = rin_cr[P_L];
  assign ej_flit   = rout[P_L];
  assign initiated = init_valid && init_ready;

  router #(.BUF_DEPTH(BUF_DEPTH), .N_PE(N_PE), .GATHER_FLITS(GATHER_FLITS), .DELTA_W(DELTA_W)) u_router (
    .clk, .rst_n, .my_xy,
    .in_flit(rin), .in_credit(rin_cr), .out_flit(rout), .out_credit(rout_cr),
    .gp_in_valid(gp_valid), .gp_in_ready(gp_ready), .gp_in_data(gp_data), .gp_in_dst(gp_dst),
    .delta, .gp_uploaded(uploaded),
    .gp_init_valid(init_valid), .gp_init_ready(init_ready),
    .gp_init_data(init_data), .gp_init_dst(init_dst), .gp_full_seen(saw_full)
  );

  ni #(.N_PE(N_PE), .DATA_W(DATA_W), .SQ_DEPTH(SQ_DEPTH), .BUF_DEPTH(BUF_DEPTH),
       .GATHER_FLITS(GATHER_FLITS)) u_ni (
    .clk, .rst_n, .my_xy, .gather_dst,
    .act_valid, .act_data, .act_credit, .wgt_valid, .wgt_data, .wgt_credit,
    .pe_valid, .pe_ready(&pe_ready), .pe_act, .pe_wgt,
    .ps_valid, .ps_data, .ps_ready,
    .gp_valid, .gp_ready, .gp_data, .gp_dst,
    .init_valid, .init_ready, .init_data, .init_dst,
    .inj_flit, .inj_credit(inj_cr), .ej_flit, .ej_credit(ej_cr),
    .rx_valid, .rx_ready(1'b1), .rx_flit
  );

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    pe #(.DATA_W(DATA_W), .ACC_W(PAYLOAD_W), .K_W(K_W), .T_MAC(T_MAC)) u_pe (
      .clk, .rst_n, .k_len, .relu_en,
      .in_valid(pe_valid && &pe_ready), .in_ready(pe_ready[i]),
      .in_a(pe_act[i*DATA_W +: DATA_W]), .in_w(pe_wgt),
      .ps_valid(ps_valid[i]), .ps_ready,
      .ps(ps_data[i*PAYLOAD_W +: PAYLOAD_W])
    );
  end
endmodule
