// noc_accel: mesh NoC accelerator with two-way streaming and gather packets.
//
// A ROWS x COLS mesh of nodes; each node is a router, a network interface
// and N_PE output-stationary PEs. Two streaming networks bypass the mesh:
// one input-activation stream unit per row broadcasts a word of N_PE
// activations to every node of its row, one filter-weight stream unit per
// column broadcasts one weight to every node of its column. Each PE
// accumulates C*R*R (= k_len) products into one partial sum. The partial
// sums of a row are then collected by gather packets travelling east along
// the row, through the mesh, to the global buffer attached to the east
// output of the row's last router (destination x = COLS, y = row).
//
// Who starts a gather packet is set by the per-node timeout delta: a node
// whose payload is not picked up by a passing gather packet within delta
// cycles starts its own; a passing packet that is already full restarts the
// wait. Setting delta = 0 in the west column, and elsewhere a delta longer
// than the packet's trip from the west edge that also grows along the row
// (so a packet started after a full one still arrives in time), gives the
// fewest gather packets per row, started at the west edge as in the paper.
//
// Host interface (the mapping and control of the paper are left to the
// host): fill the stream memories (act_wr_*, wgt_wr_*), pulse act_start and
// wgt_start with stream_base/stream_count, read results from the global
// buffer (gb_rd_*). The mesh edges other than the east edge are not
// connected (XY routes to the global buffer never use them).
//
// From the paper: mesh of router+NI nodes, two-way streaming (row streams of
// input activations, column streams of filter weights), gather packets
// towards the global buffer along each row, the parameter values of its
// network configuration table (8x8 mesh, 2 VCs, 4-flit buffers, 128-bit
// flits, 32-bit payloads, T_MAC = 5, gather packet of 2*N_PE+1 flits). Own
// choices: the host interface, widths of data and control, memory depths.
module noc_accel
  import noc_pkg::*;
#(
  parameter int unsigned ROWS         = 8,
  parameter int unsigned COLS         = 8,
  parameter int unsigned N_PE         = 1,
  parameter int unsigned DATA_W       = 16,
  parameter int unsigned BUF_DEPTH    = 4,
  parameter int unsigned GATHER_FLITS = 2 * N_PE + 1,
  parameter int unsigned SQ_DEPTH     = 4,
  parameter int unsigned STREAM_DEPTH = 4608,
  parameter int unsigned GB_DEPTH     = 1024,
  parameter int unsigned DELTA_W      = 16,
  parameter int unsigned K_W          = 16,
  parameter int unsigned T_MAC        = 5,
  parameter int unsigned SAW          = $clog2(STREAM_DEPTH),
  parameter int unsigned GAW          = $clog2(GB_DEPTH),
  parameter int unsigned RW           = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // stream memories
  input  logic [ROWS-1:0]                       act_wr_en,
  input  logic [SAW-1:0]                        act_wr_addr,
  input  logic [N_PE*DATA_W-1:0]                act_wr_data,
  input  logic [COLS-1:0]                       wgt_wr_en,
  input  logic [SAW-1:0]                        wgt_wr_addr,
  input  logic [DATA_W-1:0]                     wgt_wr_data,
  // stream control
  input  logic                                  act_start,
  input  logic                                  wgt_start,
  input  logic [SAW-1:0]                        stream_base,
  input  logic [SAW:0]                          stream_count,
  output logic [ROWS-1:0]                       act_busy,
  output logic [COLS-1:0]                       wgt_busy,
  output logic [ROWS-1:0]                       act_stall,
  output logic [COLS-1:0]                       wgt_stall,
  // PE and gather configuration
  input  logic [K_W-1:0]                        k_len,
  input  logic                                  relu_en,
  input  logic [ROWS-1:0][COLS-1:0][DELTA_W-1:0] delta,
  // node status
  output logic [ROWS-1:0][COLS-1:0]             node_uploaded,   // payload went out in a passing packet
  output logic [ROWS-1:0][COLS-1:0]             node_initiated,  // node started its own gather packet
  output logic [ROWS-1:0][COLS-1:0]             node_saw_full,   // a full gather packet passed the node
  output logic [ROWS-1:0][COLS-1:0]             node_rx_valid,   // a flit was delivered to the node
  // global buffer
  input  logic [RW-1:0]                         gb_rd_row,
  input  logic [GAW-1:0]                        gb_rd_addr,
  output logic [PAYLOAD_W-1:0]                  gb_rd_data,
  output logic [ROWS-1:0][31:0]                 gb_row_count,
  output logic [31:0]                           gb_gather_pkts,
  output logic [31:0]                           gb_unicast_pkts
);
  // ---------------- mesh wiring ----------------
  flit_t [NPORTS-1:0]             r_in      [ROWS][COLS];
  flit_t [NPORTS-1:0]             r_out     [ROWS][COLS];
  logic  [NPORTS-1:0][NUM_VC-1:0] r_in_cr   [ROWS][COLS];
  logic  [NPORTS-1:0][NUM_VC-1:0] r_out_cr  [ROWS][COLS];

  flit_t [ROWS-1:0]               gb_in;
  logic  [ROWS-1:0][NUM_VC-1:0]   gb_cr;

  // streaming buses
  logic                   act_bus_v [ROWS];
  logic [N_PE*DATA_W-1:0] act_bus_d [ROWS];
  logic [COLS-1:0]        act_cr    [ROWS];
  logic                   wgt_bus_v [COLS];
  logic [DATA_W-1:0]      wgt_bus_d [COLS];
  logic [ROWS-1:0]        wgt_cr    [COLS];

  for (genvar y = 0; y < ROWS; y++) begin : g_row
    for (genvar x = 0; x < COLS; x++) begin : g_col
      // north
      if (y > 0) begin : g_n
        assign r_in[y][x][P_N]     = r_out[y-1][x][P_S];
        assign r_out_cr[y][x][P_N] = r_in_cr[y-1][x][P_S];
      end else begin : g_n_edge
        assign r_in[y][x][P_N]     = '0;
        assign r_out_cr[y][x][P_N] = '0;
      end
      // south
      if (y < ROWS - 1) begin : g_s
        assign r_in[y][x][P_S]     = r_out[y+1][x][P_N];
        assign r_out_cr[y][x][P_S] = r_in_cr[y+1][x][P_N];
      end else begin : g_s_edge
        assign r_in[y][x][P_S]     = '0;
        assign r_out_cr[y][x][P_S] = '0;
      end
      // west
      if (x > 0) begin : g_w
        assign r_in[y][x][P_W]     = r_out[y][x-1][P_E];
        assign r_out_cr[y][x][P_W] = r_in_cr[y][x-1][P_E];
      end else begin : g_w_edge
        assign r_in[y][x][P_W]     = '0;
        assign r_out_cr[y][x][P_W] = '0;
      end
      // east: next router, or the global buffer at the edge
      if (x < COLS - 1) begin : g_e
        assign r_in[y][x][P_E]     = r_out[y][x+1][P_W];
        assign r_out_cr[y][x][P_E] = r_in_cr[y][x+1][P_W];
      end else begin : g_e_edge
        assign r_in[y][x][P_E]     = '0;
        assign gb_in[y]            = r_out[y][x][P_E];
        assign r_out_cr[y][x][P_E] = gb_cr[y];
      end

      node #(
        .N_PE(N_PE), .DATA_W(DATA_W), .BUF_DEPTH(BUF_DEPTH), .GATHER_FLITS(GATHER_FLITS),
        .SQ_DEPTH(SQ_DEPTH), .DELTA_W(DELTA_W), .K_W(K_W), .T_MAC(T_MAC)
      ) u_node (
        .clk, .rst_n,
        .my_xy      ('{y: COORD_W'(y), x: COORD_W'(x)}),
        .gather_dst ('{y: COORD_W'(y), x: COORD_W'(COLS)}),
        .delta      (delta[y][x]),
        .k_len, .relu_en,
        .in_flit    (r_in[y][x]),
        .in_credit  (r_in_cr[y][x]),
        .out_flit   (r_out[y][x]),
        .out_credit (r_out_cr[y][x]),
        .act_valid  (act_bus_v[y]),
        .act_data   (act_bus_d[y]),
        .act_credit (act_cr[y][x]),
        .wgt_valid  (wgt_bus_v[x]),
        .wgt_data   (wgt_bus_d[x]),
        .wgt_credit (wgt_cr[x][y]),
        .uploaded   (node_uploaded[y][x]),
        .initiated  (node_initiated[y][x]),
        .saw_full   (node_saw_full[y][x]),
        .rx_valid   (node_rx_valid[y][x])
      );
    end
  end

  // ---------------- stream units ----------------
  for (genvar y = 0; y < ROWS; y++) begin : g_act_su
    stream_unit #(.WORD_W(N_PE*DATA_W), .N_DEST(COLS), .DEPTH(STREAM_DEPTH), .CREDITS(SQ_DEPTH)) u_su (
      .clk, .rst_n,
      .wr_en(act_wr_en[y]), .wr_addr(act_wr_addr), .wr_data(act_wr_data),
      .start(act_start), .base(stream_base), .count(stream_count),
      .busy(act_busy[y]), .done(), .stall(act_stall[y]),
      .bus_valid(act_bus_v[y]), .bus_data(act_bus_d[y]), .credit_in(act_cr[y])
    );
  end
  for (genvar x = 0; x < COLS; x++) begin : g_wgt_su
    stream_unit #(.WORD_W(DATA_W), .N_DEST(ROWS), .DEPTH(STREAM_DEPTH), .CREDITS(SQ_DEPTH)) u_su (
      .clk, .rst_n,
      .wr_en(wgt_wr_en[x]), .wr_addr(wgt_wr_addr), .wr_data(wgt_wr_data),
      .start(wgt_start), .base(stream_base), .count(stream_count),
      .busy(wgt_busy[x]), .done(), .stall(wgt_stall[x]),
      .bus_valid(wgt_bus_v[x]), .bus_data(wgt_bus_d[x]), .credit_in(wgt_cr[x])
    );
  end

  // ---------------- global buffer ----------------
  global_buffer #(.ROWS(ROWS), .GATHER_FLITS(GATHER_FLITS), .DEPTH(GB_DEPTH)) u_gb (
    .clk, .rst_n,
    .in_flit(gb_in), .in_credit(gb_cr),
    .rd_row(gb_rd_row), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data),
    .row_count(gb_row_count), .gather_pkts(gb_gather_pkts), .unicast_pkts(gb_unicast_pkts)
  );
endmodule
