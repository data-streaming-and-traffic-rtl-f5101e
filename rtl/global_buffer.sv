// global_buffer: the global memory on the east edge of the mesh that
// receives the partial sums.
//
// One link port per mesh row, attached to the east output of the row's last
// router (destination x = COLS addresses it). Every flit received returns a
// credit to that router in the next cycle, so the buffer never backpressures.
// For each port and virtual channel it follows the packet in flight:
//   * gather packet: the head flit's ASpace gives the number of filled
//     payload slots, used = capacity - ASpace; the slots of the body and
//     tail flits are written, in packet order, into the row's bank;
//   * unicast packet: the low 32 bits of the tail flit are written.
// Each row bank holds DEPTH 32-bit words written at a running pointer
// (wraps around), stored in four single-write lanes; row_count gives the number of words written so far.
// rd_row / rd_addr read a word combinationally. gather_pkts and unicast_pkts
// count the packets received.
//
// From the paper: a global buffer on the east side collects the results of
// each row. Own choices: everything about its organisation (one bank per
// row, words stored in arrival order, the read port and counters).
module global_buffer
  import noc_pkg::*;
#(
  parameter int unsigned ROWS         = 8,
  parameter int unsigned GATHER_FLITS = 3,
  parameter int unsigned DEPTH        = 1024,
  parameter int unsigned AW           = $clog2(DEPTH),
  parameter int unsigned RW           = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  flit_t [ROWS-1:0]                  in_flit,
  output logic  [ROWS-1:0][NUM_VC-1:0]      in_credit,
  input  logic [RW-1:0]                     rd_row,
  input  logic [AW-1:0]                     rd_addr,
  output logic [PAYLOAD_W-1:0]              rd_data,
  output logic [ROWS-1:0][31:0]             row_count,
  output logic [31:0]                       gather_pkts,
  output logic [31:0]                       unicast_pkts
);
  localparam int unsigned CAP = (GATHER_FLITS - 1) * SLOTS;

  localparam int unsigned LW = AW - $clog2(SLOTS);   // address bits inside one lane

  logic [AW-1:0]        wptr [ROWS];
  pt_e                  cur_pt [ROWS][NUM_VC];
  logic [ASPACE_W-1:0]  used   [ROWS][NUM_VC];
  logic [ASPACE_W-1:0]  fidx   [ROWS][NUM_VC];

  // number of words a flit delivers: its filled slots form a prefix
  int nwr [ROWS];
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      automatic int v = int'(in_flit[r].vc);
      nwr[r] = 0;
      if (in_flit[r].valid && in_flit[r].ft != FT_HEAD) begin
        if (cur_pt[r][v] == PT_GATHER) begin
          for (int s = 0; s < SLOTS; s++)
            if (int'(fidx[r][v]) * SLOTS + s < int'(used[r][v])) nwr[r]++;
        end else if (in_flit[r].ft == FT_TAIL) nwr[r] = 1;
      end
    end
  end

  // Storage: each row bank is split into SLOTS lanes, word w in lane
  // w mod SLOTS. The up to SLOTS consecutive words of one flit fall into
  // different lanes, so every lane has a single write port.
  logic [PAYLOAD_W-1:0] lane_rd [ROWS][SLOTS];
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar l = 0; l < SLOTS; l++) begin : g_lane
      logic [PAYLOAD_W-1:0] mem [DEPTH / SLOTS];
      logic [$clog2(SLOTS)-1:0] n;       // which word of the flit lands here
      logic [AW-1:0]            waddr;
      assign n       = $clog2(SLOTS)'(l) - wptr[r][$clog2(SLOTS)-1:0];
      assign waddr   = wptr[r] + AW'(n);
      assign lane_rd[r][l] = mem[rd_addr[AW-1 -: LW]];
      always_ff @(posedge clk) begin
        if (int'(n) < nwr[r]) mem[waddr[AW-1 -: LW]] <= in_flit[r].data[int'(n)*PAYLOAD_W +: PAYLOAD_W];
      end
    end
  end
  assign rd_data = lane_rd[rd_row][rd_addr[$clog2(SLOTS)-1:0]];

  // packets completed this cycle, over all rows
  int g_inc, u_inc;
  always_comb begin
    g_inc = 0;
    u_inc = 0;
    for (int r = 0; r < ROWS; r++)
      if (in_flit[r].valid && in_flit[r].ft == FT_TAIL) begin
        if (cur_pt[r][int'(in_flit[r].vc)] == PT_GATHER) g_inc++;
        else                                            u_inc++;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_credit    <= '0;
      row_count    <= '0;
      gather_pkts  <= '0;
      unicast_pkts <= '0;
      for (int r = 0; r < ROWS; r++) begin
        wptr[r] <= '0;
        for (int v = 0; v < NUM_VC; v++) begin
          cur_pt[r][v] <= PT_UNICAST;
          used[r][v]   <= '0;
          fidx[r][v]   <= '0;
        end
      end
    end else begin
      for (int r = 0; r < ROWS; r++) begin
        automatic int   v = int'(in_flit[r].vc);
        automatic hdr_t h = hdr_t'(in_flit[r].data);
        for (int vv = 0; vv < NUM_VC; vv++) in_credit[r][vv] <= in_flit[r].valid && vv == v;
        if (in_flit[r].valid) begin
          if (in_flit[r].ft == FT_HEAD) begin
            cur_pt[r][v] <= h.pt;
            used[r][v]   <= ASPACE_W'(CAP) - h.aspace;
            fidx[r][v]   <= '0;
          end else begin
            fidx[r][v]   <= fidx[r][v] + 1'b1;
            wptr[r]      <= wptr[r] + AW'(nwr[r]);
            row_count[r] <= row_count[r] + 32'(nwr[r]);
          end
        end
      end
      gather_pkts  <= gather_pkts + 32'(g_inc);
      unicast_pkts <= unicast_pkts + 32'(u_inc);
    end
  end
endmodule
