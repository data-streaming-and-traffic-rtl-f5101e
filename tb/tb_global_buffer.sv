// tb_global_buffer: sends gather packets with different fill levels, on two
// virtual channels interleaved flit by flit and on two rows at once, plus a
// unicast packet, and checks the stored words, their order, the per-row
// counts, the packet counters and the credit returned for every flit.
module tb_global_buffer;
  import noc_pkg::*;
  localparam int ROWS = 2, GF = 3, CAP = (GF - 1) * SLOTS;
  logic clk = 0, rst_n = 0;
  flit_t [ROWS-1:0] in_flit;
  logic [ROWS-1:0][NUM_VC-1:0] in_credit;
  logic [0:0] rd_row;
  logic [9:0] rd_addr;
  logic [31:0] rd_data, gather_pkts, unicast_pkts;
  logic [ROWS-1:0][31:0] row_count;
  int checks = 0, failures = 0;
  int credits_seen [ROWS];
  int flits_sent [ROWS];

  global_buffer #(.ROWS(ROWS), .GATHER_FLITS(GF), .DEPTH(1024)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] expect_q [ROWS][$];

  always @(posedge clk) if (rst_n)
    for (int r = 0; r < ROWS; r++) credits_seen[r] += $countones(in_credit[r]);

  function automatic flit_t mk_head(input pt_e pt, input int aspace, input int vc);
    hdr_t h;
    flit_t f;
    h = '0; h.pt = pt; h.aspace = ASPACE_W'(aspace);
    f.valid = 1; f.ft = FT_HEAD; f.vc = VC_W'(vc); f.data = FLIT_W'(h);
    return f;
  endfunction

  function automatic flit_t mk_body(input ft_e ft, input int vc, input logic [FLIT_W-1:0] d);
    flit_t f;
    f.valid = 1; f.ft = ft; f.vc = VC_W'(vc); f.data = d;
    return f;
  endfunction

  // a gather packet with `used` filled slots as a list of flits
  task automatic gather_pkt(input int r, input int used, input int vc, ref flit_t fl[$]);
    fl.push_back(mk_head(PT_GATHER, CAP - used, vc));
    for (int b = 0; b < GF - 1; b++) begin
      logic [FLIT_W-1:0] d;
      for (int s = 0; s < SLOTS; s++) begin
        d[s*32 +: 32] = $urandom;
        if (b * SLOTS + s < used) expect_q[r].push_back(d[s*32 +: 32]);
      end
      fl.push_back(mk_body(b == GF - 2 ? FT_TAIL : FT_BODY, vc, d));
    end
  endtask

  initial begin
    flit_t a[$], b[$], c[$];
    logic [FLIT_W-1:0] ud;
    in_flit = '0; rd_row = 0; rd_addr = 0;
    for (int r = 0; r < ROWS; r++) begin credits_seen[r] = 0; flits_sent[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // row 0: packet on VC0 (8 used) and VC1 (5 used) interleaved; row 1: 1 used
    gather_pkt(0, 8, 0, a);
    // the VC1 packet's words arrive after VC0's last flit, keep order simple:
    // its flits interleave but its body flits follow the VC0 tail
    gather_pkt(1, 1, 1, c);
    begin
      flit_t b0[$];
      gather_pkt(0, 5, 1, b0);
      b = b0;
    end
    // sequence on row 0: a0 b0(head) a1 a2 b1 b2 ; row 1: c0 c1 c2
    for (int t = 0; t < 6; t++) begin
      flit_t f0, f1;
      case (t)
        0: f0 = a[0]; 1: f0 = b[0]; 2: f0 = a[1]; 3: f0 = a[2]; 4: f0 = b[1]; default: f0 = b[2];
      endcase
      f1 = (t < 3) ? c[t] : '0;
      in_flit[0] <= f0; in_flit[1] <= f1;
      flits_sent[0]++; if (t < 3) flits_sent[1]++;
      @(posedge clk);
    end
    // unicast packet on row 1
    ud = '0; ud[31:0] = 32'hDEADBEEF;
    in_flit[0] <= '0;
    in_flit[1] <= mk_head(PT_UNICAST, 0, 0); @(posedge clk);
    in_flit[1] <= mk_body(FT_TAIL, 0, ud); @(posedge clk);
    expect_q[1].push_back(32'hDEADBEEF);
    flits_sent[1] += 2;
    in_flit <= '0;
    repeat (3) @(posedge clk);

    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (row_count[r] != 32'(expect_q[r].size())) begin
        failures++; $display("FAIL row %0d count %0d expected %0d", r, row_count[r], expect_q[r].size());
      end
      checks++;
      if (credits_seen[r] != flits_sent[r]) begin
        failures++; $display("FAIL row %0d credits %0d for %0d flits", r, credits_seen[r], flits_sent[r]);
      end
      foreach (expect_q[r][i]) begin
        rd_row <= 1'(r); rd_addr <= 10'(i);
        @(posedge clk); #1;
        checks++;
        if (rd_data !== expect_q[r][i]) begin
          failures++; $display("FAIL row %0d word %0d = %h expected %h", r, i, rd_data, expect_q[r][i]);
        end
      end
    end
    checks++;
    if (gather_pkts != 3 || unicast_pkts != 1) begin
      failures++; $display("FAIL packet counters %0d %0d", gather_pkts, unicast_pkts);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
