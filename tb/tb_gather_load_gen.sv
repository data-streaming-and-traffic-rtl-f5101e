// tb_gather_load_gen: checks the Load signal and ASpace update against the
// rule "head flit AND gather packet AND ASpace >= payload size AND header Dst
// = payload Dst" for directed corner cases and random flits.
module tb_gather_load_gen;
  import noc_pkg::*;

  logic                flit_valid, pl_valid, load, full;
  ft_e                 flit_ft;
  logic [FLIT_W-1:0]   flit_data;
  coord_t              pl_dst;
  logic [ASPACE_W-1:0] pl_size, aspace_new;
  int checks = 0, failures = 0;

  gather_load_gen dut (.*);

  task automatic apply(input logic v, input ft_e ft, input pt_e pt, input int asp,
                       input coord_t hdst, input logic pv, input coord_t pdst, input int sz);
    hdr_t h;
    logic exp_load, exp_full;
    int   exp_asp;
    h = '0;
    h.pt = pt; h.aspace = ASPACE_W'(asp); h.dst = hdst;
    h.src = '{y: 5'(3), x: 5'(0)};
    flit_valid = v; flit_ft = ft; flit_data = FLIT_W'(h);
    pl_valid = pv; pl_dst = pdst; pl_size = ASPACE_W'(sz);
    #1;
    exp_load = v && ft == FT_HEAD && pt == PT_GATHER && asp >= sz && hdst == pdst && pv;
    exp_full = v && ft == FT_HEAD && pt == PT_GATHER && asp <  sz && hdst == pdst && pv;
    exp_asp  = exp_load ? asp - sz : asp;
    checks++;
    if (load !== exp_load || full !== exp_full || aspace_new !== ASPACE_W'(exp_asp)) begin
      failures++;
      $display("FAIL ft=%0d pt=%0d asp=%0d sz=%0d dstmatch=%0b pv=%0b: load=%0b/%0b full=%0b/%0b asp=%0d/%0d",
               ft, pt, asp, sz, hdst == pdst, pv, load, exp_load, full, exp_full, aspace_new, exp_asp);
    end
  endtask

  initial begin
    coord_t a, b;
    a = '{y: 5'(2), x: 5'(8)};
    b = '{y: 5'(3), x: 5'(8)};
    // directed
    apply(1, FT_HEAD, PT_GATHER,  7, a, 1, a, 1);  // load, 7 -> 6
    apply(1, FT_HEAD, PT_GATHER,  1, a, 1, a, 1);  // exactly enough
    apply(1, FT_HEAD, PT_GATHER,  0, a, 1, a, 1);  // full
    apply(1, FT_HEAD, PT_GATHER,  3, a, 1, a, 4);  // full for 4 payloads
    apply(1, FT_HEAD, PT_GATHER, 16, a, 1, b, 1);  // other destination
    apply(1, FT_HEAD, PT_UNICAST, 7, a, 1, a, 1);  // not a gather packet
    apply(1, FT_BODY, PT_GATHER,  7, a, 1, a, 1);  // not a head flit
    apply(1, FT_HEAD, PT_GATHER,  7, a, 0, a, 1);  // no payload waiting
    apply(0, FT_HEAD, PT_GATHER,  7, a, 1, a, 1);  // no flit
    // random
    for (int n = 0; n < 2000; n++) begin
      coord_t d1, d2;
      d1 = '{y: 5'($urandom_range(0, 3)), x: 5'($urandom_range(7, 8))};
      d2 = ($urandom_range(0, 1) == 1) ? d1 : '{y: 5'($urandom_range(0, 3)), x: 5'($urandom_range(7, 8))};
      apply(1'($urandom_range(0, 1)), ft_e'($urandom_range(0, 2)), pt_e'($urandom_range(0, 2)),
            $urandom_range(0, 64), d1, 1'($urandom_range(0, 1)), d2, $urandom_range(1, 8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
