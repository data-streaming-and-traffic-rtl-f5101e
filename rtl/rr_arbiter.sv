// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot (or zero when nothing requests) and is combinational in
// req. The priority pointer moves to the requester after the granted one
// only when update is high, so a grant that is not used does not rotate
// priority.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         update,
  output logic [N-1:0] grant
);
  logic [N-1:0] ptr;   // one-hot: highest-priority requester

  always_comb begin
    grant = '0;
    for (int unsigned k = 0; k < N; k++) begin
      for (int unsigned i = 0; i < N; i++) begin
        // requester i is checked at round k when it is k steps after ptr
        if (grant == '0 && ptr[i] && req[(i + k) % N]) grant[(i + k) % N] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= N'(1);
    else if (update && grant != '0) ptr <= {grant[N-2:0], grant[N-1]};
  end
endmodule
