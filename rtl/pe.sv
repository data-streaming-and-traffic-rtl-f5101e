// pe: output-stationary processing element.
//
// Accumulates one partial sum PS = sum over j of I_j * F_j for k_len operand
// pairs (k_len = C*R*R for a convolution), then outputs it, optionally
// through a ReLU activation function. Operands are accepted with in_valid /
// in_ready, one pair per cycle. The multiply-accumulate is a pipeline of
// T_MAC stages (multiply, T_MAC-2 delay stages, accumulate): the result of
// the round whose last pair was accepted in cycle t is valid in cycle
// t + T_MAC. Accumulation of the next round starts with the next pair, so
// rounds overlap with the collection of the previous result. The result
// waits in an output register (ps_valid / ps_ready); the last pair of the
// next round is held back (in_ready low) until that register is free.
//
// From the paper: OS dataflow with the partial sum kept in the PE, a MAC plus
// activation function, T_MAC = 5. Own choices: 16-bit signed operands,
// 32-bit result (the gather payload size), the pipeline arrangement and the
// ReLU as the activation function.
module pe #(
  parameter int unsigned DATA_W = 16,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned K_W    = 16,
  parameter int unsigned T_MAC  = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [K_W-1:0]           k_len,    // MACs per partial sum, >= 1
  input  logic                     relu_en,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [DATA_W-1:0] in_a,     // input activation
  input  logic signed [DATA_W-1:0] in_w,     // filter weight
  output logic                     ps_valid,
  input  logic                     ps_ready,
  output logic signed [ACC_W-1:0]  ps
);
  localparam int unsigned NST = T_MAC - 1;   // stages before the output register

  logic [K_W-1:0]  cnt;
  logic            acc_first;                // next accumulated term starts a new sum
  logic signed [ACC_W-1:0] acc;

  logic [NST-1:0]                  st_v, st_last;
  logic signed [ACC_W-1:0]         st_p [NST];

  logic fire, in_flight_last;

  // the last pair of a sum is taken only when the output register is free
  // and no other last pair is in flight, so a finished sum never finds the
  // output register occupied
  always_comb begin
    in_flight_last = 1'b0;
    for (int s = 0; s < NST; s++)
      if (st_v[s] && st_last[s]) in_flight_last = 1'b1;
  end
  assign in_ready = (cnt != k_len - 1'b1) || (!ps_valid && !in_flight_last);
  assign fire     = in_valid && in_ready;

  logic signed [ACC_W-1:0] sum;
  assign sum = (acc_first ? '0 : acc) + st_p[NST-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      st_v      <= '0;
      st_last   <= '0;
      acc       <= '0;
      acc_first <= 1'b1;
      ps_valid  <= 1'b0;
      ps        <= '0;
      for (int s = 0; s < NST; s++) st_p[s] <= '0;
    end else begin
      // stage 0: multiply
      st_v[0]    <= fire;
      st_last[0] <= fire && (cnt == k_len - 1'b1);
      st_p[0]    <= ACC_W'(in_a * in_w);
      if (fire) cnt <= (cnt == k_len - 1'b1) ? '0 : cnt + 1'b1;
      // delay stages
      for (int s = 1; s < NST; s++) begin
        st_v[s]    <= st_v[s-1];
        st_last[s] <= st_last[s-1];
        st_p[s]    <= st_p[s-1];
      end
      // last stage: accumulate, and hand a finished sum to the output register
      if (ps_valid && ps_ready) ps_valid <= 1'b0;
      if (st_v[NST-1]) begin
        if (st_last[NST-1]) begin
          ps        <= (relu_en && sum < 0) ? '0 : sum;
          ps_valid  <= 1'b1;
          acc_first <= 1'b1;
        end else begin
          acc       <= sum;
          acc_first <= 1'b0;
        end
      end
    end
  end

  a_no_ps_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (st_v[NST-1] && st_last[NST-1]) |-> (!ps_valid || ps_ready));
endmodule
