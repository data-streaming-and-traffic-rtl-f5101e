// gather_payload: the Gather Payload block of a router.
//
// Holds the partial sums a node wants to send to the global buffer. The PE
// side pushes one entry (N_PE 32-bit payloads plus their destination) into a
// small queue. The entry at the head of the queue is offered to the router
// (rt_valid) and a timer starts. Three things can happen to it:
//   * the router finds a passing gather packet with room and claims it
//     (rt_commit); after the router has written the last payload word into the
//     packet (rt_done) the entry is popped and `uploaded` pulses;
//   * a matching gather packet passes with too little room (rt_full_seen):
//     the timer starts again, so that a packet started by a node further
//     upstream (which also found the first packet full) can still pick the
//     entry up;
//   * the timer reaches `delta` cycles with no claim: the entry is handed
//     back for the node to start its own gather packet.
// The hand-back is the init_valid/init_ready handshake; the network interface
// turns init_data into a new gather packet. A claim always wins over a
// timeout in the same cycle, so a payload is never sent twice.
//
// Timing: the timer counts the cycles the entry has been at the head without
// a claim; init_valid rises delta+1 cycles after the entry reaches the head
// (one cycle after it for delta = 0).
//
// From the paper: the queue, the upload status reported back, the delta
// timeout set per node, and that after a full packet the node may start its
// own packet but first waits delta so that a previously generated packet can
// come through. Own choices: queue depth, that the own packet started after a
// timeout is a gather packet (see README), and the handshake signals.
module gather_payload
  import noc_pkg::*;
#(
  parameter int unsigned N_PE    = 1,   // PEs per router = payloads per entry
  parameter int unsigned Q_DEPTH = 2,
  parameter int unsigned DELTA_W = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // PE / network-interface side
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [N_PE*PAYLOAD_W-1:0] in_data,
  input  coord_t                    in_dst,
  input  logic [DELTA_W-1:0]        delta,
  output logic                      uploaded,    // pulse: entry went out in a passing packet
  output logic                      init_valid,  // start an own gather packet with this entry
  input  logic                      init_ready,
  output logic [N_PE*PAYLOAD_W-1:0] init_data,
  output coord_t                    init_dst,
  // router side
  output logic                      rt_valid,
  output logic [N_PE*PAYLOAD_W-1:0] rt_data,
  output coord_t                    rt_dst,
  input  logic                      rt_commit,
  input  logic                      rt_done,
  input  logic                      rt_full_seen
);
  typedef struct packed {
    logic [N_PE*PAYLOAD_W-1:0] data;
    coord_t                    dst;
  } entry_t;

  typedef enum logic [1:0] {S_WAIT, S_COMMIT, S_INIT} state_e;

  entry_t head;
  logic   empty, full, pop;
  state_e state;
  logic [DELTA_W-1:0] timer;

  fifo #(.T(entry_t), .DEPTH(Q_DEPTH)) u_q (
    .clk, .rst_n,
    .wr_en  (in_valid && in_ready),
    .wr_data('{data: in_data, dst: in_dst}),
    .rd_en  (pop),
    .rd_data(head),
    .empty, .full, .count()
  );

  assign in_ready   = !full;
  assign rt_valid   = !empty && state == S_WAIT;
  assign rt_data    = head.data;
  assign rt_dst     = head.dst;
  assign init_valid = !empty && state == S_INIT;
  assign init_data  = head.data;
  assign init_dst   = head.dst;
  assign pop        = (state == S_COMMIT && rt_done) || (init_valid && init_ready);
  assign uploaded   = state == S_COMMIT && rt_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_WAIT;
      timer <= '0;
    end else begin
      unique case (state)
        S_WAIT: begin
          if (!empty) begin
            if (rt_commit)          state <= S_COMMIT;
            else if (rt_full_seen)  timer <= '0;      // wait delta again for a later packet
            else if (timer >= delta) state <= S_INIT;
            else                    timer <= timer + 1'b1;
          end
        end
        S_COMMIT: if (rt_done) begin
          state <= S_WAIT;
          timer <= '0;
        end
        S_INIT: if (init_ready) begin
          state <= S_WAIT;
          timer <= '0;
        end
        default: state <= S_WAIT;
      endcase
    end
  end

  a_commit_only_offered: assert property (@(posedge clk) disable iff (!rst_n) rt_commit |-> rt_valid);
  a_done_only_committed: assert property (@(posedge clk) disable iff (!rst_n) rt_done |-> state == S_COMMIT);
endmodule
