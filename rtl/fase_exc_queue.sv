// fase_exc_queue: state monitor, StopFetch holding and Exception Event Queue.
//
// The state monitor watches the privilege level reported by every core. When a
// core switches from U-mode to a higher privilege (it took an exception or a
// system call), its CPU ID is queued; the Next request blocks on this queue and
// dequeues the IDs in order. Several cores may switch in the same cycle: each
// switch first sets a pending bit, and one pending ID per cycle (lowest index
// first) is moved into the queue. Since a core that left U-mode stays stopped
// until the host redirects it, at most N_CPU IDs can be outstanding, so a
// queue of N_CPU entries never overflows.
//
// The block also holds the StopFetch lines. StopFetch is asserted from reset,
// whenever a core is not in U-mode, and from the moment a core leaves U-mode
// until the controller finishes a Redirect for it (release strobe). So it is
// deasserted only while user code runs, as the paper requires.
//
// Timing: a U->M switch seen in cycle t sets the pending bit at t+1 and the ID
// can be dequeued from t+2. deq_valid / deq_id show the head; deq_ready pops.
// Queueing on the U->M switch and the reset state follow the paper; pending
// bits, fixed priority and depth are this design's choice.
module fase_exc_queue
  import fase_pkg::*;
#(
  parameter int unsigned N_CPU = 4,
  parameter int unsigned IDW   = (N_CPU > 1) ? $clog2(N_CPU) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_CPU-1:0][1:0] priv,
  input  logic                  release_valid,   // Redirect finished for release_id
  input  logic [IDW-1:0]        release_id,
  output logic [N_CPU-1:0]      stop_fetch,
  output logic                  deq_valid,
  output logic [IDW-1:0]        deq_id,
  input  logic                  deq_ready,
  output logic [N_CPU-1:0]      user_mode        // priv == U, registered view
);
  logic [N_CPU-1:0] prev_user, hold, pending;
  logic [N_CPU-1:0] now_user, leave_u;

  always_comb begin
    for (int i = 0; i < N_CPU; i++) begin
      now_user[i] = (priv[i] == PRIV_U);
      leave_u[i]  = prev_user[i] && !now_user[i];
      stop_fetch[i] = hold[i] || !now_user[i];
    end
  end
  assign user_mode = prev_user;

  // lowest pending ID
  logic           pick_valid;
  logic [IDW-1:0] pick_id;
  always_comb begin
    pick_valid = 1'b0;
    pick_id    = '0;
    for (int i = N_CPU - 1; i >= 0; i--) begin
      if (pending[i]) begin
        pick_valid = 1'b1;
        pick_id    = IDW'(i);
      end
    end
  end

  logic q_full, q_empty;
  fase_byte_fifo #(.WIDTH(IDW), .DEPTH(N_CPU)) u_q (
    .clk, .rst_n,
    .push (pick_valid && !q_full),
    .wdata(pick_id),
    .pop  (deq_ready && !q_empty),
    .rdata(deq_id),
    .full (q_full),
    .empty(q_empty),
    .count()
  );
  assign deq_valid = !q_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_user <= '0;
      hold      <= '1;
      pending   <= '0;
    end else begin
      prev_user <= now_user;
      for (int i = 0; i < N_CPU; i++) begin
        if (leave_u[i]) hold[i] <= 1'b1;
        else if (release_valid && release_id == IDW'(i)) hold[i] <= 1'b0;
        if (leave_u[i]) pending[i] <= 1'b1;
        else if (pick_valid && !q_full && pick_id == IDW'(i)) pending[i] <= 1'b0;
      end
    end
  end
endmodule
