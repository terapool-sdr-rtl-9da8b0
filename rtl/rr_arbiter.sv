// rr_arbiter: round-robin arbiter for N requesters.
//
// Combinational grant: the first active request at or after the priority
// pointer wins. The pointer moves to one past the winner when the grant is
// taken (`advance_i`), so a requester that keeps asking is served at least
// once every N grants. A grant that is not taken in its cycle is held
// (locked) until it is taken, so a stalled crossbar output keeps offering the
// same beat: chained crossbars then see the same valid/ready rule as a core.
// Reset sets the pointer to requester 0 and clears the lock. This is the
// arbiter used at every crossbar output; the paper names arbiters only, the
// round-robin policy is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [N-1:0] req_i,
  input  logic         advance_i,
  output logic [N-1:0] gnt_o,
  output logic         any_o
);
  localparam int unsigned IdxW = (N > 1) ? $clog2(N) : 1;

  logic [IdxW-1:0] ptr_q;
  logic [IdxW-1:0] win;
  logic            lock_q;
  logic [IdxW-1:0] lock_idx_q;

  always_comb begin
    gnt_o = '0;
    win   = ptr_q;
    any_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IdxW-1:0] idx;
      idx = IdxW'((int'(ptr_q) + k) % N);
      if (!any_o && req_i[idx]) begin
        any_o      = 1'b1;
        gnt_o[idx] = 1'b1;
        win        = idx;
      end
    end
    if (lock_q && req_i[lock_idx_q]) begin
      gnt_o        = '0;
      gnt_o[lock_idx_q] = 1'b1;
      win          = lock_idx_q;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q      <= '0;
      lock_q     <= 1'b0;
      lock_idx_q <= '0;
    end else begin
      if (advance_i && any_o) begin
        ptr_q <= (int'(win) == N - 1) ? '0 : win + IdxW'(1);
      end
      lock_q     <= any_o && !advance_i;
      lock_idx_q <= win;
    end
  end

endmodule
