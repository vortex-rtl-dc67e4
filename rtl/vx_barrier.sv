// vx_barrier: barrier table for wavefront synchronization.
//
// Each barrier ID has an entry with a count of the wavefronts that have
// arrived and a mask of the wavefronts stalled on it. A bar request carries
// the ID, the number of wavefronts expected (numW) and the arriving waiter.
// When the arrival completes the count the entry's mask, including the
// arriving waiter, is sent out on rel_mask for one cycle and the entry is
// cleared; otherwise the waiter's bit is added to the mask. The same module
// serves as the per-core table (waiters are wavefronts) and as the
// processor-wide table for global barriers (waiters are core*NUM_WARPS+wid).
//
// Timing: the request is registered; the release appears one cycle after the
// last arrival.
module vx_barrier #(
  parameter int unsigned NUM_BARRIERS = 4,
  parameter int unsigned NUM_WAITERS  = 4,
  localparam int unsigned IDW = (NUM_BARRIERS > 1) ? $clog2(NUM_BARRIERS) : 1,
  localparam int unsigned WW  = (NUM_WAITERS > 1) ? $clog2(NUM_WAITERS) : 1,
  localparam int unsigned CW  = $clog2(NUM_WAITERS + 1)
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   req_valid,
  input  logic [IDW-1:0]         req_id,
  input  logic [CW-1:0]          req_count,   // wavefronts the barrier waits for
  input  logic [WW-1:0]          req_waiter,
  output logic                   rel_valid,
  output logic [NUM_WAITERS-1:0] rel_mask
);
  logic [CW-1:0]          cnt_q  [NUM_BARRIERS];
  logic [NUM_WAITERS-1:0] mask_q [NUM_BARRIERS];

  logic [CW-1:0]          cnt_n;
  logic [NUM_WAITERS-1:0] mask_n;

  always_comb begin
    cnt_n  = cnt_q[req_id] + 1'b1;
    mask_n = mask_q[req_id] | (NUM_WAITERS'(1) << req_waiter);
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      for (int i = 0; i < NUM_BARRIERS; i++) begin
        cnt_q[i]  <= '0;
        mask_q[i] <= '0;
      end
      rel_valid <= 1'b0;
      rel_mask  <= '0;
    end else begin
      rel_valid <= 1'b0;
      if (req_valid) begin
        if (cnt_n >= req_count) begin
          rel_valid      <= 1'b1;
          rel_mask       <= mask_n;
          cnt_q[req_id]  <= '0;
          mask_q[req_id] <= '0;
        end else begin
          cnt_q[req_id]  <= cnt_n;
          mask_q[req_id] <= mask_n;
        end
      end
    end
  end
endmodule
