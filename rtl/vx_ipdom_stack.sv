// vx_ipdom_stack: immediate-post-dominator reconvergence stack of one
// wavefront.
//
// A split instruction pushes up to two entries in one cycle: first the
// current thread mask marked as fall-through, then (only when the threads
// diverge) the not-taken threads together with the PC after the split. A join
// pops one entry; the scheduler restores the thread mask from it and, when
// the entry is not a fall-through, also jumps to its PC. This is the scheme
// the design describes; the depth and the single-entry push of a
// non-divergent split are this implementation's choices.
//
// Interface: push/push2 with the entries, pop; top is the entry that pop
// returns (valid when !empty). Push and pop take effect at the clock edge;
// top is combinational from the stack registers.
module vx_ipdom_stack #(
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned DEPTH       = 2 * NUM_THREADS
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic                   push,        // push entry A (fall-through)
  input  logic                   push2,       // also push entry B on top of A
  input  logic [NUM_THREADS-1:0] push_tmask_a,
  input  logic [NUM_THREADS-1:0] push_tmask_b,
  input  logic [31:0]            push_pc_b,
  input  logic                   pop,
  output logic [NUM_THREADS-1:0] top_tmask,
  output logic [31:0]            top_pc,
  output logic                   top_fall,
  output logic                   empty,
  output logic                   full
);
  localparam int unsigned AW = $clog2(DEPTH + 1);

  logic [NUM_THREADS-1:0] tmask_q [DEPTH];
  logic [31:0]            pc_q    [DEPTH];
  logic [DEPTH-1:0]       fall_q;
  logic [AW-1:0]          sp_q;   // number of entries

  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [IW-1:0] top_i, w0_i, w1_i;  // top entry, first and second free slot
  assign top_i = IW'(sp_q - 1'b1);
  assign w0_i  = IW'(sp_q);
  assign w1_i  = IW'(sp_q + 1'b1);

  assign empty = (sp_q == '0);
  assign full  = (sp_q > AW'(DEPTH - 2));  // room for two entries is required
  assign top_tmask = empty ? '0 : tmask_q[top_i];
  assign top_pc    = empty ? '0 : pc_q[top_i];
  assign top_fall  = empty ? 1'b0 : fall_q[top_i];

  always_ff @(posedge clk) begin
    if (reset) begin
      sp_q   <= '0;
      fall_q <= '0;
    end else if (push && !full) begin
      tmask_q[w0_i] <= push_tmask_a;
      pc_q[w0_i]    <= '0;
      fall_q[w0_i]  <= 1'b1;
      if (push2) begin
        tmask_q[w1_i] <= push_tmask_b;
        pc_q[w1_i]    <= push_pc_b;
        fall_q[w1_i]  <= 1'b0;
        sp_q <= sp_q + AW'(2);
      end else begin
        sp_q <= sp_q + AW'(1);
      end
    end else if (pop && !empty) begin
      sp_q <= sp_q - 1'b1;
    end
  end

  // a split must never overflow the stack and a join never underflow it
  always_ff @(posedge clk) begin
    if (!reset) begin
      assert (!(push && full)) else $error("IPDOM stack overflow");
      assert (!(pop && empty && !push)) else $error("IPDOM stack underflow");
    end
  end
endmodule
