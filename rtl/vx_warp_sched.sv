// vx_warp_sched: wavefront scheduler of the fetch stage.
//
// Holds the wavefront table (PC and thread mask of every wavefront), one IPDOM
// stack per wavefront and four masks: active (wavefront running), stalled
// (not to be scheduled for now), barrier (waiting at a barrier) and visible
// (the hierarchical-scheduling window). Each cycle it picks the lowest
// wavefront of the visible mask that is schedulable and clears its visible
// bit; when no visible wavefront is schedulable the visible mask is refilled
// with every active, unstalled, non-barrier wavefront. These masks and their
// roles follow the design; pick order and the stall policy are this
// implementation's: a fetched wavefront is stalled and its PC advanced by 4,
// decode releases it for ordinary instructions, and execute releases it
// (with the new PC or mask) for branches and wavefront-control instructions.
//
// Interface: elastic fetch request (valid/ready) carrying pc, wavefront id
// and thread mask; release, branch, GPU-control and barrier-release inputs,
// all acting at the next clock edge. Reset starts wavefront 0 with thread 0
// at STARTUP_ADDR.
module vx_warp_sched #(
  parameter int unsigned NUM_WARPS    = 4,
  parameter int unsigned NUM_THREADS  = 4,
  parameter logic [31:0] STARTUP_ADDR = 32'h8000_0000,
  localparam int unsigned WB = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1
) (
  input  logic                   clk,
  input  logic                   reset,
  // fetch request
  output logic                   ifetch_valid,
  input  logic                   ifetch_ready,
  output logic [31:0]            ifetch_pc,
  output logic [WB-1:0]          ifetch_wid,
  output logic [NUM_THREADS-1:0] ifetch_tmask,
  // decode releases a wavefront whose instruction is not a control one
  input  logic                   unstall_valid,
  input  logic [WB-1:0]          unstall_wid,
  // branch resolution from the ALU
  input  logic                   br_valid,
  input  logic [WB-1:0]          br_wid,
  input  logic                   br_taken,
  input  logic [31:0]            br_dest,
  // wavefront control from the GPU unit
  input  logic                   tmc_valid,
  input  logic [WB-1:0]          tmc_wid,
  input  logic [NUM_THREADS-1:0] tmc_tmask,
  input  logic                   wspawn_valid,
  input  logic [WB-1:0]          wspawn_wid,
  input  logic [NUM_WARPS-1:0]   wspawn_mask,
  input  logic [31:0]            wspawn_pc,
  input  logic                   split_valid,
  input  logic [WB-1:0]          split_wid,
  input  logic                   split_diverged,
  input  logic [NUM_THREADS-1:0] split_taken,     // threads with true predicate
  input  logic [NUM_THREADS-1:0] split_ntaken,    // threads with false predicate
  input  logic [31:0]            split_pc,        // PC after the split
  input  logic                   join_valid,
  input  logic [WB-1:0]          join_wid,
  input  logic                   bar_valid,       // wavefront waits at a barrier
  input  logic [WB-1:0]          bar_wid,
  input  logic                   bar_release_valid,
  input  logic [NUM_WARPS-1:0]   bar_release_mask,
  // status
  output logic [NUM_WARPS-1:0]   active_mask,
  output logic [NUM_WARPS-1:0]   barrier_mask,
  output logic                   ipdom_full,
  output logic                   busy
);
  logic [31:0]            pc_q    [NUM_WARPS];
  logic [NUM_THREADS-1:0] tmask_q [NUM_WARPS];
  logic [NUM_WARPS-1:0]   active_q, stalled_q, barrier_q, visible_q;

  logic [NUM_WARPS-1:0] schedulable, vis_eff;
  logic [WB-1:0]        pick;
  logic                 fire;

  assign schedulable = active_q & ~stalled_q & ~barrier_q;
  assign vis_eff     = ((visible_q & schedulable) != '0) ? (visible_q & schedulable) : schedulable;

  always_comb begin
    pick = '0;
    for (int i = NUM_WARPS - 1; i >= 0; i--)
      if (vis_eff[i]) pick = WB'(i);
  end

  assign ifetch_valid = (vis_eff != '0);
  assign ifetch_wid   = pick;
  assign ifetch_pc    = pc_q[pick];
  assign ifetch_tmask = tmask_q[pick];
  assign fire         = ifetch_valid && ifetch_ready;

  assign active_mask  = active_q;
  assign barrier_mask = barrier_q;
  assign busy         = (active_q != '0);

  // ---------------- IPDOM stacks ----------------
  logic [NUM_THREADS-1:0] top_tmask [NUM_WARPS];
  logic [31:0]            top_pc    [NUM_WARPS];
  logic [NUM_WARPS-1:0]   top_fall, st_full;

  for (genvar w = 0; w < NUM_WARPS; w++) begin : g_ipdom
    vx_ipdom_stack #(.NUM_THREADS(NUM_THREADS)) u_ipdom (
      .clk, .reset,
      .push         (split_valid && split_wid == WB'(w)),
      .push2        (split_diverged),
      .push_tmask_a (tmask_q[w]),
      .push_tmask_b (split_ntaken),
      .push_pc_b    (split_pc),
      .pop          (join_valid && join_wid == WB'(w)),
      .top_tmask    (top_tmask[w]),
      .top_pc       (top_pc[w]),
      .top_fall     (top_fall[w]),
      .empty        (),
      .full         (st_full[w])
    );
  end
  assign ipdom_full = (st_full != '0);

  // ---------------- state update ----------------
  always_ff @(posedge clk) begin
    if (reset) begin
      active_q  <= NUM_WARPS'(1);
      stalled_q <= '0;
      barrier_q <= '0;
      visible_q <= '0;
      for (int w = 0; w < NUM_WARPS; w++) begin
        pc_q[w]    <= STARTUP_ADDR;
        tmask_q[w] <= NUM_THREADS'(1);
      end
    end else begin
      if (fire) begin
        visible_q         <= vis_eff & ~(NUM_WARPS'(1) << pick);
        stalled_q[pick]   <= 1'b1;
        pc_q[pick]        <= pc_q[pick] + 32'd4;
      end else if ((visible_q & schedulable) == '0) begin
        visible_q <= '0;
      end
      if (unstall_valid) stalled_q[unstall_wid] <= 1'b0;
      if (br_valid) begin
        stalled_q[br_wid] <= 1'b0;
        if (br_taken) pc_q[br_wid] <= br_dest;
      end
      if (tmc_valid) begin
        stalled_q[tmc_wid] <= 1'b0;
        tmask_q[tmc_wid]   <= tmc_tmask;
        if (tmc_tmask == '0) active_q[tmc_wid] <= 1'b0;
      end
      if (wspawn_valid) begin
        stalled_q[wspawn_wid] <= 1'b0;
        for (int w = 0; w < NUM_WARPS; w++) begin
          if (wspawn_mask[w] && !active_q[w]) begin
            active_q[w]  <= 1'b1;
            stalled_q[w] <= 1'b0;
            pc_q[w]      <= wspawn_pc;
            tmask_q[w]   <= NUM_THREADS'(1);
          end
        end
      end
      if (split_valid) begin
        stalled_q[split_wid] <= 1'b0;
        if (split_diverged) tmask_q[split_wid] <= split_taken;
      end
      if (join_valid) begin
        stalled_q[join_wid] <= 1'b0;
        tmask_q[join_wid]   <= top_tmask[join_wid];
        if (!top_fall[join_wid]) pc_q[join_wid] <= top_pc[join_wid];
      end
      if (bar_valid) begin
        stalled_q[bar_wid] <= 1'b0;
        barrier_q[bar_wid] <= 1'b1;
      end
      if (bar_release_valid) begin
        barrier_q <= barrier_q & ~bar_release_mask;
        if (bar_valid && !bar_release_mask[bar_wid]) barrier_q[bar_wid] <= 1'b1;
      end
    end
  end
endmodule
