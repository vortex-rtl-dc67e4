// vx_gpu_unit: executes the wavefront-control instructions of the extension.
//
// Combinational. From the instruction (funct3) and the operand vectors it
// produces the one-cycle commands for the scheduler and the barrier tables:
//   tmc rs1     - new thread mask with the lowest rs1 threads on (rs1 is
//                 taken from the lowest active thread; 0 ends the wavefront)
//   wspawn rs1, rs2 - activate wavefronts 1..rs1-1 at PC rs2
//   split rs1   - per-thread predicate rs1[0]; taken/not-taken masks and
//                 whether the active threads diverge
//   join        - pop the IPDOM stack
//   bar rs1, rs2 - barrier id rs1 (MSB of the id field: global scope),
//                 rs2 wavefronts expected
// The instruction set follows the design; operand conventions (a count for
// tmc, which wavefronts wspawn starts) are this implementation's choices.
module vx_gpu_unit
  import vx_pkg::*;
#(
  parameter int unsigned NUM_WARPS    = 4,
  parameter int unsigned NUM_THREADS  = 4,
  parameter int unsigned BAR_ID_BITS  = 3     // MSB selects global scope
) (
  input  logic                   valid,
  input  logic [2:0]             func3,
  input  logic [31:0]            pc,
  input  logic [NUM_THREADS-1:0] tmask,
  input  logic [31:0]            rs1_data [NUM_THREADS],
  input  logic [31:0]            rs2_data [NUM_THREADS],
  output logic                   tmc_valid,
  output logic [NUM_THREADS-1:0] tmc_tmask,
  output logic                   wspawn_valid,
  output logic [NUM_WARPS-1:0]   wspawn_mask,
  output logic [31:0]            wspawn_pc,
  output logic                   split_valid,
  output logic                   split_diverged,
  output logic [NUM_THREADS-1:0] split_taken,
  output logic [NUM_THREADS-1:0] split_ntaken,
  output logic [31:0]            split_pc,
  output logic                   join_valid,
  output logic                   bar_valid,
  output logic                   bar_global,
  output logic [BAR_ID_BITS-2:0] bar_id,
  output logic [31:0]            bar_count
);
  logic [31:0] a0, b0;   // operands of the lowest active thread

  always_comb begin
    a0 = rs1_data[0];
    b0 = rs2_data[0];
    for (int t = NUM_THREADS - 1; t >= 0; t--)
      if (tmask[t]) begin a0 = rs1_data[t]; b0 = rs2_data[t]; end
  end

  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      tmc_tmask[t]    = (a0 > 32'(t));
      split_taken[t]  = tmask[t] &  rs1_data[t][0];
      split_ntaken[t] = tmask[t] & ~rs1_data[t][0];
    end
    for (int w = 0; w < NUM_WARPS; w++)
      wspawn_mask[w] = (w != 0) && (a0 > 32'(w));
  end

  assign wspawn_pc      = b0;
  assign split_pc       = pc + 32'd4;
  assign split_diverged = (split_taken != '0) && (split_ntaken != '0);
  assign bar_global     = a0[BAR_ID_BITS-1];
  assign bar_id         = a0[BAR_ID_BITS-2:0];
  assign bar_count      = b0;

  assign tmc_valid    = valid && (func3 == GPU_TMC);
  assign wspawn_valid = valid && (func3 == GPU_WSPAWN);
  assign split_valid  = valid && (func3 == GPU_SPLIT);
  assign join_valid   = valid && (func3 == GPU_JOIN);
  assign bar_valid    = valid && (func3 == GPU_BAR);
endmodule
