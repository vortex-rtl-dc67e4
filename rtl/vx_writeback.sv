// vx_writeback: commit-stage arbiter onto the register-file write port.
//
// NUM_INPUTS execution units offer results (wavefront, rd, thread mask,
// per-thread data, write flag). One is granted per cycle by fixed priority,
// input 0 first (the core connects LSU, texture, CSR, ALU in that order so
// that long-latency units drain first). The granted result drives the GPR
// write port and releases rd in the scoreboard. Combinational; the chosen
// input's ready is high in the cycle it is written. The priority order is
// this implementation's choice.
module vx_writeback #(
  parameter int unsigned NUM_INPUTS  = 4,
  parameter int unsigned NUM_THREADS = 4,
  parameter int unsigned WB          = 2
) (
  input  logic [NUM_INPUTS-1:0]  in_valid,
  output logic [NUM_INPUTS-1:0]  in_ready,
  input  logic [WB-1:0]          in_wid   [NUM_INPUTS],
  input  logic [4:0]             in_rd    [NUM_INPUTS],
  input  logic [NUM_THREADS-1:0] in_tmask [NUM_INPUTS],
  input  logic [NUM_INPUTS-1:0]  in_wb,
  input  logic [31:0]            in_data  [NUM_INPUTS][NUM_THREADS],
  output logic                   wb_valid,      // a result retires
  output logic                   wb_write,      // ... and writes rd
  output logic [WB-1:0]          wb_wid,
  output logic [4:0]             wb_rd,
  output logic [NUM_THREADS-1:0] wb_tmask,
  output logic [31:0]            wb_data  [NUM_THREADS]
);
  always_comb begin
    logic found;
    found    = 1'b0;
    in_ready = '0;
    wb_valid = 1'b0;
    wb_write = 1'b0;
    wb_wid   = '0;
    wb_rd    = '0;
    wb_tmask = '0;
    for (int t = 0; t < NUM_THREADS; t++) wb_data[t] = '0;
    for (int i = 0; i < NUM_INPUTS; i++) begin
      if (in_valid[i] && !found) begin
        found       = 1'b1;
        in_ready[i] = 1'b1;
        wb_valid    = 1'b1;
        wb_write    = in_wb[i];
        wb_wid      = in_wid[i];
        wb_rd       = in_rd[i];
        wb_tmask    = in_tmask[i];
        for (int t = 0; t < NUM_THREADS; t++) wb_data[t] = in_data[i][t];
      end
    end
  end
endmodule
