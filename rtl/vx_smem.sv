// vx_smem: per-core shared memory (scratchpad).
//
// SMEM_SIZE bytes split into NUM_BANKS word-interleaved single-ported banks.
// Each cycle every bank serves the lowest-numbered lane that addresses it;
// the other lanes of that bank see ready low and retry (bank conflict).
// Reads return one cycle later with the lane mask of the lanes served;
// writes take byte enables and return nothing. Banking and the fixed
// one-cycle latency are this implementation's choices.
module vx_smem #(
  parameter int unsigned SMEM_SIZE   = 16384,
  parameter int unsigned NUM_BANKS   = 4,
  parameter int unsigned NUM_THREADS = 4
) (
  input  logic                   clk,
  input  logic                   reset,
  input  logic [NUM_THREADS-1:0] req_valid,
  output logic [NUM_THREADS-1:0] req_ready,
  input  logic                   req_rw,
  input  logic [31:0]            req_addr   [NUM_THREADS],
  input  logic [3:0]             req_byteen [NUM_THREADS],
  input  logic [31:0]            req_data   [NUM_THREADS],
  output logic                   rsp_valid,
  output logic [NUM_THREADS-1:0] rsp_mask,
  output logic [31:0]            rsp_data [NUM_THREADS]
);
  localparam int unsigned WORDS = SMEM_SIZE / 4 / NUM_BANKS;
  localparam int unsigned BB    = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;
  localparam int unsigned IB    = $clog2(WORDS);

  logic [31:0] mem [NUM_BANKS][WORDS];

  function automatic logic [BB-1:0] bank_of(logic [31:0] a);
    return (NUM_BANKS > 1) ? BB'(a >> 2) : '0;
  endfunction
  function automatic logic [IB-1:0] idx_of(logic [31:0] a);
    return IB'(a >> (2 + ((NUM_BANKS > 1) ? BB : 0)));
  endfunction

  always_comb begin
    logic [NUM_BANKS-1:0] used;
    used = '0;
    req_ready = '0;
    for (int t = 0; t < NUM_THREADS; t++)
      if (req_valid[t] && !used[bank_of(req_addr[t])]) begin
        used[bank_of(req_addr[t])] = 1'b1;
        req_ready[t] = 1'b1;
      end
  end

  always_ff @(posedge clk) begin
    if (reset) begin
      rsp_valid <= 1'b0;
      rsp_mask  <= '0;
    end else begin
      rsp_valid <= !req_rw && (req_ready != '0);
      rsp_mask  <= req_rw ? '0 : req_ready;
    end
    for (int t = 0; t < NUM_THREADS; t++) begin
      if (req_ready[t]) begin
        if (req_rw) begin
          for (int b = 0; b < 4; b++)
            if (req_byteen[t][b]) mem[bank_of(req_addr[t])][idx_of(req_addr[t])][8*b +: 8] <= req_data[t][8*b +: 8];
        end else begin
          rsp_data[t] <= mem[bank_of(req_addr[t])][idx_of(req_addr[t])];
        end
      end
    end
  end
endmodule
