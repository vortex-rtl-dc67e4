// vx_ibuffer: instruction buffer between decode and issue.
//
// One small FIFO per wavefront holds decoded instructions (as an opaque
// payload of DATAW bits) so that a wavefront blocked on a register hazard
// does not hold up the others. Decode writes into the queue of the
// instruction's wavefront (in_ready is that queue's not-full); issue reads the
// head of any queue with out_ready[w]. Depth is this implementation's choice.
//
// Timing: a write is visible at the head on the next cycle; read and write of
// the same queue in one cycle are allowed.
module vx_ibuffer #(
  parameter int unsigned NUM_WARPS = 4,
  parameter int unsigned DATAW     = 64,
  parameter int unsigned DEPTH     = 2,
  localparam int unsigned WB = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned AB = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 reset,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [WB-1:0]        in_wid,
  input  logic [DATAW-1:0]     in_data,
  output logic [NUM_WARPS-1:0] out_valid,
  input  logic [NUM_WARPS-1:0] out_ready,
  output logic [DATAW-1:0]     out_data [NUM_WARPS]
);
  logic [DATAW-1:0] mem_q [NUM_WARPS][DEPTH];
  logic [AB-1:0]    rd_q  [NUM_WARPS];
  logic [AB-1:0]    wr_q  [NUM_WARPS];
  logic [AB:0]      cnt_q [NUM_WARPS];

  assign in_ready = (cnt_q[in_wid] != (AB+1)'(DEPTH));

  for (genvar w = 0; w < NUM_WARPS; w++) begin : g_q
    logic push, pop;
    assign push         = in_valid && in_ready && (in_wid == WB'(w));
    assign pop          = out_valid[w] && out_ready[w];
    assign out_valid[w] = (cnt_q[w] != '0);
    assign out_data[w]  = mem_q[w][rd_q[w]];
    always_ff @(posedge clk) begin
      if (reset) begin
        rd_q[w] <= '0; wr_q[w] <= '0; cnt_q[w] <= '0;
      end else begin
        if (push) begin
          mem_q[w][wr_q[w]] <= in_data;
          wr_q[w] <= (wr_q[w] == AB'(DEPTH - 1)) ? '0 : wr_q[w] + 1'b1;
        end
        if (pop) rd_q[w] <= (rd_q[w] == AB'(DEPTH - 1)) ? '0 : rd_q[w] + 1'b1;
        cnt_q[w] <= cnt_q[w] + (AB+1)'(push) - (AB+1)'(pop);
      end
    end
  end
endmodule
