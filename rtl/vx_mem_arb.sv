// vx_mem_arb: line-wide memory request arbiter and response router.
//
// Merges NUM_INPUTS memory request ports (from caches, cores or clusters)
// into one. Requests are granted round-robin; the grant index is appended
// below the request tag, and a response is routed back to the input named by
// the low tag bits with those bits removed. Combinational, no buffering:
// ready and valid pass straight through. This is how cores share a cluster
// port and clusters the processor's memory port; the round-robin policy is
// this implementation's choice.
module vx_mem_arb #(
  parameter int unsigned NUM_INPUTS = 2,
  parameter int unsigned ADDR_WIDTH = 26,
  parameter int unsigned DATA_WIDTH = 512,
  parameter int unsigned TAG_WIDTH  = 26,
  localparam int unsigned SB = (NUM_INPUTS > 1) ? $clog2(NUM_INPUTS) : 1
) (
  input  logic                    clk,
  input  logic                    reset,
  input  logic [NUM_INPUTS-1:0]   in_req_valid,
  output logic [NUM_INPUTS-1:0]   in_req_ready,
  input  logic [NUM_INPUTS-1:0]   in_req_rw,
  input  logic [ADDR_WIDTH-1:0]   in_req_addr   [NUM_INPUTS],
  input  logic [DATA_WIDTH-1:0]   in_req_data   [NUM_INPUTS],
  input  logic [DATA_WIDTH/8-1:0] in_req_byteen [NUM_INPUTS],
  input  logic [TAG_WIDTH-1:0]    in_req_tag    [NUM_INPUTS],
  output logic [NUM_INPUTS-1:0]   in_rsp_valid,
  input  logic [NUM_INPUTS-1:0]   in_rsp_ready,
  output logic [DATA_WIDTH-1:0]   in_rsp_data,
  output logic [TAG_WIDTH-1:0]    in_rsp_tag,
  output logic                    out_req_valid,
  input  logic                    out_req_ready,
  output logic                    out_req_rw,
  output logic [ADDR_WIDTH-1:0]   out_req_addr,
  output logic [DATA_WIDTH-1:0]   out_req_data,
  output logic [DATA_WIDTH/8-1:0] out_req_byteen,
  output logic [TAG_WIDTH+SB-1:0] out_req_tag,
  input  logic                    out_rsp_valid,
  output logic                    out_rsp_ready,
  input  logic [DATA_WIDTH-1:0]   out_rsp_data,
  input  logic [TAG_WIDTH+SB-1:0] out_rsp_tag
);
  logic [SB-1:0] rr_q, grant;
  logic          gvalid;

  always_comb begin
    gvalid = 1'b0;
    grant  = '0;
    for (int k = NUM_INPUTS - 1; k >= 0; k--) begin
      int unsigned i;
      i = (int'(rr_q) + k + 1) % NUM_INPUTS;
      if (in_req_valid[i]) begin gvalid = 1'b1; grant = SB'(i); end
    end
  end
  always_comb begin
    in_req_ready = '0;
    in_req_ready[grant] = gvalid && out_req_ready;
  end

  always_ff @(posedge clk) begin
    if (reset) rr_q <= '0;
    else if (gvalid && out_req_ready) rr_q <= grant;
  end

  assign out_req_valid  = gvalid;
  assign out_req_rw     = in_req_rw[grant];
  assign out_req_addr   = in_req_addr[grant];
  assign out_req_data   = in_req_data[grant];
  assign out_req_byteen = in_req_byteen[grant];
  assign out_req_tag    = {in_req_tag[grant], grant};

  logic [SB-1:0] dst;
  assign dst         = (NUM_INPUTS > 1) ? out_rsp_tag[SB-1:0] : '0;
  assign in_rsp_data = out_rsp_data;
  assign in_rsp_tag  = out_rsp_tag[TAG_WIDTH+SB-1:SB];
  always_comb begin
    in_rsp_valid = '0;
    in_rsp_valid[dst] = out_rsp_valid;
  end
  assign out_rsp_ready = in_rsp_ready[dst];
endmodule
