// mem_arbiter: the memory interface shared by the three DMAs.
//
// The accelerator has one external memory port. A DMA asks for it by
// raising `busy`; when the port is free the arbiter grants it to the
// lowest-numbered busy DMA (0 input, 1 weights, 2 output) on the next
// clock, and the grant stays until that DMA drops `busy`. Only the owner's
// requests reach the port and every read response is returned to the
// owner, so responses need no tag. The grant is registered: a DMA sees
// req_ready one clock after it becomes busy at the earliest.
//
// External port: mem_req_valid/mem_req_ready/mem_req carry requests;
// mem_rsp_valid/mem_rsp_data return read data in request order.
// The shared memory interface is drawn in the paper; arbitration is this
// design's choice.
module mem_arbiter
  import mfdfp_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     busy      [N],
  input  logic     req_valid [N],
  output logic     req_ready [N],
  input  mem_req_t req       [N],
  output logic     rsp_valid [N],
  output mword_t   rsp_data,
  output logic     mem_req_valid,
  input  logic     mem_req_ready,
  output mem_req_t mem_req,
  input  logic     mem_rsp_valid,
  input  mword_t   mem_rsp_data
);
  localparam int unsigned ID_W = (N > 1) ? $clog2(N) : 1;
  logic            owned;
  logic [ID_W-1:0] owner;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owned <= 1'b0;
      owner <= '0;
    end else if (owned) begin
      if (!busy[owner]) owned <= 1'b0;
    end else begin
      for (int i = N-1; i >= 0; i--) begin
        if (busy[i]) begin
          owned <= 1'b1;
          owner <= ID_W'(i);
        end
      end
    end
  end

  always_comb begin
    mem_req_valid = owned && req_valid[owner];
    mem_req       = req[owner];
    for (int i = 0; i < int'(N); i++) begin
      req_ready[i] = owned && (owner == ID_W'(i)) && mem_req_ready;
      rsp_valid[i] = owned && (owner == ID_W'(i)) && mem_rsp_valid;
    end
  end
  assign rsp_data = mem_rsp_data;

  // A request once offered is held until it is taken.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req));
endmodule
