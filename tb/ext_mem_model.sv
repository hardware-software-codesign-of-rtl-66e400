// ext_mem_model: behavioural model of the external main memory, for
// simulation only (not synthesizable as a memory chip would be).
//
// Word-addressed 64-bit memory behind the accelerator's memory port.
// Requests use valid/ready; req_ready is withdrawn at random on STALL_PCT
// percent of the clocks to exercise back-pressure. A read returns its word
// on rsp_valid/rsp_data exactly LAT clocks after it is accepted, so
// responses keep request order. Testbenches load and inspect `mem`
// directly by hierarchical reference. Counts accepted requests and stalls.
module ext_mem_model
  import mfdfp_pkg::*;
#(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned LAT       = 3,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mword_t   rsp_data
);
  mword_t mem [WORDS];
  logic   pv [LAT];
  mword_t pd [LAT];
  int     n_reads = 0, n_writes = 0, n_stalls = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      for (int i = 0; i < int'(LAT); i++) begin pv[i] <= 1'b0; pd[i] <= '0; end
    end else begin
      req_ready <= (int'($urandom_range(0, 99)) >= int'(STALL_PCT));
      pv[0] <= req_valid && req_ready && !req.we;
      pd[0] <= mem[req.addr % WORDS];
      for (int i = 1; i < int'(LAT); i++) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
      if (req_valid && req_ready) begin
        if (req.we) begin mem[req.addr % WORDS] <= req.wdata; n_writes++; end
        else n_reads++;
      end
      if (req_valid && !req_ready) n_stalls++;
    end
  end
  assign rsp_valid = pv[LAT-1];
  assign rsp_data  = pd[LAT-1];
endmodule
