// dram_arbiter: merges N requesters (cache slices and table loaders) onto the single DRAM
// port of the memory controller.
//
// Round-robin among the requesters with a request up. A write completes when the DRAM port
// accepts it. A read keeps the arbiter locked to its requester until the read data returns,
// and the data is handed back to that requester only; so there is at most one read in
// flight. All ports are 128-bit words addressed in word units.
// The single DDR4 controller behind it is the paper's; this arbiter is this design's.
module dram_arbiter
  import rnn_pkg::*;
#(
  parameter int N = 16,
  localparam int NW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          req_valid,
  output logic [N-1:0]          req_ready,
  input  logic [N-1:0]          req_we,
  input  logic [N-1:0][AW-1:0]  req_addr,
  input  logic [N-1:0][VW-1:0]  req_wdata,
  output logic [N-1:0]          rsp_valid,
  output logic [VW-1:0]         rsp_rdata,
  output logic                  dram_req_valid,
  input  logic                  dram_req_ready,
  output logic                  dram_req_we,
  output logic [AW-1:0]         dram_req_addr,
  output logic [VW-1:0]         dram_req_wdata,
  input  logic                  dram_rsp_valid,
  input  logic [VW-1:0]         dram_rsp_rdata
);
  logic [NW-1:0] rr, sel, owner;
  logic          found, busy;

  always_comb begin
    found = 1'b0; sel = '0;
    for (int k = 0; k < N; k++) begin
      if (!found && req_valid[(int'(rr) + k) % N]) begin
        found = 1'b1; sel = NW'((int'(rr) + k) % N);
      end
    end
    dram_req_valid = found && !busy;
    dram_req_we    = req_we[sel];
    dram_req_addr  = req_addr[sel];
    dram_req_wdata = req_wdata[sel];
    req_ready = '0;
    req_ready[sel] = dram_req_valid && dram_req_ready;
    rsp_valid = '0;
    rsp_valid[owner] = busy && dram_rsp_valid;
  end
  assign rsp_rdata = dram_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; owner <= '0; busy <= 1'b0;
    end else begin
      if (dram_req_valid && dram_req_ready) begin
        rr <= (sel == NW'(N-1)) ? '0 : sel + 1'b1;
        if (!dram_req_we) begin busy <= 1'b1; owner <= sel; end
      end
      if (busy && dram_rsp_valid) busy <= 1'b0;
    end
  end
endmodule
