// mem_controller: the memory controller front end of the chip.
//
// NSLICE cache slices, each behind an In-DRAM Table Loader, each serving the Memory NoC
// edge port of one mesh column (slice s owns the lines with line address % NSLICE = s, and
// PEs address their requests to column s). Host DMA words are steered to the slice that owns
// the address, one DMA access at a time; each DMA access gets one response (read data, or
// an acknowledgement for a write). A round-robin arbiter merges the DRAM traffic of all
// slices and table loaders onto the single DRAM word port, which leads to the off-chip
// DDR4 controller.
// The slice count, caches and table loaders are the paper's; the DMA path and the DRAM
// port protocol (valid/ready request, in-order read data) are this design's choices.
module mem_controller
  import rnn_pkg::*;
#(
  parameter int NSLICE = 8,
  parameter int SETS   = 512,
  parameter int WAYS   = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // memory NoC edge
  input  logic [NSLICE-1:0]        noc_in_valid,
  output logic [NSLICE-1:0]        noc_in_ready,
  input  noc_flit_t [NSLICE-1:0]   noc_in_flit,
  output logic [NSLICE-1:0]        noc_out_valid,
  input  logic [NSLICE-1:0]        noc_out_ready,
  output noc_flit_t [NSLICE-1:0]   noc_out_flit,
  // host DMA
  input  logic                     dma_req_valid,
  output logic                     dma_req_ready,
  input  logic                     dma_req_we,
  input  logic [AW-1:0]            dma_req_addr,
  input  logic [VW-1:0]            dma_req_wdata,
  output logic                     dma_rsp_valid,
  output logic [VW-1:0]            dma_rsp_rdata,
  // DRAM
  output logic                     dram_req_valid,
  input  logic                     dram_req_ready,
  output logic                     dram_req_we,
  output logic [AW-1:0]            dram_req_addr,
  output logic [VW-1:0]            dram_req_wdata,
  input  logic                     dram_rsp_valid,
  input  logic [VW-1:0]            dram_rsp_rdata,
  // statistics
  output logic [NSLICE-1:0]        ev_hit,
  output logic [NSLICE-1:0]        ev_miss,
  output logic [NSLICE-1:0]        ev_writeback,
  output logic [NSLICE-1:0]        ev_lookup
);
  localparam int NP = 2 * NSLICE;
  logic [NP-1:0]          a_valid, a_ready, a_we, a_rsp;
  logic [NP-1:0][AW-1:0]  a_addr;
  logic [NP-1:0][VW-1:0]  a_wdata;
  logic [VW-1:0]          a_rdata;

  logic                   dma_busy;
  logic [NSLICE-1:0]      s_dma_valid, s_dma_ready, s_dma_rsp;
  logic [NSLICE-1:0][VW-1:0] s_dma_rdata;
  logic [$clog2(NSLICE)-1:0] dsl;
  assign dsl = $clog2(NSLICE)'(dma_req_addr[2 +: $clog2(NSLICE)]);

  for (genvar s = 0; s < NSLICE; s++) begin : g_slice
    logic      t_valid, t_ready;
    noc_flit_t t_flit;
    table_loader u_tl (
      .clk, .rst_n,
      .in_valid(noc_in_valid[s]), .in_ready(noc_in_ready[s]), .in_flit(noc_in_flit[s]),
      .out_valid(t_valid), .out_ready(t_ready), .out_flit(t_flit),
      .dram_req_valid(a_valid[2*s+1]), .dram_req_ready(a_ready[2*s+1]), .dram_req_addr(a_addr[2*s+1]),
      .dram_rsp_valid(a_rsp[2*s+1]), .dram_rsp_rdata(a_rdata), .ev_lookup(ev_lookup[s]));
    assign a_we[2*s+1]    = 1'b0;
    assign a_wdata[2*s+1] = '0;

    assign s_dma_valid[s] = dma_req_valid && !dma_busy && dsl == $clog2(NSLICE)'(s);
    cache_slice #(.SETS(SETS), .WAYS(WAYS)) u_cache (
      .clk, .rst_n,
      .req_valid(t_valid), .req_ready(t_ready), .req_flit(t_flit),
      .rsp_valid(noc_out_valid[s]), .rsp_ready(noc_out_ready[s]), .rsp_flit(noc_out_flit[s]),
      .dma_valid(s_dma_valid[s]), .dma_ready(s_dma_ready[s]), .dma_we(dma_req_we),
      .dma_addr(dma_req_addr), .dma_wdata(dma_req_wdata),
      .dma_rsp_valid(s_dma_rsp[s]), .dma_rsp_rdata(s_dma_rdata[s]),
      .dram_req_valid(a_valid[2*s]), .dram_req_ready(a_ready[2*s]), .dram_req_we(a_we[2*s]),
      .dram_req_addr(a_addr[2*s]), .dram_req_wdata(a_wdata[2*s]),
      .dram_rsp_valid(a_rsp[2*s]), .dram_rsp_rdata(a_rdata),
      .ev_hit(ev_hit[s]), .ev_miss(ev_miss[s]), .ev_writeback(ev_writeback[s]));
  end

  assign dma_req_ready = |s_dma_ready;
  always_comb begin
    dma_rsp_valid = |s_dma_rsp;
    dma_rsp_rdata = '0;
    for (int s = 0; s < NSLICE; s++) if (s_dma_rsp[s]) dma_rsp_rdata = s_dma_rdata[s];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dma_busy <= 1'b0;
    else if (dma_req_valid && dma_req_ready) dma_busy <= 1'b1;
    else if (dma_rsp_valid) dma_busy <= 1'b0;
  end

  dram_arbiter #(.N(NP)) u_arb (
    .clk, .rst_n,
    .req_valid(a_valid), .req_ready(a_ready), .req_we(a_we), .req_addr(a_addr), .req_wdata(a_wdata),
    .rsp_valid(a_rsp), .rsp_rdata(a_rdata),
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr, .dram_req_wdata,
    .dram_rsp_valid, .dram_rsp_rdata);
endmodule
