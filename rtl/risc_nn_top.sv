// risc_nn_top: the RISC-NN accelerator chip.
//
// MX x MY processing elements sit on two 2-D meshes. The Memory NoC carries LD, ST and
// instruction-load traffic between the PEs and the memory controller: requests travel
// X-first to the PE's target column and then north out of row 0 into that column's cache
// slice (slice s serves the lines whose line address % 8 = s). The inter-PE NoC carries COPY
// data and ExeBlock activation messages between PEs. A tree-shaped Control NoC carries
// configuration messages from the host-side Control Interface down to the PEs and
// completion reports back up.
//
// Off-chip parts are ports: the host side (configuration messages, completion events and
// per-task completion counters, DMA word access to DRAM) stands for the PCIe link, and the
// DRAM port (valid/ready word requests, read data in order) stands for the DDR4 controller.
// Statistics outputs are one-cycle pulses, one bit per PE or per cache slice.
// The organisation follows the paper; the mesh shape (8 x 8), the north-edge placement
// of the cache slices and the port protocols are this design's choices. MX must be at
// least the number of cache slices (8).
module risc_nn_top
  import rnn_pkg::*;
#(
  parameter int MX = 8,
  parameter int MY = 8,
  parameter int CACHE_SETS = 512,
  parameter int CACHE_WAYS = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host control
  input  logic                        host_msg_valid,
  output logic                        host_msg_ready,
  input  ctrl_msg_t                   host_msg,
  output logic                        host_evt_valid,
  output ctrl_up_t                    host_evt,
  output logic [NUM_TASK-1:0][15:0]   done_count,
  // host DMA
  input  logic                        dma_req_valid,
  output logic                        dma_req_ready,
  input  logic                        dma_req_we,
  input  logic [AW-1:0]               dma_req_addr,
  input  logic [VW-1:0]               dma_req_wdata,
  output logic                        dma_rsp_valid,
  output logic [VW-1:0]               dma_rsp_rdata,
  // DRAM
  output logic                        dram_req_valid,
  input  logic                        dram_req_ready,
  output logic                        dram_req_we,
  output logic [AW-1:0]               dram_req_addr,
  output logic [VW-1:0]               dram_req_wdata,
  input  logic                        dram_rsp_valid,
  input  logic [VW-1:0]               dram_rsp_rdata,
  // statistics
  output logic [MX*MY-1:0]            ev_raw_bypass,
  output logic [MX*MY-1:0]            ev_preread_hit,
  output logic [MX*MY-1:0]            ev_fetch_stall,
  output logic [MX*MY-1:0]            ev_copy_in,
  output logic [SLICES-1:0]           ev_cache_hit,
  output logic [SLICES-1:0]           ev_cache_miss,
  output logic [SLICES-1:0]           ev_cache_writeback,
  output logic [SLICES-1:0]           ev_table_lookup
);
  localparam int N = MX * MY;

  // Memory NoC
  logic [N-1:0]        m_in_v, m_in_r, m_out_v, m_out_r;
  noc_flit_t [N-1:0]   m_in_f, m_out_f;
  logic [MX-1:0]       me_in_v, me_in_r, me_out_v, me_out_r;
  noc_flit_t [MX-1:0]  me_in_f, me_out_f;
  // inter-PE NoC
  logic [N-1:0]        p_in_v, p_in_r, p_out_v, p_out_r;
  noc_flit_t [N-1:0]   p_in_f, p_out_f;
  logic [MX-1:0]       pe_in_r, pe_out_v;
  noc_flit_t [MX-1:0]  pe_out_f;
  // Control NoC
  logic                root_v, root_r, root_up_v, root_up_r;
  ctrl_msg_t           root_m;
  ctrl_up_t            root_up_m;
  logic [N-1:0]        leaf_v, leaf_r, leaf_up_v, leaf_up_r;
  ctrl_msg_t [N-1:0]   leaf_m;
  ctrl_up_t [N-1:0]    leaf_up_m;

  for (genvar y = 0; y < MY; y++) begin : g_y
    for (genvar x = 0; x < MX; x++) begin : g_x
      localparam int I = y * MX + x;
      pe #(.MX(MX)) u_pe (
        .clk, .rst_n, .my_x(CW'(x)), .my_y(CW'(y)),
        .mem_out_valid(m_in_v[I]), .mem_out_ready(m_in_r[I]), .mem_out_flit(m_in_f[I]),
        .mem_in_valid(m_out_v[I]), .mem_in_ready(m_out_r[I]), .mem_in_flit(m_out_f[I]),
        .net_out_valid(p_in_v[I]), .net_out_ready(p_in_r[I]), .net_out_flit(p_in_f[I]),
        .net_in_valid(p_out_v[I]), .net_in_ready(p_out_r[I]), .net_in_flit(p_out_f[I]),
        .cmsg_valid(leaf_v[I]), .cmsg_ready(leaf_r[I]), .cmsg(leaf_m[I]),
        .up_valid(leaf_up_v[I]), .up_ready(leaf_up_r[I]), .up_msg(leaf_up_m[I]),
        .ev_raw_bypass(ev_raw_bypass[I]), .ev_preread_hit(ev_preread_hit[I]),
        .ev_fetch_stall(ev_fetch_stall[I]), .ev_copy_in(ev_copy_in[I]));
    end
  end

  mesh_noc #(.MX(MX), .MY(MY)) u_mem_noc (
    .clk, .rst_n,
    .loc_in_valid(m_in_v), .loc_in_ready(m_in_r), .loc_in_flit(m_in_f),
    .loc_out_valid(m_out_v), .loc_out_ready(m_out_r), .loc_out_flit(m_out_f),
    .edge_in_valid(me_in_v), .edge_in_ready(me_in_r), .edge_in_flit(me_in_f),
    .edge_out_valid(me_out_v), .edge_out_ready(me_out_r), .edge_out_flit(me_out_f));

  // The inter-PE mesh has no edge traffic: nothing enters, and a stray packet that
  // leaves the edge is absorbed.
  mesh_noc #(.MX(MX), .MY(MY)) u_pe_noc (
    .clk, .rst_n,
    .loc_in_valid(p_in_v), .loc_in_ready(p_in_r), .loc_in_flit(p_in_f),
    .loc_out_valid(p_out_v), .loc_out_ready(p_out_r), .loc_out_flit(p_out_f),
    .edge_in_valid('0), .edge_in_ready(pe_in_r), .edge_in_flit('0),
    .edge_out_valid(pe_out_v), .edge_out_ready('1), .edge_out_flit(pe_out_f));

  mem_controller #(.NSLICE(SLICES), .SETS(CACHE_SETS), .WAYS(CACHE_WAYS)) u_mc (
    .clk, .rst_n,
    .noc_in_valid(me_out_v[SLICES-1:0]), .noc_in_ready(me_out_r[SLICES-1:0]),
    .noc_in_flit(me_out_f[SLICES-1:0]),
    .noc_out_valid(me_in_v[SLICES-1:0]), .noc_out_ready(me_in_r[SLICES-1:0]),
    .noc_out_flit(me_in_f[SLICES-1:0]),
    .dma_req_valid, .dma_req_ready, .dma_req_we, .dma_req_addr, .dma_req_wdata,
    .dma_rsp_valid, .dma_rsp_rdata,
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr, .dram_req_wdata,
    .dram_rsp_valid, .dram_rsp_rdata,
    .ev_hit(ev_cache_hit), .ev_miss(ev_cache_miss), .ev_writeback(ev_cache_writeback),
    .ev_lookup(ev_table_lookup));

  if (MX > SLICES) begin : g_extra_cols
    // columns without a slice: nothing enters there and nothing is addressed there
    assign me_in_v[MX-1:SLICES]  = '0;
    assign me_in_f[MX-1:SLICES]  = '0;
    assign me_out_r[MX-1:SLICES] = '1;
  end

  ctrl_noc #(.NUM_PE(N)) u_cnoc (
    .clk, .rst_n,
    .root_valid(root_v), .root_ready(root_r), .root_msg(root_m),
    .root_up_valid(root_up_v), .root_up_ready(root_up_r), .root_up_msg(root_up_m),
    .leaf_valid(leaf_v), .leaf_ready(leaf_r), .leaf_msg(leaf_m),
    .leaf_up_valid(leaf_up_v), .leaf_up_ready(leaf_up_r), .leaf_up_msg(leaf_up_m));

  control_interface u_ci (
    .clk, .rst_n,
    .host_msg_valid, .host_msg_ready, .host_msg, .host_evt_valid, .host_evt, .done_count,
    .root_valid(root_v), .root_ready(root_r), .root_msg(root_m),
    .root_up_valid(root_up_v), .root_up_ready(root_up_r), .root_up_msg(root_up_m));

  initial assert (MX >= SLICES) else $error("risc_nn_top: MX must be at least SLICES");
endmodule
