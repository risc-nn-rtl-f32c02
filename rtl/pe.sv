// pe: one RISC-NN processing element.
//
// A PE holds 32 ExeBlocks (the records kept by the Control Unit) that share one set of
// execution units: the LD unit (DRAM -> Operand RAM), the CAL pipeline (SIMD arithmetic on
// the Operand RAM), the FLOW unit (Operand RAM -> another PE's Operand RAM, then activation
// messages to successor ExeBlocks) and the ST unit (Operand RAM -> DRAM). The Control Unit
// walks every enabled ExeBlock through instruction loading, LD, CAL, FLOW, ST and reset, and
// hands each stage to its unit. The Instruction Loader fills the banked Instruction RAM from
// DRAM and turns sparse vectors into Sparse PC Inc fields.
//
// Interfaces: a request/response port on the Memory NoC (LD, ST and loader requests are
// merged round-robin; responses are sorted by packet kind), an in/out port on the inter-PE
// NoC (COPY data and activation messages), and a leaf port on the Control NoC (downward
// configuration messages, upward completion reports). All ports are valid/ready.
// Memory port assignment: Instruction RAM fetch ports CAL, LD, ST, FLOW in that priority;
// Operand RAM read ports CAL x3, ST, FLOW and write ports CAL write-back, LD, remote COPY.
// The unit set and the memories follow the paper; the port priorities, the merge and the
// event outputs (one-cycle pulses for statistics) are this design's choices.
module pe
  import rnn_pkg::*;
#(
  parameter int MX = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CW-1:0]        my_x,
  input  logic [CW-1:0]        my_y,
  // Memory NoC local port
  output logic                 mem_out_valid,
  input  logic                 mem_out_ready,
  output noc_flit_t            mem_out_flit,
  input  logic                 mem_in_valid,
  output logic                 mem_in_ready,
  input  noc_flit_t            mem_in_flit,
  // inter-PE NoC local port
  output logic                 net_out_valid,
  input  logic                 net_out_ready,
  output noc_flit_t            net_out_flit,
  input  logic                 net_in_valid,
  output logic                 net_in_ready,
  input  noc_flit_t            net_in_flit,
  // Control NoC leaf
  input  logic                 cmsg_valid,
  output logic                 cmsg_ready,
  input  ctrl_msg_t            cmsg,
  output logic                 up_valid,
  input  logic                 up_ready,
  output ctrl_up_t             up_msg,
  // statistics pulses
  output logic                 ev_raw_bypass,
  output logic                 ev_preread_hit,
  output logic                 ev_fetch_stall,
  output logic                 ev_copy_in
);
  logic [PE_W-1:0] my_pe;
  assign my_pe = PE_W'(my_y) * PE_W'(MX) + PE_W'(my_x);

  // ---------------- control unit <-> loader ----------------
  logic ld_start, ld_busy, ld_done;
  logic [EB_W-1:0] ld_eb, ld_done_eb, sp_eb, sp_done_eb;
  logic [AW-1:0] ld_addr;
  logic [PC_W-1:0] ld_pc_lo, ld_pc_hi, sp_cal_lo, sp_cal_hi, sp_first_pc;
  logic sp_valid, sp_ready, sp_done;
  logic [5:0] sp_chunk;
  logic [63:0] sp_bits;
  logic [3:0] u_start, u_busy, u_done;
  logic [3:0][PC_W-1:0] u_init_pc, u_end_pc;
  logic cal_sparse;
  logic [AW-1:0] ld_base, st_base;
  succ_t [2:0] flow_succ;
  logic act_valid;
  logic [EB_W-1:0] act_eb;

  control_unit u_ctrl (
    .clk, .rst_n, .my_pe,
    .cmsg_valid, .cmsg, .cmsg_ready, .up_valid, .up_msg, .up_ready,
    .act_valid, .act_eb,
    .ld_start, .ld_eb, .ld_addr, .ld_pc_lo, .ld_pc_hi, .ld_busy, .ld_done, .ld_done_eb,
    .sp_valid, .sp_ready, .sp_eb, .sp_chunk, .sp_bits, .sp_cal_lo, .sp_cal_hi,
    .sp_done, .sp_done_eb, .sp_first_pc,
    .u_start, .u_init_pc, .u_end_pc, .u_busy, .u_done,
    .cal_sparse, .ld_base, .st_base, .flow_succ);

  // ---------------- memories ----------------
  logic [3:0]              if_req, if_gnt;
  logic [3:0][PC_W-1:0]    if_addr;
  logic [3:0][IW-1:0]      if_data;
  logic                    iw_req, iw_gnt;
  logic [PC_W-1:0]         iw_addr;
  logic [IW-1:0]           iw_data, iw_mask;

  instr_ram u_iram (
    .clk, .rst_n,
    .fetch_req(if_req), .fetch_addr(if_addr), .fetch_gnt(if_gnt), .fetch_data(if_data),
    .wr_req(iw_req), .wr_addr(iw_addr), .wr_data(iw_data), .wr_mask(iw_mask), .wr_gnt(iw_gnt));

  logic [4:0]              o_rd_req, o_rd_gnt;
  logic [4:0][OA_W-1:0]    o_rd_addr;
  logic [4:0][VW-1:0]      o_rd_data;
  logic [2:0]              o_wr_req, o_wr_gnt;
  logic [2:0][OA_W-1:0]    o_wr_addr;
  logic [2:0][VW-1:0]      o_wr_data;

  operand_ram u_oram (
    .clk, .rst_n,
    .rd_req(o_rd_req), .rd_addr(o_rd_addr), .rd_gnt(o_rd_gnt), .rd_data(o_rd_data),
    .wr_req(o_wr_req), .wr_addr(o_wr_addr), .wr_data(o_wr_data), .wr_gnt(o_wr_gnt));

  // ---------------- execution units ----------------
  cal_unit u_cal (
    .clk, .rst_n,
    .start(u_start[ST_CAL]), .init_pc(u_init_pc[ST_CAL]), .end_pc(u_end_pc[ST_CAL]),
    .sparse(cal_sparse), .busy(u_busy[ST_CAL]), .done(u_done[ST_CAL]),
    .if_req(if_req[0]), .if_addr(if_addr[0]), .if_data(instr_t'(if_data[0])),
    .rd_req(o_rd_req[2:0]), .rd_addr(o_rd_addr[2:0]), .rd_data(o_rd_data[2:0]),
    .wr_req(o_wr_req[0]), .wr_addr(o_wr_addr[0]), .wr_data(o_wr_data[0]),
    .ev_raw_bypass, .ev_preread_hit);

  logic ld_rq_v, ld_rq_r, ld_rs_v, ld_rs_r;
  noc_flit_t ld_rq_f;
  ld_unit u_ld (
    .clk, .rst_n, .my_x, .my_y,
    .start(u_start[ST_LD]), .init_pc(u_init_pc[ST_LD]), .end_pc(u_end_pc[ST_LD]),
    .ld_base, .busy(u_busy[ST_LD]), .done(u_done[ST_LD]),
    .if_req(if_req[1]), .if_addr(if_addr[1]), .if_gnt(if_gnt[1]), .if_data(instr_t'(if_data[1])),
    .req_valid(ld_rq_v), .req_ready(ld_rq_r), .req_flit(ld_rq_f),
    .rsp_valid(ld_rs_v), .rsp_ready(ld_rs_r), .rsp_flit(mem_in_flit),
    .wr_req(o_wr_req[1]), .wr_addr(o_wr_addr[1]), .wr_data(o_wr_data[1]), .wr_gnt(o_wr_gnt[1]));

  logic st_rq_v, st_rq_r, st_ack_v, st_ack_r;
  noc_flit_t st_rq_f;
  st_unit u_st (
    .clk, .rst_n, .my_x, .my_y,
    .start(u_start[ST_ST]), .init_pc(u_init_pc[ST_ST]), .end_pc(u_end_pc[ST_ST]),
    .st_base, .busy(u_busy[ST_ST]), .done(u_done[ST_ST]),
    .if_req(if_req[2]), .if_addr(if_addr[2]), .if_gnt(if_gnt[2]), .if_data(instr_t'(if_data[2])),
    .rd_req(o_rd_req[3]), .rd_addr(o_rd_addr[3]), .rd_gnt(o_rd_gnt[3]), .rd_data(o_rd_data[3]),
    .req_valid(st_rq_v), .req_ready(st_rq_r), .req_flit(st_rq_f),
    .ack_valid(st_ack_v), .ack_ready(st_ack_r));

  flow_unit #(.MX(MX)) u_flow (
    .clk, .rst_n, .my_x, .my_y,
    .start(u_start[ST_FLOW]), .init_pc(u_init_pc[ST_FLOW]), .end_pc(u_end_pc[ST_FLOW]),
    .succ(flow_succ), .busy(u_busy[ST_FLOW]), .done(u_done[ST_FLOW]),
    .if_req(if_req[3]), .if_addr(if_addr[3]), .if_gnt(if_gnt[3]), .if_data(instr_t'(if_data[3])),
    .rd_req(o_rd_req[4]), .rd_addr(o_rd_addr[4]), .rd_gnt(o_rd_gnt[4]), .rd_data(o_rd_data[4]),
    .net_valid(net_out_valid), .net_ready(net_out_ready), .net_flit(net_out_flit));

  logic il_rq_v, il_rq_r, il_rs_v, il_rs_r;
  noc_flit_t il_rq_f;
  instr_loader u_loader (
    .clk, .rst_n, .my_x, .my_y,
    .ld_start, .ld_eb, .ld_addr, .ld_pc_lo, .ld_pc_hi, .ld_busy, .ld_done, .ld_done_eb,
    .sp_valid, .sp_ready, .sp_eb, .sp_chunk, .sp_bits, .sp_cal_lo, .sp_cal_hi,
    .sp_done, .sp_done_eb, .sp_first_pc,
    .req_valid(il_rq_v), .req_ready(il_rq_r), .req_flit(il_rq_f),
    .rsp_valid(il_rs_v), .rsp_ready(il_rs_r), .rsp_flit(mem_in_flit),
    .wr_req(iw_req), .wr_addr(iw_addr), .wr_data(iw_data), .wr_mask(iw_mask), .wr_gnt(iw_gnt));

  // ---------------- Memory NoC request merge (round robin: LD, ST, loader) ----------------
  logic [2:0] m_req, m_gnt;
  logic [1:0] m_last;
  assign m_req = {il_rq_v, st_rq_v, ld_rq_v};
  always_comb begin
    m_gnt = '0;
    for (int k = 1; k <= 3; k++) begin
      int idx;
      idx = (int'(m_last) + k) % 3;
      if (m_gnt == '0 && m_req[idx]) m_gnt[idx] = 1'b1;
    end
  end
  assign mem_out_valid = |m_req;
  assign mem_out_flit  = m_gnt[0] ? ld_rq_f : m_gnt[1] ? st_rq_f : il_rq_f;
  assign ld_rq_r = m_gnt[0] && mem_out_ready;
  assign st_rq_r = m_gnt[1] && mem_out_ready;
  assign il_rq_r = m_gnt[2] && mem_out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) m_last <= 2'd2;
    else if (mem_out_valid && mem_out_ready)
      m_last <= m_gnt[0] ? 2'd0 : m_gnt[1] ? 2'd1 : 2'd2;
  end

  // ---------------- Memory NoC response sort ----------------
  assign ld_rs_v  = mem_in_valid && mem_in_flit.kind == K_RDRSP;
  assign st_ack_v = mem_in_valid && mem_in_flit.kind == K_WRACK;
  assign il_rs_v  = mem_in_valid && mem_in_flit.kind == K_IRSP;
  always_comb begin
    unique case (mem_in_flit.kind)
      K_RDRSP: mem_in_ready = ld_rs_r;
      K_WRACK: mem_in_ready = st_ack_r;
      K_IRSP:  mem_in_ready = il_rs_r;
      default: mem_in_ready = 1'b1;    // stray packet kinds are dropped
    endcase
  end

  // ---------------- inter-PE NoC ejection ----------------
  assign o_wr_req[2]  = net_in_valid && net_in_flit.kind == K_COPY;
  assign o_wr_addr[2] = net_in_flit.tag[OA_W-1:0];
  assign o_wr_data[2] = net_in_flit.data;
  assign act_valid    = net_in_valid && net_in_flit.kind == K_ACT;
  assign act_eb       = net_in_flit.tag[EB_W-1:0];
  assign net_in_ready = net_in_flit.kind == K_COPY ? o_wr_gnt[2] : 1'b1;

  assign ev_fetch_stall = |(if_req[3:1] & ~if_gnt[3:1]);
  assign ev_copy_in     = o_wr_req[2] && o_wr_gnt[2];
endmodule
