// cal_unit: the CAL (calculation) unit of a PE, a four-stage in-order pipeline.
//
//   FETCH  PC -> Instruction RAM. The next PC is the prior PC plus 1, or, for an ExeBlock
//          with Sparse Execution set, plus the Sparse PC Inc field of the instruction just
//          read, so skipped instructions are never fetched.
//   READ   decode into the Operation Register and OP0/OP1/OP2 Addr Regs and issue the
//          Operand RAM reads on ports 0..2. If F0 (F1) equals a valid OP0 (OP1) PreRead Addr
//          Reg, Match Reg 0 (1) is set and that RAM read is skipped; the pre-read entry is
//          consumed (one use only) and is also dropped when a new stage starts. PREREAD0/1 load the
//          PreRead Addr Reg here.
//   EXE    pick each operand: Result Data Reg if its address equals Result Addr Reg (the
//          instruction one ahead wrote it: read-after-write bypass), else the PreRead Data Reg
//          if matched, else the RAM data. The SIMD ALU computes; PREREAD0/1 capture their
//          operand in the PreRead Data Reg.
//   WB     write Result Data Reg to the Operand RAM (write port 0) at Result Addr Reg.
// A result two instructions ahead is picked up by the Operand RAM's write-through read.
//
// Interface: start (one cycle, while !busy) with init_pc, end_pc (exclusive) and sparse.
// done pulses one cycle after the last write-back. The unit never stalls: the Instruction
// and Operand RAM give it top priority. One instruction per cycle.
// The pipeline, its registers and the bypass/pre-read rules follow the paper's pipeline
// figure; the exact mux order and treating a zero Sparse PC Inc as 1 are this design's choice.
module cal_unit
  import rnn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // stage dispatch
  input  logic                 start,
  input  logic [PC_W-1:0]      init_pc,
  input  logic [PC_W-1:0]      end_pc,
  input  logic                 sparse,
  output logic                 busy,
  output logic                 done,
  // instruction fetch
  output logic                 if_req,
  output logic [PC_W-1:0]      if_addr,
  input  instr_t               if_data,
  // operand RAM ports 0..2 and write port 0
  output logic [2:0]           rd_req,
  output logic [2:0][OA_W-1:0] rd_addr,
  input  logic [2:0][VW-1:0]   rd_data,
  output logic                 wr_req,
  output logic [OA_W-1:0]      wr_addr,
  output logic [VW-1:0]        wr_data,
  // statistics for testbenches
  output logic                 ev_raw_bypass,
  output logic                 ev_preread_hit
);
  // ---------------- FETCH ----------------
  logic            running, first, fetching;
  logic [PC_W-1:0] pc_q, end_q;
  logic            sparse_q;
  logic            f_valid;            // if_data holds the instruction at pc_q
  logic [PC_W:0]   next_pc;
  logic [7:0]      inc;

  always_comb begin
    inc = (sparse_q && if_data.spinc != 8'd0) ? if_data.spinc : 8'd1;
    if (first) next_pc = {1'b0, pc_q};
    else       next_pc = {1'b0, pc_q} + (PC_W+1)'(inc);
    if_req  = fetching && (first || f_valid) && (next_pc < {1'b0, end_q});
    if_addr = next_pc[PC_W-1:0];
  end

  // ---------------- pipeline registers ----------------
  // READ stage works on if_data while f_valid
  typedef struct packed {
    logic            v;
    logic [3:0]      op;
    logic [OA_W-1:0] a0, a1, a2;
    logic            m0, m1;
  } ex_t;
  ex_t ex_q;

  logic            pre0_v, pre1_v;
  logic [OA_W-1:0] pre0_a, pre1_a;
  logic [VW-1:0]   pre0_d, pre1_d;
  logic            res_v;
  logic [OA_W-1:0] res_a;
  logic [VW-1:0]   res_d;

  // READ decode
  logic            uses0, uses1, uses2, alu_op, m0, m1;
  opcode_e         dop;
  always_comb begin
    dop    = opcode_e'(if_data.op);
    alu_op = dop inside {OP_ADD, OP_SUB, OP_MUL, OP_MAX, OP_MIN, OP_MADD};
    uses0  = alu_op || dop == OP_PRE0;
    uses1  = alu_op || dop == OP_PRE1;
    uses2  = dop == OP_MADD;
    m0     = pre0_v && pre0_a == if_data.f0[OA_W-1:0] && alu_op;
    m1     = pre1_v && pre1_a == if_data.f1[OA_W-1:0] && alu_op;
    rd_req[0]  = f_valid && uses0 && !m0;
    rd_req[1]  = f_valid && uses1 && !m1;
    rd_req[2]  = f_valid && uses2;
    rd_addr[0] = if_data.f0[OA_W-1:0];
    rd_addr[1] = if_data.f1[OA_W-1:0];
    rd_addr[2] = if_data.f2[OA_W-1:0];
  end

  // EXE operand selection
  logic [VW-1:0] op0, op1, op2, alu_y;
  logic          raw0, raw1, raw2;
  always_comb begin
    raw0 = res_v && res_a == ex_q.a0;
    raw1 = res_v && res_a == ex_q.a1;
    raw2 = res_v && res_a == ex_q.a2;
    op0 = raw0 ? res_d : (ex_q.m0 ? pre0_d : rd_data[0]);
    op1 = raw1 ? res_d : (ex_q.m1 ? pre1_d : rd_data[1]);
    op2 = raw2 ? res_d : rd_data[2];
  end

  simd_alu #(.LANES(SIMD), .LW(DW)) u_alu (.op(ex_q.op), .a(op0), .b(op1), .c(op2), .y(alu_y));

  logic ex_alu;
  assign ex_alu = ex_q.v && (opcode_e'(ex_q.op) inside {OP_ADD, OP_SUB, OP_MUL, OP_MAX, OP_MIN, OP_MADD});

  assign ev_raw_bypass  = ex_alu && (raw0 || raw1 || (raw2 && ex_q.op == OP_MADD));
  assign ev_preread_hit = ex_alu && (ex_q.m0 || ex_q.m1);

  // WB
  assign wr_req  = res_v;
  assign wr_addr = res_a;
  assign wr_data = res_d;

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; first <= 1'b0; fetching <= 1'b0; pc_q <= '0; end_q <= '0;
      sparse_q <= 1'b0; f_valid <= 1'b0; ex_q <= '0;
      pre0_v <= 1'b0; pre1_v <= 1'b0; pre0_a <= '0; pre1_a <= '0; pre0_d <= '0; pre1_d <= '0;
      res_v <= 1'b0; res_a <= '0; res_d <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1; first <= 1'b1; fetching <= 1'b1;
        pc_q <= init_pc; end_q <= end_pc; sparse_q <= sparse; f_valid <= 1'b0;
        pre0_v <= 1'b0; pre1_v <= 1'b0;   // pre-reads never cross a stage boundary
      end else if (running) begin
        // FETCH
        if (if_req) begin
          pc_q <= next_pc[PC_W-1:0];
          f_valid <= 1'b1;
          first <= 1'b0;
        end else begin
          f_valid <= 1'b0;
          if (fetching && (first || f_valid)) fetching <= 1'b0;
          first <= 1'b0;
        end
        // READ -> EXE
        ex_q.v  <= f_valid && (uses0 || uses1);
        ex_q.op <= if_data.op;
        ex_q.a0 <= if_data.f0[OA_W-1:0];
        ex_q.a1 <= if_data.f1[OA_W-1:0];
        ex_q.a2 <= if_data.f2[OA_W-1:0];
        ex_q.m0 <= m0;
        ex_q.m1 <= m1;
        if (f_valid) begin
          if (m0) pre0_v <= 1'b0;
          if (m1) pre1_v <= 1'b0;
          if (dop == OP_PRE0) begin pre0_v <= 1'b1; pre0_a <= if_data.f0[OA_W-1:0]; end
          if (dop == OP_PRE1) begin pre1_v <= 1'b1; pre1_a <= if_data.f1[OA_W-1:0]; end
        end
        // EXE -> WB
        if (ex_q.v && ex_q.op == OP_PRE0) pre0_d <= op0;
        if (ex_q.v && ex_q.op == OP_PRE1) pre1_d <= op1;
        res_v <= ex_alu;
        if (ex_alu) begin
          res_a <= ex_q.a2;
          res_d <= alu_y;
        end
        // finish once fetch stopped and the pipe drained
        if (!fetching && !f_valid && !ex_q.v && !res_v) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
