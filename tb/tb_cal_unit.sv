// tb_cal_unit: checks the CAL pipeline together with an Operand RAM.
// Random programs of ADD/SUB/MUL/MAX/MIN/MADD and PREREAD0/1 are run, dense and sparse
// (random Sparse PC Inc fields), after the Operand RAM is filled with random data through
// the LD write port. Operand addresses are drawn from a small pool so back-to-back
// dependences (bypass), two-apart dependences (write-through) and pre-read hits are
// frequent; the three operands of one instruction are kept in different banks, as the
// compiler must. A sequential model gives the expected Operand RAM contents, read back
// through the ST read port. The pipeline must execute one instruction per cycle:
// done must come at most executed+5 cycles after start.
module tb_cal_unit;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, sparse, busy, done, if_req, wr_req, ev_raw_bypass, ev_preread_hit;
  logic [PC_W-1:0] init_pc, end_pc, if_addr;
  instr_t if_data;
  logic [2:0] rd_req;
  logic [2:0][OA_W-1:0] rd_addr;
  logic [2:0][VW-1:0] rd_data;
  logic [OA_W-1:0] wr_addr;
  logic [VW-1:0] wr_data;

  logic [4:0] o_rd_req, o_rd_gnt;
  logic [4:0][OA_W-1:0] o_rd_addr;
  logic [4:0][VW-1:0] o_rd_data;
  logic [2:0] o_wr_req, o_wr_gnt;
  logic [2:0][OA_W-1:0] o_wr_addr;
  logic [2:0][VW-1:0] o_wr_data;
  logic bk_rd, bk_wr;
  logic [OA_W-1:0] bk_rd_a, bk_wr_a;
  logic [VW-1:0] bk_wr_d;

  cal_unit dut (.*);
  assign o_rd_req  = {1'b0, bk_rd, rd_req};
  assign o_rd_addr = {OA_W'(0), bk_rd_a, rd_addr};
  assign rd_data   = o_rd_data[2:0];
  assign o_wr_req  = {1'b0, bk_wr, wr_req};
  assign o_wr_addr = {OA_W'(0), bk_wr_a, wr_addr};
  assign o_wr_data = {VW'(0), bk_wr_d, wr_data};
  operand_ram u_oram (.clk, .rst_n, .rd_req(o_rd_req), .rd_addr(o_rd_addr), .rd_gnt(o_rd_gnt),
    .rd_data(o_rd_data), .wr_req(o_wr_req), .wr_addr(o_wr_addr), .wr_data(o_wr_data), .wr_gnt(o_wr_gnt));

  instr_t prog [4096];
  always_ff @(posedge clk) if (if_req) if_data <= prog[if_addr];

  int checks = 0, failures = 0, n_byp = 0, n_pre = 0;
  always @(posedge clk) begin
    if (ev_raw_bypass) n_byp++;
    if (ev_preread_hit) n_pre++;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [VW-1:0] vec_t;
  vec_t ref_m [2048];
  function automatic vec_t alu(input logic [3:0] op, input vec_t a, b, c);
    vec_t r;
    for (int l = 0; l < SIMD; l++) begin
      logic signed [15:0] x, y, z;
      x = a[l*16 +: 16]; y = b[l*16 +: 16]; z = c[l*16 +: 16];
      case (op)
        OP_ADD: r[l*16 +: 16] = x + y;
        OP_SUB: r[l*16 +: 16] = x - y;
        OP_MUL: r[l*16 +: 16] = 16'(x * y);
        OP_MAX: r[l*16 +: 16] = x > y ? x : y;
        OP_MIN: r[l*16 +: 16] = x < y ? x : y;
        default: r[l*16 +: 16] = 16'(x * y) + z;
      endcase
    end
    return r;
  endfunction

  // operand address: bank k (0..15), row from a small pool
  function automatic logic [15:0] oa(input int bank);
    return 16'({7'($urandom_range(0, 2)), 4'(bank)});
  endfunction

  initial begin
    logic [3:0] ops [8] = '{OP_ADD, OP_SUB, OP_MUL, OP_MAX, OP_MIN, OP_MADD, OP_PRE0, OP_PRE1};
    start = 0; sparse = 0; init_pc = 0; end_pc = 0;
    bk_rd = 0; bk_wr = 0; bk_rd_a = 0; bk_wr_a = 0; bk_wr_d = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 2048; i++) begin
      bk_wr <= 1; bk_wr_a <= OA_W'(i);
      ref_m[i] = {$urandom, $urandom, $urandom, $urandom};
      bk_wr_d <= ref_m[i];
      @(posedge clk);
    end
    bk_wr <= 0;
    for (int run = 0; run < 40; run++) begin
      int n, pc, executed, t0, lo;
      logic p0v, p1v;
      logic [10:0] p0a, p1a;
      vec_t p0d, p1d;
      bit sp;
      sp = run % 2;
      n = $urandom_range(5, 60);
      lo = $urandom_range(0, 3000);
      for (int i = 0; i < n; i++) begin
        int b;
        instr_t ins;
        b = $urandom_range(0, 15);
        ins = '0;
        ins.op = ops[$urandom_range(0, 7)];
        ins.f0 = oa(b); ins.f1 = oa((b + 5) % 16); ins.f2 = oa((b + 10) % 16);
        ins.spinc = 8'($urandom_range(0, 3));
        prog[lo + i] = ins;
      end
      // sequential model
      pc = lo; executed = 0; p0v = 0; p1v = 0;
      while (pc < lo + n) begin
        instr_t ins;
        vec_t a, b;
        ins = prog[pc];
        executed++;
        case (ins.op)
          OP_PRE0: begin p0v = 1; p0a = ins.f0[10:0]; p0d = ref_m[ins.f0[10:0]]; end
          OP_PRE1: begin p1v = 1; p1a = ins.f1[10:0]; p1d = ref_m[ins.f1[10:0]]; end
          default: begin
            a = ref_m[ins.f0[10:0]]; b = ref_m[ins.f1[10:0]];
            if (p0v && p0a == ins.f0[10:0]) begin a = p0d; p0v = 0; end
            if (p1v && p1a == ins.f1[10:0]) begin b = p1d; p1v = 0; end
            ref_m[ins.f2[10:0]] = alu(ins.op, a, b, ref_m[ins.f2[10:0]]);
          end
        endcase
        pc += sp ? ((ins.spinc == 0) ? 1 : int'(ins.spinc)) : 1;
      end
      // run the unit
      init_pc <= PC_W'(lo); end_pc <= PC_W'(lo + n); sparse <= sp; start <= 1;
      @(posedge clk);
      start <= 0;
      t0 = 0;
      while (!done) begin @(posedge clk); t0++; end
      chk(t0 <= executed + 5, $sformatf("one instruction per cycle (%0d cycles for %0d)", t0, executed));
      // read back everything the address pool can touch
      for (int r = 0; r < 3; r++)
        for (int bnk = 0; bnk < 16; bnk++) begin
          logic [10:0] a;
          a = {7'(r), 4'(bnk)};
          bk_rd <= 1; bk_rd_a <= a;
          @(posedge clk);
          bk_rd <= 0;
          #1 chk(o_rd_data[3] == ref_m[a], "operand RAM contents");
        end
      // a reset between runs clears left-over pre-read registers (the RAM keeps its data)
      rst_n <= 0; @(posedge clk); rst_n <= 1; @(posedge clk);
    end
    $display("bypasses=%0d preread hits=%0d", n_byp, n_pre);
    chk(n_byp > 0, "bypass exercised");
    chk(n_pre > 0, "pre-read hit exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
