// tb_st_unit: checks the ST unit against a model of its surroundings.
// The Instruction RAM and Operand RAM ports grant at random (data one cycle after the
// grant; OPM[a] reads as {8{a}}), the Memory NoC accepts requests at random and returns
// write acknowledgements after random delays. For random ST programs and bases, each
// request must be a K_WR to ST base + {F1,F2} carrying OPM[F0] and the instruction's
// lookup type, addressed to the owning slice column, and done must come only after the
// last acknowledgement.
module tb_st_unit;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, if_req, if_gnt, rd_req, rd_gnt, req_valid, req_ready, ack_valid, ack_ready;
  logic [CW-1:0] my_x = 4'd5, my_y = 4'd6;
  logic [PC_W-1:0] init_pc, end_pc, if_addr;
  logic [AW-1:0] st_base;
  instr_t if_data;
  logic [OA_W-1:0] rd_addr;
  logic [VW-1:0] rd_data;
  noc_flit_t req_flit;
  st_unit dut (.*);

  instr_t prog [4096];
  always_ff @(posedge clk) if (if_req && if_gnt) if_data <= prog[if_addr];
  always_ff @(posedge clk) if (rd_req && rd_gnt) rd_data <= {8{5'd0, rd_addr}};
  always_ff @(posedge clk) begin
    if_gnt <= $urandom_range(0, 2) != 0;
    rd_gnt <= $urandom_range(0, 2) != 0;
    req_ready <= $urandom_range(0, 2) != 0;
  end

  int checks = 0, failures = 0, acks_due = 0, idx = 0;
  instr_t exp_q [$];
  logic [AW-1:0] base;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      instr_t e;
      logic [AW-1:0] a;
      e = exp_q.pop_front();
      a = base + {e.f1, e.f2};
      chk(req_flit.kind == K_WR && req_flit.addr == a && req_flit.dst_x == CW'(a[4:2]) &&
          req_flit.to_edge && req_flit.src_x == my_x && req_flit.src_y == my_y, "store request header");
      chk(req_flit.data == {8{5'd0, e.f0[OA_W-1:0]}} && req_flit.lut == e.lut, "store data and lookup type");
      acks_due++;
    end
    if (ack_valid && ack_ready) acks_due--;
    ack_valid <= acks_due > 0 && $urandom_range(0, 3) == 0 && !(ack_valid && acks_due == 1);
  end

  initial begin
    start = 0; init_pc = 0; end_pc = 0; st_base = 0; ack_valid = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 30; run++) begin
      int n, lo;
      n = $urandom_range(0, 20);
      lo = $urandom_range(0, 4000);
      base = $urandom;
      for (int i = 0; i < n; i++) begin
        instr_t ins;
        ins = '0; ins.op = OP_ST;
        ins.f0 = 16'($urandom_range(0, 2047)); ins.f1 = 16'($urandom_range(0, 3)); ins.f2 = 16'($urandom);
        ins.lut = 4'($urandom_range(0, 3));
        prog[lo + i] = ins;
        exp_q.push_back(ins);
      end
      @(negedge clk);
      start = 1; init_pc = PC_W'(lo); end_pc = PC_W'(lo + n); st_base = base;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      chk(exp_q.size() == 0, "every ST sent");
      chk(acks_due == 0, "done only after the last acknowledgement");
      repeat (3) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
