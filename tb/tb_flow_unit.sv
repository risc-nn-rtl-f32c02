// tb_flow_unit: checks the FLOW unit against a model of its surroundings.
// Instruction RAM, Operand RAM (OPM[a] reads as {8{a}}) and the Inter-PE NoC grant at
// random. For random COPY programs and successor lists, the unit must send, in program
// order, one K_COPY per instruction to PE F2 (x = F2 % 8, y = F2 / 8) carrying OPM[F0] and
// the remote address F1, then one K_ACT per valid successor carrying its ExeBlock number,
// and pulse done after the last packet.
module tb_flow_unit;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, if_req, if_gnt, rd_req, rd_gnt, net_valid, net_ready;
  logic [CW-1:0] my_x = 4'd1, my_y = 4'd4;
  logic [PC_W-1:0] init_pc, end_pc, if_addr;
  succ_t [2:0] succ;
  instr_t if_data;
  logic [OA_W-1:0] rd_addr;
  logic [VW-1:0] rd_data;
  noc_flit_t net_flit;
  flow_unit dut (.*);

  instr_t prog [4096];
  always_ff @(posedge clk) if (if_req && if_gnt) if_data <= prog[if_addr];
  always_ff @(posedge clk) if (rd_req && rd_gnt) rd_data <= {8{5'd0, rd_addr}};
  always_ff @(posedge clk) begin
    if_gnt <= $urandom_range(0, 2) != 0;
    rd_gnt <= $urandom_range(0, 2) != 0;
    net_ready <= $urandom_range(0, 2) != 0;
  end

  int checks = 0, failures = 0;
  noc_flit_t exp_q [$];
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
  always @(posedge clk) if (rst_n && net_valid && net_ready) begin
    noc_flit_t e;
    chk(exp_q.size() > 0, "no extra packets");
    if (exp_q.size() > 0) begin
      e = exp_q.pop_front();
      chk(net_flit.kind == e.kind && net_flit.dst_x == e.dst_x && net_flit.dst_y == e.dst_y &&
          net_flit.tag == e.tag && net_flit.src_x == my_x && net_flit.src_y == my_y, "packet header");
      if (e.kind == K_COPY) chk(net_flit.data == e.data, "COPY data");
    end
  end

  initial begin
    start = 0; init_pc = 0; end_pc = 0; succ = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 40; run++) begin
      int n, lo;
      n = $urandom_range(0, 12);
      lo = $urandom_range(0, 4000);
      for (int i = 0; i < n; i++) begin
        instr_t ins;
        noc_flit_t e;
        ins = '0; ins.op = OP_COPY;
        ins.f0 = 16'($urandom_range(0, 2047)); ins.f1 = 16'($urandom_range(0, 2047));
        ins.f2 = 16'($urandom_range(0, 63));
        prog[lo + i] = ins;
        e = '0; e.kind = K_COPY; e.dst_x = CW'(ins.f2 % 8); e.dst_y = CW'(ins.f2 / 8);
        e.tag = ins.f1; e.data = {8{5'd0, ins.f0[10:0]}};
        exp_q.push_back(e);
      end
      for (int s = 0; s < 3; s++) begin
        succ[s].v = $urandom_range(0, 1); succ[s].pe = PE_W'($urandom); succ[s].eb = EB_W'($urandom);
      end
      for (int s = 0; s < 3; s++) if (succ[s].v) begin
        noc_flit_t e;
        e = '0; e.kind = K_ACT; e.dst_x = CW'(succ[s].pe % 8); e.dst_y = CW'(succ[s].pe / 8);
        e.tag = 16'(succ[s].eb);
        exp_q.push_back(e);
      end
      @(negedge clk);
      start = 1; init_pc = PC_W'(lo); end_pc = PC_W'(lo + n);
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      chk(exp_q.size() == 0, "all packets sent before done");
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
