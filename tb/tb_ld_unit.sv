// tb_ld_unit: checks the LD unit against a model of its surroundings.
// The Instruction RAM port grants at random (data one cycle after the grant), the Memory
// NoC accepts requests at random and answers them after random delays and out of order
// with data d(addr) = {4{addr ^ 32'h1357_9BDF}}, and the Operand RAM write port grants at
// random. For random LD programs and bases, every request must carry the right DRAM
// address, destination slice column, source and tag, every OPM[F0] must be written with
// d(base + {F1,F2}) exactly once, and done must come only after the last write. With
// everything granted at once, one LD must issue every three cycles.
module tb_ld_unit;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, if_req, if_gnt, req_valid, req_ready, rsp_valid, rsp_ready;
  logic wr_req, wr_gnt;
  logic [CW-1:0] my_x = 4'd3, my_y = 4'd2;
  logic [PC_W-1:0] init_pc, end_pc, if_addr;
  logic [AW-1:0] ld_base;
  instr_t if_data;
  noc_flit_t req_flit, rsp_flit;
  logic [OA_W-1:0] wr_addr;
  logic [VW-1:0] wr_data;
  ld_unit dut (.*);

  instr_t prog [4096];
  bit fast = 0;
  always_ff @(posedge clk) if (if_req && if_gnt) if_data <= prog[if_addr];
  always_ff @(posedge clk) begin
    if_gnt <= fast || $urandom_range(0, 2) != 0;
    req_ready <= fast || $urandom_range(0, 2) != 0;
    wr_gnt <= fast || $urandom_range(0, 2) != 0;
  end

  int checks = 0, failures = 0, n_req = 0, n_wr = 0;
  noc_flit_t pend [$];
  int written [int];
  logic [AW-1:0] exp_addr [int];
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
  function automatic logic [VW-1:0] d(input logic [AW-1:0] a);
    return {4{a ^ 32'h1357_9BDF}};
  endfunction

  // memory side
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin pend.push_back(req_flit); n_req++; end
    if (rsp_valid && rsp_ready) begin
      chk(wr_req && wr_addr == rsp_flit.tag[OA_W-1:0] && wr_data == rsp_flit.data, "response written to OPM[tag]");
      written[int'(wr_addr)] = written.exists(int'(wr_addr)) ? written[int'(wr_addr)] + 1 : 1;
      n_wr++;
    end
    if (!rsp_valid || rsp_ready) begin
      if (pend.size() > 0 && (fast || $urandom_range(0, 2) == 0)) begin
        int k;
        noc_flit_t r;
        k = fast ? 0 : $urandom_range(0, pend.size() - 1);
        r = pend[k]; pend.delete(k);
        rsp_flit <= '0;
        rsp_flit.kind <= K_RDRSP; rsp_flit.tag <= r.tag; rsp_flit.data <= d(r.addr);
        rsp_valid <= 1'b1;
      end else rsp_valid <= 1'b0;
    end
  end

  initial begin
    start = 0; init_pc = 0; end_pc = 0; ld_base = 0; rsp_valid = 0; rsp_flit = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 30; run++) begin
      int n, lo, t0;
      logic [AW-1:0] base;
      n = (run == 29) ? 20 : $urandom_range(0, 25);
      fast = run == 29;
      lo = $urandom_range(0, 4000);
      base = $urandom;
      written.delete();
      for (int i = 0; i < n; i++) begin
        instr_t ins;
        ins = '0; ins.op = OP_LD;
        ins.f0 = 16'(i * 3 + run);   // distinct destinations
        ins.f1 = 16'($urandom_range(0, 3)); ins.f2 = 16'($urandom);
        prog[lo + i] = ins;
        exp_addr[int'(ins.f0)] = base + {ins.f1, ins.f2};
      end
      repeat (2) @(posedge clk);
      @(negedge clk);
      start = 1; init_pc = PC_W'(lo); end_pc = PC_W'(lo + n); ld_base = base;
      @(negedge clk);
      start = 0;
      t0 = n_req;
      while (!done) @(negedge clk);
      chk(pend.size() == 0 && !rsp_valid, "done only after the last response");
      for (int i = 0; i < n; i++) begin
        instr_t ins;
        ins = prog[lo + i];
        chk(written.exists(int'(ins.f0[OA_W-1:0])) && written[int'(ins.f0[OA_W-1:0])] == 1, "each LD written once");
      end
      chk(n_req - t0 == n, "one request per LD");
    end
    // issue rate: 20 LDs with nothing waiting
    begin
      int t;
      t = 0;
      @(negedge clk);
      start = 1; init_pc = 0; end_pc = 20; ld_base = 0;
      for (int i = 0; i < 20; i++) begin prog[i] = '0; prog[i].f0 = 16'(i); end
      @(negedge clk); start = 0;
      while (!done) begin @(negedge clk); t++; end
      chk(t <= 3 * 20 + 6, $sformatf("three cycles per LD (%0d cycles for 20)", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // address check on every request
  always @(posedge clk) if (rst_n && req_valid && req_ready) begin
    chk(req_flit.kind == K_RD && req_flit.to_edge && req_flit.dst_x == CW'(req_flit.addr[4:2]) &&
        req_flit.src_x == my_x && req_flit.src_y == my_y, "request header");
    if (!fast) chk(exp_addr.exists(int'(req_flit.tag)) && req_flit.addr == exp_addr[int'(req_flit.tag)],
                   "DRAM address = LD base + {F1,F2}");
  end
endmodule
