// tb_instr_ram: checks the banked Instruction RAM.
// Phase 1 fills random addresses through the loader write port with random bit masks,
// keeping a reference copy. Phase 2 issues random fetches on all four ports at once plus
// a competing write: the expected grants (lower port wins a bank; a write only gets an
// idle bank) are computed here, and each granted fetch must return the reference word
// exactly one cycle later.
module tb_instr_ram;
  localparam int AWI = 12;
  logic clk = 0, rst_n = 0;
  logic [3:0] fetch_req, fetch_gnt;
  logic [3:0][AWI-1:0] fetch_addr;
  logic [3:0][63:0] fetch_data;
  logic wr_req, wr_gnt;
  logic [AWI-1:0] wr_addr;
  logic [63:0] wr_data, wr_mask;
  logic [63:0] ref_mem [4096];
  int checks = 0, failures = 0;

  instr_ram dut (.clk, .rst_n, .fetch_req, .fetch_addr, .fetch_gnt, .fetch_data,
                 .wr_req, .wr_addr, .wr_data, .wr_mask, .wr_gnt);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [3:0] exp_gnt;
    logic [7:0] busy;
    logic [3:0][AWI-1:0] a_q;
    logic [3:0] g_q;
    fetch_req = '0; fetch_addr = '0; wr_req = 0; wr_addr = '0; wr_data = '0; wr_mask = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill the whole memory (full mask), then overwrite part of it with random masks
    for (int i = 0; i < 4096 + 2000; i++) begin
      logic [63:0] m;
      wr_req = 1; wr_addr = (i < 4096) ? AWI'(i) : AWI'($urandom);
      wr_data = {$urandom, $urandom};
      m = (i < 4096) ? '1 : {$urandom, $urandom};
      wr_mask = m;
      #1;
      chk(wr_gnt, "write refused with no fetch");
      ref_mem[wr_addr] = (ref_mem[wr_addr] & ~m) | (wr_data & m);
      @(posedge clk); #1;
    end
    wr_req = 0;
    g_q = '0;
    for (int t = 0; t < 5000; t++) begin
      for (int p = 0; p < 4; p++) begin
        fetch_req[p] = $urandom_range(0, 3) != 0;
        fetch_addr[p] = (t % 3 == 0) ? AWI'($urandom) : {3'($urandom_range(0,1)), 9'($urandom)};
      end
      wr_req = $urandom_range(0, 1); wr_addr = AWI'($urandom); wr_data = {$urandom, $urandom};
      wr_mask = '1;
      #1;
      // data of the fetches granted last cycle
      for (int p = 0; p < 4; p++)
        if (g_q[p]) begin chk(fetch_data[p] == ref_mem[a_q[p]], "fetch data"); if (fetch_data[p] != ref_mem[a_q[p]] && failures < 4) $display("t=%0d p=%0d a=%h got %h exp %h", t, p, a_q[p], fetch_data[p], ref_mem[a_q[p]]); end
      busy = '0; exp_gnt = '0;
      for (int p = 0; p < 4; p++)
        if (fetch_req[p] && !busy[fetch_addr[p][11:9]]) begin
          exp_gnt[p] = 1; busy[fetch_addr[p][11:9]] = 1;
        end
      chk(fetch_gnt == exp_gnt, "fetch grant priority");
      chk(wr_gnt == (wr_req && !busy[wr_addr[11:9]]), "write grant");
      g_q = fetch_gnt; a_q = fetch_addr;
      @(posedge clk); #1;
      if (wr_gnt) ref_mem[wr_addr] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
