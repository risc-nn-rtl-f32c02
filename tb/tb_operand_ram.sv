// tb_operand_ram: checks the banked Operand RAM.
// All 2048 entries are first written through the LD write port. Then, every cycle, random
// reads on the five read ports (the three CAL ports always in different banks, as the
// compiler guarantees) and random writes on the three write ports are issued. Expected
// grants follow the fixed port priority and the same-address sharing rule; each granted
// read must return, one cycle later, the entry as it is after that cycle's writes
// (write-through).
module tb_operand_ram;
  localparam int A = 11;
  logic clk = 0, rst_n = 0;
  logic [4:0] rd_req, rd_gnt;
  logic [4:0][A-1:0] rd_addr;
  logic [4:0][127:0] rd_data;
  logic [2:0] wr_req, wr_gnt;
  logic [2:0][A-1:0] wr_addr;
  logic [2:0][127:0] wr_data;
  logic [127:0] ref_mem [2048];
  int checks = 0, failures = 0, shared = 0;

  operand_ram dut (.clk, .rst_n, .rd_req, .rd_addr, .rd_gnt, .rd_data,
                   .wr_req, .wr_addr, .wr_data, .wr_gnt);
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

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    logic [4:0] eg, g_q;
    logic [2:0] ewg;
    logic [15:0] rb, wb;
    logic [15:0][A-1:0] ra;
    logic [4:0][127:0] exp_q;
    rd_req = '0; rd_addr = '0; wr_req = '0; wr_addr = '0; wr_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    for (int i = 0; i < 2048; i++) begin
      wr_req = 3'b010; wr_addr[1] = A'(i); wr_data[1] = rnd128();
      #1; chk(wr_gnt == 3'b010, "fill write");
      ref_mem[i] = wr_data[1];
      @(posedge clk); #1;
    end
    g_q = '0;
    for (int t = 0; t < 6000; t++) begin
      logic [3:0] b0;
      b0 = 4'($urandom);
      for (int p = 0; p < 5; p++) begin
        rd_req[p] = $urandom_range(0, 2) != 0;
        if (p < 3) rd_addr[p] = {7'($urandom), b0 + 4'(p * 5)};
        else rd_addr[p] = ($urandom_range(0, 3) == 0) ? rd_addr[$urandom_range(0, 2)]
                                                      : {7'($urandom), 4'($urandom_range(0, 3))};
      end
      for (int p = 0; p < 3; p++) begin
        wr_req[p] = $urandom_range(0, 1);
        wr_addr[p] = ($urandom_range(0, 2) == 0) ? rd_addr[p] : {7'($urandom), 4'($urandom_range(0, 3))};
        wr_data[p] = rnd128();
      end
      #1;
      // reads granted in the previous cycle
      for (int p = 0; p < 5; p++) if (g_q[p]) chk(rd_data[p] == exp_q[p], "read data");
      // expected grants
      rb = '0; wb = '0; eg = '0; ewg = '0; ra = '0;
      for (int p = 0; p < 5; p++)
        if (rd_req[p]) begin
          if (!rb[rd_addr[p][3:0]]) begin rb[rd_addr[p][3:0]] = 1; ra[rd_addr[p][3:0]] = rd_addr[p]; eg[p] = 1; end
          else if (ra[rd_addr[p][3:0]] == rd_addr[p]) begin eg[p] = 1; shared++; end
        end
      for (int p = 0; p < 3; p++)
        if (wr_req[p] && !wb[wr_addr[p][3:0]]) begin wb[wr_addr[p][3:0]] = 1; ewg[p] = 1; end
      chk(rd_gnt == eg, "read grants");
      chk(wr_gnt == ewg, "write grants");
      for (int p = 0; p < 3; p++) if (ewg[p]) ref_mem[wr_addr[p]] = wr_data[p];
      for (int p = 0; p < 5; p++) exp_q[p] = ref_mem[rd_addr[p]];
      g_q = rd_gnt;
      @(posedge clk); #1;
    end
    chk(shared > 0, "shared reads happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
