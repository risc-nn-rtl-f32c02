// tb_instr_loader: checks the Instruction Loader together with an Instruction RAM.
// Loading: for random ExeBlocks (DRAM address, PC range) the loader's K_IRD requests are
// answered out of order after random delays with DRAM-model words; afterwards every PC
// of the range is read back through a fetch port and must hold its instruction (even PC
// in the upper half of a word) while the PCs just outside the range stay untouched.
// Sparse PC Inc: random sparse vectors (one or two 64-bit chunks) are applied to the
// CAL range; every valid instruction must then hold the distance to the next valid one
// (or to the end of the range) in its Sparse PC Inc field, its other bits unchanged, and
// the reported first PC must be the first valid one (the range end if none).
module tb_instr_loader;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_start, ld_busy, ld_done, sp_valid, sp_ready, sp_done;
  logic [CW-1:0] my_x = 4'd2, my_y = 4'd7;
  logic [EB_W-1:0] ld_eb, ld_done_eb, sp_eb, sp_done_eb;
  logic [AW-1:0] ld_addr;
  logic [PC_W-1:0] ld_pc_lo, ld_pc_hi, sp_cal_lo, sp_cal_hi, sp_first_pc;
  logic [5:0] sp_chunk;
  logic [63:0] sp_bits;
  logic req_valid, req_ready, rsp_valid, rsp_ready, wr_req, wr_gnt;
  noc_flit_t req_flit, rsp_flit;
  logic [PC_W-1:0] wr_addr;
  logic [IW-1:0] wr_data, wr_mask;
  instr_loader dut (.*);

  logic [3:0] f_req, f_gnt;
  logic [3:0][PC_W-1:0] f_addr;
  logic [3:0][IW-1:0] f_data;
  instr_ram u_iram (.clk, .rst_n, .fetch_req(f_req), .fetch_addr(f_addr), .fetch_gnt(f_gnt),
    .fetch_data(f_data), .wr_req, .wr_addr, .wr_data, .wr_mask, .wr_gnt);
  dram_model u_dram (.clk, .rst_n, .req_valid(1'b0), .req_ready(), .req_we(1'b0), .req_addr('0),
    .req_wdata('0), .rsp_valid(), .rsp_rdata());

  int checks = 0, failures = 0;
  noc_flit_t pend [$];
  logic [IW-1:0] ref_i [4096];
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    req_ready <= $urandom_range(0, 2) != 0;
    if (rst_n && req_valid && req_ready) begin
      chk(req_flit.kind == K_IRD && req_flit.to_edge && req_flit.dst_x == CW'(req_flit.addr[4:2]) &&
          req_flit.src_x == my_x && req_flit.src_y == my_y, "instruction read header");
      pend.push_back(req_flit);
    end
    if (rst_n && (!rsp_valid || rsp_ready)) begin
      if (pend.size() > 0 && $urandom_range(0, 1)) begin
        int k;
        noc_flit_t r;
        k = $urandom_range(0, pend.size() - 1);
        r = pend[k]; pend.delete(k);
        r.kind = K_IRSP; r.data = u_dram.peek(r.addr);
        rsp_flit <= r; rsp_valid <= 1'b1;
      end else rsp_valid <= 1'b0;
    end
  end

  task automatic fetch(input logic [PC_W-1:0] a, output logic [IW-1:0] d);
    @(negedge clk);
    f_req[0] = 1; f_addr[0] = a;
    @(posedge clk); #1 f_req[0] = 0;
    d = f_data[0];
  endtask

  initial begin
    ld_start = 0; ld_eb = 0; ld_addr = 0; ld_pc_lo = 0; ld_pc_hi = 0;
    sp_valid = 0; sp_eb = 0; sp_chunk = 0; sp_bits = 0; sp_cal_lo = 0; sp_cal_hi = 0;
    rsp_valid = 0; rsp_flit = '0; f_req = 0; f_addr = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int run = 0; run < 12; run++) begin
      int lo, n;
      logic [AW-1:0] a;
      logic [IW-1:0] d;
      logic [EB_W-1:0] eb;
      lo = 2 * $urandom_range(0, 1900); n = $urandom_range(1, 150);
      a = $urandom_range(0, 32'h00FF_FFFF);
      eb = EB_W'($urandom);
      @(negedge clk);
      ld_start = 1; ld_eb = eb; ld_addr = a; ld_pc_lo = PC_W'(lo); ld_pc_hi = PC_W'(lo + n);
      @(negedge clk); ld_start = 0;
      while (!ld_done) @(negedge clk);
      chk(ld_done_eb == eb, "done names the ExeBlock");
      for (int i = 0; i < n; i++) begin
        logic [VW-1:0] w;
        w = u_dram.peek(a + AW'(i / 2));
        ref_i[lo + i] = (i % 2 == 0) ? w[127:64] : w[63:0];
      end
      for (int i = 0; i < n; i++) begin
        fetch(PC_W'(lo + i), d);
        chk(d == ref_i[lo + i], "loaded instruction");
      end
      // sparse update on a CAL range inside the loaded range
      begin
        int cl, ch;
        logic [127:0] bits;
        int first, prev;
        logic [PC_W-1:0] fp;
        cl = lo + $urandom_range(0, n - 1); ch = cl + $urandom_range(0, lo + n - cl);
        if (ch - cl > 128) ch = cl + 128;
        bits = {$urandom, $urandom, $urandom, $urandom};
        if (run % 4 == 0) bits = '0;
        for (int c = 0; c * 64 < ch - cl || c == 0; c++) begin
          @(negedge clk);
          sp_valid = 1; sp_eb = eb; sp_chunk = 6'(c); sp_bits = bits[c*64 +: 64];
          sp_cal_lo = PC_W'(cl); sp_cal_hi = PC_W'(ch);
          #1 while (!sp_ready) begin @(negedge clk); #1; end
          @(posedge clk); #1 sp_valid = 0;
        end
        while (!sp_done) @(negedge clk);
        fp = sp_first_pc;
        chk(sp_done_eb == eb, "sparse done names the ExeBlock");
        // model
        first = ch; prev = -1;
        for (int q = cl; q < ch; q++)
          if (bits[q - cl]) begin
            if (prev < 0) first = q;
            else ref_i[prev][SPINC_LSB +: 8] = 8'(q - prev);
            prev = q;
          end
        if (prev >= 0) ref_i[prev][SPINC_LSB +: 8] = 8'(ch - prev);
        chk(fp == PC_W'(first), "first valid CAL PC");
        for (int q = cl; q < ch; q++) begin
          fetch(PC_W'(q), d);
          chk(d == ref_i[q], "Sparse PC Inc fields");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
