// tb_mem_controller: checks the memory controller (eight table loaders and cache slices,
// DMA steering, DRAM arbiter) with the DRAM model. Cache slices are reduced to 4 sets.
// All eight NoC edge ports issue random reads and writes at the same time, each to
// addresses owned by its own slice, with some stores carrying a lookup type; host DMA
// reads and writes run alongside, to addresses no edge port touches while they are in
// flight. Read data is checked against a reference memory, lookup stores must store the
// table value f(v) = v*5 + 1 of every lane, and every request must be answered.
module tb_mem_controller;
  import rnn_pkg::*;
  localparam int NS = 8;
  localparam logic [31:0] TBASE = 32'h0F00_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NS-1:0] noc_in_valid, noc_in_ready, noc_out_valid, noc_out_ready;
  noc_flit_t [NS-1:0] noc_in_flit, noc_out_flit;
  logic dma_req_valid, dma_req_ready, dma_req_we, dma_rsp_valid;
  logic [AW-1:0] dma_req_addr;
  logic [VW-1:0] dma_req_wdata, dma_rsp_rdata;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [AW-1:0] dram_req_addr;
  logic [VW-1:0] dram_req_wdata, dram_rsp_rdata;
  logic [NS-1:0] ev_hit, ev_miss, ev_writeback, ev_lookup;
  mem_controller #(.SETS(4)) dut (.*);
  dram_model #(.LAT(3)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  int checks = 0, failures = 0, n_lut = 0, n_wb = 0, done_ports = 0;
  logic [VW-1:0] ref_m [logic [AW-1:0]];
  always @(posedge clk) begin
    n_lut += $countones(ev_lookup);
    n_wb += $countones(ev_writeback);
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
  function automatic logic [15:0] tabf(input logic [15:0] v);
    return v * 16'd5 + 16'd1;
  endfunction
  function automatic logic [VW-1:0] refv(input logic [AW-1:0] a);
    return ref_m.exists(a) ? ref_m[a] : u_dram.init_word(a);
  endfunction

  for (genvar s = 0; s < NS; s++) begin : g_port
    initial begin
      noc_in_valid[s] = 0; noc_in_flit[s] = '0; noc_out_ready[s] = 1;
      wait (rst_n);
      repeat (3) @(posedge clk);
      for (int n = 0; n < 150; n++) begin
        noc_flit_t f;
        logic [AW-1:0] a;
        logic [VW-1:0] expd;
        a = AW'({$urandom_range(0, 5), 2'($urandom_range(0, 3)), 3'(s), 2'($urandom_range(0, 3))});
        f = '0;
        f.kind = $urandom_range(0, 1) ? K_RD : K_WR;
        f.addr = a; f.tag = 16'(n); f.src_x = 4'(s); f.src_y = 4'(n % 8);
        f.data = {$urandom, $urandom, $urandom, $urandom};
        if (f.kind == K_WR && $urandom_range(0, 4) == 0) f.lut = 4'd1;
        expd = f.data;
        if (f.lut != 0) for (int l = 0; l < SIMD; l++) expd[l*16 +: 16] = tabf(f.data[l*16 +: 16]);
        @(negedge clk);
        noc_in_flit[s] = f; noc_in_valid[s] = 1;
        #1 while (!noc_in_ready[s]) begin @(negedge clk); #1; end
        @(posedge clk); #1 noc_in_valid[s] = 0;
        while (!noc_out_valid[s]) begin @(negedge clk); #1; end
        chk(noc_out_flit[s].tag == f.tag && noc_out_flit[s].dst_x == 4'(s), "response to its sender");
        if (f.kind == K_RD) chk(noc_out_flit[s].kind == K_RDRSP && noc_out_flit[s].data == refv(a), "read data");
        else begin chk(noc_out_flit[s].kind == K_WRACK, "write ack"); ref_m[a] = expd; end
        @(posedge clk); #1;
      end
      done_ports++;
    end
  end

  initial begin
    dma_req_valid = 0; dma_req_we = 0; dma_req_addr = 0; dma_req_wdata = 0;
    for (int w = 0; w < 8192; w++) begin
      logic [VW-1:0] tw;
      for (int l = 0; l < SIMD; l++) tw[l*16 +: 16] = tabf(16'(w * 8 + l));
      u_dram.poke(TBASE + 32'(w), tw);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // DMA runs alongside the edge traffic in a separate address range (tags 8..9)
    for (int n = 0; n < 200; n++) begin
      logic [AW-1:0] a;
      logic [VW-1:0] d;
      a = AW'({$urandom_range(8, 9), 2'($urandom_range(0, 3)), 3'($urandom), 2'($urandom)});
      d = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      dma_req_addr = a; dma_req_we = $urandom_range(0, 1); dma_req_wdata = d; dma_req_valid = 1;
      #1 while (!dma_req_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 dma_req_valid = 0;
      while (!dma_rsp_valid) begin @(negedge clk); #1; end
      if (dma_req_we) ref_m[a] = d;
      else chk(dma_rsp_rdata == refv(a), "DMA read data");
      @(posedge clk); #1;
    end
    wait (done_ports == NS);
    // read everything back through DMA
    foreach (ref_m[a]) begin
      @(negedge clk);
      dma_req_addr = a; dma_req_we = 0; dma_req_valid = 1;
      #1 while (!dma_req_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 dma_req_valid = 0;
      while (!dma_rsp_valid) begin @(negedge clk); #1; end
      chk(dma_rsp_rdata == ref_m[a], "final contents through DMA");
      @(posedge clk); #1;
    end
    $display("lookups=%0d writebacks=%0d", n_lut, n_wb);
    chk(n_lut > 0 && n_wb > 0, "lookups and write-backs happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
