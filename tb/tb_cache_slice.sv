// tb_cache_slice: checks one cache slice with the DRAM model behind it.
// The slice is reduced to 4 sets (4 ways, 64-byte lines) so that a small address pool
// causes misses, dirty evictions and refills. Random K_RD / K_WR requests from the NoC
// side and random host DMA reads and writes are issued one at a time; a word-level
// reference memory gives every expected read value, responses must echo tag and route
// back to the sender, and instruction reads (K_IRD, to a region the test never writes)
// must return the DRAM contents. A read hit must answer 3 cycles after it was accepted.
// Hits, misses and write-backs must all occur.
module tb_cache_slice;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  noc_flit_t req_flit, rsp_flit;
  logic dma_valid, dma_ready, dma_we, dma_rsp_valid;
  logic [AW-1:0] dma_addr;
  logic [VW-1:0] dma_wdata, dma_rsp_rdata;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [AW-1:0] dram_req_addr;
  logic [VW-1:0] dram_req_wdata, dram_rsp_rdata;
  logic ev_hit, ev_miss, ev_writeback;
  cache_slice #(.SETS(4)) dut (.*);
  dram_model #(.LAT(4)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  int checks = 0, failures = 0, n_hit = 0, n_miss = 0, n_wb = 0, hit_lat_checked = 0;
  logic [VW-1:0] ref_m [logic [AW-1:0]];
  always @(posedge clk) begin
    if (ev_hit) n_hit++;
    if (ev_miss) n_miss++;
    if (ev_writeback) n_wb++;
  end
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
  function automatic logic [VW-1:0] refv(input logic [AW-1:0] a);
    return ref_m.exists(a) ? ref_m[a] : u_dram.init_word(a);
  endfunction
  function automatic logic [AW-1:0] pool_addr();
    // tag 0..5, set 0..3, word 0..3, slice bits 0
    return AW'({$urandom_range(0, 5), 2'($urandom_range(0, 3)), 3'b000, 2'($urandom_range(0, 3))});
  endfunction

  initial begin
    req_valid = 0; req_flit = '0; rsp_ready = 1; dma_valid = 0; dma_we = 0; dma_addr = 0; dma_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 1500; n++) begin
      int kind, t;
      logic [AW-1:0] a;
      kind = $urandom_range(0, 9);
      a = pool_addr();
      @(negedge clk);
      if (kind < 7) begin
        noc_flit_t f;
        bit was_hit;
        f = '0;
        f.kind = (kind < 3) ? K_RD : (kind < 6) ? K_WR : K_IRD;
        if (f.kind == K_IRD) a = 32'h0100_0000 + AW'($urandom_range(0, 63));
        f.addr = a; f.tag = 16'($urandom); f.src_x = 4'($urandom); f.src_y = 4'($urandom);
        f.data = {$urandom, $urandom, $urandom, $urandom};
        req_flit = f; req_valid = 1;
        #1 while (!req_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 req_valid = 0;
        t = 0; was_hit = 0;
        while (!rsp_valid) begin
          if (ev_hit) was_hit = 1;
          @(negedge clk); t++;
        end
        chk(rsp_flit.tag == f.tag && rsp_flit.dst_x == f.src_x && rsp_flit.dst_y == f.src_y,
            "response returns to the sender with its tag");
        case (f.kind)
          K_RD: begin
            chk(rsp_flit.kind == K_RDRSP && rsp_flit.data == refv(a), "cached read data");
            if (was_hit) begin chk(t == 3, $sformatf("hit answered 3 cycles after acceptance (%0d)", t)); hit_lat_checked++; end
          end
          K_WR: begin chk(rsp_flit.kind == K_WRACK, "write acknowledged"); ref_m[a] = f.data; end
          default: chk(rsp_flit.kind == K_IRSP && rsp_flit.data == u_dram.peek(a), "instruction read from DRAM");
        endcase
        @(posedge clk); #1;
      end else begin
        logic [VW-1:0] d;
        d = {$urandom, $urandom, $urandom, $urandom};
        dma_addr = a; dma_we = kind == 9; dma_wdata = d; dma_valid = 1;
        #1 while (!dma_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 dma_valid = 0;
        while (!dma_rsp_valid) begin @(negedge clk); #1; end
        if (dma_we) ref_m[a] = d;
        else chk(dma_rsp_rdata == refv(a), "DMA read data");
        @(posedge clk); #1;
      end
    end
    $display("hits=%0d misses=%0d writebacks=%0d", n_hit, n_miss, n_wb);
    chk(n_hit > 0 && n_miss > 0 && n_wb > 0, "hits, misses and write-backs all happened");
    chk(hit_lat_checked > 0, "hit latency measured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
