// tb_table_loader: checks the In-DRAM Table Loader on its own, with the DRAM model.
// Lookup table t holds f_t(v) = v*3 + t at entry v, laid out eight entries per 128-bit
// word from TABLE_BASE + (t-1)*8192. Random packets are sent through: stores with a
// lookup type must come out with every lane replaced by f_t(lane) and the type cleared,
// after exactly eight DRAM reads; all other packets must come out unchanged. ev_lookup
// must pulse once per lookup store. A random stall on the output checks back-pressure.
module tb_table_loader;
  import rnn_pkg::*;
  localparam logic [31:0] TB_BASE = 32'h0F00_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, ev_lookup;
  noc_flit_t in_flit, out_flit;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [AW-1:0] dram_req_addr;
  logic [VW-1:0] dram_rsp_rdata;
  int checks = 0, failures = 0, n_ev = 0, n_lut_pkts = 0;
  noc_flit_t expq [$];

  table_loader dut (.*);
  dram_model #(.LAT(3)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(1'b0), .req_addr(dram_req_addr), .req_wdata('0), .rsp_valid(dram_rsp_valid),
    .rsp_rdata(dram_rsp_rdata));

  function automatic logic [15:0] tabf(input int t, input logic [15:0] v);
    return v * 16'd3 + 16'(t);
  endfunction

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

  always @(posedge clk) if (ev_lookup) n_ev++;

  // output side: random ready, compare in order
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      noc_flit_t e;
      e = expq.pop_front();
      chk(out_flit == e, "output packet");
    end
    out_ready <= $urandom_range(0, 3) != 0;
  end

  initial begin
    in_valid = 0; in_flit = '0; out_ready = 0;
    for (int t = 1; t <= 2; t++)
      for (int w = 0; w < 8192; w++) begin
        logic [VW-1:0] tw;
        for (int l = 0; l < SIMD; l++) tw[l*16 +: 16] = tabf(t, 16'(w * 8 + l));
        u_dram.poke(TB_BASE + 32'((t - 1) * 8192 + w), tw);
      end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 300; n++) begin
      noc_flit_t f, e;
      int rd0, t0;
      f = '0;
      f.kind = kind_e'($urandom_range(0, 7));
      if ($urandom_range(0, 1)) f.kind = K_WR;
      f.lut = 4'($urandom_range(0, 2));
      f.addr = $urandom; f.tag = 16'($urandom);
      f.data = {$urandom, $urandom, $urandom, $urandom};
      e = f;
      if (f.kind == K_WR && f.lut != 0) begin
        for (int l = 0; l < SIMD; l++) e.data[l*16 +: 16] = tabf(f.lut, f.data[l*16 +: 16]);
        e.lut = 0;
        n_lut_pkts++;
      end
      expq.push_back(e);
      rd0 = u_dram.n_reads;
      in_flit <= f; in_valid <= 1;
      do @(posedge clk); while (!in_ready);
      in_valid <= 0;
      t0 = 0;
      while (expq.size() != 0) begin @(posedge clk); t0++; end
      chk(u_dram.n_reads - rd0 == ((f.kind == K_WR && f.lut != 0) ? SIMD : 0), "DRAM reads per packet");
    end
    repeat (5) @(posedge clk);
    chk(n_ev == n_lut_pkts, "one lookup event per lookup store");
    $display("lookup stores=%0d events=%0d", n_lut_pkts, n_ev);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
