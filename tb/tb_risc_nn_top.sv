// tb_risc_nn_top: end-to-end test of the whole chip at its default size (8 x 8 PEs,
// 1 MB cache), with the DRAM modelled behaviourally.
//
// The host side of the test programs a small two-PE task through the Control NoC and runs
// it twice:
//   PE0 / ExeBlock 0  loads five input vectors (cache misses, then a hit on a refilled
//                     line), computes with ADD, MUL, PREREAD0/1, MADD, MAX, SUB and MIN so
//                     that read-after-write bypasses and pre-read hits occur, COPYs two
//                     results into PE1 and activates PE1's ExeBlock 2, and stores results,
//                     one of them through the In-DRAM lookup table, and enough lines into one
//                     cache set to force a dirty write-back.
//   PE0 / ExeBlock 1  an independent block of the same task whose LD stage overlaps
//                     ExeBlock 0's CAL stage, so LD fetches lose Instruction RAM cycles.
//   PE1 / ExeBlock 2  waits for the activation, runs a sparse CAL stage (bit vector 101:
//                     the middle instruction is skipped) and stores two results.
// Inputs go in, and results come out, over host DMA. Instruction images and the lookup
// table are placed in DRAM directly. Every result is compared with a model computed here,
// per 16-bit lane. The run is repeated with another ST base to check that ExeBlocks reset
// and reuse their loaded instructions. Each mechanism (cache hit, miss, write-back, table
// lookup, RAW bypass, pre-read hit, fetch stall, remote COPY, activation ordering, sparse
// skip, completion reports) is counted, and one that never happened is a failure.
module tb_risc_nn_top;
  import rnn_pkg::*;
  localparam logic [31:0] LDB = 32'h0000_1000;
  localparam logic [31:0] STB1 = 32'h0000_2000, STB2 = 32'h0000_3000;
  localparam logic [31:0] TBASE = 32'h0F00_0000;
  localparam logic [31:0] IA0 = 32'h0000_8000, IA1 = 32'h0000_8100, IA2 = 32'h0000_8200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_msg_valid, host_msg_ready, host_evt_valid;
  ctrl_msg_t host_msg;
  ctrl_up_t host_evt;
  logic [NUM_TASK-1:0][15:0] done_count;
  logic dma_req_valid, dma_req_ready, dma_req_we, dma_rsp_valid;
  logic [AW-1:0] dma_req_addr;
  logic [VW-1:0] dma_req_wdata, dma_rsp_rdata;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [AW-1:0] dram_req_addr;
  logic [VW-1:0] dram_req_wdata, dram_rsp_rdata;
  logic [63:0] ev_raw_bypass, ev_preread_hit, ev_fetch_stall, ev_copy_in;
  logic [7:0] ev_cache_hit, ev_cache_miss, ev_cache_writeback, ev_table_lookup;

  risc_nn_top dut (.*);
  dram_model u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_wb = 0, n_lut = 0, n_byp = 0, n_pre = 0, n_stall = 0, n_copy = 0;
  int n_evt = 0, cyc = 0;
  int evt_order [$];

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    // count only once reset is applied: before the first clock edge the state is arbitrary
    if (rst_n) begin
      n_hit   <= n_hit + $countones(ev_cache_hit);
      n_miss  <= n_miss + $countones(ev_cache_miss);
      n_wb    <= n_wb + $countones(ev_cache_writeback);
      n_lut   <= n_lut + $countones(ev_table_lookup);
      n_byp   <= n_byp + $countones(ev_raw_bypass);
      n_pre   <= n_pre + $countones(ev_preread_hit);
      n_stall <= n_stall + $countones(ev_fetch_stall);
      n_copy  <= n_copy + $countones(ev_copy_in);
    end
    if (host_evt_valid) begin
      n_evt <= n_evt + 1;
      evt_order.push_back(int'(host_evt.src_pe) * 100 + int'(host_evt.eb));
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- lane models ----------------
  typedef logic [VW-1:0] vec_t;
  function automatic logic [15:0] tabf(input logic [15:0] v);
    return v * 16'd3 + 16'd1;
  endfunction
  function automatic vec_t lanes(input vec_t a, input vec_t b, input vec_t c, input opcode_e op);
    vec_t r;
    for (int l = 0; l < SIMD; l++) begin
      logic signed [15:0] x, y, z;
      x = a[l*16 +: 16]; y = b[l*16 +: 16]; z = c[l*16 +: 16];
      case (op)
        OP_ADD:  r[l*16 +: 16] = x + y;
        OP_SUB:  r[l*16 +: 16] = x - y;
        OP_MUL:  r[l*16 +: 16] = 16'(x * y);
        OP_MAX:  r[l*16 +: 16] = x > y ? x : y;
        OP_MIN:  r[l*16 +: 16] = x < y ? x : y;
        OP_MADD: r[l*16 +: 16] = 16'(x * y) + z;
        default: r[l*16 +: 16] = '0;
      endcase
    end
    return r;
  endfunction
  function automatic vec_t lut1(input vec_t a);
    vec_t r;
    for (int l = 0; l < SIMD; l++) r[l*16 +: 16] = tabf(a[l*16 +: 16]);
    return r;
  endfunction

  // ---------------- encoders ----------------
  function automatic logic [63:0] ins(input opcode_e op, input int f0, f1, f2, input int lut = 0);
    instr_t i;
    i = '0; i.op = op; i.f0 = 16'(f0); i.f1 = 16'(f1); i.f2 = 16'(f2); i.lut = 4'(lut);
    return i;
  endfunction
  function automatic ctrl_msg_t cm(input int pe, input bit bc, input msg_e t, input int eb,
                                   input logic [69:0] pl);
    ctrl_msg_t m;
    m.dst_pe = PE_W'(pe); m.bcast = bc; m.mtype = t; m.eb = EB_W'(eb); m.payload = pl;
    return m;
  endfunction
  function automatic logic [69:0] pcs(input int a, b, c, d);
    return {22'd0, 12'(a), 12'(b), 12'(c), 12'(d)};
  endfunction

  // instruction image of one ExeBlock: PCs lo, lo+1, ... packed two per DRAM word
  task automatic put_image(input logic [31:0] ia, input logic [63:0] img [$]);
    for (int k = 0; k < img.size(); k += 2)
      u_dram.poke(ia + 32'(k / 2), {img[k], (k + 1 < img.size()) ? img[k+1] : 64'd0});
  endtask

  task automatic send(input ctrl_msg_t m);
    @(negedge clk);
    host_msg = m; host_msg_valid = 1'b1;
    #1 while (!host_msg_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 host_msg_valid = 1'b0;
  endtask

  task automatic dma_wr(input logic [31:0] a, input vec_t d);
    @(negedge clk);
    dma_req_addr = a; dma_req_wdata = d; dma_req_we = 1'b1; dma_req_valid = 1'b1;
    #1 while (!dma_req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 dma_req_valid = 1'b0;
    while (!dma_rsp_valid) begin @(negedge clk); #1; end
    @(posedge clk); #1;
  endtask

  task automatic dma_rd(input logic [31:0] a, output vec_t d);
    @(negedge clk);
    dma_req_addr = a; dma_req_we = 1'b0; dma_req_valid = 1'b1;
    #1 while (!dma_req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 dma_req_valid = 1'b0;
    while (!dma_rsp_valid) begin @(negedge clk); #1; end
    d = dma_rsp_rdata;
    @(posedge clk); #1;
  endtask

  vec_t x [0:24];
  vec_t o8, o9, o10, o12, o13, o14, p7, p8, e28;

  task automatic run_task(input logic [31:0] stb, input int expect_done);
    vec_t r;
    int t0;
    t0 = cyc;
    send(cm(1, 1'b0, M_SPARSE, 2, {6'd0, 64'b101}));
    send(cm(0, 1'b1, M_TASK, 0, {3'd0, 3'd0, LDB, stb}));
    while (done_count[0] < 16'(expect_done)) @(posedge clk);
    $display("task run finished after %0d cycles", cyc - t0);
    dma_rd(stb + 0, r);                chk(r == o10, "PE0 store of OPM[10]");
    dma_rd(stb + 1, r);                chk(r == lut1(o9), "PE0 lookup store of OPM[9]");
    dma_rd(stb + 5, r);                chk(r == o13, "PE0 store of OPM[13]");
    for (int k = 1; k <= 4; k++) begin
      dma_rd(stb + 32'(k) * 32'h4000, r); chk(r == o14, "PE0 stores into one cache set");
    end
    dma_rd(stb + 8, r);                chk(r == p8, "PE1 sparse result OPM[8]");
    dma_rd(stb + 9, r);                chk(r == p7, "PE1 result OPM[7]");
    dma_rd(stb + 16, r);               chk(r == e28, "PE0 ExeBlock 1 result");
  endtask

  initial begin
    logic [63:0] img [$];
    host_msg_valid = 0; host_msg = '0;
    dma_req_valid = 0; dma_req_we = 0; dma_req_addr = '0; dma_req_wdata = '0;
    for (int i = 0; i <= 24; i++) x[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int w = 0; w < 8192; w++) begin
      vec_t tw;
      for (int l = 0; l < SIMD; l++) tw[l*16 +: 16] = tabf(16'(w * 8 + l));
      u_dram.poke(TBASE + 32'(w), tw);
    end
    // PE0 ExeBlock 0: LD 0..5, CAL 6..14, FLOW 15..16, ST 17..24
    img = {};
    img.push_back(ins(OP_LD, 0, 0, 0));  img.push_back(ins(OP_LD, 1, 0, 1));
    img.push_back(ins(OP_LD, 2, 0, 2));  img.push_back(ins(OP_LD, 3, 0, 3));
    img.push_back(ins(OP_LD, 4, 0, 4));  img.push_back(ins(OP_LD, 11, 0, 1));
    img.push_back(ins(OP_ADD, 0, 1, 8));     // O8  = O0 + O1
    img.push_back(ins(OP_MUL, 8, 2, 9));     // O9  = O8 * O2      (bypass)
    img.push_back(ins(OP_PRE0, 3, 0, 0));    // pre-read O3
    img.push_back(ins(OP_ADD, 3, 9, 10));    // O10 = O3 + O9      (pre-read hit)
    img.push_back(ins(OP_MADD, 11, 4, 10));  // O10 = O11*O4 + O10 (bypass on F2)
    img.push_back(ins(OP_PRE1, 0, 4, 0));    // pre-read O4
    img.push_back(ins(OP_MAX, 0, 4, 12));    // O12 = max(O0, O4)  (pre-read hit)
    img.push_back(ins(OP_SUB, 12, 1, 13));   // O13 = O12 - O1     (bypass)
    img.push_back(ins(OP_MIN, 13, 2, 14));   // O14 = min(O13, O2) (bypass)
    img.push_back(ins(OP_COPY, 10, 5, 1));   // PE1.O5 = O10
    img.push_back(ins(OP_COPY, 14, 6, 1));   // PE1.O6 = O14
    img.push_back(ins(OP_ST, 10, 0, 0));
    img.push_back(ins(OP_ST, 9, 0, 1, 1));   // through lookup table 1
    img.push_back(ins(OP_ST, 13, 0, 5));
    img.push_back(ins(OP_ST, 14, 1, 0));     // +0x10000 ... same set, new tags
    img.push_back(ins(OP_ST, 14, 0, 16'h4000));
    img.push_back(ins(OP_ST, 14, 0, 16'h8000));
    img.push_back(ins(OP_ST, 14, 0, 16'hC000));
    put_image(IA0, img);
    // PE0 ExeBlock 1: LD 30..37, CAL 38, ST 39 (PC 30 keeps the image word-aligned)
    img = {};
    for (int i = 0; i < 8; i++) img.push_back(ins(OP_LD, 20 + i, 0, 16 + i));
    img.push_back(ins(OP_ADD, 20, 21, 28));
    img.push_back(ins(OP_ST, 28, 0, 16));
    put_image(IA1, img);
    // PE1 ExeBlock 2: CAL 0..2 (sparse 101), ST 3..4
    img = {};
    img.push_back(ins(OP_ADD, 5, 6, 7));     // O7 = O5 + O6
    img.push_back(ins(OP_MUL, 7, 7, 7));     // skipped by the sparse vector
    img.push_back(ins(OP_SUB, 7, 5, 8));     // O8 = O7 - O5
    img.push_back(ins(OP_ST, 8, 0, 8));
    img.push_back(ins(OP_ST, 7, 0, 9));
    put_image(IA2, img);
    // expected values
    o8  = lanes(x[0], x[1], '0, OP_ADD);
    o9  = lanes(o8, x[2], '0, OP_MUL);
    o10 = lanes(x[3], o9, '0, OP_ADD);
    o10 = lanes(x[1], x[4], o10, OP_MADD);
    o12 = lanes(x[0], x[4], '0, OP_MAX);
    o13 = lanes(o12, x[1], '0, OP_SUB);
    o14 = lanes(o13, x[2], '0, OP_MIN);
    p7  = lanes(o10, o14, '0, OP_ADD);
    p8  = lanes(p7, o10, '0, OP_SUB);
    e28 = lanes(x[16], x[17], '0, OP_ADD);

    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    for (int i = 0; i <= 4; i++) dma_wr(LDB + 32'(i), x[i]);
    for (int i = 16; i <= 23; i++) dma_wr(LDB + 32'(i), x[i]);
    // initialization
    send(cm(0, 1'b0, M_EB0, 0, {4'd0, 3'd0, 4'd0, 1'b0, 26'd0, IA0}));
    send(cm(0, 1'b0, M_EB1, 0, pcs(0, 6, 6, 15)));
    send(cm(0, 1'b0, M_EB2, 0, pcs(15, 17, 17, 24)));
    send(cm(0, 1'b0, M_EB3, 0, {34'd0, 24'd0, {1'b1, 6'd1, 5'd2}}));
    send(cm(0, 1'b0, M_EB0, 1, {4'd1, 3'd0, 4'd0, 1'b0, 26'd0, IA1}));
    send(cm(0, 1'b0, M_EB1, 1, pcs(30, 38, 38, 39)));
    send(cm(0, 1'b0, M_EB2, 1, pcs(39, 39, 39, 40)));
    send(cm(0, 1'b0, M_EB3, 1, 70'd0));
    send(cm(1, 1'b0, M_EB0, 2, {4'd0, 3'd0, 4'd1, 1'b1, 26'd0, IA2}));
    send(cm(1, 1'b0, M_EB1, 2, pcs(0, 0, 0, 3)));
    send(cm(1, 1'b0, M_EB2, 2, pcs(3, 3, 3, 5)));
    send(cm(1, 1'b0, M_EB3, 2, 70'd0));
    run_task(STB1, 3);
    begin
      bit seen;
      seen = 0;
      foreach (evt_order[i]) if (evt_order[i] == 102) seen = 1;
      chk(seen, "activated ExeBlock on PE1 completed");
    end
    run_task(STB2, 6);
    chk(n_evt == 6, "six completion reports");
    $display("hits=%0d misses=%0d writebacks=%0d lookups=%0d bypass=%0d preread=%0d stalls=%0d copies=%0d events=%0d",
             n_hit, n_miss, n_wb, n_lut, n_byp, n_pre, n_stall, n_copy, n_evt);
    chk(n_hit > 0, "cache hit happened");
    chk(n_miss > 0, "cache miss happened");
    chk(n_wb > 0, "dirty write-back happened");
    chk(n_lut == 2, "one table lookup per run");
    chk(n_byp > 0, "RAW bypass happened");
    chk(n_pre == 4, "two pre-read hits per run");
    chk(n_stall > 0, "instruction fetch stall happened");
    chk(n_copy == 4, "two remote copies per run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
