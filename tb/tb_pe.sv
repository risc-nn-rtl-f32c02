// tb_pe: checks one processing element with modelled networks around it.
// The Memory NoC side answers instruction reads from an instruction image, operand reads
// with d(a) = {4{a * 32'h9E37_79B9}} and acknowledges writes, all after random delays.
// One ExeBlock (one predecessor) is initialized over the Control NoC port and its task
// enabled. Its program loads two vectors, adds them, adds a third vector that another PE
// COPYs in over the Inter-PE NoC, COPYs the sum to PE 13 and activates ExeBlock 4 there,
// and stores the sum with lookup type 2. The test sends the incoming COPY and the
// activation at a random moment and checks every packet the PE sends and its completion
// report. It runs the block three times to check reuse of the loaded instructions.
module tb_pe;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [CW-1:0] my_x = 4'd3, my_y = 4'd1;
  logic mem_out_valid, mem_out_ready, mem_in_valid, mem_in_ready;
  noc_flit_t mem_out_flit, mem_in_flit;
  logic net_out_valid, net_out_ready, net_in_valid, net_in_ready;
  noc_flit_t net_out_flit, net_in_flit;
  logic cmsg_valid, cmsg_ready, up_valid, up_ready;
  ctrl_msg_t cmsg;
  ctrl_up_t up_msg;
  logic ev_raw_bypass, ev_preread_hit, ev_fetch_stall, ev_copy_in;
  pe dut (.*);

  localparam logic [31:0] IA = 32'h0004_0000, LDB = 32'h0000_0500, STB = 32'h0000_0900;
  int checks = 0, failures = 0, n_ird = 0, n_copy_out = 0, n_act_out = 0, n_wr = 0, n_up = 0;
  logic [VW-1:0] img [16];
  logic [VW-1:0] x2;
  noc_flit_t pend [$];
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
    return {4{a * 32'h9E37_79B9}};
  endfunction
  function automatic logic [VW-1:0] vadd(input logic [VW-1:0] a, b);
    logic [VW-1:0] r;
    for (int l = 0; l < SIMD; l++) r[l*16 +: 16] = a[l*16 +: 16] + b[l*16 +: 16];
    return r;
  endfunction
  function automatic logic [63:0] ins(input opcode_e op, input int f0, f1, f2, input int lut = 0);
    instr_t i;
    i = '0; i.op = op; i.f0 = 16'(f0); i.f1 = 16'(f1); i.f2 = 16'(f2); i.lut = 4'(lut);
    return i;
  endfunction
  logic [VW-1:0] sum;
  assign sum = vadd(vadd(d(LDB), d(LDB + 1)), x2);

  // memory side
  always @(posedge clk) begin
    mem_out_ready <= $urandom_range(0, 2) != 0;
    if (rst_n && mem_out_valid && mem_out_ready) begin
      noc_flit_t r;
      r = mem_out_flit;
      chk(r.to_edge && r.dst_x == CW'(r.addr[4:2]) && r.src_x == my_x && r.src_y == my_y, "memory request header");
      case (r.kind)
        K_IRD: begin r.kind = K_IRSP; r.data = img[r.addr - IA]; n_ird++; end
        K_RD:  begin r.kind = K_RDRSP; r.data = d(r.addr); end
        K_WR:  begin
          chk(r.addr == STB + 3 && r.data == sum && r.lut == 4'd2, "store of the sum with its lookup type");
          r.kind = K_WRACK; n_wr++;
        end
        default: chk(0, "unexpected memory request kind");
      endcase
      pend.push_back(r);
    end
    if (rst_n && (!mem_in_valid || mem_in_ready)) begin
      if (pend.size() > 0 && $urandom_range(0, 1)) begin
        int k;
        k = $urandom_range(0, pend.size() - 1);
        mem_in_flit <= pend[k]; pend.delete(k); mem_in_valid <= 1'b1;
      end else mem_in_valid <= 1'b0;
    end
    net_out_ready <= $urandom_range(0, 1);
    if (rst_n && net_out_valid && net_out_ready) begin
      if (net_out_flit.kind == K_COPY) begin
        chk(net_out_flit.dst_x == 4'd5 && net_out_flit.dst_y == 4'd1 && net_out_flit.tag == 16'd7 &&
            net_out_flit.data == sum, "outgoing COPY to PE 13, OPM[7]");
        n_copy_out++;
      end else begin
        chk(net_out_flit.kind == K_ACT && n_copy_out > n_act_out && net_out_flit.tag == 16'd4 &&
            net_out_flit.dst_x == 4'd5 && net_out_flit.dst_y == 4'd1, "activation after the COPY");
        n_act_out++;
      end
    end
    up_ready <= 1'b1;
    if (rst_n && up_valid && up_ready) begin
      chk(up_msg.eb == 5'd6 && up_msg.task_id == 3'd1 && up_msg.src_pe == 6'd11, "completion report");
      n_up++;
    end
  end

  task automatic send(input msg_e t, input logic [69:0] pl, input bit bc = 0);
    @(negedge clk);
    cmsg.dst_pe = 6'd11; cmsg.bcast = bc; cmsg.mtype = t; cmsg.eb = 5'd6; cmsg.payload = pl;
    cmsg_valid = 1;
    #1 while (!cmsg_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 cmsg_valid = 0;
  endtask
  task automatic net_send(input kind_e k, input int tag, input logic [VW-1:0] data);
    @(negedge clk);
    net_in_flit = '0; net_in_flit.kind = k; net_in_flit.tag = 16'(tag); net_in_flit.data = data;
    net_in_flit.dst_x = my_x; net_in_flit.dst_y = my_y;
    net_in_valid = 1;
    #1 while (!net_in_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 net_in_valid = 0;
  endtask

  initial begin
    logic [63:0] p [$];
    cmsg_valid = 0; cmsg = '0; net_in_valid = 0; net_in_flit = '0; mem_in_valid = 0; mem_in_flit = '0;
    // PCs: LD 0-1, CAL 2-3, FLOW 4, ST 5
    p = {ins(OP_LD, 0, 0, 0), ins(OP_LD, 1, 0, 1), ins(OP_ADD, 0, 1, 3), ins(OP_ADD, 3, 2, 4),
         ins(OP_COPY, 4, 7, 13), ins(OP_ST, 4, 0, 3, 2)};
    foreach (img[i]) img[i] = '0;
    for (int k = 0; k < p.size(); k += 2) img[k / 2] = {p[k], p[k + 1]};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    send(M_EB0, {4'd0, 3'd1, 4'd1, 1'b0, 26'd0, IA});
    send(M_EB1, {22'd0, 12'd0, 12'd2, 12'd2, 12'd4});
    send(M_EB2, {22'd0, 12'd4, 12'd5, 12'd5, 12'd6});
    send(M_EB3, {34'd0, 24'd0, {1'b1, 6'd13, 5'd4}});
    for (int run = 1; run <= 3; run++) begin
      x2 = {$urandom, $urandom, $urandom, $urandom};
      send(M_TASK, {3'd0, 3'd1, LDB, STB}, 1'b1);
      repeat ($urandom_range(0, 60)) @(posedge clk);
      net_send(K_COPY, 2, x2);
      net_send(K_ACT, 6, '0);
      while (n_up < run) @(posedge clk);
      chk(n_copy_out == run && n_act_out == run && n_wr == run, "one COPY, activation and store per run");
    end
    chk(n_ird == 3, "instructions loaded once (three words) and reused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
