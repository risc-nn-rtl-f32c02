// tb_control_unit: checks the Control Unit's ExeBlock sequencing with modelled neighbours.
// Six ExeBlocks with random priorities, predecessor counts and (for one) a sparse vector
// are initialized through EB0..EB3 messages; a modelled Instruction Loader takes a few
// cycles per load. After all are loaded, one broadcast TASK message enables them.
// Modelled execution units take random times; activations arrive at random times.
// Checked: each ExeBlock is loaded once and passes LD, CAL, FLOW, ST once, in that order,
// with its own PC ranges and task base addresses; CAL never starts before the activation
// count reaches #Predecessor; the sparse block's CAL starts at the first valid PC the
// loader reported; a unit is never started while busy; the first LD dispatched goes to the
// best priority; every ExeBlock reports completion once, with its task id.
module tb_control_unit;
  import rnn_pkg::*;
  localparam int NE = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [PE_W-1:0] my_pe = 6'd9;
  logic cmsg_valid, cmsg_ready, up_valid, up_ready, act_valid;
  ctrl_msg_t cmsg;
  ctrl_up_t up_msg;
  logic [EB_W-1:0] act_eb, ld_eb, ld_done_eb, sp_eb, sp_done_eb;
  logic ld_start, ld_busy, ld_done, sp_valid, sp_ready, sp_done;
  logic [AW-1:0] ld_addr, ld_base, st_base;
  logic [PC_W-1:0] ld_pc_lo, ld_pc_hi, sp_cal_lo, sp_cal_hi, sp_first_pc;
  logic [5:0] sp_chunk;
  logic [63:0] sp_bits;
  logic [3:0] u_start, u_busy, u_done;
  logic [3:0][PC_W-1:0] u_init_pc, u_end_pc;
  logic cal_sparse;
  succ_t [2:0] flow_succ;
  control_unit dut (.*);

  int checks = 0, failures = 0;
  int ebs [NE] = '{3, 7, 12, 20, 25, 31};
  int prio [NE], npred [NE], acts [NE], stage_of [NE], reported [NE], loaded [NE];
  int first_ld = -1;
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

  // PC layout: ExeBlock k owns PCs 100k .. 100k+34, stage u at 100k + 10u .. +5
  function automatic int eb_of_pc(input int pc);
    return pc / 100;
  endfunction

  // loader model
  int ld_cnt = 0;
  always @(posedge clk) begin
    ld_done <= 1'b0; sp_done <= 1'b0;
    if (!rst_n) begin ld_busy <= 1'b0; ld_cnt = 0; end
    else begin
      if (ld_start) begin
        chk(!ld_busy, "loader not started while busy");
        ld_busy <= 1'b1; ld_cnt = $urandom_range(3, 12);
        for (int k = 0; k < NE; k++) if (ebs[k] == int'(ld_eb)) begin
          loaded[k]++;
          chk(ld_pc_lo == PC_W'(100 * k) && ld_pc_hi == PC_W'(100 * k + 35) && ld_addr == 32'(1000 * k),
              "load range and address");
        end
      end else if (ld_busy) begin
        ld_cnt--;
        if (ld_cnt == 0) begin ld_busy <= 1'b0; ld_done <= 1'b1; ld_done_eb <= ld_eb; end
      end
      if (sp_valid && sp_ready) begin
        sp_done <= 1'b1; sp_done_eb <= sp_eb; sp_first_pc <= sp_cal_lo + 12'd3;
      end
    end
  end
  assign sp_ready = !ld_busy;

  // execution unit models
  int ucnt [4];
  always @(posedge clk) begin
    for (int u = 0; u < 4; u++) begin
      u_done[u] <= 1'b0;
      if (!rst_n) begin u_busy[u] <= 1'b0; ucnt[u] = 0; end
      else if (u_start[u]) begin
        int k;
        chk(!u_busy[u], "unit not started while busy");
        k = eb_of_pc(int'(u_init_pc[u]));
        chk(k < NE && stage_of[k] == u, "stages in order LD, CAL, FLOW, ST");
        if (u == ST_CAL) begin
          chk(acts[k] >= npred[k], "CAL waits for its predecessors");
          chk(u_init_pc[u] == PC_W'(100 * k + 10 + (k == 2 ? 3 : 0)), "CAL start PC (sparse: first valid)");
          chk(cal_sparse == (k == 2), "sparse flag");
        end else
          chk(u_init_pc[u] == PC_W'(100 * k + 10 * u), "stage start PC");
        chk(u_end_pc[u] == PC_W'(100 * k + 10 * u + 5), "stage end PC");
        if (u == ST_LD) begin
          chk(ld_base == 32'h1000, "LD base of the task");
          if (first_ld < 0) begin
            first_ld = k;
            for (int j = 0; j < NE; j++)
              chk(prio[j] > prio[k] || (prio[j] == prio[k] && j >= k), "best priority first");
          end
        end
        if (u == ST_ST) chk(st_base == 32'h2000, "ST base of the task");
        if (u == ST_FLOW) chk(flow_succ[0].eb == EB_W'(k) && flow_succ[0].v, "successor list");
        stage_of[k]++;
        u_busy[u] <= 1'b1; ucnt[u] = $urandom_range(1, 15);
      end else if (u_busy[u]) begin
        ucnt[u]--;
        if (ucnt[u] == 0) begin u_busy[u] <= 1'b0; u_done[u] <= 1'b1; end
      end
    end
    if (rst_n && up_valid && up_ready) begin
      for (int k = 0; k < NE; k++) if (ebs[k] == int'(up_msg.eb)) begin
        reported[k]++;
        chk(stage_of[k] == 4 && up_msg.task_id == 3'd2 && up_msg.src_pe == my_pe, "completion report");
      end
    end
    up_ready <= $urandom_range(0, 1);
  end

  // activations
  always @(posedge clk) begin
    act_valid <= 1'b0;
    if (rst_n && $urandom_range(0, 99) == 0) begin
      int k;
      k = $urandom_range(0, NE - 1);
      if (acts[k] < npred[k]) begin acts[k]++; act_valid <= 1'b1; act_eb <= EB_W'(ebs[k]); end
    end
  end

  function automatic logic [69:0] pcs(input int a, b, c, d);
    return {22'd0, 12'(a), 12'(b), 12'(c), 12'(d)};
  endfunction
  task automatic send(input int dst, input bit bc, input msg_e t, input int eb, input logic [69:0] pl);
    @(negedge clk);
    cmsg.dst_pe = PE_W'(dst); cmsg.bcast = bc; cmsg.mtype = t; cmsg.eb = EB_W'(eb); cmsg.payload = pl;
    cmsg_valid = 1;
    #1 while (!cmsg_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 cmsg_valid = 0;
  endtask

  initial begin
    cmsg_valid = 0; cmsg = '0; up_ready = 0; act_valid = 0; act_eb = 0; ld_done_eb = 0;
    sp_done_eb = 0; sp_first_pc = 0;
    foreach (acts[k]) begin acts[k] = 0; stage_of[k] = 0; reported[k] = 0; loaded[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // a message for another PE must be ignored
    send(5, 0, M_EB0, 3, {4'd0, 3'd2, 4'd0, 1'b0, 26'd0, 32'd0});
    send(5, 0, M_EB3, 3, 70'd0);
    for (int k = 0; k < NE; k++) begin
      prio[k] = $urandom_range(0, 3); npred[k] = $urandom_range(0, 2);
      send(9, 0, M_EB0, ebs[k], {4'(prio[k]), 3'd2, 4'(npred[k]), k == 2, 26'd0, 32'(1000 * k)});
      send(9, 0, M_EB1, ebs[k], pcs(100 * k, 100 * k + 5, 100 * k + 10, 100 * k + 15));
      send(9, 0, M_EB2, ebs[k], pcs(100 * k + 20, 100 * k + 25, 100 * k + 30, 100 * k + 35));
      send(9, 0, M_EB3, ebs[k], {34'd0, 24'd0, {1'b1, 6'd0, 5'(k)}});
    end
    send(9, 0, M_SPARSE, ebs[2], {6'd0, 64'hFFFF_FFFF_FFFF_FFF8});
    repeat (200) @(posedge clk);
    foreach (loaded[k]) chk(loaded[k] == 1, "each ExeBlock loaded once before enabling");
    foreach (stage_of[k]) chk(stage_of[k] == 0, "nothing runs before the task is enabled");
    send(0, 1, M_TASK, 0, {3'd0, 3'd2, 32'h1000, 32'h2000});
    repeat (12000) @(posedge clk);
    foreach (stage_of[k]) chk(stage_of[k] == 4, "all four stages ran");
    foreach (reported[k]) chk(reported[k] == 1, "one completion report");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
