// control_unit: the Control Unit of a PE.
//
// It holds the ExeBlock Info Recorder (NUM_EB entries) and the Task Base Addr Registers
// (LD Base and ST Base per task id) and walks each ExeBlock through its steps:
//   Initialization  control messages EB0..EB3 fill an entry; EB3 completes it.
//   Instr. Loading  when the Instruction Loader is idle, the highest-priority entry whose
//                   instructions are not loaded is handed to it.
//   Sparse PC Inc   sparse-vector chunks for a loaded entry are passed to the loader; a
//                   Sparse-Execution entry may not start before its vector is processed.
//   Task Enabling   a broadcast TASK message sets the task's base addresses and enables
//                   every entry of that task.
//   Activation      activation packets from predecessors are counted per entry.
//   Execution       stages LD, CAL, FLOW, ST in order, each on its own unit. For every
//                   unit, the highest-priority ready entry (smallest priority value, then
//                   smallest index) is dispatched when the unit is free. CAL also waits
//                   until the activation count reaches #Predecessor. Different ExeBlocks
//                   thus overlap on different units.
//   Reset           after ST the entry is disabled and its counters cleared (instructions
//                   stay loaded for reuse) and a completion report goes up the Control NoC.
// Empty stages (start PC = end PC) are still dispatched; the unit finishes at once.
//
// Timing: start pulses and stage parameters are registered; a dispatch decided in cycle t
// reaches the unit in cycle t+1.
// Steps, stages, recorded fields and their order are the paper's; message formats, the
// priority encoding, the EB3-completes-initialization rule and completion reports are
// this design's choices.
module control_unit
  import rnn_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [PE_W-1:0]       my_pe,
  // control NoC
  input  logic                  cmsg_valid,
  input  ctrl_msg_t             cmsg,
  output logic                  cmsg_ready,
  output logic                  up_valid,
  output ctrl_up_t              up_msg,
  input  logic                  up_ready,
  // activations arriving over the inter-PE NoC
  input  logic                  act_valid,
  input  logic [EB_W-1:0]       act_eb,
  // instruction loader
  output logic                  ld_start,
  output logic [EB_W-1:0]       ld_eb,
  output logic [AW-1:0]         ld_addr,
  output logic [PC_W-1:0]       ld_pc_lo,
  output logic [PC_W-1:0]       ld_pc_hi,
  input  logic                  ld_busy,
  input  logic                  ld_done,
  input  logic [EB_W-1:0]       ld_done_eb,
  output logic                  sp_valid,
  input  logic                  sp_ready,
  output logic [EB_W-1:0]       sp_eb,
  output logic [5:0]            sp_chunk,
  output logic [63:0]           sp_bits,
  output logic [PC_W-1:0]       sp_cal_lo,
  output logic [PC_W-1:0]       sp_cal_hi,
  input  logic                  sp_done,
  input  logic [EB_W-1:0]       sp_done_eb,
  input  logic [PC_W-1:0]       sp_first_pc,
  // execution units: index = stage_e (LD, CAL, FLOW, ST)
  output logic [3:0]            u_start,
  output logic [3:0][PC_W-1:0]  u_init_pc,
  output logic [3:0][PC_W-1:0]  u_end_pc,
  input  logic [3:0]            u_busy,
  input  logic [3:0]            u_done,
  output logic                  cal_sparse,
  output logic [AW-1:0]         ld_base,
  output logic [AW-1:0]         st_base,
  output succ_t [2:0]           flow_succ
);
  typedef struct packed {
    logic                   valid;      // initialization complete
    logic                   loaded;
    logic                   loading;
    logic                   enabled;
    logic                   sp_ok;      // sparse vector processed for this task
    logic                   running;    // current stage is on a unit
    stage_e                 stage;
    logic [3:0]             prio;
    logic [TASK_W-1:0]      task_id;
    logic [3:0]             npred;
    logic [3:0]             actcnt;
    logic                   sparse;
    logic [AW-1:0]          inst_addr;
    logic [3:0][PC_W-1:0]   spc;
    logic [3:0][PC_W-1:0]   epc;
    logic [PC_W-1:0]        cal_first;
    succ_t [2:0]            succ;
  } eb_rec_t;

  eb_rec_t                         rec [NUM_EB];
  logic [NUM_TASK-1:0][AW-1:0]     ldb, stb;
  logic [3:0][EB_W-1:0]            cur_eb;
  logic [NUM_EB-1:0]               done_pend;

  // ---------------- message decode ----------------
  logic for_me;
  assign for_me = cmsg.bcast || cmsg.dst_pe == my_pe;

  always_comb begin
    sp_eb     = cmsg.eb;
    sp_chunk  = cmsg.payload[69:64];
    sp_bits   = cmsg.payload[63:0];
    sp_cal_lo = rec[cmsg.eb].spc[ST_CAL];
    sp_cal_hi = rec[cmsg.eb].epc[ST_CAL];
    sp_valid  = cmsg_valid && for_me && cmsg.mtype == M_SPARSE && rec[cmsg.eb].loaded;
    if (cmsg_valid && for_me && cmsg.mtype == M_SPARSE) cmsg_ready = sp_valid && sp_ready;
    else                                                cmsg_ready = 1'b1;
  end

  // ---------------- selection ----------------
  function automatic logic better(input logic [3:0] pa, input logic [3:0] pb);
    return pa < pb;
  endfunction

  logic [3:0]             sel_v;
  logic [3:0][EB_W-1:0]   sel_eb;
  logic                   lsel_v;
  logic [EB_W-1:0]        lsel_eb;

  always_comb begin
    sel_v = '0; sel_eb = '0; lsel_v = 1'b0; lsel_eb = '0;
    for (int e = NUM_EB-1; e >= 0; e--) begin
      // instruction loading candidate
      if (rec[e].valid && !rec[e].loaded && !rec[e].loading)
        if (!lsel_v || !better(rec[lsel_eb].prio, rec[e].prio)) begin
          lsel_v = 1'b1; lsel_eb = EB_W'(e);
        end
      for (int u = 0; u < 4; u++) begin
        if (rec[e].valid && rec[e].loaded && rec[e].enabled && !rec[e].running &&
            (!rec[e].sparse || rec[e].sp_ok) && rec[e].stage == stage_e'(u) &&
            (u != ST_CAL || rec[e].actcnt >= rec[e].npred))
          if (!sel_v[u] || !better(rec[sel_eb[u]].prio, rec[e].prio)) begin
            sel_v[u] = 1'b1; sel_eb[u] = EB_W'(e);
          end
      end
    end
  end

  // ---------------- completion reports ----------------
  logic [EB_W-1:0] up_eb;
  always_comb begin
    up_eb = '0;
    for (int e = NUM_EB-1; e >= 0; e--) if (done_pend[e]) up_eb = EB_W'(e);
  end
  assign up_valid       = |done_pend;
  assign up_msg.src_pe  = my_pe;
  assign up_msg.eb      = up_eb;
  assign up_msg.task_id = rec[up_eb].task_id;

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NUM_EB; e++) rec[e] <= '0;
      ldb <= '0; stb <= '0; cur_eb <= '0; done_pend <= '0;
      u_start <= '0; u_init_pc <= '0; u_end_pc <= '0; cal_sparse <= 1'b0;
      ld_base <= '0; st_base <= '0; flow_succ <= '0;
      ld_start <= 1'b0; ld_eb <= '0; ld_addr <= '0; ld_pc_lo <= '0; ld_pc_hi <= '0;
    end else begin
      // control messages
      if (cmsg_valid && cmsg_ready && for_me) begin
        unique case (cmsg.mtype)
          M_EB0: begin
            rec[cmsg.eb].valid     <= 1'b0;
            rec[cmsg.eb].loaded    <= 1'b0;
            rec[cmsg.eb].loading   <= 1'b0;
            rec[cmsg.eb].enabled   <= 1'b0;
            rec[cmsg.eb].sp_ok     <= 1'b0;
            rec[cmsg.eb].running   <= 1'b0;
            rec[cmsg.eb].stage     <= ST_LD;
            rec[cmsg.eb].actcnt    <= '0;
            rec[cmsg.eb].prio      <= cmsg.payload[69:66];
            rec[cmsg.eb].task_id   <= cmsg.payload[65:63];
            rec[cmsg.eb].npred     <= cmsg.payload[62:59];
            rec[cmsg.eb].sparse    <= cmsg.payload[58];
            rec[cmsg.eb].inst_addr <= cmsg.payload[31:0];
          end
          M_EB1: begin
            rec[cmsg.eb].spc[ST_LD]  <= cmsg.payload[47:36];
            rec[cmsg.eb].epc[ST_LD]  <= cmsg.payload[35:24];
            rec[cmsg.eb].spc[ST_CAL] <= cmsg.payload[23:12];
            rec[cmsg.eb].epc[ST_CAL] <= cmsg.payload[11:0];
            rec[cmsg.eb].cal_first   <= cmsg.payload[23:12];
          end
          M_EB2: begin
            rec[cmsg.eb].spc[ST_FLOW] <= cmsg.payload[47:36];
            rec[cmsg.eb].epc[ST_FLOW] <= cmsg.payload[35:24];
            rec[cmsg.eb].spc[ST_ST]   <= cmsg.payload[23:12];
            rec[cmsg.eb].epc[ST_ST]   <= cmsg.payload[11:0];
          end
          M_EB3: begin
            rec[cmsg.eb].succ  <= cmsg.payload[35:0];
            rec[cmsg.eb].valid <= 1'b1;
          end
          M_TASK: begin
            ldb[cmsg.payload[66:64]] <= cmsg.payload[63:32];
            stb[cmsg.payload[66:64]] <= cmsg.payload[31:0];
            for (int e = 0; e < NUM_EB; e++)
              if (rec[e].valid && rec[e].task_id == cmsg.payload[66:64]) rec[e].enabled <= 1'b1;
          end
          default: ;  // M_SPARSE is consumed by the loader
        endcase
      end

      // activations
      if (act_valid && rec[act_eb].actcnt != 4'hF) rec[act_eb].actcnt <= rec[act_eb].actcnt + 1'b1;

      // instruction loading
      ld_start <= 1'b0;
      if (lsel_v && !ld_busy && !ld_start) begin
        ld_start <= 1'b1;
        ld_eb    <= lsel_eb;
        ld_addr  <= rec[lsel_eb].inst_addr;
        ld_pc_lo <= rec[lsel_eb].spc[ST_LD];
        ld_pc_hi <= rec[lsel_eb].epc[ST_ST];
        rec[lsel_eb].loading <= 1'b1;
      end
      if (ld_done) begin
        rec[ld_done_eb].loaded  <= 1'b1;
        rec[ld_done_eb].loading <= 1'b0;
      end
      if (sp_done) begin
        rec[sp_done_eb].sp_ok     <= 1'b1;
        rec[sp_done_eb].cal_first <= sp_first_pc;
      end

      // stage completion
      for (int u = 0; u < 4; u++) begin
        if (u_done[u]) begin
          rec[cur_eb[u]].running <= 1'b0;
          if (u == ST_ST) begin
            rec[cur_eb[u]].stage   <= ST_LD;
            rec[cur_eb[u]].enabled <= 1'b0;
            rec[cur_eb[u]].actcnt  <= '0;
            rec[cur_eb[u]].sp_ok   <= 1'b0;
          end else begin
            rec[cur_eb[u]].stage <= stage_e'(u + 1);
          end
        end
      end

      // stage dispatch
      for (int u = 0; u < 4; u++) begin
        u_start[u] <= 1'b0;
        if (sel_v[u] && !u_busy[u] && !u_start[u] && !u_done[u]) begin
          u_start[u]   <= 1'b1;
          cur_eb[u]    <= sel_eb[u];
          rec[sel_eb[u]].running <= 1'b1;
          u_init_pc[u] <= (u == ST_CAL && rec[sel_eb[u]].sparse) ? rec[sel_eb[u]].cal_first
                                                                 : rec[sel_eb[u]].spc[u];
          u_end_pc[u]  <= rec[sel_eb[u]].epc[u];
          if (u == ST_CAL)  cal_sparse <= rec[sel_eb[u]].sparse;
          if (u == ST_LD)   ld_base    <= ldb[rec[sel_eb[u]].task_id];
          if (u == ST_ST)   st_base    <= stb[rec[sel_eb[u]].task_id];
          if (u == ST_FLOW) flow_succ  <= rec[sel_eb[u]].succ;
        end
      end

      // completion reports
      begin
        logic [NUM_EB-1:0] dp;
        dp = done_pend;
        if (up_valid && up_ready) dp[up_eb] = 1'b0;
        if (u_done[ST_ST]) dp[cur_eb[ST_ST]] = 1'b1;
        done_pend <= dp;
      end
    end
  end
endmodule
