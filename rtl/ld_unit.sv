// ld_unit: the LD execution unit of a PE (the LD Stage of an ExeBlock).
//
// For each LD instruction in [init_pc, end_pc) it fetches the instruction, then sends a read
// request OPM[F0] = DRAM[LD_Base + {F1,F2}] into the Memory NoC, addressed to the cache slice
// that owns the word. The destination OPM address travels in the packet's tag, so responses
// may come back in any order; each is written through Operand RAM write port 1 (which may
// wait for a bank). Up to MAX_OUT reads are in flight. done pulses when every LD has been
// sent and every response written.
//
// Timing: three cycles per instruction issue (fetch, decode, send) when nothing waits.
// The instruction semantics and base-plus-offset addressing are the paper's; word addressing,
// the outstanding limit and the packet format are this design's choices.
module ld_unit
  import rnn_pkg::*;
#(
  parameter int MAX_OUT = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CW-1:0]        my_x,
  input  logic [CW-1:0]        my_y,
  input  logic                 start,
  input  logic [PC_W-1:0]      init_pc,
  input  logic [PC_W-1:0]      end_pc,
  input  logic [AW-1:0]        ld_base,
  output logic                 busy,
  output logic                 done,
  output logic                 if_req,
  output logic [PC_W-1:0]      if_addr,
  input  logic                 if_gnt,
  input  instr_t               if_data,
  output logic                 req_valid,
  input  logic                 req_ready,
  output noc_flit_t            req_flit,
  input  logic                 rsp_valid,
  output logic                 rsp_ready,
  input  noc_flit_t            rsp_flit,
  output logic                 wr_req,
  output logic [OA_W-1:0]      wr_addr,
  output logic [VW-1:0]        wr_data,
  input  logic                 wr_gnt
);
  typedef enum logic [1:0] { S_IDLE, S_FETCH, S_DEC, S_SEND } state_e;
  state_e state;
  logic [PC_W-1:0] pc, end_q;
  logic [AW-1:0]   base_q;
  logic [$clog2(MAX_OUT+1)-1:0] outst;
  noc_flit_t       f_q;
  logic            rsp_fire, req_fire;

  assign if_req  = state == S_FETCH && pc < end_q && outst < MAX_OUT;
  assign if_addr = pc;

  assign req_valid = state == S_SEND;
  assign req_flit  = f_q;
  assign req_fire  = req_valid && req_ready;

  assign wr_req    = rsp_valid;
  assign wr_addr   = rsp_flit.tag[OA_W-1:0];
  assign wr_data   = rsp_flit.data;
  assign rsp_ready = wr_gnt;
  assign rsp_fire  = rsp_valid && wr_gnt;

  assign busy = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; end_q <= '0; base_q <= '0; outst <= '0; f_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      outst <= outst + (req_fire ? 1'b1 : 1'b0) - (rsp_fire ? 1'b1 : 1'b0);
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_FETCH; pc <= init_pc; end_q <= end_pc; base_q <= ld_base;
        end
        S_FETCH: begin
          if (if_req && if_gnt) state <= S_DEC;
          else if (pc >= end_q && outst == '0 && !rsp_fire) begin
            state <= S_IDLE; done <= 1'b1;
          end
        end
        S_DEC: begin
          f_q         <= '0;
          f_q.addr    <= base_q + {if_data.f1, if_data.f2};
          f_q.dst_x   <= CW'(slice_of(base_q + {if_data.f1, if_data.f2}));
          f_q.dst_y   <= '0;
          f_q.to_edge <= 1'b1;
          f_q.src_x   <= my_x;
          f_q.src_y   <= my_y;
          f_q.kind    <= K_RD;
          f_q.tag     <= if_data.f0;
          state       <= S_SEND;
        end
        S_SEND: if (req_ready) begin
          pc <= pc + 1'b1;
          state <= S_FETCH;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
