// st_unit: the ST execution unit of a PE (the ST Stage of an ExeBlock).
//
// For each ST instruction in [init_pc, end_pc): fetch it, read OPM[F0] through Operand RAM
// read port 3 (lower priority than CAL, so it may wait for the bank), then send a write
// request DRAM[ST_Base + {F1,F2}] = data into the Memory NoC, carrying the 4-bit In-DRAM
// Lookup Type from the CTRL field. A non-zero type makes the memory side replace each lane
// by its entry in the function table before storing. Every store is acknowledged; done
// pulses when all stores are sent and acknowledged, so a finished ST stage means the data
// has reached the cache.
// Instruction semantics and the lookup field are the paper's; acknowledgement and packet
// format are this design's choices.
module st_unit
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
  input  logic [AW-1:0]        st_base,
  output logic                 busy,
  output logic                 done,
  output logic                 if_req,
  output logic [PC_W-1:0]      if_addr,
  input  logic                 if_gnt,
  input  instr_t               if_data,
  output logic                 rd_req,
  output logic [OA_W-1:0]      rd_addr,
  input  logic                 rd_gnt,
  input  logic [VW-1:0]        rd_data,
  output logic                 req_valid,
  input  logic                 req_ready,
  output noc_flit_t            req_flit,
  input  logic                 ack_valid,
  output logic                 ack_ready
);
  typedef enum logic [2:0] { S_IDLE, S_FETCH, S_DEC, S_READ, S_DATA, S_SEND } state_e;
  state_e state;
  logic [PC_W-1:0] pc, end_q;
  logic [AW-1:0]   base_q;
  logic [$clog2(MAX_OUT+1)-1:0] outst;
  noc_flit_t       f_q;
  logic [OA_W-1:0] src_q;
  logic            req_fire, ack_fire;

  assign if_req    = state == S_FETCH && pc < end_q && outst < MAX_OUT;
  assign if_addr   = pc;
  assign rd_req    = state == S_READ;
  assign rd_addr   = src_q;
  assign req_valid = state == S_SEND;
  assign req_flit  = f_q;
  assign req_fire  = req_valid && req_ready;
  assign ack_ready = 1'b1;
  assign ack_fire  = ack_valid;
  assign busy      = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; end_q <= '0; base_q <= '0; outst <= '0; f_q <= '0;
      src_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      outst <= outst + (req_fire ? 1'b1 : 1'b0) - (ack_fire ? 1'b1 : 1'b0);
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_FETCH; pc <= init_pc; end_q <= end_pc; base_q <= st_base;
        end
        S_FETCH: begin
          if (if_req && if_gnt) state <= S_DEC;
          else if (pc >= end_q && outst == '0 && !ack_fire) begin
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
          f_q.kind    <= K_WR;
          f_q.lut     <= if_data.lut;
          src_q       <= if_data.f0[OA_W-1:0];
          state       <= S_READ;
        end
        S_READ: if (rd_gnt) state <= S_DATA;
        S_DATA: begin
          f_q.data <= rd_data;
          state    <= S_SEND;
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
