// flow_unit: the FLOW execution unit of a PE (the FLOW Stage and the sending half of the
// Activation step).
//
// For each COPY in [init_pc, end_pc): fetch it, read OPM[F0] through Operand RAM read port 4
// (lowest priority), and send it over the Inter-PE NoC to PE number F2, to be written at
// that PE's OPM[F1]. After the last COPY it sends one activation packet to each valid
// successor ExeBlock (up to three). The Inter-PE NoC is dimension-ordered and keeps packets
// between a pair of PEs in order, so an activation never overtakes the data it announces.
// done pulses after the last activation has left.
//
// PE numbers map to mesh coordinates as x = pe % MX, y = pe / MX.
// COPY follows the paper's ISA table, PE[F2].OPM[F1] = OPM[F0]. (The paper's data-sharing
// figure prints the PE number in F1 instead; the table is followed here.)
module flow_unit
  import rnn_pkg::*;
#(
  parameter int MX = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CW-1:0]        my_x,
  input  logic [CW-1:0]        my_y,
  input  logic                 start,
  input  logic [PC_W-1:0]      init_pc,
  input  logic [PC_W-1:0]      end_pc,
  input  succ_t [2:0]          succ,
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
  output logic                 net_valid,
  input  logic                 net_ready,
  output noc_flit_t            net_flit
);
  typedef enum logic [2:0] { S_IDLE, S_FETCH, S_DEC, S_READ, S_DATA, S_SEND, S_ACT } state_e;
  state_e state;
  logic [PC_W-1:0] pc, end_q;
  succ_t [2:0]     succ_q;
  logic [1:0]      si;
  noc_flit_t       f_q, act_f;
  logic [OA_W-1:0] src_q;

  function automatic logic [CW-1:0] pe_x(input logic [PE_W-1:0] p);
    return CW'(p % PE_W'(MX));
  endfunction
  function automatic logic [CW-1:0] pe_y(input logic [PE_W-1:0] p);
    return CW'(p / PE_W'(MX));
  endfunction

  always_comb begin
    act_f       = '0;
    act_f.dst_x = pe_x(succ_q[si].pe);
    act_f.dst_y = pe_y(succ_q[si].pe);
    act_f.src_x = my_x;
    act_f.src_y = my_y;
    act_f.kind  = K_ACT;
    act_f.tag   = 16'(succ_q[si].eb);
  end

  assign if_req    = state == S_FETCH && pc < end_q;
  assign if_addr   = pc;
  assign rd_req    = state == S_READ;
  assign rd_addr   = src_q;
  assign net_valid = state == S_SEND || (state == S_ACT && si < 2'd3 && succ_q[si].v);
  assign net_flit  = (state == S_ACT) ? act_f : f_q;
  assign busy      = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; end_q <= '0; succ_q <= '0; si <= '0; f_q <= '0; src_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_FETCH; pc <= init_pc; end_q <= end_pc; succ_q <= succ; si <= '0;
        end
        S_FETCH: begin
          if (if_req && if_gnt) state <= S_DEC;
          else if (pc >= end_q) state <= S_ACT;
        end
        S_DEC: begin
          f_q       <= '0;
          f_q.dst_x <= pe_x(if_data.f2[PE_W-1:0]);
          f_q.dst_y <= pe_y(if_data.f2[PE_W-1:0]);
          f_q.src_x <= my_x;
          f_q.src_y <= my_y;
          f_q.kind  <= K_COPY;
          f_q.tag   <= if_data.f1;
          src_q     <= if_data.f0[OA_W-1:0];
          state     <= S_READ;
        end
        S_READ: if (rd_gnt) state <= S_DATA;
        S_DATA: begin
          f_q.data <= rd_data;
          state    <= S_SEND;
        end
        S_SEND: if (net_ready) begin
          pc <= pc + 1'b1;
          state <= S_FETCH;
        end
        S_ACT: begin
          if (si == 2'd3) begin
            state <= S_IDLE; done <= 1'b1;
          end else if (!succ_q[si].v || net_ready) begin
            si <= si + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
