// instr_loader: the Instruction Loader of a PE.
//
// Instruction Loading step: given an ExeBlock (chosen by the Control Unit, highest priority
// first) with instruction DRAM address A and instruction range [pc_lo, pc_hi), it reads the
// words A, A+1, ... over the Memory NoC (these reads bypass the cache) and writes the two
// 64-bit instructions of each 128-bit word to PCs pc_lo + 2*i and pc_lo + 2*i + 1. Word
// requests are tagged with i, so responses may arrive in any order. Like a DMA, it issues
// up to MAX_OUT reads ahead. The instruction at the even PC sits in bits [127:64] of a word.
//
// Sparse PC Inc Update step: it takes a sparse vector, 64 bits per chunk, whose bit k says
// whether CAL instruction cal_lo + k runs in the coming task. Scanning forward, each time it
// meets a set bit at PC q it writes q - p into the Sparse PC Inc field of the previous
// valid instruction p (masked write, 8 bits only); at the end of the range the last valid
// one gets cal_hi - p. It then reports the first valid PC (or cal_hi if none) as the new CAL
// start PC. Chunks of one ExeBlock must arrive in order. Gaps above 255 cannot be encoded.
//
// The two steps and their purpose are the paper's; the chunking, the forward scan and the
// reporting of a new CAL start PC are this design's way of doing them.
module instr_loader
  import rnn_pkg::*;
#(
  parameter int MAX_OUT = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CW-1:0]        my_x,
  input  logic [CW-1:0]        my_y,
  // load command
  input  logic                 ld_start,
  input  logic [EB_W-1:0]      ld_eb,
  input  logic [AW-1:0]        ld_addr,
  input  logic [PC_W-1:0]      ld_pc_lo,
  input  logic [PC_W-1:0]      ld_pc_hi,
  output logic                 ld_busy,
  output logic                 ld_done,
  output logic [EB_W-1:0]      ld_done_eb,
  // sparse vector chunk
  input  logic                 sp_valid,
  output logic                 sp_ready,
  input  logic [EB_W-1:0]      sp_eb,
  input  logic [5:0]           sp_chunk,
  input  logic [63:0]          sp_bits,
  input  logic [PC_W-1:0]      sp_cal_lo,
  input  logic [PC_W-1:0]      sp_cal_hi,
  output logic                 sp_done,
  output logic [EB_W-1:0]      sp_done_eb,
  output logic [PC_W-1:0]      sp_first_pc,
  // memory NoC
  output logic                 req_valid,
  input  logic                 req_ready,
  output noc_flit_t            req_flit,
  input  logic                 rsp_valid,
  output logic                 rsp_ready,
  input  noc_flit_t            rsp_flit,
  // instruction RAM write
  output logic                 wr_req,
  output logic [PC_W-1:0]      wr_addr,
  output logic [IW-1:0]        wr_data,
  output logic [IW-1:0]        wr_mask,
  input  logic                 wr_gnt
);
  typedef enum logic [1:0] { S_IDLE, S_LOAD, S_SPARSE } state_e;
  state_e state;

  // ---------------- loading ----------------
  logic [EB_W-1:0] eb_q;
  logic [AW-1:0]   addr_q;
  logic [PC_W-1:0] lo_q, hi_q;
  logic [PC_W:0]   nwords, sent, recvd;
  logic [$clog2(MAX_OUT+1)-1:0] outst;
  logic            hold_v, hold_half;
  noc_flit_t       hold;
  logic [PC_W:0]   wpc;

  assign nwords = ({1'b0, hi_q} - {1'b0, lo_q} + 1'b1) >> 1;

  always_comb begin
    req_flit         = '0;
    req_flit.addr    = addr_q + AW'(sent);
    req_flit.dst_x   = CW'(slice_of(addr_q + AW'(sent)));
    req_flit.to_edge = 1'b1;
    req_flit.src_x   = my_x;
    req_flit.src_y   = my_y;
    req_flit.kind    = K_IRD;
    req_flit.tag     = 16'(sent);
  end
  assign req_valid = state == S_LOAD && sent < nwords && 32'(outst) < MAX_OUT;
  assign rsp_ready = !hold_v;

  // ---------------- sparse scan ----------------
  logic [6:0]      bit_i;
  logic [63:0]     bits_q;
  logic [PC_W:0]   base_pc;       // PC of bit 0 of the current chunk
  logic [PC_W-1:0] cal_hi_q;
  logic            have_prev;
  logic [PC_W-1:0] prev_pc, first_pc;
  logic [PC_W:0]   cur_pc;
  logic            at_end;

  assign cur_pc  = base_pc + (PC_W+1)'(bit_i);
  assign at_end  = cur_pc >= {1'b0, cal_hi_q};
  assign sp_ready = state == S_IDLE && !ld_start;

  // the instruction RAM write port: load data, or one Sparse PC Inc
  logic            sp_wr;
  logic [PC_W-1:0] sp_wpc;
  logic [7:0]      sp_inc;
  always_comb begin
    sp_wr  = 1'b0; sp_wpc = prev_pc; sp_inc = '0;
    if (state == S_SPARSE && have_prev) begin
      if (at_end) begin
        sp_wr = 1'b1; sp_inc = 8'(cal_hi_q - prev_pc);
      end else if (bits_q[bit_i[5:0]]) begin
        sp_wr = 1'b1; sp_inc = 8'(cur_pc[PC_W-1:0] - prev_pc);
      end
    end
    wpc = {1'b0, lo_q} + {hold.tag[PC_W-1:0], 1'b0} + (PC_W+1)'(hold_half);
    if (state == S_SPARSE) begin
      wr_req  = sp_wr;
      wr_addr = sp_wpc;
      wr_data = IW'(sp_inc) << SPINC_LSB;
      wr_mask = IW'(8'hFF) << SPINC_LSB;
    end else begin
      wr_req  = hold_v && wpc < {1'b0, hi_q};
      wr_addr = wpc[PC_W-1:0];
      wr_data = hold_half ? hold.data[IW-1:0] : hold.data[2*IW-1:IW];
      wr_mask = '1;
    end
  end

  assign ld_busy = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; eb_q <= '0; addr_q <= '0; lo_q <= '0; hi_q <= '0; sent <= '0; recvd <= '0;
      outst <= '0; hold_v <= 1'b0; hold_half <= 1'b0; hold <= '0;
      bit_i <= '0; bits_q <= '0; base_pc <= '0; cal_hi_q <= '0; have_prev <= 1'b0;
      prev_pc <= '0; first_pc <= '0;
      ld_done <= 1'b0; ld_done_eb <= '0; sp_done <= 1'b0; sp_done_eb <= '0; sp_first_pc <= '0;
    end else begin
      ld_done <= 1'b0;
      sp_done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (ld_start) begin
            state <= S_LOAD; eb_q <= ld_eb; addr_q <= ld_addr; lo_q <= ld_pc_lo; hi_q <= ld_pc_hi;
            sent <= '0; recvd <= '0; outst <= '0;
          end else if (sp_valid) begin
            state    <= S_SPARSE;
            eb_q     <= sp_eb;
            bits_q   <= sp_bits;
            bit_i    <= '0;
            base_pc  <= {1'b0, sp_cal_lo} + {sp_chunk, 6'd0};
            cal_hi_q <= sp_cal_hi;
            if (sp_chunk == 6'd0) begin have_prev <= 1'b0; first_pc <= sp_cal_hi; end
          end
        end
        S_LOAD: begin
          if (req_valid && req_ready) begin sent <= sent + 1'b1; end
          outst <= outst + ((req_valid && req_ready) ? 1'b1 : 1'b0) - ((rsp_valid && rsp_ready) ? 1'b1 : 1'b0);
          if (rsp_valid && rsp_ready) begin hold <= rsp_flit; hold_v <= 1'b1; hold_half <= 1'b0; end
          if (hold_v && (wr_gnt || !wr_req)) begin
            if (hold_half) begin hold_v <= 1'b0; recvd <= recvd + 1'b1; end
            hold_half <= !hold_half;
          end
          if (recvd == nwords && !hold_v) begin
            state <= S_IDLE; ld_done <= 1'b1; ld_done_eb <= eb_q;
          end
        end
        S_SPARSE: begin
          if (!sp_wr || wr_gnt) begin
            if (at_end) begin
              state <= S_IDLE; have_prev <= 1'b0;
              sp_done <= 1'b1; sp_done_eb <= eb_q;
              sp_first_pc <= first_pc;
            end else begin
              if (bits_q[bit_i[5:0]]) begin
                if (!have_prev) first_pc <= cur_pc[PC_W-1:0];
                have_prev <= 1'b1;
                prev_pc   <= cur_pc[PC_W-1:0];
              end
              if (bit_i == 7'd63 && cur_pc + 1'b1 < {1'b0, cal_hi_q})
                state <= S_IDLE;   // wait for the next chunk
              bit_i <= bit_i + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
