// cache_slice: one of the eight slices of the memory controller's front-end cache.
//
// SETS x WAYS lines of LINE_WORDS 128-bit words (512 x 4 x 64 B = 128 KB; eight slices give
// the 1 MB cache). Word address a maps to slice a[4:2], set a[13:5], tag a[31:14], word a[1:0].
// Requests come from the Memory NoC (north edge port of one column) and from host DMA:
//   K_RD   cached read, answered with K_RDRSP (tag echoed) to the requesting PE;
//   K_WR   cached write, write-allocate, write-back, answered with K_WRACK;
//   K_IRD  instruction read: bypasses the cache, read from DRAM, answered with K_IRSP;
//   DMA    read: hit -> cached word, miss -> DRAM (no allocation);
//          write: written to DRAM, and into the line too if it is cached,
// so host DMA and the cache-bypassing instruction loads always see current data.
// A miss writes back a dirty victim (round-robin victim per set) and fills the line word
// by word from DRAM. One request is handled at a time; DMA and NoC alternate.
//
// Timing: a hit takes 3 cycles to the response; a miss adds 4 (8 if dirty) DRAM accesses.
// Tag and data arrays are read combinationally here; an SRAM macro would add a cycle.
// Size, ways, line size, write-back policy and instruction bypass are the paper's;
// replacement, blocking operation and DMA coherence are this design's choices.
module cache_slice
  import rnn_pkg::*;
#(
  parameter int SETS = 512,
  parameter int WAYS = 4,
  localparam int SW  = $clog2(SETS),
  localparam int WW  = $clog2(WAYS),
  localparam int TW  = AW - 5 - SW
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the memory NoC
  input  logic              req_valid,
  output logic              req_ready,
  input  noc_flit_t         req_flit,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output noc_flit_t         rsp_flit,
  // host DMA
  input  logic              dma_valid,
  output logic              dma_ready,
  input  logic              dma_we,
  input  logic [AW-1:0]     dma_addr,
  input  logic [VW-1:0]     dma_wdata,
  output logic              dma_rsp_valid,
  output logic [VW-1:0]     dma_rsp_rdata,
  // DRAM word port
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output logic              dram_req_we,
  output logic [AW-1:0]     dram_req_addr,
  output logic [VW-1:0]     dram_req_wdata,
  input  logic              dram_rsp_valid,
  input  logic [VW-1:0]     dram_rsp_rdata,
  // statistics
  output logic              ev_hit,
  output logic              ev_miss,
  output logic              ev_writeback
);
  logic [TW-1:0]          tags [SETS*WAYS];     // tag array (SRAM, not reset)
  logic [SETS*WAYS-1:0]   vbit, dbit;           // valid and dirty bits (flip-flops)
  logic [VW-1:0] data [SETS*WAYS*LINE_WORDS];
  logic [WW-1:0] victim [SETS];

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_WB, S_FILL_REQ, S_FILL_WAIT, S_HIT, S_DRD, S_DRD_WAIT, S_DWR, S_RESP
  } state_e;
  state_e state;

  // latched request
  logic          is_dma, dma_w_q;
  noc_flit_t     r;
  logic [VW-1:0] rdata_q;
  logic [1:0]    wcnt;
  logic [WW-1:0] way_q;
  logic          last_dma;
  logic          rsp_is_dma;

  wire [SW-1:0]  set_i = r.addr[5 +: SW];
  wire [TW-1:0]  tag_i = r.addr[AW-1 -: TW];
  wire [1:0]     off_i = r.addr[1:0];

  // lookup
  logic          hit;
  logic [WW-1:0] hit_way;
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (vbit[set_i*WAYS + w] && tags[set_i*WAYS + w] == tag_i) begin
        hit = 1'b1; hit_way = WW'(w);
      end
  end

  function automatic int widx(input logic [SW-1:0] s, input logic [WW-1:0] w, input logic [1:0] o);
    return (int'(s) * WAYS + int'(w)) * LINE_WORDS + int'(o);
  endfunction

  // request selection: alternate between DMA and NoC when both wait
  wire take_dma = dma_valid && (!req_valid || !last_dma);
  assign req_ready = state == S_IDLE && req_valid && !take_dma;
  assign dma_ready = state == S_IDLE && take_dma;

  // DRAM port
  logic [TW-1:0] vt;
  assign vt = tags[set_i*WAYS + way_q];
  always_comb begin
    dram_req_valid = 1'b0; dram_req_we = 1'b0; dram_req_addr = r.addr; dram_req_wdata = '0;
    unique case (state)
      S_WB: begin
        dram_req_valid = 1'b1; dram_req_we = 1'b1;
        dram_req_addr  = {vt, set_i, r.addr[4:2], wcnt};
        dram_req_wdata = data[widx(set_i, way_q, wcnt)];
      end
      S_FILL_REQ: begin
        dram_req_valid = 1'b1;
        dram_req_addr  = {r.addr[AW-1:2], wcnt};
      end
      S_DRD: dram_req_valid = 1'b1;
      S_DWR: begin
        dram_req_valid = 1'b1; dram_req_we = 1'b1; dram_req_wdata = r.data;
      end
      default: ;
    endcase
  end

  // responses
  always_comb begin
    rsp_flit       = '0;
    rsp_flit.dst_x = r.src_x;
    rsp_flit.dst_y = r.src_y;
    rsp_flit.src_x = r.dst_x;
    rsp_flit.tag   = r.tag;
    rsp_flit.addr  = r.addr;
    rsp_flit.data  = rdata_q;
    unique case (r.kind)
      K_WR:    rsp_flit.kind = K_WRACK;
      K_IRD:   rsp_flit.kind = K_IRSP;
      default: rsp_flit.kind = K_RDRSP;
    endcase
  end
  assign rsp_valid     = state == S_RESP && !rsp_is_dma;
  assign dma_rsp_valid = state == S_RESP && rsp_is_dma;
  assign dma_rsp_rdata = rdata_q;

  assign ev_hit       = state == S_LOOKUP && !is_dma && r.kind != K_IRD && hit;
  assign ev_miss      = state == S_LOOKUP && !is_dma && r.kind != K_IRD && !hit;
  assign ev_writeback = state == S_WB && dram_req_ready && wcnt == 2'd3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; is_dma <= 1'b0; dma_w_q <= 1'b0; r <= '0; rdata_q <= '0; wcnt <= '0;
      way_q <= '0; last_dma <= 1'b0; rsp_is_dma <= 1'b0;
      vbit <= '0; dbit <= '0;
      for (int s = 0; s < SETS; s++) victim[s] <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (dma_ready) begin
            is_dma <= 1'b1; dma_w_q <= dma_we; last_dma <= 1'b1;
            r <= '0; r.addr <= dma_addr; r.data <= dma_wdata;
            state <= S_LOOKUP;
          end else if (req_ready) begin
            is_dma <= 1'b0; last_dma <= 1'b0; r <= req_flit;
            state <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (is_dma) begin
            if (dma_w_q) begin
              if (hit) data[widx(set_i, hit_way, off_i)] <= r.data;
              state <= S_DWR;
            end else if (hit) begin
              rdata_q <= data[widx(set_i, hit_way, off_i)];
              rsp_is_dma <= 1'b1; state <= S_RESP;
            end else state <= S_DRD;
          end else if (r.kind == K_IRD) begin
            state <= S_DRD;
          end else if (hit) begin
            way_q <= hit_way; state <= S_HIT;
          end else begin
            way_q <= victim[set_i];
            victim[set_i] <= victim[set_i] + 1'b1;
            wcnt <= '0;
            state <= (vbit[set_i*WAYS + victim[set_i]] && dbit[set_i*WAYS + victim[set_i]])
                     ? S_WB : S_FILL_REQ;
          end
        end
        S_WB: if (dram_req_ready) begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == 2'd3) state <= S_FILL_REQ;
        end
        S_FILL_REQ: if (dram_req_ready) state <= S_FILL_WAIT;
        S_FILL_WAIT: if (dram_rsp_valid) begin
          data[widx(set_i, way_q, wcnt)] <= dram_rsp_rdata;
          wcnt <= wcnt + 1'b1;
          if (wcnt == 2'd3) begin
            tags[set_i*WAYS + way_q] <= tag_i;
            vbit[set_i*WAYS + way_q] <= 1'b1;
            dbit[set_i*WAYS + way_q] <= 1'b0;
            state <= S_HIT;
          end else state <= S_FILL_REQ;
        end
        S_HIT: begin
          if (r.kind == K_WR) begin
            data[widx(set_i, way_q, off_i)] <= r.data;
            dbit[set_i*WAYS + way_q] <= 1'b1;
          end
          rdata_q <= data[widx(set_i, way_q, off_i)];
          rsp_is_dma <= 1'b0;
          state <= S_RESP;
        end
        S_DRD: if (dram_req_ready) state <= S_DRD_WAIT;
        S_DRD_WAIT: if (dram_rsp_valid) begin
          rdata_q <= dram_rsp_rdata;
          rsp_is_dma <= is_dma;
          state <= S_RESP;
        end
        S_DWR: if (dram_req_ready) begin
          rsp_is_dma <= 1'b1; state <= S_RESP;
        end
        S_RESP: if (rsp_is_dma || rsp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
