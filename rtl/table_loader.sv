// table_loader: the In-DRAM Table Loader in front of one cache slice.
//
// Complex activation and classifier functions are 2^16-entry tables of 16-bit values
// (128 KB each) kept in DRAM. A store packet (K_WR) whose lookup type t is non-zero is held
// here; for each of its SIMD lanes with value v the loader reads DRAM word
// TABLE_BASE + (t-1)*8192 + v[15:3] and takes the 16-bit entry at lane v[2:0] of that word.
// The packet then goes on to the cache slice with the looked-up values and t cleared, so
// the function value is what gets stored. Every other packet passes straight through
// (one register stage).
// Timing: a lookup store costs SIMD DRAM reads. Table reads go directly to DRAM.
// The lookup-on-store mechanism and table size are the paper's; the table placement
// (TABLE_BASE, consecutive tables) is this design's choice.
module table_loader
  import rnn_pkg::*;
#(
  parameter logic [AW-1:0] TABLE_BASE = 32'h0F00_0000
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  noc_flit_t      in_flit,
  output logic           out_valid,
  input  logic           out_ready,
  output noc_flit_t      out_flit,
  output logic           dram_req_valid,
  input  logic           dram_req_ready,
  output logic [AW-1:0]  dram_req_addr,
  input  logic           dram_rsp_valid,
  input  logic [VW-1:0]  dram_rsp_rdata,
  output logic           ev_lookup
);
  typedef enum logic [1:0] { S_EMPTY, S_REQ, S_WAIT, S_FULL } state_e;
  state_e    state;
  noc_flit_t f;
  logic [$clog2(SIMD)-1:0] lane;
  logic [DW-1:0] v;

  assign v              = f.data[lane*DW +: DW];
  assign in_ready       = state == S_EMPTY;
  assign out_valid      = state == S_FULL;
  assign out_flit       = f;
  assign dram_req_valid = state == S_REQ;
  assign dram_req_addr  = TABLE_BASE + {f.lut - 4'd1, 13'd0} + AW'(v[DW-1:3]);
  assign ev_lookup      = state == S_WAIT && dram_rsp_valid && lane == $clog2(SIMD)'(SIMD-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_EMPTY; f <= '0; lane <= '0;
    end else begin
      unique case (state)
        S_EMPTY: if (in_valid) begin
          f    <= in_flit;
          lane <= '0;
          state <= (in_flit.kind == K_WR && in_flit.lut != 4'd0) ? S_REQ : S_FULL;
        end
        S_REQ: if (dram_req_ready) state <= S_WAIT;
        S_WAIT: if (dram_rsp_valid) begin
          f.data[lane*DW +: DW] <= dram_rsp_rdata[v[2:0]*DW +: DW];
          if (lane == $clog2(SIMD)'(SIMD-1)) begin
            f.lut <= 4'd0;
            state <= S_FULL;
          end else begin
            lane  <= lane + 1'b1;
            state <= S_REQ;
          end
        end
        S_FULL: if (out_ready) state <= S_EMPTY;
        default: state <= S_EMPTY;
      endcase
    end
  end
endmodule
