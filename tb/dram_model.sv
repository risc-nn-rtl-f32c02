// dram_model: behavioural model of the off-chip DRAM behind the memory controller's
// single word port (it stands for the DDR4 controller and chips, which are not part of
// the RTL). 128-bit words, word addresses. A request is accepted when req_valid is high
// and the model is not busy (req_ready); a read returns its data LAT cycles later, and only
// one access is handled at a time. Words never written read as init_word(addr), so tests
// can predict them. poke/peek give testbenches direct access. Not synthesizable.
module dram_model
  import rnn_pkg::*;
#(
  parameter int LAT = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  output logic           req_ready,
  input  logic           req_we,
  input  logic [AW-1:0]  req_addr,
  input  logic [VW-1:0]  req_wdata,
  output logic           rsp_valid,
  output logic [VW-1:0]  rsp_rdata
);
  logic [VW-1:0] mem [logic [AW-1:0]];
  int            cnt;
  logic [AW-1:0] a_q;
  int            n_reads = 0, n_writes = 0;

  function automatic logic [VW-1:0] init_word(input logic [AW-1:0] a);
    return {a ^ 32'hA5A5_0000, a + 32'd3, a * 32'd7, a};
  endfunction
  function automatic logic [VW-1:0] peek(input logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction
  task automatic poke(input logic [AW-1:0] a, input logic [VW-1:0] d);
    mem[a] = d;
  endtask

  assign req_ready = rst_n && cnt == 0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= 0; rsp_valid <= 1'b0; rsp_rdata <= '0; a_q <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[req_addr] = req_wdata;
          n_writes++;
        end else begin
          cnt <= LAT; a_q <= req_addr;
          n_reads++;
        end
      end else if (cnt > 1) cnt <= cnt - 1;
      else if (cnt == 1) begin
        cnt <= 0; rsp_valid <= 1'b1; rsp_rdata <= peek(a_q);
      end
    end
  end
endmodule
