// instr_ram: the Instruction RAM Module of a PE.
//
// BANKS single-port SRAM banks of DEPTH x WIDTH bits (8 x 512 x 64 in the paper's
// configuration). A PC selects bank PC / DEPTH, so an ExeBlock's instructions normally sit in
// one bank. Four execution units fetch (port 0 = CAL, 1 = LD, 2 = ST, 3 = FLOW) and the
// Instruction Loader writes (port 4). Each bank serves one port per cycle, the lowest
// port number first, so the CAL unit is never refused; the others retry.
//
// Timing: fetch_gnt is combinational in the request cycle; fetch_data of that port is valid
// in the following cycle. The loader write takes a bit mask so that it can rewrite just the
// Sparse PC Inc field of an instruction.
// The bank count and sizes are the paper's; the bank mapping and the priority order are this
// design's choice.
module instr_ram #(
  parameter int BANKS = 8,
  parameter int DEPTH = 512,
  parameter int WIDTH = 64,
  parameter int NPORT = 4,
  localparam int AW_I = $clog2(BANKS*DEPTH),
  localparam int BW   = $clog2(BANKS),
  localparam int DWI  = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NPORT-1:0]      fetch_req,
  input  logic [NPORT-1:0][AW_I-1:0] fetch_addr,
  output logic [NPORT-1:0]      fetch_gnt,
  output logic [NPORT-1:0][WIDTH-1:0] fetch_data,
  input  logic                  wr_req,
  input  logic [AW_I-1:0]       wr_addr,
  input  logic [WIDTH-1:0]      wr_data,
  input  logic [WIDTH-1:0]      wr_mask,
  output logic                  wr_gnt
);
  logic [BANKS-1:0][WIDTH-1:0] bank_q;
  logic [NPORT-1:0][BW-1:0]    last_bank;
  logic [BANKS-1:0]            bank_busy;
  logic [BANKS-1:0]            rd_en;
  logic [BANKS-1:0][DWI-1:0]   rd_a;

  function automatic logic [BW-1:0] bank_of(input logic [AW_I-1:0] a);
    return a[AW_I-1 -: BW];
  endfunction

  always_comb begin
    bank_busy = '0;
    rd_en     = '0;
    rd_a      = '0;
    fetch_gnt = '0;
    for (int p = 0; p < NPORT; p++) begin
      if (fetch_req[p] && !bank_busy[bank_of(fetch_addr[p])]) begin
        fetch_gnt[p] = 1'b1;
        bank_busy[bank_of(fetch_addr[p])] = 1'b1;
        rd_en[bank_of(fetch_addr[p])] = 1'b1;
        rd_a[bank_of(fetch_addr[p])]  = fetch_addr[p][DWI-1:0];
      end
    end
    wr_gnt = wr_req && !bank_busy[bank_of(wr_addr)];
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    wire we = wr_gnt && (bank_of(wr_addr) == BW'(b));
    always_ff @(posedge clk) begin
      if (we)
        for (int i = 0; i < WIDTH; i++)
          if (wr_mask[i]) mem[wr_addr[DWI-1:0]][i] <= wr_data[i];
      if (rd_en[b]) bank_q[b] <= mem[rd_a[b]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_bank <= '0;
    else
      for (int p = 0; p < NPORT; p++)
        if (fetch_gnt[p]) last_bank[p] <= bank_of(fetch_addr[p]);
  end

  always_comb
    for (int p = 0; p < NPORT; p++) fetch_data[p] = bank_q[last_bank[p]];

endmodule
