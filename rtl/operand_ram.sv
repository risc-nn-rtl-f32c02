// operand_ram: the Operand RAM Module of a PE, used in place of a large register file.
//
// BANKS 1-write-1-read SRAM banks of DEPTH x WIDTH bits (16 x 128 x 128 in the paper's
// configuration), addressed as one flat space; an address selects bank addr % BANKS.
// Five read ports: 0..2 belong to the CAL unit and always win, 3 is the ST unit, 4 the FLOW
// unit; a lower port is also served when it reads the very address the bank is already
// reading. Three write ports: 0 = CAL write-back (always wins), 1 = LD unit, 2 = incoming
// COPY from another PE. A refused port keeps its request up and retries.
//
// Timing: rd_gnt/wr_gnt are combinational; read data comes one cycle after the grant. A read
// of the address written in the same cycle returns the new value, which lets the CAL
// pipeline get away with a single bypass register.
// Port roles, bank count and sizes follow the paper; bank mapping, write priority and the
// write-through read are this design's choices.
module operand_ram #(
  parameter int BANKS = 16,
  parameter int DEPTH = 128,
  parameter int WIDTH = 128,
  localparam int NRD = 5,
  localparam int NWR = 3,
  localparam int A_W = $clog2(BANKS*DEPTH),
  localparam int BW  = $clog2(BANKS),
  localparam int DWI = $clog2(DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NRD-1:0]             rd_req,
  input  logic [NRD-1:0][A_W-1:0]    rd_addr,
  output logic [NRD-1:0]             rd_gnt,
  output logic [NRD-1:0][WIDTH-1:0]  rd_data,
  input  logic [NWR-1:0]             wr_req,
  input  logic [NWR-1:0][A_W-1:0]    wr_addr,
  input  logic [NWR-1:0][WIDTH-1:0]  wr_data,
  output logic [NWR-1:0]             wr_gnt
);
  logic [BANKS-1:0]            rbusy, wbusy;
  logic [BANKS-1:0][A_W-1:0]   raddr_b;
  logic [BANKS-1:0]            we_b;
  logic [BANKS-1:0][DWI-1:0]   wa_b;
  logic [BANKS-1:0][WIDTH-1:0] wd_b;
  logic [BANKS-1:0][WIDTH-1:0] q_b;
  logic [NRD-1:0][BW-1:0]      last_bank;

  function automatic logic [BW-1:0] bank_of(input logic [A_W-1:0] a);
    return a[BW-1:0];
  endfunction

  always_comb begin
    rbusy = '0; raddr_b = '0; rd_gnt = '0;
    for (int p = 0; p < NRD; p++) begin
      if (rd_req[p]) begin
        if (!rbusy[bank_of(rd_addr[p])]) begin
          rbusy[bank_of(rd_addr[p])]   = 1'b1;
          raddr_b[bank_of(rd_addr[p])] = rd_addr[p];
          rd_gnt[p] = 1'b1;
        end else if (raddr_b[bank_of(rd_addr[p])] == rd_addr[p]) begin
          rd_gnt[p] = 1'b1;   // same word: share the read
        end
      end
    end
    wbusy = '0; we_b = '0; wa_b = '0; wd_b = '0; wr_gnt = '0;
    for (int p = 0; p < NWR; p++) begin
      if (wr_req[p] && !wbusy[bank_of(wr_addr[p])]) begin
        wbusy[bank_of(wr_addr[p])] = 1'b1;
        we_b[bank_of(wr_addr[p])]  = 1'b1;
        wa_b[bank_of(wr_addr[p])]  = wr_addr[p][A_W-1:BW];
        wd_b[bank_of(wr_addr[p])]  = wr_data[p];
        wr_gnt[p] = 1'b1;
      end
    end
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    wire [DWI-1:0] ra = raddr_b[b][A_W-1:BW];
    always_ff @(posedge clk) begin
      if (we_b[b]) mem[wa_b[b]] <= wd_b[b];
      if (rbusy[b]) q_b[b] <= (we_b[b] && wa_b[b] == ra) ? wd_b[b] : mem[ra];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_bank <= '0;
    else
      for (int p = 0; p < NRD; p++)
        if (rd_gnt[p]) last_bank[p] <= bank_of(rd_addr[p]);
  end

  always_comb
    for (int p = 0; p < NRD; p++) rd_data[p] = q_b[last_bank[p]];

  // The compiler keeps the three CAL operands of one instruction in different banks
  // (or routes them through PREREAD); a refused CAL port is a programming error.
  a_cal_never_refused: assert property (@(posedge clk) disable iff (!rst_n)
      (rd_req[2:0] & ~rd_gnt[2:0]) == 3'b000 && (wr_req[0] -> wr_gnt[0]));

endmodule
