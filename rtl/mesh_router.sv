// mesh_router: one node of the Memory NoC or the Inter-PE NoC (both are meshes).
//
// Five ports, 0 = north, 1 = east, 2 = south, 3 = west, 4 = local (the PE). Each input has a
// FIFO_DEPTH-entry FIFO; a packet is one flit (noc_flit_t, 128-bit data plus header).
// Routing is dimension-ordered XY: first along x to the destination column, then along y
// (north = smaller y). A packet marked to_edge is bound for the memory side: after reaching
// its column it keeps going north and leaves row 0 through the north port, where a cache
// slice sits. Each output picks among the inputs that want it in round-robin order.
//
// Links use valid/ready; a flit moves when both are high. ready depends only on the FIFO
// fill level, so chains of routers have no combinational loop. One cycle per hop.
// The mesh topology and 128-bit data width are the paper's; everything else here
// (single-flit packets, XY routing, FIFO depth, arbitration) is this design's choice.
module mesh_router
  import rnn_pkg::*;
#(
  parameter int X = 0,
  parameter int Y = 0,
  parameter int FIFO_DEPTH = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [4:0]           in_valid,
  output logic [4:0]           in_ready,
  input  noc_flit_t [4:0]      in_flit,
  output logic [4:0]           out_valid,
  input  logic [4:0]           out_ready,
  output noc_flit_t [4:0]      out_flit
);
  localparam int CNT_W = $clog2(FIFO_DEPTH+1);
  localparam int PTR_W = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  noc_flit_t [4:0]        head;
  logic [4:0]             head_v;
  logic [4:0][2:0]        route;
  logic [4:0]             pop;
  logic [4:0][2:0]        rr;        // round-robin pointer per output
  logic [4:0][2:0]        grant_in;  // input chosen per output
  logic [4:0]             grant_v;

  // ---------------- input FIFOs ----------------
  for (genvar p = 0; p < 5; p++) begin : g_in
    noc_flit_t        mem [FIFO_DEPTH];
    logic [PTR_W-1:0] rp, wp;
    logic [CNT_W-1:0] cnt;
    wire push = in_valid[p] && in_ready[p];
    assign in_ready[p] = cnt < CNT_W'(FIFO_DEPTH);
    assign head_v[p]   = cnt != '0;
    assign head[p]     = mem[rp];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rp <= '0; wp <= '0; cnt <= '0;
      end else begin
        if (push) wp <= (wp == PTR_W'(FIFO_DEPTH-1)) ? '0 : wp + 1'b1;
        if (pop[p]) rp <= (rp == PTR_W'(FIFO_DEPTH-1)) ? '0 : rp + 1'b1;
        cnt <= cnt + (push ? 1'b1 : 1'b0) - (pop[p] ? 1'b1 : 1'b0);
      end
    end
    always_ff @(posedge clk) if (push) mem[wp] <= in_flit[p];
  end

  // ---------------- XY route ----------------
  always_comb begin
    for (int p = 0; p < 5; p++) begin
      if (int'(head[p].dst_x) > X)      route[p] = 3'd1;   // east
      else if (int'(head[p].dst_x) < X) route[p] = 3'd3;   // west
      else if (head[p].to_edge)         route[p] = 3'd0;   // north, towards the memory side
      else if (int'(head[p].dst_y) > Y) route[p] = 3'd2;   // south
      else if (int'(head[p].dst_y) < Y) route[p] = 3'd0;   // north
      else                              route[p] = 3'd4;   // local
    end
  end

  // ---------------- output arbitration ----------------
  always_comb begin
    grant_v = '0; grant_in = '0;
    for (int o = 0; o < 5; o++) begin
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (!grant_v[o] && head_v[i] && route[i] == 3'(o)) begin
          grant_v[o] = 1'b1; grant_in[o] = 3'(i);
        end
      end
      out_valid[o] = grant_v[o];
      out_flit[o]  = head[grant_in[o]];
    end
  end

  // pop is kept apart from the grant logic: out_valid never depends on out_ready
  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++)
      if (grant_v[o] && out_ready[o]) pop[grant_in[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr <= '0;
    else
      for (int o = 0; o < 5; o++)
        if (grant_v[o] && out_ready[o]) rr[o] <= (grant_in[o] == 3'd4) ? 3'd0 : grant_in[o] + 1'b1;
  end

endmodule
