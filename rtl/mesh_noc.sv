// mesh_noc: an MX x MY mesh of mesh_routers, used twice in the chip: as the Memory NoC
// (north edge ports of row 0 lead to the cache slices) and as the Inter-PE NoC (edge ports
// unused).
//
// Node n = y*MX + x sits at column x, row y; row 0 is the north edge. loc_* are the local
// ports of the nodes (to/from PE n). edge_* are the north ports of row 0, one per column:
// edge_out carries packets marked to_edge out of the mesh, edge_in brings packets in.
// The other edge ports are closed (no packet is ever routed to them).
// Links are valid/ready, one cycle per hop. Only the mesh shape is the paper's.
module mesh_noc
  import rnn_pkg::*;
#(
  parameter int MX = 8,
  parameter int MY = 8,
  parameter int FIFO_DEPTH = 2,
  localparam int N = MX * MY
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         loc_in_valid,
  output logic [N-1:0]         loc_in_ready,
  input  noc_flit_t [N-1:0]    loc_in_flit,
  output logic [N-1:0]         loc_out_valid,
  input  logic [N-1:0]         loc_out_ready,
  output noc_flit_t [N-1:0]    loc_out_flit,
  input  logic [MX-1:0]        edge_in_valid,
  output logic [MX-1:0]        edge_in_ready,
  input  noc_flit_t [MX-1:0]   edge_in_flit,
  output logic [MX-1:0]        edge_out_valid,
  input  logic [MX-1:0]        edge_out_ready,
  output noc_flit_t [MX-1:0]   edge_out_flit
);
  logic [N-1:0][4:0]      iv, ir, ov, orr;
  noc_flit_t [N-1:0][4:0] ifl, ofl;

  for (genvar y = 0; y < MY; y++) begin : g_y
    for (genvar x = 0; x < MX; x++) begin : g_x
      localparam int n = y*MX + x;
      mesh_router #(.X(x), .Y(y), .FIFO_DEPTH(FIFO_DEPTH)) u_r (
        .clk, .rst_n,
        .in_valid(iv[n]), .in_ready(ir[n]), .in_flit(ifl[n]),
        .out_valid(ov[n]), .out_ready(orr[n]), .out_flit(ofl[n]));

      // local port
      assign iv[n][4]  = loc_in_valid[n];
      assign ifl[n][4] = loc_in_flit[n];
      assign loc_in_ready[n]  = ir[n][4];
      assign loc_out_valid[n] = ov[n][4];
      assign loc_out_flit[n]  = ofl[n][4];
      assign orr[n][4] = loc_out_ready[n];

      // north
      if (y == 0) begin : g_edge
        assign iv[n][0]  = edge_in_valid[x];
        assign ifl[n][0] = edge_in_flit[x];
        assign edge_in_ready[x]  = ir[n][0];
        assign edge_out_valid[x] = ov[n][0];
        assign edge_out_flit[x]  = ofl[n][0];
        assign orr[n][0] = edge_out_ready[x];
      end else begin : g_n
        assign iv[n][0]  = ov[n-MX][2];
        assign ifl[n][0] = ofl[n-MX][2];
        assign orr[n][0] = ir[n-MX][2];
      end
      // south
      if (y == MY-1) begin : g_s_edge
        assign iv[n][2]  = 1'b0;
        assign ifl[n][2] = '0;
        assign orr[n][2] = 1'b1;
      end else begin : g_s
        assign iv[n][2]  = ov[n+MX][0];
        assign ifl[n][2] = ofl[n+MX][0];
        assign orr[n][2] = ir[n+MX][0];
      end
      // east
      if (x == MX-1) begin : g_e_edge
        assign iv[n][1]  = 1'b0;
        assign ifl[n][1] = '0;
        assign orr[n][1] = 1'b1;
      end else begin : g_e
        assign iv[n][1]  = ov[n+1][3];
        assign ifl[n][1] = ofl[n+1][3];
        assign orr[n][1] = ir[n+1][3];
      end
      // west
      if (x == 0) begin : g_w_edge
        assign iv[n][3]  = 1'b0;
        assign ifl[n][3] = '0;
        assign orr[n][3] = 1'b1;
      end else begin : g_w
        assign iv[n][3]  = ov[n-1][1];
        assign ifl[n][3] = ofl[n-1][1];
        assign orr[n][3] = ir[n-1][1];
      end
    end
  end
endmodule
