// ctrl_noc: the tree-shaped Control NoC between the Control Interface and the PEs.
//
// A complete FANOUT-ary tree of register stages, LEVELS deep below the root, with one leaf
// per PE (leaves past NUM_PE are unused). Downwards every control message is copied to
// all children, so it reaches every PE; each PE keeps what is addressed to it or broadcast.
// A node passes its message on when all its children can take it, so a PE that is not
// ready holds the whole tree (the Control Unit only refuses a sparse-vector chunk whose
// ExeBlock is still loading). Upwards, each node holds one completion report and takes the
// next from its children in round-robin order.
//
// Timing: LEVELS+1 cycles from root to PE and from PE to root, one message per cycle.
// The paper says only that the Control NoC is "tree-like" and 85 bits wide; fan-out,
// broadcasting and the upward path are this design's choices.
module ctrl_noc
  import rnn_pkg::*;
#(
  parameter int NUM_PE = 64,
  parameter int FANOUT = 4,
  localparam int LEVELS = (NUM_PE <= 1) ? 1 : $clog2(NUM_PE) / $clog2(FANOUT)
                          + (($clog2(NUM_PE) % $clog2(FANOUT)) != 0 ? 1 : 0),
  localparam int LEAF0  = ((FANOUT ** LEVELS) - 1) / (FANOUT - 1),
  localparam int TOTAL  = LEAF0 + FANOUT ** LEVELS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   root_valid,
  output logic                   root_ready,
  input  ctrl_msg_t              root_msg,
  output logic                   root_up_valid,
  input  logic                   root_up_ready,
  output ctrl_up_t               root_up_msg,
  output logic [NUM_PE-1:0]      leaf_valid,
  input  logic [NUM_PE-1:0]      leaf_ready,
  output ctrl_msg_t [NUM_PE-1:0] leaf_msg,
  input  logic [NUM_PE-1:0]      leaf_up_valid,
  output logic [NUM_PE-1:0]      leaf_up_ready,
  input  ctrl_up_t [NUM_PE-1:0]  leaf_up_msg
);
  logic      [TOTAL-1:0] v, cr, rdy, fire;
  ctrl_msg_t [TOTAL-1:0] m;
  logic      [TOTAL-1:0] uv, upop;
  ctrl_up_t  [TOTAL-1:0] um;
  logic [TOTAL-1:0][$clog2(FANOUT)-1:0] rr;
  logic [TOTAL-1:0]                     uload;
  logic [TOTAL-1:0][$clog2(FANOUT)-1:0] usel;

  // ---------------- downward ----------------
  for (genvar i = 0; i < TOTAL; i++) begin : g_down
    if (i >= LEAF0) begin : g_leafnode
      if (i - LEAF0 < NUM_PE) begin : g_used
        assign cr[i] = leaf_ready[i - LEAF0];
      end else begin : g_unused
        assign cr[i] = 1'b1;
      end
    end else begin : g_inner
      assign cr[i] = &rdy[FANOUT*i + FANOUT : FANOUT*i + 1];
    end
    assign rdy[i]  = !v[i] || cr[i];
    assign fire[i] = v[i] && cr[i];
  end
  assign root_ready = rdy[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else
      for (int i = 0; i < TOTAL; i++) begin
        if ((i == 0) ? (root_valid && rdy[0]) : fire[(i-1)/FANOUT]) v[i] <= 1'b1;
        else if (fire[i]) v[i] <= 1'b0;
      end
  end
  always_ff @(posedge clk)
    for (int i = 0; i < TOTAL; i++)
      if ((i == 0) ? (root_valid && rdy[0]) : fire[(i-1)/FANOUT])
        m[i] <= (i == 0) ? root_msg : m[(i-1)/FANOUT];

  for (genvar j = 0; j < NUM_PE; j++) begin : g_leaf
    assign leaf_valid[j] = v[LEAF0 + j];
    assign leaf_msg[j]   = m[LEAF0 + j];
  end

  // ---------------- upward ----------------
  assign upop[0] = uv[0] && root_up_ready;
  for (genvar i = 0; i < LEAF0; i++) begin : g_up
    logic                      space, found;
    logic [$clog2(FANOUT)-1:0] pick;
    assign space = !uv[i] || upop[i];
    always_comb begin
      found = 1'b0;
      pick  = '0;
      for (int k = 0; k < FANOUT; k++) begin
        if (!found && uv[FANOUT*i + 1 + (int'(rr[i]) + k) % FANOUT]) begin
          found = 1'b1;
          pick  = $clog2(FANOUT)'((int'(rr[i]) + k) % FANOUT);
        end
      end
    end
    assign uload[i] = space && found;
    assign usel[i]  = pick;
    for (genvar c = 0; c < FANOUT; c++) begin : g_c
      assign upop[FANOUT*i + 1 + c] = uload[i] && pick == $clog2(FANOUT)'(c);
    end
  end
  for (genvar j = 0; j < FANOUT ** LEVELS; j++) begin : g_upleaf
    if (j < NUM_PE) begin : g_used
      assign leaf_up_ready[j]  = !uv[LEAF0 + j] || upop[LEAF0 + j];
      assign uload[LEAF0 + j]  = leaf_up_valid[j] && leaf_up_ready[j];
    end else begin : g_unused
      assign uload[LEAF0 + j]  = 1'b0;
    end
    assign usel[LEAF0 + j] = '0;
  end
  assign root_up_valid = uv[0];
  assign root_up_msg   = um[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      uv <= '0; rr <= '0;
    end else
      for (int i = 0; i < TOTAL; i++) begin
        if (uload[i]) uv[i] <= 1'b1;
        else if (upop[i]) uv[i] <= 1'b0;
        if (i < LEAF0 && uload[i]) rr[i] <= usel[i] + 1'b1;
      end
  end
  always_ff @(posedge clk)
    for (int i = 0; i < TOTAL; i++)
      if (uload[i])
        um[i] <= (i >= LEAF0) ? leaf_up_msg[(i - LEAF0) % NUM_PE] : um[FANOUT*i + 1 + usel[i]];

endmodule
