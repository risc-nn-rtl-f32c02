// control_interface: the Control Interface between the host and the PE array.
//
// Downwards it takes control messages from the host (ExeBlock initialization, task enabling,
// sparse vectors) and issues them into the root of the Control NoC, through a FIFO of
// QDEPTH entries so that the host is not held while the tree is busy. Upwards it takes the
// completion reports of ExeBlocks (sent at their Reset step), passes each to the host as an
// event and counts them per task id, so the host can tell when all ExeBlocks of a task have
// finished.
// Interface: valid/ready on every message port; host_evt has no back-pressure (the host
// always takes it). done_count is a free-running count per task, cleared by reset.
// The role of the block is the paper's; queueing, events and counters are this design's.
module control_interface
  import rnn_pkg::*;
#(
  parameter int QDEPTH = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            host_msg_valid,
  output logic                            host_msg_ready,
  input  ctrl_msg_t                       host_msg,
  output logic                            host_evt_valid,
  output ctrl_up_t                        host_evt,
  output logic [NUM_TASK-1:0][15:0]       done_count,
  output logic                            root_valid,
  input  logic                            root_ready,
  output ctrl_msg_t                       root_msg,
  input  logic                            root_up_valid,
  output logic                            root_up_ready,
  input  ctrl_up_t                        root_up_msg
);
  localparam int PW = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  ctrl_msg_t        q [QDEPTH];
  logic [PW-1:0]    rp, wp;
  logic [PW:0]      cnt;
  wire push = host_msg_valid && host_msg_ready;
  wire pop  = root_valid && root_ready;

  assign host_msg_ready = cnt < (PW+1)'(QDEPTH);
  assign root_valid     = cnt != '0;
  assign root_msg       = q[rp];
  assign root_up_ready  = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
      host_evt_valid <= 1'b0; host_evt <= '0; done_count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(QDEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(QDEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
      host_evt_valid <= root_up_valid;
      host_evt       <= root_up_msg;
      if (root_up_valid) done_count[root_up_msg.task_id] <= done_count[root_up_msg.task_id] + 1'b1;
    end
  end
  always_ff @(posedge clk) if (push) q[wp] <= host_msg;
endmodule
