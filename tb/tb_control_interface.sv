// tb_control_interface: checks the host-side Control Interface.
// Random host messages are pushed while the Control NoC root refuses at random; they must
// come out in order and unchanged, and the host must be held only while the queue is full.
// Random completion reports arrive from the root; each must appear as a host event one
// cycle later, and the per-task counters must match a count kept here.
module tb_control_interface;
  import rnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_msg_valid, host_msg_ready, host_evt_valid, root_valid, root_ready;
  logic root_up_valid, root_up_ready;
  ctrl_msg_t host_msg, root_msg;
  ctrl_up_t host_evt, root_up_msg;
  logic [NUM_TASK-1:0][15:0] done_count;
  control_interface dut (.*);

  int checks = 0, failures = 0, nrx = 0;
  ctrl_msg_t sent [$];
  int cnt_ref [NUM_TASK];
  ctrl_up_t last_up;
  logic last_up_v = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (root_valid && root_ready) begin
      chk(sent.size() > 0 && root_msg == sent[0], "messages in order");
      void'(sent.pop_front());
      nrx++;
    end
    root_ready <= $urandom_range(0, 2) == 0;
    // events follow reports by one cycle
    chk(host_evt_valid == last_up_v && (!last_up_v || host_evt == last_up), "event one cycle after report");
    last_up_v = root_up_valid && root_up_ready;
    last_up = root_up_msg;
    if (root_up_valid && root_up_ready) cnt_ref[root_up_msg.task_id]++;
    root_up_valid <= $urandom_range(0, 2) == 0;
    root_up_msg <= ctrl_up_t'($urandom);
  end

  initial begin
    host_msg_valid = 0; host_msg = '0; root_ready = 0; root_up_valid = 0; root_up_msg = '0;
    foreach (cnt_ref[i]) cnt_ref[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int m = 0; m < 400; m++) begin
      ctrl_msg_t c;
      c = {$urandom, $urandom, $urandom};
      @(negedge clk);
      host_msg = c; host_msg_valid = 1'b1;
      #1 while (!host_msg_ready) begin
        chk(sent.size() == 4, "host held only when the queue is full");
        @(negedge clk); #1;
      end
      sent.push_back(c);
      @(posedge clk); #1 host_msg_valid = 1'b0;
    end
    repeat (40) @(posedge clk);
    chk(nrx == 400 && sent.size() == 0, "all messages delivered");
    @(negedge clk);
    for (int t = 0; t < NUM_TASK; t++) chk(done_count[t] == 16'(cnt_ref[t]), "per-task completion count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
