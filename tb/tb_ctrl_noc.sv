// tb_ctrl_noc: checks the Control NoC tree with 16 leaves (fan-out 4, two levels).
// Downwards, random messages enter the root while leaves refuse at random; every leaf
// must receive every message, in order and unchanged. Upwards, leaves send random
// completion reports; each must arrive at the root exactly once. In an idle tree a message
// must reach the leaves LEVELS+1 = 3 cycles after the root accepted it.
module tb_ctrl_noc;
  import rnn_pkg::*;
  localparam int NPE = 16, NM = 300, NU = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic root_valid, root_ready, root_up_valid, root_up_ready;
  ctrl_msg_t root_msg;
  ctrl_up_t root_up_msg;
  logic [NPE-1:0] leaf_valid, leaf_ready, leaf_up_valid, leaf_up_ready;
  ctrl_msg_t [NPE-1:0] leaf_msg;
  ctrl_up_t [NPE-1:0] leaf_up_msg;
  ctrl_noc #(.NUM_PE(NPE)) dut (.*);

  int checks = 0, failures = 0;
  ctrl_msg_t sent [$];
  int rx_idx [NPE];
  int up_sent = 0, up_got = 0;
  int up_pend [int];
  bit quiet = 0;
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
    for (int l = 0; l < NPE; l++) begin
      if (leaf_valid[l] && leaf_ready[l]) begin
        chk(rx_idx[l] < sent.size() && leaf_msg[l] == sent[rx_idx[l]], "leaf receives messages in order");
        rx_idx[l]++;
      end
      leaf_ready[l] <= quiet || $urandom_range(0, 4) != 0;
      // upward reports
      if (leaf_up_valid[l] && leaf_up_ready[l]) leaf_up_valid[l] <= 1'b0;
      if (!quiet && (!leaf_up_valid[l] || leaf_up_ready[l]) && up_sent < NU && $urandom_range(0, 6) == 0) begin
        ctrl_up_t u;
        u.src_pe = PE_W'(l); u.eb = EB_W'($urandom); u.task_id = TASK_W'($urandom);
        up_pend[int'(u)] = up_pend.exists(int'(u)) ? up_pend[int'(u)] + 1 : 1;
        leaf_up_msg[l] <= u; leaf_up_valid[l] <= 1'b1; up_sent++;
      end
    end
    if (root_up_valid && root_up_ready) begin
      chk(up_pend.exists(int'(root_up_msg)), "report arrives once");
      if (up_pend.exists(int'(root_up_msg))) begin
        up_pend[int'(root_up_msg)]--;
        if (up_pend[int'(root_up_msg)] == 0) up_pend.delete(int'(root_up_msg));
      end
      up_got++;
    end
    root_up_ready <= quiet || $urandom_range(0, 3) != 0;
  end

  initial begin
    root_valid = 0; root_msg = '0; leaf_ready = '0; leaf_up_valid = '0; leaf_up_msg = '0;
    root_up_ready = 0;
    foreach (rx_idx[i]) rx_idx[i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int m = 0; m < NM; m++) begin
      ctrl_msg_t c;
      c = {$urandom, $urandom, $urandom};
      sent.push_back(c);
      @(negedge clk);
      root_msg = c; root_valid = 1'b1;
      #1 while (!root_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 root_valid = 1'b0;
    end
    wait (up_sent == NU);
    quiet = 1;
    repeat (100) @(posedge clk);
    for (int l = 0; l < NPE; l++) chk(rx_idx[l] == NM, $sformatf("every leaf got every message (leaf %0d: %0d)", l, rx_idx[l]));
    chk(up_got == NU && up_pend.size() == 0, "every report reached the root");
    begin
      ctrl_msg_t c;
      int t;
      c = {$urandom, $urandom, $urandom};
      sent.push_back(c);
      root_msg <= c; root_valid <= 1'b1;
      @(posedge clk);
      root_valid <= 1'b0;
      t = 0;
      #1 while (!leaf_valid[0]) begin @(posedge clk); #1 t++; end
      chk(t + 1 == 3, $sformatf("root to leaf in LEVELS+1 cycles (%0d)", t + 1));
    end
    repeat (5) @(posedge clk);
    $display("down=%0d up=%0d", NM, up_got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
