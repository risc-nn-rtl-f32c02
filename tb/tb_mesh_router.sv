// tb_mesh_router: checks one router (at column 2, row 1) on its own.
// All five inputs receive random packets addressed to random nodes of a 5 x 4 mesh, some
// marked to_edge, under random output back-pressure. Each packet must leave, unchanged and
// exactly once, through the port that XY routing gives: east/west while the column differs,
// then north for to_edge packets, else south/north toward the row, else local. Packets of
// one input to one output must keep their order. A packet into an idle router must leave
// one cycle after it was accepted.
module tb_mesh_router;
  import rnn_pkg::*;
  localparam int X = 2, Y = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  noc_flit_t [4:0] in_flit, out_flit;
  mesh_router #(.X(X), .Y(Y)) dut (.*);

  int checks = 0, failures = 0, sent = 0, got = 0;
  int last_serial [5][5];
  noc_flit_t pend [int];
  int pend_in [int];
  bit stop_rand = 0;
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
  function automatic int route(input noc_flit_t f);
    if (int'(f.dst_x) > X) return 1;
    if (int'(f.dst_x) < X) return 3;
    if (f.to_edge) return 0;
    if (int'(f.dst_y) > Y) return 2;
    if (int'(f.dst_y) < Y) return 0;
    return 4;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        int s;
        s = int'(out_flit[o].tag);
        chk(pend.exists(s), "packet left once");
        if (pend.exists(s)) begin
          chk(out_flit[o] == pend[s], "packet unchanged");
          chk(route(pend[s]) == o, "XY output port");
          chk(s > last_serial[pend_in[s]][o], "order kept per input/output pair");
          last_serial[pend_in[s]][o] = s;
          pend.delete(s);
        end
        got++;
      end
      out_ready[o] <= stop_rand ? 1'b1 : ($urandom_range(0, 2) != 0);
    end
    for (int i = 0; i < 5; i++) begin
      if (in_valid[i] && in_ready[i]) in_valid[i] <= 1'b0;
      if (!stop_rand && (!in_valid[i] || in_ready[i]) && sent < 2000 && $urandom_range(0, 1) == 0) begin
        noc_flit_t f;
        f = '0;
        f.dst_x = CW'($urandom_range(0, 4)); f.dst_y = CW'($urandom_range(0, 3));
        f.to_edge = $urandom_range(0, 3) == 0;
        f.data = {$urandom, $urandom, $urandom, $urandom};
        f.addr = $urandom;
        sent++;
        f.tag = 16'(sent);
        pend[sent] = f; pend_in[sent] = i;
        in_flit[i] <= f; in_valid[i] <= 1'b1;
      end
    end
  end

  initial begin
    in_valid = '0; in_flit = '0; out_ready = '0;
    foreach (last_serial[i, j]) last_serial[i][j] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (sent == 2000);
    stop_rand = 1;
    repeat (50) @(posedge clk);
    chk(pend.size() == 0, "all packets left");
    // latency through an idle router: accepted at one edge, valid after it
    begin
      noc_flit_t f;
      f = '0; f.dst_x = 4'd4; f.tag = 16'd60000;
      pend[60000] = f; pend_in[60000] = 4;
      in_flit[4] <= f; in_valid[4] <= 1'b1;
      @(posedge clk);
      in_valid[4] <= 1'b0;
      #1 chk(out_valid[1], "one cycle through the router");
    end
    repeat (3) @(posedge clk);
    $display("sent=%0d out=%0d", sent, got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
