// tb_mesh_noc: random traffic test of a 4 x 3 mesh (reduced from 8 x 8 to keep the run
// short; the routers are the same).
// Every local port and every north edge port injects packets with random headers and
// payloads: local packets go to a random node, or out of the north edge of a random column
// (to_edge); edge packets go to a random node. Receivers apply random back-pressure. Each
// packet carries a unique serial number; it must arrive exactly once, unchanged, at the
// port it was addressed to. A packet crossing an empty mesh must take one cycle per
// router (checked for a single packet from node (MX-1, MY-1) to the north edge of column 0).
module tb_mesh_noc;
  import rnn_pkg::*;
  localparam int MX = 4, MY = 3, N = MX * MY, NP = 500;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] loc_in_valid, loc_in_ready, loc_out_valid, loc_out_ready;
  noc_flit_t [N-1:0] loc_in_flit, loc_out_flit;
  logic [MX-1:0] edge_in_valid, edge_in_ready, edge_out_valid, edge_out_ready;
  noc_flit_t [MX-1:0] edge_in_flit, edge_out_flit;
  mesh_noc #(.MX(MX), .MY(MY)) dut (.*);

  int checks = 0, failures = 0, sent = 0, recvd = 0;
  noc_flit_t sent_f [int];
  bit random_mode = 1;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic noc_flit_t mk(input int serial, input bit from_edge);
    noc_flit_t f;
    f.data = {$urandom, $urandom, $urandom, $urandom};
    f.kind = kind_e'($urandom_range(0, 7));
    f.lut = 4'($urandom);
    f.addr = $urandom;
    f.src_x = 4'($urandom); f.src_y = 4'($urandom);
    f.tag = 16'(serial);
    f.to_edge = !from_edge && $urandom_range(0, 2) == 0;
    f.dst_x = CW'($urandom_range(0, MX - 1));
    f.dst_y = CW'($urandom_range(0, MY - 1));
    return f;
  endfunction

  // receivers
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++)
      if (loc_out_valid[n] && loc_out_ready[n]) begin
        noc_flit_t f;
        f = loc_out_flit[n];
        chk(sent_f.exists(f.tag), "packet delivered once");
        if (sent_f.exists(f.tag)) begin
          chk(f == sent_f[f.tag], "payload intact");
          chk(!f.to_edge && int'(f.dst_y) * MX + int'(f.dst_x) == n, "delivered to its node");
          sent_f.delete(f.tag);
        end
        recvd++;
      end
    for (int x = 0; x < MX; x++)
      if (edge_out_valid[x] && edge_out_ready[x]) begin
        noc_flit_t f;
        f = edge_out_flit[x];
        chk(sent_f.exists(f.tag), "edge packet delivered once");
        if (sent_f.exists(f.tag)) begin
          chk(f == sent_f[f.tag], "edge payload intact");
          chk(f.to_edge && int'(f.dst_x) == x, "left through its column");
          sent_f.delete(f.tag);
        end
        recvd++;
      end
    for (int n = 0; n < N; n++) loc_out_ready[n] <= random_mode ? $urandom_range(0, 3) != 0 : 1'b1;
    for (int x = 0; x < MX; x++) edge_out_ready[x] <= random_mode ? $urandom_range(0, 3) != 0 : 1'b1;
  end

  // senders
  int serial = 1;
  always @(posedge clk) if (rst_n && random_mode) begin
    for (int n = 0; n < N; n++) begin
      if (loc_in_valid[n] && loc_in_ready[n]) loc_in_valid[n] <= 1'b0;
      if ((!loc_in_valid[n] || loc_in_ready[n]) && sent < NP && $urandom_range(0, 2) == 0) begin
        noc_flit_t f;
        f = mk(serial, 0); sent_f[serial] = f; serial++; sent++;
        loc_in_flit[n] <= f; loc_in_valid[n] <= 1'b1;
      end
    end
    for (int x = 0; x < MX; x++) begin
      if (edge_in_valid[x] && edge_in_ready[x]) edge_in_valid[x] <= 1'b0;
      if ((!edge_in_valid[x] || edge_in_ready[x]) && sent < NP && $urandom_range(0, 2) == 0) begin
        noc_flit_t f;
        f = mk(serial, 1); sent_f[serial] = f; serial++; sent++;
        edge_in_flit[x] <= f; edge_in_valid[x] <= 1'b1;
      end
    end
  end

  initial begin
    loc_in_valid = '0; loc_in_flit = '0; edge_in_valid = '0; edge_in_flit = '0;
    loc_out_ready = '0; edge_out_ready = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (sent == NP);
    repeat (200) @(posedge clk);
    loc_in_valid <= '0; edge_in_valid <= '0;
    chk(sent_f.size() == 0, "every packet arrived");
    // latency of one packet in an empty mesh
    random_mode = 0;
    repeat (3) @(posedge clk);
    begin
      noc_flit_t f;
      int t;
      f = mk(9999, 0); f.to_edge = 1; f.dst_x = 0; sent_f[9999] = f;
      loc_in_flit[N-1] <= f; loc_in_valid[N-1] <= 1'b1;
      @(posedge clk); loc_in_valid[N-1] <= 1'b0;
      t = 1;
      while (!edge_out_valid[0]) begin @(posedge clk); t++; end
      // the injection cycle plus one cycle in each of the MX+MY-1 routers on the path
      chk(t == MX + MY, $sformatf("one cycle per router (%0d cycles)", t));
    end
    repeat (3) @(posedge clk);
    $display("sent=%0d received=%0d", sent, recvd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
