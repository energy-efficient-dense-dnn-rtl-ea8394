// tb_binoc_router: random flits into all five ports of the router at (0,1),
// with random back-pressure on all outputs. Each flit carries a unique tag;
// it must leave exactly once, on the X-then-Y port for its destination
// (control-unit flits go north), and flits between the same input and
// output must keep their order. At the end nothing may be left in flight.
module tb_binoc_router;
  import sba_pkg::*;
  localparam int X = 0, Y = 1, NF = 3000;
  logic clk = 0, rst_n = 0;
  logic [4:0] in_valid = 0, in_ready, out_valid, out_ready = 0;
  flit_t [4:0] in_flit, out_flit;
  logic [4:0] acc_q;   // input handshakes seen at the last clock edge
  binoc_router #(.X(X), .Y(Y)) dut (.*);

  int checks = 0, failures = 0, sent = 0, recvd = 0;
  int exp_port[int];
  int last_tag[5][5];
  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int port_for(coord_t d);
    if (d.y == 2'd3) return 1;
    if (int'(d.x) > X) return 3;
    if (int'(d.x) < X) return 4;
    if (int'(d.y) < Y) return 1;
    if (int'(d.y) > Y) return 2;
    return 0;
  endfunction

  always @(posedge clk) acc_q <= in_valid & in_ready;

  // receive side
  always @(posedge clk) if (rst_n)
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && out_ready[o]) begin
        int tag, src;
        tag = int'(out_flit[o].data[31:0]);
        src = int'(out_flit[o].data[35:32]);
        recvd++;
        checks++;
        if (!exp_port.exists(tag) || exp_port[tag] != o) begin
          failures++;
          if (failures < 5) $display("flit %0d left on port %0d", tag, o);
        end else exp_port.delete(tag);
        checks++;
        if (tag <= last_tag[src][o]) failures++;
        last_tag[src][o] = tag;
      end

  initial begin
    for (int i = 0; i < 5; i++) for (int o = 0; o < 5; o++) last_tag[i][o] = -1;
    in_flit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (sent < NF) begin
      @(negedge clk);
      for (int o = 0; o < 5; o++) out_ready[o] = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < 5; i++) begin
        if (acc_q[i]) in_valid[i] = 0;
        if (!in_valid[i] && $urandom_range(0, 1) && sent < NF) begin
          coord_t d;
          d.x = 1'($urandom);
          d.y = 2'($urandom_range(0, 3));
          if (d.y == 2'd3) d.x = 1'b0;
          in_flit[i].dst  = d;
          in_flit[i].kind = FK_BUF;
          in_flit[i].data = {28'd0, 4'(i), 32'(sent)};
          exp_port[sent] = port_for(d);
          sent++;
          in_valid[i] = 1;
        end
      end
    end
    while (in_valid != 0) begin
      @(negedge clk);
      for (int i = 0; i < 5; i++) if (acc_q[i]) in_valid[i] = 0;
    end
    out_ready = '1;
    repeat (30) @(negedge clk);
    checks++;
    if (recvd != NF || exp_port.size() != 0) begin
      failures++;
      $display("sent %0d received %0d left %0d", NF, recvd, exp_port.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
