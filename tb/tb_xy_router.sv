// tb_xy_router: self-checking test of one X-Y router at (2, 3).
// All five inputs inject packets with random destinations, the outputs
// apply random back-pressure. Checks: every packet leaves once, on the port
// X-Y routing selects (east/west until the column matches, then
// north/south, then local); packets from one input to one output keep their
// order; all outputs and all inputs are used.
module tb_xy_router;
  import yoso_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [4:0] in_valid = '0, in_ready, out_valid, out_ready = '1;
  logic [PKT_W-1:0] in_pkt [5];
  logic [PKT_W-1:0] out_pkt [5];
  int checks = 0, failures = 0;
  int sent = 0, recv = 0;
  int per_out [5];

  xy_router dut (.clk, .rst_n, .my_x(4'd2), .my_y(4'd3), .in_valid, .in_ready,
                 .in_pkt, .out_valid, .out_ready, .out_pkt);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int route(input logic [PKT_W-1:0] p);
    int dx, dy;
    dx = int'(p[39:36]); dy = int'(p[35:32]);
    if (dx > 2) return 2;
    if (dx < 2) return 4;
    if (dy > 3) return 1;
    if (dy < 3) return 3;
    return 0;
  endfunction

  // expected packets per (input, output) pair, in order
  logic [PKT_W-1:0] exp_q [5][5][$];

  always @(posedge clk) begin
    #1;
    for (int o = 0; o < 5; o++) out_ready[o] = ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      int src;
      src = int'(out_pkt[o][11:8]);   // the test puts the source port here
      checks++;
      recv++;
      per_out[o]++;
      if (exp_q[src][o].size() == 0 || out_pkt[o] !== exp_q[src][o][0]) begin
        failures++; $display("port %0d got %h", o, out_pkt[o]);
      end else void'(exp_q[src][o].pop_front());
    end
  end

  for (genvar i = 0; i < 5; i++) begin : g_src
    initial begin
      in_pkt[i] = '0;
      wait (rst_n);
      @(negedge clk);
      for (int k = 0; k < 100; k++) begin
        logic [PKT_W-1:0] p;
        logic a;
        p = {4'($urandom_range(0, 5)), 4'($urandom_range(0, 6)), 20'($urandom), 4'(i), 8'(k)};
        exp_q[i][route(p)].push_back(p);
        sent++;
        in_valid[i] = 1; in_pkt[i] = p;
        do begin #1; a = in_ready[i]; @(negedge clk); end while (!a);
        in_valid[i] = 0;
        while ($urandom_range(0, 3) == 0) @(negedge clk);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2000) @(negedge clk);
    checks++;
    if (sent != 500 || recv != 500) begin failures++; $display("sent %0d received %0d", sent, recv); end
    for (int o = 0; o < 5; o++) begin
      checks++;
      if (per_out[o] == 0) begin failures++; $display("output %0d unused", o); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
