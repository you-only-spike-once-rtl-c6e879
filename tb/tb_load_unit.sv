// tb_load_unit: self-checking test of the LOAD module's access patterns.
// Sends input spikes (with and without a count override) and EoT requests,
// with random back-pressure on every output queue, and checks each
// generated weight, accumulated-weight and neuron address, the intent bits,
// the LOAD-to-COMPUTE and LOAD-to-STORE entries, and that without
// back-pressure a spike with P accesses occupies P+1 cycles (one to decode,
// then one access per cycle).
module tb_load_unit;
  import yoso_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic in_valid = 0, in_ready;
  core_in_t in_spk;
  logic wgt_rd_valid, wgt_rd_ready, acc_rd_valid, acc_rd_ready, acc_rd_intent;
  logic neu_rd_valid, neu_rd_ready, neu_rd_intent;
  logic [WADDR_W-1:0] wgt_rd_addr;
  logic [NADDR_W-1:0] acc_rd_addr, neu_rd_addr;
  logic l2c_valid, l2c_ready, l2s_valid, l2s_ready, busy;
  l2c_t l2c;
  l2s_t l2s;
  int checks = 0, failures = 0;
  bit bp = 0;   // random back-pressure on

  load_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    wgt_rd_ready = !bp || ($urandom_range(0, 3) != 0);
    acc_rd_ready = !bp || ($urandom_range(0, 3) != 0);
    neu_rd_ready = !bp || ($urandom_range(0, 3) != 0);
    l2s_ready    = !bp || ($urandom_range(0, 3) != 0);
    l2c_ready    = !bp || ($urandom_range(0, 1) != 0);
  end

  // expected streams
  int ew[$], ea[$], ei[$], en[$], es[$];     // addresses / intents / l2s packed
  int ec[$];                                  // l2c packed

  always @(posedge clk) if (rst_n) begin
    if (wgt_rd_valid && wgt_rd_ready) begin
      checks++;
      if (ew.size() == 0 || int'(wgt_rd_addr) != ew[0]) begin
        failures++; $display("wgt addr %0d, expected %0d", wgt_rd_addr, ew.size() ? ew[0] : -1);
      end
      if (ew.size()) void'(ew.pop_front());
    end
    if (acc_rd_valid && acc_rd_ready) begin
      checks++;
      if (ea.size() == 0 || int'({acc_rd_intent, acc_rd_addr}) != ea[0]) begin
        failures++; $display("acc req %0h, expected %0h", {acc_rd_intent, acc_rd_addr}, ea.size() ? ea[0] : -1);
      end
      if (ea.size()) void'(ea.pop_front());
    end
    if (neu_rd_valid && neu_rd_ready) begin
      checks++;
      if (en.size() == 0 || int'({neu_rd_intent, neu_rd_addr}) != en[0]) begin
        failures++; $display("neu req %0h", {neu_rd_intent, neu_rd_addr});
      end
      if (en.size()) void'(en.pop_front());
    end
    if (l2s_valid && l2s_ready) begin
      checks++;
      if (es.size() == 0 || int'(l2s) != es[0]) begin
        failures++; $display("l2s %0h, expected %0h", l2s, es.size() ? es[0] : -1);
      end
      if (es.size()) void'(es.pop_front());
    end
    if (l2c_valid && l2c_ready) begin
      checks++;
      if (ec.size() == 0 || int'(l2c) != ec[0]) begin
        failures++; $display("l2c %0h, expected %0h", l2c, ec.size() ? ec[0] : -1);
      end
      if (ec.size()) void'(ec.pop_front());
    end
  end

  task automatic send(input kind_e k, input int j, input int povr);
    logic acc;
    int p;
    if (k == K_EOT) p = int'(cfg.neurons);
    else p = (povr != 0) ? povr : int'(cfg.p);
    ec.push_back(int'(l2c_t'{kind: k, count: CNT_W'(p)}));
    for (int i = 0; i < p; i++) begin
      if (k == K_SPIKE) begin
        ew.push_back((int'(cfg.wbase) + j + i * int'(cfg.m)) & 16'hFFFF);
        ea.push_back((1 << 8) | i);
      end else begin
        ea.push_back(i);
        en.push_back((1 << 8) | i);
      end
      es.push_back(int'(l2s_t'{kind: k, addr: 8'(i), first: (i == 0), last: (i == p - 1)}));
    end
    in_valid = 1;
    in_spk = '{kind: k, p_ovr: 8'(povr), idx: 16'(j)};
    do begin #1; acc = in_ready; @(negedge clk); end while (!acc);
    in_valid = 0;
  endtask

  initial begin
    cfg = '0;
    cfg.p = 9'd5; cfg.m = 16'd3; cfg.wbase = 16'd100; cfg.neurons = 9'd4;
    in_spk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // timing without back-pressure: spike with P=5 then idle again after 6 cycles
    begin
      int cyc;
      send(K_SPIKE, 7, 0);       // accepted at the edge just passed
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 6) begin failures++; $display("P=5 spike took %0d cycles", cyc); end
    end
    send(K_SPIKE, 2, 2);
    send(K_EOT, 0, 0);
    repeat (10) @(negedge clk);
    // random traffic with back-pressure
    bp = 1;
    for (int n = 0; n < 60; n++) begin
      cfg.p = 9'($urandom_range(1, 20));
      cfg.m = 16'($urandom_range(1, 300));
      cfg.wbase = 16'($urandom_range(0, 1000));
      cfg.neurons = 9'($urandom_range(1, 256));
      if ($urandom_range(0, 3) == 0) send(K_EOT, 0, 0);
      else send(K_SPIKE, $urandom_range(0, 783), ($urandom_range(0, 1) != 0) ? $urandom_range(1, 40) : 0);
      while (busy) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    checks++;
    if (ew.size() || ea.size() || en.size() || es.size() || ec.size()) begin
      failures++; $display("missing requests");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
