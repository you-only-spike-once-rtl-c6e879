// tb_store_unit: self-checking test of the STORE module.
// Drives matched COMPUTE-to-STORE and LOAD-to-STORE entries with random
// back-pressure on its outputs. Checks: spike results are written to the
// accumulated-weight address; in integrate-and-fire mode a neuron fires
// once it reaches the threshold and only if it has not fired before, with
// the spiked bit written back; in softmax mode exactly the neuron with the
// largest potential in the first..last range spikes, below threshold too;
// after each EoT's last neuron an EoT marker follows the spikes.
module tb_store_unit;
  import yoso_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic c2s_valid = 0, c2s_ready, l2s_valid = 0, l2s_ready;
  c2s_t c2s;
  l2s_t l2s;
  logic acc_wr_valid, acc_wr_ready, neu_wr_valid, neu_wr_ready;
  logic [NADDR_W-1:0] acc_wr_addr, neu_wr_addr;
  logic [ACC_W-1:0] acc_wr_data;
  logic [NEU_W-1:0] neu_wr_data;
  logic spk_valid, spk_ready;
  spk_out_t spk;
  logic if_fire, sm_fire;
  int checks = 0, failures = 0, n_if = 0, n_sm = 0;

  store_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    acc_wr_ready = ($urandom_range(0, 3) != 0);
    neu_wr_ready = ($urandom_range(0, 3) != 0);
    spk_ready    = ($urandom_range(0, 3) != 0);
  end

  longint ew[$];    // expected writes {is_neu, addr, data}
  int     esp[$];   // expected spike stream {eot, addr}

  always @(posedge clk) if (rst_n) begin
    if (if_fire) n_if++;
    if (sm_fire) n_sm++;
    if (acc_wr_valid && acc_wr_ready) begin
      checks++;
      if (ew.size() == 0 || {1'b0, acc_wr_addr, acc_wr_data} != 41'(ew[0])) begin
        failures++; $display("acc write %0d %h", acc_wr_addr, acc_wr_data);
      end
      if (ew.size()) void'(ew.pop_front());
    end
    if (neu_wr_valid && neu_wr_ready) begin
      checks++;
      if (ew.size() == 0 || {1'b1, neu_wr_addr, neu_wr_data} != 41'(ew[0])) begin
        failures++; $display("neu write %0d %h expected %h", neu_wr_addr, neu_wr_data, ew.size() ? ew[0] : 0);
      end
      if (ew.size()) void'(ew.pop_front());
    end
    if (spk_valid && spk_ready) begin
      checks++;
      if (esp.size() == 0 || int'(spk) != esp[0]) begin
        failures++; $display("spike out %0h expected %0h", spk, esp.size() ? esp[0] : -1);
      end
      if (esp.size()) void'(esp.pop_front());
    end
  end

  task automatic put(input c2s_t c, input l2s_t l);
    logic acc;
    c2s_valid = 1; c2s = c; l2s_valid = 1; l2s = l;
    do begin #1; acc = c2s_ready; @(negedge clk); end while (!acc);
    c2s_valid = 0; l2s_valid = 0;
  endtask

  // One EoT over n neurons with given potentials and spiked bits.
  task automatic eot(input int n, input bit softmax);
    int pot[256];
    bit sp[256];
    int best;
    best = 0;
    for (int i = 0; i < n; i++) begin
      pot[i] = $urandom_range(0, 400) - 200;
      sp[i]  = ($urandom_range(0, 3) == 0);
      if (pot[i] > pot[best]) best = i;
    end
    for (int i = 0; i < n; i++) begin
      bit f;
      f = !softmax && !sp[i] && (pot[i] >= int'(cfg.thr));
      ew.push_back(longint'({1'b1, 8'(i), f | sp[i], 31'(pot[i])}));
      if (f) esp.push_back(i);
    end
    if (softmax) esp.push_back(best);
    esp.push_back(256);
    for (int i = 0; i < n; i++)
      put('{kind: K_EOT, value: 32'(pot[i]), spiked: sp[i]},
          '{kind: K_EOT, addr: 8'(i), first: (i == 0), last: (i == n - 1)});
  endtask

  initial begin
    cfg = '0;
    cfg.thr = 31'sd50;
    c2s = '0; l2s = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < 30; r++) begin
      int k;
      k = $urandom_range(0, 2);
      if (k == 0) begin
        int n;
        n = $urandom_range(1, 10);
        for (int i = 0; i < n; i++) begin
          int v;
          v = int'($urandom);
          ew.push_back(longint'({1'b0, 8'(i), 32'(v)}));
          put('{kind: K_SPIKE, value: 32'(v), spiked: 1'b0},
              '{kind: K_SPIKE, addr: 8'(i), first: (i == 0), last: (i == n - 1)});
        end
      end else begin
        cfg.softmax = (k == 2);
        eot($urandom_range(1, 20), cfg.softmax);
        // wait for the pending outputs before changing mode
        while (esp.size() != 0 || ew.size() != 0) @(negedge clk);
      end
    end
    repeat (20) @(negedge clk);
    checks++;
    if (ew.size() || esp.size()) begin failures++; $display("outputs missing"); end
    checks++;
    if (n_if == 0 || n_sm == 0) begin failures++; $display("if=%0d sm=%0d", n_if, n_sm); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
