// tb_router_if: self-checking test of the router interface.
// Checks programming-mode decoding (SRAM writes with pointer
// auto-increment, reference registers, RUN), run-mode steering of spikes
// and EoT packets to the core, EoT counting (EOTNEED = 3), forwarding
// with the forwarding destination prepended, output packets built from
// Spike Address words with the output destination, fair sharing of the
// output between the two, and re-entry into programming mode.
module tb_router_if;
  import yoso_pkg::*;
  import yoso_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [PKT_W-1:0] in_pkt = '0;
  logic out_valid, out_ready = 1;
  logic [PKT_W-1:0] out_pkt;
  logic core_valid, core_ready = 1;
  core_in_t core_spk;
  logic prog_mode, prog_valid, prog_ready = 1;
  prog_wr_t prog;
  logic own_valid = 0, own_ready;
  logic [SPK_W-1:0] own_word = '0;
  cfg_t cfg;
  logic fwd_event;
  int checks = 0, failures = 0, n_fwd = 0;

  router_if dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  prog_wr_t qp[$];
  core_in_t qc[$];
  logic [PKT_W-1:0] qo[$];   // expected forwarded packets, in order
  logic [PKT_W-1:0] qown[$]; // expected own packets, in order

  always @(posedge clk) if (rst_n) begin
    if (fwd_event) n_fwd++;
    if (prog_valid && prog_ready) begin
      checks++;
      if (qp.size() == 0 || prog !== qp[0]) begin failures++; $display("prog write %h", prog); end
      if (qp.size()) void'(qp.pop_front());
    end
    if (core_valid && core_ready) begin
      checks++;
      if (qc.size() == 0 || core_spk !== qc[0]) begin failures++; $display("core spike %h", core_spk); end
      if (qc.size()) void'(qc.pop_front());
    end
    if (out_valid && out_ready) begin
      checks++;
      if (qo.size() && out_pkt === qo[0]) void'(qo.pop_front());
      else if (qown.size() && out_pkt === qown[0]) void'(qown.pop_front());
      else begin failures++; $display("out packet %h", out_pkt); end
    end
  end

  task automatic put(input logic [31:0] w);
    logic a;
    in_valid = 1; in_pkt = {8'h00, w};
    do begin #1; a = in_ready; @(negedge clk); end while (!a);
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (!prog_mode) begin failures++; $display("not in programming mode after reset"); end
    // SRAM writes with auto-increment
    put(w_set_ptr(SEL_WGT, 100));
    for (int k = 0; k < 5; k++) begin
      logic [31:0] d;
      d = $urandom;
      qp.push_back('{sel: SEL_WGT, addr: 16'(100 + k), data: d});
      put(w_lo(d[15:0]));
      put(w_hi(d[31:16]));
    end
    put(w_set_ptr(SEL_NEU, 7));
    qp.push_back('{sel: SEL_NEU, addr: 16'd7, data: 32'h1234_5678});
    put(w_lo(16'h5678)); put(w_hi(16'h1234));
    // reference registers
    put(w_reg(R_P, 33)); put(w_reg(R_M, 784)); put(w_reg(R_WBASE, 9));
    put(w_reg(R_NEURONS, 50)); put(w_reg(R_THR_LO, 16'h2345)); put(w_reg(R_THR_HI, 16'h0001));
    put(w_reg(R_MODE, 1)); put(w_reg(R_OUTDEST, 8'h3A)); put(w_reg(R_FWDDEST, 8'h21));
    put(w_reg(R_FWDEN, 1)); put(w_reg(R_EOTNEED, 3));
    checks++;
    if (cfg.p != 33 || cfg.m != 784 || cfg.wbase != 9 || cfg.neurons != 50 ||
        cfg.thr != 31'h0001_2345 || !cfg.softmax || cfg.out_dest != 8'h3A ||
        cfg.fwd_dest != 8'h21 || !cfg.fwd_en || cfg.eot_need != 3) begin
      failures++; $display("reference registers wrong: %p", cfg);
    end
    put(w_run());
    checks++;
    if (prog_mode) begin failures++; $display("still in programming mode"); end
    // spikes and EoT in run mode, forwarding on, own traffic competing;
    // every third EoT reaches the core
    fork
      begin
        int n_eot;
        n_eot = 0;
        for (int k = 0; k < 60; k++) begin
          logic [31:0] w;
          if ($urandom_range(0, 2) == 0) begin
            w = EOT_WORD;
            n_eot++;
            if (n_eot % 3 == 0) qc.push_back('{kind: K_EOT, p_ovr: 8'd0, idx: 16'd0});
          end else begin
            w = w_spike($urandom_range(0, 783), $urandom_range(0, 1) ? 0 : $urandom_range(1, 9));
            qc.push_back('{kind: K_SPIKE, p_ovr: w[23:16], idx: w[15:0]});
          end
          qo.push_back({8'h21, w});
          put(w);
        end
      end
      begin
        for (int k = 0; k < 30; k++) begin
          logic a;
          own_valid = 1; own_word = $urandom;
          qown.push_back({8'h3A, own_word});
          do begin #1; a = own_ready; @(negedge clk); end while (!a);
          own_valid = 0;
        end
      end
      // the core sometimes stalls
      begin
        repeat (100) begin @(posedge clk); #1; core_ready = ($urandom_range(0, 2) != 0); end
        core_ready = 1;
      end
    join
    repeat (5) @(negedge clk);
    checks++;
    if (qc.size() || qo.size() || qown.size() || qp.size()) begin
      failures++; $display("missing: core %0d fwd %0d own %0d", qc.size(), qo.size(), qown.size());
    end
    checks++;
    if (n_fwd != 60) begin failures++; $display("forwarded %0d", n_fwd); end
    // forwarding off: nothing is forwarded
    put(w_prog());
    checks++;
    if (!prog_mode) begin failures++; $display("did not re-enter programming mode"); end
    put(w_reg(R_FWDEN, 0));
    put(w_run());
    qc.push_back('{kind: K_SPIKE, p_ovr: 8'd0, idx: 16'd5});
    put(w_spike(5));
    repeat (5) @(negedge clk);
    checks++;
    if (n_fwd != 60 || qc.size()) begin failures++; $display("forwarding not switched off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
