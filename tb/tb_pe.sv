// tb_pe: end-to-end test of one processing element through its packet
// ports. The PE is programmed with packets only (SRAM contents and
// reference registers), holds a 10-input, 8-neuron integrate-and-fire layer
// and forwards every spike and EoT it receives. Over 6 timesteps the test
// checks the two output streams separately: forwarded packets (forwarding
// destination, word unchanged, in arrival order) and the PE's own packets
// (output destination, Spike Address word of each neuron that fires, in
// neuron order, then EoT), against a reference model. It then re-enters
// programming mode, switches the layer to softmax and runs 3 more
// timesteps.
module tb_pe;
  import yoso_pkg::*;
  import yoso_tb_pkg::*;
  localparam int NIN = 10, NOUT = 8, WB = 3, THR = 50;
  localparam logic [7:0] OUTD = 8'hF1, FWDD = 8'h12;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [PKT_W-1:0] in_pkt = '0, out_pkt;
  pe_ev_t ev;
  int checks = 0, failures = 0, n_raw = 0, n_if = 0, n_sm = 0, n_fwd = 0;

  pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin #1; out_ready = ($urandom_range(0, 3) != 0); end

  int w [NOUT][NIN];
  longint acc [NOUT], pot [NOUT];
  bit spiked [NOUT];
  logic [31:0] spa [NOUT];
  logic [PKT_W-1:0] q_own[$], q_fwd[$];

  always @(posedge clk) if (rst_n) begin
    if (ev.raw_stall) n_raw++;
    if (ev.if_fire) n_if++;
    if (ev.sm_fire) n_sm++;
    if (ev.fwd) n_fwd++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_pkt[39:32] == FWDD) begin
        if (q_fwd.size() == 0 || out_pkt !== q_fwd[0]) begin failures++; $display("fwd %h", out_pkt); end
        if (q_fwd.size()) void'(q_fwd.pop_front());
      end else begin
        if (q_own.size() == 0 || out_pkt !== q_own[0]) begin
          failures++; $display("own %h expected %h", out_pkt, q_own.size() ? q_own[0] : 0);
        end
        if (q_own.size()) void'(q_own.pop_front());
      end
    end
  end

  task automatic put(input logic [31:0] w_);
    logic a;
    in_valid = 1; in_pkt = {8'h00, w_};
    do begin #1; a = in_ready; @(negedge clk); end while (!a);
    in_valid = 0;
  endtask

  task automatic program_pe(input bit softmax);
    logic [31:0] q[$];
    for (int i = 0; i < NOUT; i++) begin
      acc[i] = 0;
      pot[i] = $urandom_range(0, 30) - 15;
      spiked[i] = 0;
      spa[i] = {PT_SPIKE, 14'h0, 16'(100 + i)};
      push_write(q, SEL_ACC, i, 32'(acc[i]));
      push_write(q, SEL_NEU, i, {1'b0, 31'(pot[i])});
      push_write(q, SEL_SPA, i, spa[i]);
      for (int j = 0; j < NIN; j++) begin
        w[i][j] = $urandom_range(0, 40) - 10;
        push_write(q, SEL_WGT, WB + j + i * NIN, 32'(w[i][j]));
      end
    end
    q.push_back(w_reg(R_P, NOUT));
    q.push_back(w_reg(R_M, NIN));
    q.push_back(w_reg(R_WBASE, WB));
    q.push_back(w_reg(R_NEURONS, NOUT));
    q.push_back(w_reg(R_THR_LO, THR));
    q.push_back(w_reg(R_THR_HI, 0));
    q.push_back(w_reg(R_MODE, softmax));
    q.push_back(w_reg(R_OUTDEST, OUTD));
    q.push_back(w_reg(R_FWDDEST, FWDD));
    q.push_back(w_reg(R_FWDEN, 1));
    q.push_back(w_reg(R_EOTNEED, 1));
    q.push_back(w_run());
    foreach (q[k]) put(q[k]);
  endtask

  task automatic run(input int steps, input bit softmax);
    for (int t = 0; t < steps; t++) begin
      for (int j = 0; j < NIN; j++) if ($urandom_range(0, 2) == 0) begin
        for (int i = 0; i < NOUT; i++) acc[i] = sat(acc[i] + w[i][j], 32);
        q_fwd.push_back({FWDD, w_spike(j)});
        put(w_spike(j));
      end
      begin
        int best;
        best = 0;
        for (int i = 0; i < NOUT; i++) begin
          pot[i] = sat(pot[i] + acc[i], 31);
          if (!softmax && !spiked[i] && pot[i] >= THR) begin
            spiked[i] = 1;
            q_own.push_back({OUTD, spa[i]});
          end
          if (pot[i] > pot[best]) best = i;
        end
        if (softmax) q_own.push_back({OUTD, spa[best]});
        q_own.push_back({OUTD, EOT_WORD});
      end
      q_fwd.push_back({FWDD, EOT_WORD});
      put(EOT_WORD);
    end
    while (q_own.size() || q_fwd.size()) @(negedge clk);
    repeat (10) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    program_pe(1'b0);
    run(6, 1'b0);
    put(w_prog());
    program_pe(1'b1);
    run(3, 1'b1);
    checks++;
    if (!ev.idle) begin failures++; $display("PE not idle"); end
    checks++;
    if (n_if == 0 || n_sm == 0 || n_fwd == 0) begin
      failures++; $display("events: if %0d sm %0d fwd %0d", n_if, n_sm, n_fwd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
