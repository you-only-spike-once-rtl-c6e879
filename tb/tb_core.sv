// tb_core: end-to-end test of the neuron core on a small layer.
// The core is wired to a memory interface with its four SRAMs. The test
// programs a 12-input, 10-neuron layer (random weights and biases,
// column-wise weight layout with base 5 and stride M = 12) and plays an
// input spike pattern over 8 timesteps, then a softmax layer over 4
// timesteps. A reference model in this file computes, per timestep,
// accumulated weights += w[i][j] for each input spike, then at EoT
// potential += accumulated weight and the threshold / argmax rule. Checks:
// (half the spikes carry a count override of 1..3 neurons) and
// the order and content of the spike words the core produces (spikes of a
// timestep in neuron order, then EoT), and the final SRAM contents. It
// also requires that a RAW stall and a saturating add have happened.
module tb_core;
  import yoso_pkg::*;
  localparam int NIN = 12, NOUT = 10, T = 8, WB = 5, THR = 60;

  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic prog_mode = 1, prog_valid = 0, prog_ready;
  prog_wr_t prog;
  logic in_valid = 0, in_ready;
  core_in_t in_spk;
  logic               acc_rd_valid, acc_rd_ready, acc_rd_intent;
  logic [NADDR_W-1:0] acc_rd_addr;
  logic               neu_rd_valid, neu_rd_ready, neu_rd_intent;
  logic [NADDR_W-1:0] neu_rd_addr;
  logic               wgt_rd_valid, wgt_rd_ready;
  logic [WADDR_W-1:0] wgt_rd_addr;
  logic               acc_wr_valid, acc_wr_ready, neu_wr_valid, neu_wr_ready;
  logic [NADDR_W-1:0] acc_wr_addr, neu_wr_addr;
  logic [ACC_W-1:0]   acc_wr_data, acc_rsp_data;
  logic [NEU_W-1:0]   neu_wr_data, neu_rsp_data;
  logic               acc_rsp_valid, acc_rsp_ready, neu_rsp_valid, neu_rsp_ready;
  logic               wgt_rsp_valid, wgt_rsp_ready;
  logic [WGT_W-1:0]   wgt_rsp_data;
  logic               spk_valid, spk_ready;
  spk_out_t           spk;
  logic               out_valid, out_ready;
  logic [SPK_W-1:0]   out_word;
  logic               raw_stall_acc, raw_stall_neu, saturated, if_fire, sm_fire, idle;
  int checks = 0, failures = 0, n_raw = 0, n_sat = 0;

  core dut (.*);
  mem_if u_mem (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin #1; out_ready = ($urandom_range(0, 3) != 0); end

  // ---------------------------------------------------------- reference
  int w [NOUT][NIN];
  longint acc [NOUT];
  longint pot [NOUT];
  bit spiked [NOUT];
  logic [31:0] spa [NOUT];
  logic [31:0] expq[$];

  function automatic longint sat(input longint v, input int bits);
    longint hi, lo;
    hi = (longint'(1) <<< (bits - 1)) - 1;
    lo = -(longint'(1) <<< (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (raw_stall_acc || raw_stall_neu) n_raw++;
    if (saturated) n_sat++;
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0) begin failures++; $display("extra word %h", out_word); end
      else begin
        logic [31:0] e;
        e = expq.pop_front();
        if (out_word !== e) begin failures++; $display("word %h, expected %h", out_word, e); end
      end
    end
  end

  task automatic progw(input sram_sel_e s, input int a, input logic [31:0] d);
    logic acc_;
    prog_valid = 1; prog = '{sel: s, addr: 16'(a), data: d};
    do begin #1; acc_ = prog_ready; @(negedge clk); end while (!acc_);
    prog_valid = 0;
  endtask

  task automatic send(input kind_e k, input int j, input int povr = 0);
    logic acc_;
    in_valid = 1; in_spk = '{kind: k, p_ovr: 8'(povr), idx: 16'(j)};
    do begin #1; acc_ = in_ready; @(negedge clk); end while (!acc_);
    in_valid = 0;
  endtask

  task automatic program_layer(input bit big_acc);
    prog_mode = 1;
    @(negedge clk);
    for (int i = 0; i < NOUT; i++) begin
      acc[i] = (big_acc && i == NOUT - 1) ? 64'sh7FFF_FFF0 : 0;
      pot[i] = $urandom_range(0, 40) - 20;
      spiked[i] = 0;
      progw(SEL_ACC, i, 32'(acc[i]));
      progw(SEL_NEU, i, {1'b0, 31'(pot[i])});
      spa[i] = 32'h00AB_0000 + 32'(i * 17);
      progw(SEL_SPA, i, spa[i]);
      for (int j = 0; j < NIN; j++) begin
        w[i][j] = $urandom_range(0, 40) - 10;
        progw(SEL_WGT, WB + j + i * NIN, 32'(w[i][j]));
      end
    end
    prog_mode = 0;
    @(negedge clk);
  endtask

  task automatic run(input int steps, input int tin[NIN], input bit softmax);
    for (int t = 0; t < steps; t++) begin
      for (int j = 0; j < NIN; j++) if (tin[j] == t) begin
        // half the spikes reach only the first 1..3 neurons (count
        // override), so that read-modify-writes of one address follow
        // each other closely
        int p;
        p = ($urandom_range(0, 1) != 0) ? 0 : $urandom_range(1, 3);
        for (int i = 0; i < ((p == 0) ? NOUT : p); i++) acc[i] = sat(acc[i] + w[i][j], 32);
        send(K_SPIKE, j, p);
      end
      begin
        int best;
        best = 0;
        for (int i = 0; i < NOUT; i++) begin
          pot[i] = sat(pot[i] + acc[i], 31);
          if (!softmax && !spiked[i] && pot[i] >= THR) begin
            spiked[i] = 1;
            expq.push_back(spa[i]);
          end
          if (pot[i] > pot[best]) best = i;
        end
        if (softmax) expq.push_back(spa[best]);
        expq.push_back(EOT_WORD);
      end
      send(K_EOT, 0);
    end
    while (expq.size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);
  endtask

  task automatic check_srams();
    for (int i = 0; i < NOUT; i++) begin
      checks++;
      if (u_mem.u_acc_sram.mem[i] !== 32'(acc[i])) begin
        failures++; $display("acc[%0d] %h expected %h", i, u_mem.u_acc_sram.mem[i], 32'(acc[i]));
      end
      checks++;
      if (u_mem.u_neu_sram.mem[i] !== {spiked[i], 31'(pot[i])}) begin
        failures++; $display("neu[%0d] %h expected %h", i, u_mem.u_neu_sram.mem[i], {spiked[i], 31'(pot[i])});
      end
    end
  endtask

  initial begin
    int tin[NIN];
    cfg = '0;
    cfg.p = 9'(NOUT); cfg.m = 16'(NIN); cfg.wbase = 16'(WB);
    cfg.neurons = 9'(NOUT); cfg.thr = 31'(THR);
    prog = '0; in_spk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // integrate-and-fire layer
    program_layer(1'b1);
    for (int j = 0; j < NIN; j++) tin[j] = $urandom_range(0, T / 2);
    run(T, tin, 1'b0);
    check_srams();
    // softmax layer
    cfg.softmax = 1;
    program_layer(1'b0);
    for (int j = 0; j < NIN; j++) tin[j] = $urandom_range(0, 2);
    run(4, tin, 1'b1);
    check_srams();
    checks++;
    if (!idle) begin failures++; $display("core not idle at the end"); end
    checks++;
    if (n_raw == 0) begin failures++; $display("no RAW stall happened"); end
    checks++;
    if (n_sat == 0) begin failures++; $display("no saturation happened"); end
    $display("raw stalls %0d, saturations %0d", n_raw, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
