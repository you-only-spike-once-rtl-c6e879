// tb_mnist_workload: the MNIST fully connected network 784-300-300-10 run
// on the full-size 6 x 7 mesh with random 8-bit weights and random input
// spike times (no trained weights or images are used; the test is of the
// data path at the real sizes, not of accuracy).
//
// Mapping (C = max(n/256, m*n/40960) PEs per layer):
//   layer 1, 784 -> 300, integrate-and-fire: 6 PEs of 50 neurons at tiles
//     (0,0)..(0,5), 39 200 weights each, chained by forwarding
//     (0,0) -> (0,1) -> ... -> (0,5); input spikes enter at (0,0)
//   layer 2, 300 -> 300, integrate-and-fire: 3 PEs of 100 neurons at tiles
//     (1,0)..(1,2), chained (1,0) -> (1,1) -> (1,2), EOTNEED = 6
//   layer 3, 300 -> 10, softmax: one PE at (2,0), EOTNEED = 3, output to
//     the host at the east edge of row 0 (x = 15)
// Weights are stored column-major, w[i][j] at j + i*m, so P = local
// neurons and M = m. Each row's host input programs the tiles of its row in
// parallel. A reference model computes the winning output neuron of every
// timestep; the host waits for the output EoT before the next timestep.
module tb_mnist_workload;
  import yoso_pkg::*;
  import yoso_tb_pkg::*;
  localparam int NI = 784, N1 = 300, N2 = 300, NO = 10;
  localparam int PE1 = 6, PE2 = 3, L1 = N1 / PE1, L2 = N2 / PE2;
  localparam int T = 6, THR1 = 200, THR2 = 60;
  localparam int XD = 6, YD = 7;

  logic clk = 0, rst_n = 0;
  logic             host_in_valid [YD];
  logic             host_in_ready [YD];
  logic [PKT_W-1:0] host_in_pkt   [YD];
  logic             host_out_valid [YD];
  logic             host_out_ready [YD];
  logic [PKT_W-1:0] host_out_pkt   [YD];
  pe_ev_t           ev [XD*YD];

  yoso_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  int n_if = 0, n_sm = 0, n_fwd = 0, n_raw = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte w1 [N1][NI];
  byte w2 [N2][N1];
  byte w3 [NO][N2];
  longint acc1 [N1], pot1 [N1], acc2 [N2], pot2 [N2], acc3 [NO], pot3 [NO];
  bit sp1 [N1], sp2 [N2];
  int tin [NI];                       // timestep of each input spike, -1: none
  logic [PKT_W-1:0] q_out[$];

  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int r = 0; r < XD*YD; r++) begin
      if (ev[r].if_fire)   n_if++;
      if (ev[r].sm_fire)   n_sm++;
      if (ev[r].fwd)       n_fwd++;
      if (ev[r].raw_stall) n_raw++;
    end
    for (int y = 0; y < YD; y++) if (host_out_valid[y] && host_out_ready[y]) begin
      checks++;
      if (y != 0 || q_out.size() == 0 || host_out_pkt[y] !== q_out[0]) begin
        failures++;
        $display("host row %0d got %h, expected %h", y, host_out_pkt[y], q_out.size() ? q_out[0] : 0);
      end
      if (q_out.size()) void'(q_out.pop_front());
    end
  end

  always @(posedge clk) begin
    #1;
    for (int y = 0; y < YD; y++) host_out_ready[y] = ($urandom_range(0, 3) != 0);
  end

  task automatic put(input int row, input logic [7:0] dest, input logic [31:0] w_);
    logic a;
    host_in_valid[row] = 1; host_in_pkt[row] = {dest, w_};
    do begin #1; a = host_in_ready[row]; @(negedge clk); end while (!a);
    host_in_valid[row] = 0;
  endtask

  task automatic send_all(input int row, input logic [7:0] dest, ref logic [31:0] q[$]);
    foreach (q[k]) put(row, dest, q[k]);
    q.delete();
  endtask

  function automatic void regs(ref logic [31:0] q[$], input int p, input int m, input int thr,
                               input bit sm, input logic [7:0] od, input logic [7:0] fd,
                               input bit fe, input int en);
    q.push_back(w_reg(R_P, p));       q.push_back(w_reg(R_M, m));
    q.push_back(w_reg(R_WBASE, 0));   q.push_back(w_reg(R_NEURONS, p));
    q.push_back(w_reg(R_THR_LO, thr & 16'hFFFF)); q.push_back(w_reg(R_THR_HI, thr >>> 16));
    q.push_back(w_reg(R_MODE, sm));   q.push_back(w_reg(R_OUTDEST, od));
    q.push_back(w_reg(R_FWDDEST, fd)); q.push_back(w_reg(R_FWDEN, fe));
    q.push_back(w_reg(R_EOTNEED, en));
  endfunction

  // state (accumulated weights 0, potentials = biases) and spike words of
  // `n` neurons starting at global index `g0`
  function automatic void state(ref logic [31:0] q[$], input int n, input int g0, ref longint pot[]);
    q.push_back(w_set_ptr(SEL_ACC, 0));
    for (int k = 0; k < n; k++) begin q.push_back(w_lo(16'h0)); q.push_back(w_hi(16'h0)); end
    q.push_back(w_set_ptr(SEL_NEU, 0));
    for (int k = 0; k < n; k++) begin
      logic [31:0] v;
      v = {1'b0, 31'(pot[k])};
      q.push_back(w_lo(v[15:0])); q.push_back(w_hi(v[31:16]));
    end
    q.push_back(w_set_ptr(SEL_SPA, 0));
    for (int k = 0; k < n; k++) begin
      logic [31:0] v;
      v = w_spike(g0 + k);
      q.push_back(w_lo(v[15:0])); q.push_back(w_hi(v[31:16]));
    end
  endfunction

  task automatic program_row(input int y);
    logic [31:0] q[$];
    longint b[];
    // layer-1 tile (0,y)
    b = new[L1];
    for (int k = 0; k < L1; k++) b[k] = pot1[y*L1 + k];
    state(q, L1, y*L1, b);
    q.push_back(w_set_ptr(SEL_WGT, 0));
    for (int k = 0; k < L1; k++) for (int j = 0; j < NI; j++) begin
      q.push_back(w_lo(16'(w1[y*L1 + k][j]))); q.push_back(w_hi(16'h0));
    end
    regs(q, L1, NI, THR1, 1'b0, 8'h10, 8'(y + 1), y < PE1 - 1, 1);
    q.push_back(w_run());
    send_all(y, 8'(y), q);
    // layer-2 tile (1,y)
    if (y < PE2) begin
      b = new[L2];
      for (int k = 0; k < L2; k++) b[k] = pot2[y*L2 + k];
      state(q, L2, y*L2, b);
      q.push_back(w_set_ptr(SEL_WGT, 0));
      for (int k = 0; k < L2; k++) for (int j = 0; j < N1; j++) begin
        q.push_back(w_lo(16'(w2[y*L2 + k][j]))); q.push_back(w_hi(16'h0));
      end
      regs(q, L2, N1, THR2, 1'b0, 8'h20, 8'h10 | 8'(y + 1), y < PE2 - 1, PE1);
      q.push_back(w_run());
      send_all(y, 8'h10 | 8'(y), q);
    end
    // output tile (2,0), programmed from row 3
    if (y == 3) begin
      b = new[NO];
      for (int k = 0; k < NO; k++) b[k] = pot3[k];
      state(q, NO, 0, b);
      q.push_back(w_set_ptr(SEL_WGT, 0));
      for (int k = 0; k < NO; k++) for (int j = 0; j < N2; j++) begin
        q.push_back(w_lo(16'(w3[k][j]))); q.push_back(w_hi(16'h0));
      end
      regs(q, NO, N2, 0, 1'b1, 8'hF0, 8'h00, 1'b0, PE2);
      q.push_back(w_run());
      send_all(y, 8'h20, q);
    end
  endtask

  initial begin
    int nspk, h1, h2;
    for (int y = 0; y < YD; y++) begin
      host_in_valid[y] = 0; host_in_pkt[y] = '0; host_out_ready[y] = 1;
    end
    for (int i = 0; i < N1; i++) for (int j = 0; j < NI; j++) w1[i][j] = byte'($urandom_range(0, 9) - 4);
    for (int i = 0; i < N2; i++) for (int j = 0; j < N1; j++) w2[i][j] = byte'($urandom_range(0, 9) - 4);
    for (int i = 0; i < NO; i++) for (int j = 0; j < N2; j++) w3[i][j] = byte'($urandom_range(0, 20) - 10);
    for (int i = 0; i < N1; i++) begin acc1[i] = 0; pot1[i] = $urandom_range(0, 40) - 20; sp1[i] = 0; end
    for (int i = 0; i < N2; i++) begin acc2[i] = 0; pot2[i] = $urandom_range(0, 40) - 20; sp2[i] = 0; end
    for (int i = 0; i < NO; i++) begin acc3[i] = 0; pot3[i] = $urandom_range(0, 40) - 20; end
    for (int j = 0; j < NI; j++) tin[j] = ($urandom_range(0, 5) == 0) ? $urandom_range(0, T - 1) : -1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fork
      program_row(0); program_row(1); program_row(2);
      program_row(3); program_row(4); program_row(5);
    join
    $display("programmed after %0d cycles", cycles);
    h1 = 0; h2 = 0;
    for (int t = 0; t < T; t++) begin
      int f1[$], f2[$], best;
      nspk = 0;
      f1.delete(); f2.delete();
      for (int j = 0; j < NI; j++) if (tin[j] == t) begin
        nspk++;
        for (int i = 0; i < N1; i++) acc1[i] = sat(acc1[i] + w1[i][j], 32);
        put(0, 8'h00, w_spike(j));
      end
      for (int i = 0; i < N1; i++) begin
        pot1[i] = sat(pot1[i] + acc1[i], 31);
        if (!sp1[i] && pot1[i] >= THR1) begin sp1[i] = 1; f1.push_back(i); end
      end
      foreach (f1[k]) for (int o = 0; o < N2; o++) acc2[o] = sat(acc2[o] + w2[o][f1[k]], 32);
      for (int i = 0; i < N2; i++) begin
        pot2[i] = sat(pot2[i] + acc2[i], 31);
        if (!sp2[i] && pot2[i] >= THR2) begin sp2[i] = 1; f2.push_back(i); end
      end
      foreach (f2[k]) for (int o = 0; o < NO; o++) acc3[o] = sat(acc3[o] + w3[o][f2[k]], 32);
      best = 0;
      for (int o = 0; o < NO; o++) begin
        pot3[o] = sat(pot3[o] + acc3[o], 31);
        if (pot3[o] > pot3[best]) best = o;
      end
      h1 += f1.size(); h2 += f2.size();
      q_out.push_back({8'hF0, w_spike(best)});
      q_out.push_back({8'hF0, EOT_WORD});
      put(0, 8'h00, EOT_WORD);
      while (q_out.size() != 0) @(negedge clk);
      $display("timestep %0d: %0d input, %0d layer-1, %0d layer-2 spikes, class %0d, cycle %0d",
               t, nspk, f1.size(), f2.size(), best, cycles);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (q_out.size() != 0) begin failures++; $display("%0d outputs missing", q_out.size()); end
    checks++;
    if (n_if != h1 + h2) begin failures++; $display("IF spikes %0d, expected %0d", n_if, h1 + h2); end
    checks++;
    if (n_sm != T) begin failures++; $display("softmax spikes %0d, expected %0d", n_sm, T); end
    checks++;
    if (h1 == 0 || h2 == 0) begin failures++; $display("a hidden layer never fired"); end
    $display("events: if %0d softmax %0d fwd %0d raw %0d, %0d cycles", n_if, n_sm, n_fwd, n_raw, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
