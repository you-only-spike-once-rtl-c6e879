// tb_yoso_top: end-to-end test of the full 6 x 7 mesh at default sizes.
// A two-layer network is mapped onto three PEs and run from the host
// ports, then run again on new inputs after reprogramming:
//   input layer (host)  16 neurons, spikes injected at tile (0,0)
//   hidden layer        12 integrate-and-fire neurons split over tiles
//                       (0,0) [neurons 0-5] and (1,0) [6-11]; (0,0)
//                       forwards every input packet to (1,0)
//   output layer        4 softmax neurons on tile (2,1), which waits for
//                       the EoT of both hidden tiles (EOTNEED = 2) and
//                       sends its spike and EoT to the host (x = 15, row 1)
// All programming goes through the NoC as packets. A reference model
// computes the output spike of every timestep; the host waits for the
// output EoT of a timestep before starting the next. The test also counts
// how often each mechanism occurred and fails if one never did: RAW stall,
// saturating add, integrate-and-fire spike, softmax spike, forwarding,
// EoT merging, and a switch from run back to programming mode.
module tb_yoso_top;
  import yoso_pkg::*;
  import yoso_tb_pkg::*;
  localparam int NI = 16, NH = 12, NO = 4, HPE = 6, T = 6, THR1 = 40;
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
  int n_raw = 0, n_sat = 0, n_if = 0, n_sm = 0, n_fwd = 0, n_merge = 0, n_prog = 0;
  longint cycles = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // network and reference state
  int w1 [NH][NI];
  int w2 [NO][NH];
  longint acc1 [NH], pot1 [NH], acc2 [NO], pot2 [NO];
  bit sp1 [NH];
  logic [PKT_W-1:0] q_out[$];

  // event counters
  bit prog_q [XD*YD];
  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int r = 0; r < XD*YD; r++) begin
      if (ev[r].raw_stall) n_raw++;
      if (ev[r].saturated) n_sat++;
      if (ev[r].if_fire)   n_if++;
      if (ev[r].sm_fire)   n_sm++;
      if (ev[r].fwd)       n_fwd++;
      if (ev[r].prog_mode && !prog_q[r]) n_prog++;
      prog_q[r] = ev[r].prog_mode;
    end
    if (dut.g_row[1].g_col[2].u_pe.u_rif.in_valid && dut.g_row[1].g_col[2].u_pe.u_rif.in_ready &&
        dut.g_row[1].g_col[2].u_pe.u_rif.is_eot && !dut.g_row[1].g_col[2].u_pe.u_rif.eot_pass)
      n_merge++;
    for (int y = 0; y < YD; y++) if (host_out_valid[y] && host_out_ready[y]) begin
      checks++;
      if (y != 1 || q_out.size() == 0 || host_out_pkt[y] !== q_out[0]) begin
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

  task automatic put(input logic [7:0] dest, input logic [31:0] w_);
    logic a;
    host_in_valid[0] = 1; host_in_pkt[0] = {dest, w_};
    do begin #1; a = host_in_ready[0]; @(negedge clk); end while (!a);
    host_in_valid[0] = 0;
  endtask

  task automatic send_all(input logic [7:0] dest, ref logic [31:0] q[$]);
    foreach (q[k]) put(dest, q[k]);
    q.delete();
  endtask

  function automatic void regs(ref logic [31:0] q[$], input int p, input int m, input int wb,
                               input int n, input int thr, input bit sm, input logic [7:0] od,
                               input logic [7:0] fd, input bit fe, input int en);
    q.push_back(w_reg(R_P, p));       q.push_back(w_reg(R_M, m));
    q.push_back(w_reg(R_WBASE, wb));  q.push_back(w_reg(R_NEURONS, n));
    q.push_back(w_reg(R_THR_LO, thr & 16'hFFFF)); q.push_back(w_reg(R_THR_HI, thr >>> 16));
    q.push_back(w_reg(R_MODE, sm));   q.push_back(w_reg(R_OUTDEST, od));
    q.push_back(w_reg(R_FWDDEST, fd)); q.push_back(w_reg(R_FWDEN, fe));
    q.push_back(w_reg(R_EOTNEED, en));
  endfunction

  // Program the state SRAMs (and, when full, weights, spike words and
  // registers) of the three tiles.
  task automatic program_net(input bit full);
    logic [31:0] q[$];
    for (int pe_ = 0; pe_ < 2; pe_++) begin
      logic [7:0] d;
      d = (pe_ == 0) ? 8'h00 : 8'h10;
      if (!full) q.push_back(w_prog());
      for (int li = 0; li < HPE; li++) begin
        int i;
        i = pe_ * HPE + li;
        acc1[i] = (i == 0) ? 64'sh7FFF_FF00 : 0;   // drives a saturation
        pot1[i] = $urandom_range(0, 20) - 10;
        sp1[i] = 0;
        push_write(q, SEL_ACC, li, 32'(acc1[i]));
        push_write(q, SEL_NEU, li, {1'b0, 31'(pot1[i])});
        if (full) begin
          push_write(q, SEL_SPA, li, w_spike(i));
          for (int j = 0; j < NI; j++) push_write(q, SEL_WGT, j + li * NI, 32'(w1[i][j]));
        end
      end
      if (full) regs(q, HPE, NI, 0, HPE, THR1, 1'b0, 8'h21, 8'h10, pe_ == 0, 1);
      q.push_back(w_run());
      send_all(d, q);
    end
    if (!full) q.push_back(w_prog());
    for (int i = 0; i < NO; i++) begin
      acc2[i] = 0;
      pot2[i] = $urandom_range(0, 20) - 10;
      push_write(q, SEL_ACC, i, 32'(acc2[i]));
      push_write(q, SEL_NEU, i, {1'b0, 31'(pot2[i])});
      if (full) begin
        push_write(q, SEL_SPA, i, 32'hC000_0000 | 32'(i));
        for (int j = 0; j < NH; j++) push_write(q, SEL_WGT, j + i * NH, 32'(w2[i][j]));
      end
    end
    if (full) regs(q, NO, NH, 0, NO, 0, 1'b1, 8'hF1, 8'h00, 1'b0, 2);
    q.push_back(w_run());
    send_all(8'h21, q);
  endtask

  task automatic inference();
    for (int t = 0; t < T; t++) begin
      int fired[$];
      for (int j = 0; j < NI; j++) if ($urandom_range(0, 2) == 0) begin
        for (int i = 0; i < NH; i++) acc1[i] = sat(acc1[i] + w1[i][j], 32);
        put(8'h00, w_spike(j));
      end
      for (int i = 0; i < NH; i++) begin
        pot1[i] = sat(pot1[i] + acc1[i], 31);
        if (!sp1[i] && pot1[i] >= THR1) begin sp1[i] = 1; fired.push_back(i); end
      end
      foreach (fired[k]) for (int o = 0; o < NO; o++) acc2[o] = sat(acc2[o] + w2[o][fired[k]], 32);
      begin
        int best;
        best = 0;
        for (int o = 0; o < NO; o++) begin
          pot2[o] = sat(pot2[o] + acc2[o], 31);
          if (pot2[o] > pot2[best]) best = o;
        end
        q_out.push_back({8'hF1, 32'hC000_0000 | 32'(best)});
        q_out.push_back({8'hF1, EOT_WORD});
        $display("timestep %0d: %0d hidden spikes, output neuron %0d", t, fired.size(), best);
      end
      put(8'h00, EOT_WORD);
      while (q_out.size() != 0) @(negedge clk);   // timestep barrier
    end
  endtask

  initial begin
    for (int y = 0; y < YD; y++) begin
      host_in_valid[y] = 0; host_in_pkt[y] = '0; host_out_ready[y] = 1;
    end
    for (int i = 0; i < NH; i++) for (int j = 0; j < NI; j++) w1[i][j] = $urandom_range(0, 30) - 8;
    for (int o = 0; o < NO; o++) for (int i = 0; i < NH; i++) w2[o][i] = $urandom_range(0, 60) - 30;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    program_net(1'b1);
    inference();
    program_net(1'b0);   // second inference: back to programming mode, new state
    inference();
    repeat (20) @(negedge clk);
    checks++;
    if (q_out.size() != 0) begin failures++; $display("%0d outputs missing", q_out.size()); end
    for (int r = 0; r < XD*YD; r++) begin
      checks++;
      if (!ev[r].idle) begin failures++; $display("tile %0d not idle", r); end
    end
    $display("events: raw %0d sat %0d if %0d softmax %0d fwd %0d eot-merge %0d prog-entry %0d, %0d cycles",
             n_raw, n_sat, n_if, n_sm, n_fwd, n_merge, n_prog, cycles);
    checks++; if (n_raw == 0)   begin failures++; $display("no RAW stall"); end
    checks++; if (n_sat == 0)   begin failures++; $display("no saturation"); end
    checks++; if (n_if == 0)    begin failures++; $display("no IF spike"); end
    checks++; if (n_sm == 0)    begin failures++; $display("no softmax spike"); end
    checks++; if (n_fwd == 0)   begin failures++; $display("no forwarding"); end
    checks++; if (n_merge == 0) begin failures++; $display("no EoT merge"); end
    checks++; if (n_prog < XD * YD + 3) begin failures++; $display("no re-entry into programming mode"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
