// tb_mem_if: self-checking test of the memory interface.
// Programs all four SRAMs through the programming port (weights at a
// reduced depth of 1024 to keep the run short), then in run mode checks:
// reads from the core return the programmed words; core writes land and
// are read back; programming writes are refused in run mode and core
// writes in programming mode; a stream of spiked-neuron addresses and EoT
// markers becomes Spike Address SRAM words and EoT words in the same
// order, under random back-pressure.
module tb_mem_if;
  import yoso_pkg::*;
  localparam int WD = 1024;
  logic clk = 0, rst_n = 0;
  logic prog_mode = 1, prog_valid = 0, prog_ready;
  prog_wr_t prog;
  logic acc_rd_valid = 0, acc_rd_ready, acc_rd_intent = 0;
  logic [NADDR_W-1:0] acc_rd_addr = '0;
  logic neu_rd_valid = 0, neu_rd_ready, neu_rd_intent = 0;
  logic [NADDR_W-1:0] neu_rd_addr = '0;
  logic wgt_rd_valid = 0, wgt_rd_ready;
  logic [WADDR_W-1:0] wgt_rd_addr = '0;
  logic acc_wr_valid = 0, acc_wr_ready, neu_wr_valid = 0, neu_wr_ready;
  logic [NADDR_W-1:0] acc_wr_addr = '0, neu_wr_addr = '0;
  logic [ACC_W-1:0] acc_wr_data = '0, acc_rsp_data;
  logic [NEU_W-1:0] neu_wr_data = '0, neu_rsp_data;
  logic acc_rsp_valid, acc_rsp_ready = 1, neu_rsp_valid, neu_rsp_ready = 1;
  logic wgt_rsp_valid, wgt_rsp_ready = 1;
  logic [WGT_W-1:0] wgt_rsp_data;
  logic spk_valid = 0, spk_ready;
  spk_out_t spk;
  logic out_valid, out_ready = 1;
  logic [SPK_W-1:0] out_word;
  logic raw_stall_acc, raw_stall_neu;
  int checks = 0, failures = 0;

  mem_if #(.WDEPTH(WD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] m_acc [256], m_neu [256], m_spa [256];
  logic [7:0]  m_wgt [WD];
  logic [31:0] qa[$], qn[$], qw[$], qo[$];

  always @(posedge clk) if (rst_n) begin
    if (acc_rsp_valid && acc_rsp_ready) begin
      checks++;
      if (qa.size() == 0 || acc_rsp_data !== qa[0]) begin failures++; $display("acc rsp %h", acc_rsp_data); end
      if (qa.size()) void'(qa.pop_front());
    end
    if (neu_rsp_valid && neu_rsp_ready) begin
      checks++;
      if (qn.size() == 0 || neu_rsp_data !== qn[0]) begin failures++; $display("neu rsp %h", neu_rsp_data); end
      if (qn.size()) void'(qn.pop_front());
    end
    if (wgt_rsp_valid && wgt_rsp_ready) begin
      checks++;
      if (qw.size() == 0 || 32'(wgt_rsp_data) !== qw[0]) begin failures++; $display("wgt rsp %h", wgt_rsp_data); end
      if (qw.size()) void'(qw.pop_front());
    end
    if (out_valid && out_ready) begin
      checks++;
      if (qo.size() == 0 || out_word !== qo[0]) begin
        failures++; $display("out %h expected %h", out_word, qo.size() ? qo[0] : 0);
      end
      if (qo.size()) void'(qo.pop_front());
    end
  end

  task automatic progw(input sram_sel_e s, input int a, input logic [31:0] d);
    logic acc_;
    prog_valid = 1; prog = '{sel: s, addr: 16'(a), data: d};
    do begin #1; acc_ = prog_ready; @(negedge clk); end while (!acc_);
    prog_valid = 0;
  endtask

  initial begin
    prog = '0; spk = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // programming
    for (int a = 0; a < 256; a++) begin
      m_acc[a] = $urandom; m_neu[a] = $urandom; m_spa[a] = $urandom;
      progw(SEL_ACC, a, m_acc[a]);
      progw(SEL_NEU, a, m_neu[a]);
      progw(SEL_SPA, a, m_spa[a]);
    end
    for (int a = 0; a < WD; a++) begin
      m_wgt[a] = 8'($urandom);
      progw(SEL_WGT, a, {24'hFFFFFF, m_wgt[a]});
    end
    // core writes are held off in programming mode
    acc_wr_valid = 1; #1;
    checks++;
    if (acc_wr_ready) begin failures++; $display("core write accepted in programming mode"); end
    acc_wr_valid = 0;
    prog_mode = 0;
    @(negedge clk);
    prog_valid = 1; prog = '{sel: SEL_WGT, addr: 16'd0, data: 32'd0}; #1;
    checks++;
    if (prog_ready) begin failures++; $display("programming write accepted in run mode"); end
    prog_valid = 0;
    // reads of every SRAM
    for (int k = 0; k < 200; k++) begin
      int a, b;
      logic acc_;
      a = $urandom_range(0, 255);
      b = $urandom_range(0, WD - 1);
      qa.push_back(m_acc[a]); qn.push_back(m_neu[a]); qw.push_back(32'(m_wgt[b]));
      acc_rd_valid = 1; acc_rd_addr = 8'(a);
      neu_rd_valid = 1; neu_rd_addr = 8'(a);
      wgt_rd_valid = 1; wgt_rd_addr = 16'(b);
      fork
        begin do begin #1; acc_ = acc_rd_ready; @(negedge clk); end while (!acc_); acc_rd_valid = 0; end
        begin logic r; do begin #1; r = neu_rd_ready; @(negedge clk); end while (!r); neu_rd_valid = 0; end
        begin logic r; do begin #1; r = wgt_rd_ready; @(negedge clk); end while (!r); wgt_rd_valid = 0; end
      join
    end
    repeat (10) @(negedge clk);
    // core writes in run mode, then read back
    for (int a = 0; a < 8; a++) begin
      logic acc_;
      m_acc[a] = $urandom; m_neu[a] = $urandom;
      acc_wr_valid = 1; acc_wr_addr = 8'(a); acc_wr_data = m_acc[a];
      neu_wr_valid = 1; neu_wr_addr = 8'(a); neu_wr_data = m_neu[a];
      do begin #1; acc_ = acc_wr_ready && neu_wr_ready; @(negedge clk); end while (!acc_);
      acc_wr_valid = 0; neu_wr_valid = 0;
      qa.push_back(m_acc[a]); qn.push_back(m_neu[a]);
      acc_rd_valid = 1; acc_rd_addr = 8'(a);
      neu_rd_valid = 1; neu_rd_addr = 8'(a);
      do begin #1; acc_ = acc_rd_ready && neu_rd_ready; @(negedge clk); end while (!acc_);
      acc_rd_valid = 0; neu_rd_valid = 0;
    end
    repeat (10) @(negedge clk);
    // spiked-neuron path with back-pressure
    fork
      forever begin @(posedge clk); #1; out_ready = ($urandom_range(0, 2) != 0); end
    join_none
    for (int k = 0; k < 300; k++) begin
      logic acc_;
      logic e;
      int a;
      e = ($urandom_range(0, 4) == 0);
      a = $urandom_range(0, 255);
      qo.push_back(e ? EOT_WORD : m_spa[a]);
      spk_valid = 1; spk = '{eot: e, addr: 8'(a)};
      do begin #1; acc_ = spk_ready; @(negedge clk); end while (!acc_);
      spk_valid = 0;
    end
    repeat (40) @(negedge clk);
    checks++;
    if (qa.size() || qn.size() || qw.size() || qo.size()) begin failures++; $display("responses missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
