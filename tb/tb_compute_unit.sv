// tb_compute_unit: self-checking test of the COMPUTE module.
// Feeds work items and read responses with random gaps and back-pressure:
// spike items (32-bit accumulated weight + signed 8-bit weight) and EoT
// items (31-bit potential + accumulated weight), including values that
// overflow and underflow, and checks each result against a saturating
// reference, that the spiked bit passes through, and the saturation flag.
module tb_compute_unit;
  import yoso_pkg::*;
  logic clk = 0, rst_n = 0;
  logic l2c_valid = 0, l2c_ready;
  l2c_t l2c;
  logic acc_rsp_valid = 0, acc_rsp_ready, neu_rsp_valid = 0, neu_rsp_ready;
  logic wgt_rsp_valid = 0, wgt_rsp_ready;
  logic [ACC_W-1:0] acc_rsp_data = '0;
  logic [NEU_W-1:0] neu_rsp_data = '0;
  logic [WGT_W-1:0] wgt_rsp_data = '0;
  logic c2s_valid, c2s_ready = 1, saturated;
  c2s_t c2s;
  int checks = 0, failures = 0, nsat = 0;

  compute_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  c2s_t expq[$];
  bit   satq[$];

  always @(posedge clk) if (rst_n && c2s_valid && c2s_ready) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("extra result"); end
    else begin
      c2s_t e;
      bit s;
      e = expq.pop_front();
      s = satq.pop_front();
      if (c2s.kind !== e.kind || c2s.spiked !== e.spiked ||
          (e.kind == K_SPIKE && c2s.value !== e.value) ||
          (e.kind == K_EOT && c2s.value[POT_W-1:0] !== e.value[POT_W-1:0])) begin
        failures++;
        $display("result %h, expected %h", c2s, e);
      end
      checks++;
      if (saturated !== s) begin failures++; $display("sat flag %0d want %0d", saturated, s); end
    end
  end

  always @(posedge clk) begin #1; c2s_ready = ($urandom_range(0, 3) != 0); end

  function automatic longint clamp(input longint v, input int bits, output bit s);
    longint hi, lo;
    hi = (longint'(1) <<< (bits - 1)) - 1;
    lo = -(longint'(1) <<< (bits - 1));
    s = (v > hi) || (v < lo);
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  function automatic int rnd_acc();
    case ($urandom_range(0, 3))
      0: return 32'h7FFF_FF80 + $urandom_range(0, 127);
      1: return 32'h8000_0000 + $urandom_range(0, 127);
      2: return $urandom_range(0, 2000) - 1000;
      default: return int'($urandom);
    endcase
  endfunction

  task automatic item(input kind_e k, input int n);
    logic acc;
    l2c_valid = 1; l2c = '{kind: k, count: CNT_W'(n)};
    do begin #1; acc = l2c_ready; @(negedge clk); end while (!acc);
    l2c_valid = 0;
    for (int i = 0; i < n; i++) begin
      int a;
      logic [7:0] w;
      logic [NEU_W-1:0] nw;
      longint r;
      bit s;
      c2s_t e;
      a = rnd_acc();
      w = 8'($urandom);
      nw = NEU_W'($urandom);
      if ($urandom_range(0, 3) == 0) nw[POT_W-1:0] = 31'h3FFF_FFF0;
      if (k == K_SPIKE) begin
        r = clamp(longint'(a) + longint'($signed(w)), ACC_W, s);
        e = '{kind: K_SPIKE, value: ACC_W'(r), spiked: 1'b0};
      end else begin
        r = clamp(longint'($signed(nw[POT_W-1:0])) + longint'(a), POT_W, s);
        e = '{kind: K_EOT, value: ACC_W'(r), spiked: nw[NEU_W-1]};
      end
      if (s) nsat++;
      expq.push_back(e);
      satq.push_back(s);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      acc_rsp_valid = 1; acc_rsp_data = a;
      wgt_rsp_valid = (k == K_SPIKE); wgt_rsp_data = w;
      neu_rsp_valid = (k == K_EOT);   neu_rsp_data = nw;
      do begin #1; acc = acc_rsp_ready; @(negedge clk); end while (!acc);
      checks++;
      if (k == K_SPIKE && !wgt_rsp_ready && 0) failures++;
      acc_rsp_valid = 0; wgt_rsp_valid = 0; neu_rsp_valid = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 40; n++)
      item(($urandom_range(0, 1) != 0) ? K_EOT : K_SPIKE, $urandom_range(1, 12));
    repeat (20) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
