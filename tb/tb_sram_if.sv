// tb_sram_if: self-checking test of an SRAM interface with RAW protection.
// A 16-word x 16-bit interface drives a real sp_sram. Checks:
//  1. writes then reads return the written data, in request order;
//  2. a read with intent to write blocks a later read of the same address
//     until the write arrives (the later read returns the new value, and
//     the stall is observed), while reads of other addresses are served;
//  3. with both queues full, served requests alternate read/write;
//  4. a response arrives two cycles after its read is served.
module tb_sram_if;
  localparam int DEPTH = 16, W = 16;
  logic clk = 0, rst_n = 0;
  logic rd_valid = 0, rd_ready, rd_intent = 0;
  logic [3:0] rd_addr = '0;
  logic wr_valid = 0, wr_ready;
  logic [3:0] wr_addr = '0;
  logic [W-1:0] wr_data = '0;
  logic rsp_valid, rsp_ready = 1;
  logic [W-1:0] rsp_data;
  logic sram_en, sram_we;
  logic [3:0] sram_addr;
  logic [W-1:0] sram_wdata, sram_rdata;
  logic raw_stall;
  int checks = 0, failures = 0, stalls = 0;
  logic [W-1:0] expq[$];

  sram_if #(.DEPTH(DEPTH), .WIDTH(W), .RAW_PROTECT(1'b1), .QDEPTH(4)) dut (.*);
  sp_sram #(.DEPTH(DEPTH), .WIDTH(W)) u_ram (.clk, .en(sram_en), .we(sram_we),
    .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Response checker.
  always @(posedge clk) begin
    if (raw_stall) stalls++;
    if (rst_n && rsp_valid && rsp_ready) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected response %h", rsp_data);
      end else begin
        logic [W-1:0] e;
        e = expq.pop_front();
        if (rsp_data !== e) begin
          failures++;
          $display("response %h, expected %h", rsp_data, e);
        end
      end
    end
  end

  // Tasks start and end at a falling edge; inputs change only there.
  task automatic wr(input int a, input logic [W-1:0] d);
    logic acc;
    wr_valid = 1; wr_addr = 4'(a); wr_data = d;
    do begin #1; acc = wr_ready; @(negedge clk); end while (!acc);
    wr_valid = 0;
  endtask

  task automatic rd(input int a, input logic intent, input logic [W-1:0] e);
    logic acc;
    rd_valid = 1; rd_addr = 4'(a); rd_intent = intent;
    expq.push_back(e);
    do begin #1; acc = rd_ready; @(negedge clk); end while (!acc);
    rd_valid = 0;
  endtask

  logic [W-1:0] model [DEPTH];
  int ops[$];   // 1 = read, 0 = write, in service order

  always @(posedge clk) if (sram_en) ops.push_back(sram_we ? 0 : 1);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1. fill and read back
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = W'($urandom);
      wr(a, model[a]);
    end
    for (int a = DEPTH - 1; a >= 0; a--) rd(a, 1'b0, model[a]);
    repeat (10) @(negedge clk);

    // 2. RAW protection
    rd(3, 1'b1, model[3]);        // read-modify-write begins
    rd(3, 1'b0, 16'hBEEF);        // must see the new value
    repeat (12) @(negedge clk);
    checks++;
    if (expq.size() != 1) begin
      failures++;
      $display("protected read was not held back (%0d pending)", expq.size());
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no RAW stall seen"); end
    wr(3, 16'hBEEF);
    model[3] = 16'hBEEF;
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("protected read never served"); end
    // after the write, address 3 is free again
    rd(3, 1'b0, 16'hBEEF);
    repeat (6) @(negedge clk);

    // 3. alternation: let both queues fill while the response side is blocked
    rsp_ready = 0;
    ops.delete();
    fork
      for (int k = 0; k < 4; k++) rd(8 + k, 1'b0, model[8 + k]);
      for (int k = 0; k < 4; k++) begin
        model[k] = W'(k * 3 + 1);
        wr(k, model[k]);
      end
    join
    rsp_ready = 1;
    repeat (20) @(negedge clk);
    // Two reads went before the response FIFO limited them; from then on
    // whenever both were ready they must alternate. Check that no two writes
    // are adjacent while reads were pending: count read-write alternations.
    begin
      int rr, ww, alt;
      rr = 0; ww = 0; alt = 0;
      foreach (ops[i]) begin
        if (ops[i] == 1) rr++; else ww++;
        if (i > 0 && ops[i] != ops[i-1]) alt++;
      end
      checks++;
      if (rr != 4 || ww != 4) begin failures++; $display("ops r=%0d w=%0d", rr, ww); end
      checks++;
      if (alt < 3) begin failures++; $display("no alternation, alt=%0d", alt); end
    end

    // 4. latency: one read into idle interface
    begin
      int t0, t1;
      rd_valid = 1; rd_addr = 4'd0; rd_intent = 0;
      expq.push_back(model[0]);
      @(negedge clk);              // edge 1: queued
      rd_valid = 0;
      t0 = 1;
      while (!rsp_valid) begin @(negedge clk); t0++; end
      t1 = t0;
      checks++;
      // edge 1 queued, edge 2 served, edge 3 captured: visible after edge 3
      if (t1 != 3) begin failures++; $display("read latency %0d", t1); end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
