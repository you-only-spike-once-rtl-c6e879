// tb_sp_sram: self-checking test of the single-port SRAM.
// Writes random words to every location of a 64 x 16 instance, reads them
// back in a shuffled order and checks data and the one-cycle read latency,
// and checks that read data holds while the SRAM is not read.
module tb_sp_sram;
  localparam int DEPTH = 64, WIDTH = 16;
  logic clk = 0, en = 0, we = 0;
  logic [5:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sp_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = WIDTH'($urandom);
      en = 1; we = 1; addr = 6'(a); wdata = model[a];
      @(negedge clk);
    end
    for (int k = 0; k < 3 * DEPTH; k++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      en = 1; we = 0; addr = 6'(a);
      @(negedge clk);
      en = 0;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("read %0d: got %h want %h", a, rdata, model[a]);
      end
      // data holds while idle, and a write does not change it
      en = 1; we = 1; wdata = ~model[a]; addr = 6'(a);
      model[a] = ~model[a];
      @(negedge clk);
      en = 0;
      checks++;
      if (rdata !== ~model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
