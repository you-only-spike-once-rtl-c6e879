// sram_if: request queues and arbitration in front of one single-port SRAM.
//
// Reads and writes wait in their own FIFOs. Because the SRAM has one port,
// at most one request is served per cycle; when both queues hold a request
// that may go, the interface alternates between them (the paper's policy),
// so neither side can starve. Read data returns through a response FIFO;
// a read is only issued when the response FIFO has room for it, counting
// the read still in flight.
//
// RAW protection (RAW_PROTECT=1): a read carries an "intent to write" bit.
// Such a read sets the bit of its address in a protection register of one
// bit per word (256 bits for a 256-word SRAM, as in the paper); the write to
// that address clears it. A read at the head of the queue whose address bit
// is set waits, whether or not it has the intent bit itself; writes keep
// flowing meanwhile. The Weights SRAM is built without this (paper: it is
// only written at program time). Queue depths are this design's choice.
//
// Timing: a read served in cycle t is pushed into the response FIFO at t+1
// and is visible at rsp_* at t+2.
module sram_if #(
  parameter int unsigned DEPTH       = 256,
  parameter int unsigned WIDTH       = 32,
  parameter int unsigned AW          = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter bit          RAW_PROTECT = 1'b1,
  parameter int unsigned QDEPTH      = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // read requests
  input  logic             rd_valid,
  output logic             rd_ready,
  input  logic [AW-1:0]    rd_addr,
  input  logic             rd_intent,
  // write requests
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  // read responses
  output logic             rsp_valid,
  input  logic             rsp_ready,
  output logic [WIDTH-1:0] rsp_data,
  // SRAM port
  output logic             sram_en,
  output logic             sram_we,
  output logic [AW-1:0]    sram_addr,
  output logic [WIDTH-1:0] sram_wdata,
  input  logic [WIDTH-1:0] sram_rdata,
  // observation: a read was held back by the protection register this cycle
  output logic             raw_stall
);
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  logic          rq_valid, rq_pop, rq_intent;
  logic [AW-1:0] rq_addr;
  logic          wq_valid, wq_pop;
  logic [AW-1:0] wq_addr;
  logic [WIDTH-1:0] wq_data;
  logic [CW-1:0] rsp_count;
  logic          inflight;
  logic          rsp_push_ready;
  logic          last_read;   // last served request was a read
  logic          prot_hit;    // head read's address is protected
  logic          rd_ok, wr_ok, do_rd, do_wr;

  sync_fifo #(.WIDTH(AW + 1), .DEPTH(QDEPTH)) u_rq (
    .clk, .rst_n,
    .in_valid(rd_valid), .in_ready(rd_ready), .in_data({rd_intent, rd_addr}),
    .out_valid(rq_valid), .out_ready(rq_pop), .out_data({rq_intent, rq_addr}),
    .count());

  sync_fifo #(.WIDTH(AW + WIDTH), .DEPTH(QDEPTH)) u_wq (
    .clk, .rst_n,
    .in_valid(wr_valid), .in_ready(wr_ready), .in_data({wr_addr, wr_data}),
    .out_valid(wq_valid), .out_ready(wq_pop), .out_data({wq_addr, wq_data}),
    .count());

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(QDEPTH)) u_rsp (
    .clk, .rst_n,
    .in_valid(inflight), .in_ready(rsp_push_ready), .in_data(sram_rdata),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp_data),
    .count(rsp_count));

  // Room for one more response, counting the read in flight; a response
  // popped this cycle frees a slot only next cycle (kept simple).
  logic rsp_room;
  assign rsp_room  = (32'(rsp_count) + 32'(inflight)) < QDEPTH;

  assign raw_stall = rq_valid && prot_hit;
  assign rd_ok     = rq_valid && !raw_stall && rsp_room;
  assign wr_ok     = wq_valid;

  always_comb begin
    do_rd = 1'b0;
    do_wr = 1'b0;
    if (rd_ok && wr_ok) begin
      do_rd = !last_read;
      do_wr =  last_read;
    end else begin
      do_rd = rd_ok;
      do_wr = wr_ok;
    end
  end

  assign rq_pop     = do_rd;
  assign wq_pop     = do_wr;
  assign sram_en    = do_rd || do_wr;
  assign sram_we    = do_wr;
  assign sram_addr  = do_wr ? wq_addr : rq_addr;
  assign sram_wdata = wq_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inflight  <= 1'b0;
      last_read <= 1'b0;
    end else begin
      inflight <= do_rd;
      if (do_rd) last_read <= 1'b1;
      if (do_wr) last_read <= 1'b0;
    end
  end

  // RW protection register, one bit per SRAM word.
  if (RAW_PROTECT) begin : g_prot
    logic [DEPTH-1:0] prot;
    assign prot_hit = prot[rq_addr];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        prot <= '0;
      end else begin
        if (do_rd && rq_intent) prot[rq_addr] <= 1'b1;
        if (do_wr)              prot[wq_addr] <= 1'b0;
      end
    end
  end else begin : g_noprot
    assign prot_hit = 1'b0;
  end

  // A response is never pushed into a full response FIFO.
  always_ff @(posedge clk) begin
    if (rst_n && inflight) assert (rsp_push_ready);
  end
endmodule
