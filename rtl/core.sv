// core: the PE's neuron core, a decoupled access/execute pipeline.
//
// Three modules joined by FIFOs, as drawn in the paper's core diagram:
//   incoming-spike FIFO -> LOAD -> (read requests to the memory interface)
//   LOAD -> LOAD-to-COMPUTE FIFO -> COMPUTE <- (read responses)
//   COMPUTE -> COMPUTE-to-STORE FIFO -> STORE -> (write requests)
//   LOAD -> LOAD-to-STORE FIFO -> STORE
//   STORE -> spiked-neuron-address FIFO -> memory interface
// A stall in one module leaves the others running until a FIFO between
// them fills. The read-request, read-response and write-request FIFOs of
// the diagram sit in the memory interface's SRAM interfaces. FIFO depths
// are this design's choice (the LOAD-to-STORE FIFO is deep enough to cover
// the read latency of the memory interface).
module core
  import yoso_pkg::*;
#(
  parameter int unsigned FDEPTH   = 4,
  parameter int unsigned L2SDEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  // spikes from the router interface
  input  logic     in_valid,
  output logic     in_ready,
  input  core_in_t in_spk,
  // memory interface: reads
  output logic               acc_rd_valid,
  input  logic               acc_rd_ready,
  output logic [NADDR_W-1:0] acc_rd_addr,
  output logic               acc_rd_intent,
  output logic               neu_rd_valid,
  input  logic               neu_rd_ready,
  output logic [NADDR_W-1:0] neu_rd_addr,
  output logic               neu_rd_intent,
  output logic               wgt_rd_valid,
  input  logic               wgt_rd_ready,
  output logic [WADDR_W-1:0] wgt_rd_addr,
  // memory interface: writes
  output logic               acc_wr_valid,
  input  logic               acc_wr_ready,
  output logic [NADDR_W-1:0] acc_wr_addr,
  output logic [ACC_W-1:0]   acc_wr_data,
  output logic               neu_wr_valid,
  input  logic               neu_wr_ready,
  output logic [NADDR_W-1:0] neu_wr_addr,
  output logic [NEU_W-1:0]   neu_wr_data,
  // memory interface: responses
  input  logic               acc_rsp_valid,
  output logic               acc_rsp_ready,
  input  logic [ACC_W-1:0]   acc_rsp_data,
  input  logic               neu_rsp_valid,
  output logic               neu_rsp_ready,
  input  logic [NEU_W-1:0]   neu_rsp_data,
  input  logic               wgt_rsp_valid,
  output logic               wgt_rsp_ready,
  input  logic [WGT_W-1:0]   wgt_rsp_data,
  // spiked neurons and EoT markers to the memory interface
  output logic     spk_valid,
  input  logic     spk_ready,
  output spk_out_t spk,
  // observation
  output logic     saturated,
  output logic     if_fire,
  output logic     sm_fire,
  output logic     idle
);
  logic     q_in_valid, q_in_ready;
  core_in_t q_in;
  logic     l2c_i_valid, l2c_i_ready, l2c_o_valid, l2c_o_ready;
  l2c_t     l2c_i, l2c_o;
  logic     l2s_i_valid, l2s_i_ready, l2s_o_valid, l2s_o_ready;
  l2s_t     l2s_i, l2s_o;
  logic     c2s_i_valid, c2s_i_ready, c2s_o_valid, c2s_o_ready;
  c2s_t     c2s_i, c2s_o;
  logic     s_spk_valid, s_spk_ready;
  spk_out_t s_spk;
  logic     load_busy;
  logic [$clog2(FDEPTH+1)-1:0]   n_in, n_l2c, n_c2s, n_spk;
  logic [$clog2(L2SDEPTH+1)-1:0] n_l2s;

  sync_fifo #(.WIDTH($bits(core_in_t)), .DEPTH(FDEPTH)) u_in_fifo (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_spk),
    .out_valid(q_in_valid), .out_ready(q_in_ready), .out_data(q_in), .count(n_in));

  load_unit u_load (
    .clk, .rst_n, .cfg,
    .in_valid(q_in_valid), .in_ready(q_in_ready), .in_spk(q_in),
    .wgt_rd_valid, .wgt_rd_ready, .wgt_rd_addr,
    .acc_rd_valid, .acc_rd_ready, .acc_rd_addr, .acc_rd_intent,
    .neu_rd_valid, .neu_rd_ready, .neu_rd_addr, .neu_rd_intent,
    .l2c_valid(l2c_i_valid), .l2c_ready(l2c_i_ready), .l2c(l2c_i),
    .l2s_valid(l2s_i_valid), .l2s_ready(l2s_i_ready), .l2s(l2s_i),
    .busy(load_busy));

  sync_fifo #(.WIDTH($bits(l2c_t)), .DEPTH(FDEPTH)) u_l2c_fifo (
    .clk, .rst_n, .in_valid(l2c_i_valid), .in_ready(l2c_i_ready), .in_data(l2c_i),
    .out_valid(l2c_o_valid), .out_ready(l2c_o_ready), .out_data(l2c_o), .count(n_l2c));

  sync_fifo #(.WIDTH($bits(l2s_t)), .DEPTH(L2SDEPTH)) u_l2s_fifo (
    .clk, .rst_n, .in_valid(l2s_i_valid), .in_ready(l2s_i_ready), .in_data(l2s_i),
    .out_valid(l2s_o_valid), .out_ready(l2s_o_ready), .out_data(l2s_o), .count(n_l2s));

  compute_unit u_compute (
    .clk, .rst_n,
    .l2c_valid(l2c_o_valid), .l2c_ready(l2c_o_ready), .l2c(l2c_o),
    .acc_rsp_valid, .acc_rsp_ready, .acc_rsp_data,
    .neu_rsp_valid, .neu_rsp_ready, .neu_rsp_data,
    .wgt_rsp_valid, .wgt_rsp_ready, .wgt_rsp_data,
    .c2s_valid(c2s_i_valid), .c2s_ready(c2s_i_ready), .c2s(c2s_i),
    .saturated);

  sync_fifo #(.WIDTH($bits(c2s_t)), .DEPTH(FDEPTH)) u_c2s_fifo (
    .clk, .rst_n, .in_valid(c2s_i_valid), .in_ready(c2s_i_ready), .in_data(c2s_i),
    .out_valid(c2s_o_valid), .out_ready(c2s_o_ready), .out_data(c2s_o), .count(n_c2s));

  store_unit u_store (
    .clk, .rst_n, .cfg,
    .c2s_valid(c2s_o_valid), .c2s_ready(c2s_o_ready), .c2s(c2s_o),
    .l2s_valid(l2s_o_valid), .l2s_ready(l2s_o_ready), .l2s(l2s_o),
    .acc_wr_valid, .acc_wr_ready, .acc_wr_addr, .acc_wr_data,
    .neu_wr_valid, .neu_wr_ready, .neu_wr_addr, .neu_wr_data,
    .spk_valid(s_spk_valid), .spk_ready(s_spk_ready), .spk(s_spk),
    .if_fire, .sm_fire);

  sync_fifo #(.WIDTH($bits(spk_out_t)), .DEPTH(FDEPTH)) u_spk_fifo (
    .clk, .rst_n, .in_valid(s_spk_valid), .in_ready(s_spk_ready), .in_data(s_spk),
    .out_valid(spk_valid), .out_ready(spk_ready), .out_data(spk), .count(n_spk));

  // Nothing queued or in progress inside the core (store-side pending
  // markers show up in the spiked-neuron FIFO one cycle later).
  assign idle = !load_busy && (n_in == '0) && (n_l2c == '0) && (n_l2s == '0)
             && (n_c2s == '0) && (n_spk == '0) && !s_spk_valid;
endmodule
