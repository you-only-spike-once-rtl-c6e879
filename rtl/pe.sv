// pe: YOSO processing element, one node of the mesh.
//
// Input spike FIFO -> router interface -> core -> memory interface (with
// its four SRAMs) -> router interface -> output spike FIFO, following the
// paper's PE diagram: the router interface feeds the core and, at program
// time, the memory interface; the memory interface returns spike words from
// the Spike Address SRAM to the router interface. Packets are 40 bits,
// {destination x[3:0], y[3:0], spike word[31:0]}. Both ends use valid/ready.
// A PE holds up to 256 neurons and 40960 8-bit weights.
module pe
  import yoso_pkg::*;
#(
  parameter int unsigned WDEPTH = WGT_DEPTH,
  parameter int unsigned IODEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PKT_W-1:0] in_pkt,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [PKT_W-1:0] out_pkt,
  output pe_ev_t           ev
);
  logic             ri_in_valid, ri_in_ready, ri_out_valid, ri_out_ready;
  logic [PKT_W-1:0] ri_in_pkt, ri_out_pkt;
  cfg_t             cfg;
  logic             prog_mode, prog_valid, prog_ready;
  prog_wr_t         prog;
  logic             own_valid, own_ready;
  logic [SPK_W-1:0] own_word;
  logic             c_valid, c_ready;
  core_in_t         c_spk;
  logic             fwd_event, core_idle;
  logic [$clog2(IODEPTH+1)-1:0] n_in, n_out;

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
  logic               raw_acc, raw_neu;

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(IODEPTH)) u_in_fifo (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_pkt),
    .out_valid(ri_in_valid), .out_ready(ri_in_ready), .out_data(ri_in_pkt), .count(n_in));

  router_if u_rif (
    .clk, .rst_n,
    .in_valid(ri_in_valid), .in_ready(ri_in_ready), .in_pkt(ri_in_pkt),
    .out_valid(ri_out_valid), .out_ready(ri_out_ready), .out_pkt(ri_out_pkt),
    .core_valid(c_valid), .core_ready(c_ready), .core_spk(c_spk),
    .prog_mode, .prog_valid, .prog_ready, .prog,
    .own_valid, .own_ready, .own_word,
    .cfg, .fwd_event);

  core u_core (
    .clk, .rst_n, .cfg,
    .in_valid(c_valid), .in_ready(c_ready), .in_spk(c_spk),
    .acc_rd_valid, .acc_rd_ready, .acc_rd_addr, .acc_rd_intent,
    .neu_rd_valid, .neu_rd_ready, .neu_rd_addr, .neu_rd_intent,
    .wgt_rd_valid, .wgt_rd_ready, .wgt_rd_addr,
    .acc_wr_valid, .acc_wr_ready, .acc_wr_addr, .acc_wr_data,
    .neu_wr_valid, .neu_wr_ready, .neu_wr_addr, .neu_wr_data,
    .acc_rsp_valid, .acc_rsp_ready, .acc_rsp_data,
    .neu_rsp_valid, .neu_rsp_ready, .neu_rsp_data,
    .wgt_rsp_valid, .wgt_rsp_ready, .wgt_rsp_data,
    .spk_valid, .spk_ready, .spk,
    .saturated(ev.saturated), .if_fire(ev.if_fire), .sm_fire(ev.sm_fire),
    .idle(core_idle));

  mem_if #(.WDEPTH(WDEPTH)) u_mem (
    .clk, .rst_n, .prog_mode,
    .prog_valid, .prog_ready, .prog,
    .acc_rd_valid, .acc_rd_ready, .acc_rd_addr, .acc_rd_intent,
    .neu_rd_valid, .neu_rd_ready, .neu_rd_addr, .neu_rd_intent,
    .wgt_rd_valid, .wgt_rd_ready, .wgt_rd_addr,
    .acc_wr_valid, .acc_wr_ready, .acc_wr_addr, .acc_wr_data,
    .neu_wr_valid, .neu_wr_ready, .neu_wr_addr, .neu_wr_data,
    .acc_rsp_valid, .acc_rsp_ready, .acc_rsp_data,
    .neu_rsp_valid, .neu_rsp_ready, .neu_rsp_data,
    .wgt_rsp_valid, .wgt_rsp_ready, .wgt_rsp_data,
    .spk_valid, .spk_ready, .spk,
    .out_valid(own_valid), .out_ready(own_ready), .out_word(own_word),
    .raw_stall_acc(raw_acc), .raw_stall_neu(raw_neu));

  sync_fifo #(.WIDTH(PKT_W), .DEPTH(IODEPTH)) u_out_fifo (
    .clk, .rst_n, .in_valid(ri_out_valid), .in_ready(ri_out_ready), .in_data(ri_out_pkt),
    .out_valid, .out_ready, .out_data(out_pkt), .count(n_out));

  assign ev.raw_stall = raw_acc || raw_neu;
  assign ev.fwd       = fwd_event;
  assign ev.prog_mode = prog_mode;
  assign ev.idle      = core_idle && (n_in == '0) && (n_out == '0) && !own_valid;
endmodule
