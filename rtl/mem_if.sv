// mem_if: memory interface of a PE, four SRAM interfaces and their SRAMs.
//
// One sram_if per SRAM block (paper: "four individual SRAM interfaces").
//   Accumulated Weights SRAM  256 x 32 bit, RAW protected
//   Neuron SRAM               256 x 32 bit ({spiked, potential}), RAW protected
//   Weights SRAM            40960 x  8 bit, no RAW protection (paper)
//   Spike Address SRAM        256 x 32 bit (spike word sent per neuron)
// Write sources: in programming mode, programming writes from the router
// interface go to the SRAM they select and the core's write ports are held
// off; in run mode the core writes the Accumulated Weights and Neuron SRAMs.
// The Weights and Spike Address SRAMs are written only in programming mode.
//
// Spiked-neuron path (paper: store module -> Spike Address SRAM -> router
// interface): each spiked-neuron address read from the core becomes a read
// of the Spike Address SRAM, whose 32-bit word is passed on to the router
// interface. An EoT marker in the same stream bypasses the SRAM and becomes
// the EoT spike word. A small tag FIFO keeps the two in arrival order; this
// ordering scheme is this design's own choice.
module mem_if
  import yoso_pkg::*;
#(
  parameter int unsigned WDEPTH = WGT_DEPTH,
  parameter int unsigned QDEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic prog_mode,
  // programming writes from the router interface
  input  logic     prog_valid,
  output logic     prog_ready,
  input  prog_wr_t prog,
  // core: read requests
  input  logic               acc_rd_valid,
  output logic               acc_rd_ready,
  input  logic [NADDR_W-1:0] acc_rd_addr,
  input  logic               acc_rd_intent,
  input  logic               neu_rd_valid,
  output logic               neu_rd_ready,
  input  logic [NADDR_W-1:0] neu_rd_addr,
  input  logic               neu_rd_intent,
  input  logic               wgt_rd_valid,
  output logic               wgt_rd_ready,
  input  logic [WADDR_W-1:0] wgt_rd_addr,
  // core: write requests
  input  logic               acc_wr_valid,
  output logic               acc_wr_ready,
  input  logic [NADDR_W-1:0] acc_wr_addr,
  input  logic [ACC_W-1:0]   acc_wr_data,
  input  logic               neu_wr_valid,
  output logic               neu_wr_ready,
  input  logic [NADDR_W-1:0] neu_wr_addr,
  input  logic [NEU_W-1:0]   neu_wr_data,
  // core: read responses
  output logic               acc_rsp_valid,
  input  logic               acc_rsp_ready,
  output logic [ACC_W-1:0]   acc_rsp_data,
  output logic               neu_rsp_valid,
  input  logic               neu_rsp_ready,
  output logic [NEU_W-1:0]   neu_rsp_data,
  output logic               wgt_rsp_valid,
  input  logic               wgt_rsp_ready,
  output logic [WGT_W-1:0]   wgt_rsp_data,
  // core: spiked neuron addresses and EoT markers
  input  logic               spk_valid,
  output logic               spk_ready,
  input  spk_out_t           spk,
  // spike words to the router interface
  output logic               out_valid,
  input  logic               out_ready,
  output logic [SPK_W-1:0]   out_word,
  // observation
  output logic               raw_stall_acc,
  output logic               raw_stall_neu
);
  localparam int unsigned WAW = $clog2(WDEPTH);

  // ---------------------------------------------------------------- writes
  logic acc_w_valid, acc_w_ready, neu_w_valid, neu_w_ready;
  logic wgt_w_valid, wgt_w_ready, spa_w_valid, spa_w_ready;
  logic [NADDR_W-1:0] acc_w_addr, neu_w_addr;
  logic [31:0]        acc_w_data, neu_w_data;

  always_comb begin
    if (prog_mode) begin
      acc_w_valid = prog_valid && (prog.sel == SEL_ACC);
      acc_w_addr  = prog.addr[NADDR_W-1:0];
      acc_w_data  = prog.data;
      neu_w_valid = prog_valid && (prog.sel == SEL_NEU);
      neu_w_addr  = prog.addr[NADDR_W-1:0];
      neu_w_data  = prog.data;
    end else begin
      acc_w_valid = acc_wr_valid;
      acc_w_addr  = acc_wr_addr;
      acc_w_data  = acc_wr_data;
      neu_w_valid = neu_wr_valid;
      neu_w_addr  = neu_wr_addr;
      neu_w_data  = neu_wr_data;
    end
    wgt_w_valid = prog_mode && prog_valid && (prog.sel == SEL_WGT);
    spa_w_valid = prog_mode && prog_valid && (prog.sel == SEL_SPA);
    unique case (prog.sel)
      SEL_ACC: prog_ready = prog_mode && acc_w_ready;
      SEL_NEU: prog_ready = prog_mode && neu_w_ready;
      SEL_WGT: prog_ready = prog_mode && wgt_w_ready;
      default: prog_ready = prog_mode && spa_w_ready;
    endcase
    acc_wr_ready = !prog_mode && acc_w_ready;
    neu_wr_ready = !prog_mode && neu_w_ready;
  end

  // ------------------------------------------------------- SRAM interfaces
  logic                acc_en, acc_we, neu_en, neu_we, wgt_en, wgt_we, spa_en, spa_we;
  logic [NADDR_W-1:0]  acc_a, neu_a, spa_a;
  logic [WAW-1:0]      wgt_a;
  logic [ACC_W-1:0]    acc_wd, acc_rdat;
  logic [NEU_W-1:0]    neu_wd, neu_rdat;
  logic [WGT_W-1:0]    wgt_wd, wgt_rdat;
  logic [SPK_W-1:0]    spa_wd, spa_rdat;

  sram_if #(.DEPTH(NEURONS), .WIDTH(ACC_W), .RAW_PROTECT(1'b1), .QDEPTH(QDEPTH)) u_acc_if (
    .clk, .rst_n,
    .rd_valid(acc_rd_valid), .rd_ready(acc_rd_ready), .rd_addr(acc_rd_addr), .rd_intent(acc_rd_intent),
    .wr_valid(acc_w_valid), .wr_ready(acc_w_ready), .wr_addr(acc_w_addr), .wr_data(acc_w_data),
    .rsp_valid(acc_rsp_valid), .rsp_ready(acc_rsp_ready), .rsp_data(acc_rsp_data),
    .sram_en(acc_en), .sram_we(acc_we), .sram_addr(acc_a), .sram_wdata(acc_wd), .sram_rdata(acc_rdat),
    .raw_stall(raw_stall_acc));

  sram_if #(.DEPTH(NEURONS), .WIDTH(NEU_W), .RAW_PROTECT(1'b1), .QDEPTH(QDEPTH)) u_neu_if (
    .clk, .rst_n,
    .rd_valid(neu_rd_valid), .rd_ready(neu_rd_ready), .rd_addr(neu_rd_addr), .rd_intent(neu_rd_intent),
    .wr_valid(neu_w_valid), .wr_ready(neu_w_ready), .wr_addr(neu_w_addr), .wr_data(neu_w_data),
    .rsp_valid(neu_rsp_valid), .rsp_ready(neu_rsp_ready), .rsp_data(neu_rsp_data),
    .sram_en(neu_en), .sram_we(neu_we), .sram_addr(neu_a), .sram_wdata(neu_wd), .sram_rdata(neu_rdat),
    .raw_stall(raw_stall_neu));

  sram_if #(.DEPTH(WDEPTH), .WIDTH(WGT_W), .RAW_PROTECT(1'b0), .QDEPTH(QDEPTH)) u_wgt_if (
    .clk, .rst_n,
    .rd_valid(wgt_rd_valid), .rd_ready(wgt_rd_ready), .rd_addr(wgt_rd_addr[WAW-1:0]), .rd_intent(1'b0),
    .wr_valid(wgt_w_valid), .wr_ready(wgt_w_ready), .wr_addr(prog.addr[WAW-1:0]), .wr_data(prog.data[WGT_W-1:0]),
    .rsp_valid(wgt_rsp_valid), .rsp_ready(wgt_rsp_ready), .rsp_data(wgt_rsp_data),
    .sram_en(wgt_en), .sram_we(wgt_we), .sram_addr(wgt_a), .sram_wdata(wgt_wd), .sram_rdata(wgt_rdat),
    .raw_stall());

  // Spike Address SRAM: read for each spiked neuron.
  logic spa_rd_valid, spa_rd_ready, spa_rsp_valid, spa_rsp_ready;
  logic [SPK_W-1:0] spa_rsp_data;
  logic tag_in_valid, tag_in_ready, tag_valid, tag_eot, tag_pop;

  sram_if #(.DEPTH(NEURONS), .WIDTH(SPK_W), .RAW_PROTECT(1'b0), .QDEPTH(QDEPTH)) u_spa_if (
    .clk, .rst_n,
    .rd_valid(spa_rd_valid), .rd_ready(spa_rd_ready), .rd_addr(spk.addr), .rd_intent(1'b0),
    .wr_valid(spa_w_valid), .wr_ready(spa_w_ready), .wr_addr(prog.addr[NADDR_W-1:0]), .wr_data(prog.data),
    .rsp_valid(spa_rsp_valid), .rsp_ready(spa_rsp_ready), .rsp_data(spa_rsp_data),
    .sram_en(spa_en), .sram_we(spa_we), .sram_addr(spa_a), .sram_wdata(spa_wd), .sram_rdata(spa_rdat),
    .raw_stall());

  sp_sram #(.DEPTH(NEURONS), .WIDTH(ACC_W)) u_acc_sram (
    .clk, .en(acc_en), .we(acc_we), .addr(acc_a), .wdata(acc_wd), .rdata(acc_rdat));
  sp_sram #(.DEPTH(NEURONS), .WIDTH(NEU_W)) u_neu_sram (
    .clk, .en(neu_en), .we(neu_we), .addr(neu_a), .wdata(neu_wd), .rdata(neu_rdat));
  sp_sram #(.DEPTH(WDEPTH), .WIDTH(WGT_W)) u_wgt_sram (
    .clk, .en(wgt_en), .we(wgt_we), .addr(wgt_a), .wdata(wgt_wd), .rdata(wgt_rdat));
  sp_sram #(.DEPTH(NEURONS), .WIDTH(SPK_W)) u_spa_sram (
    .clk, .en(spa_en), .we(spa_we), .addr(spa_a), .wdata(spa_wd), .rdata(spa_rdat));

  // --------------------------------------------- spiked-neuron ordering
  // A spike needs a read slot and a tag slot; an EoT marker a tag slot only.
  assign spk_ready    = tag_in_ready && (spk.eot || spa_rd_ready);
  assign spa_rd_valid = spk_valid && !spk.eot && tag_in_ready;
  assign tag_in_valid = spk_valid && (spk.eot || spa_rd_ready);

  sync_fifo #(.WIDTH(1), .DEPTH(2 * QDEPTH)) u_tag (
    .clk, .rst_n,
    .in_valid(tag_in_valid), .in_ready(tag_in_ready), .in_data(spk.eot),
    .out_valid(tag_valid), .out_ready(tag_pop), .out_data(tag_eot),
    .count());

  assign out_valid     = tag_valid && (tag_eot || spa_rsp_valid);
  assign out_word      = tag_eot ? EOT_WORD : spa_rsp_data;
  assign tag_pop       = out_valid && out_ready;
  assign spa_rsp_ready = tag_valid && !tag_eot && out_ready;
endmodule
