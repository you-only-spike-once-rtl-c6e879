// router_if: router interface of a PE, between the NoC and the core.
//
// Programming mode (entered at reset, or by a run-mode word of type 11):
// every incoming word is a programming command. SET_PTR chooses an SRAM and
// a start address, DATA_LO holds the low 16 bits of a data word, DATA_HI
// supplies the high 16 bits and writes the word through the memory
// interface, then advances the address. SET_REG writes one 16-bit field of
// the reference registers (cfg). RUN returns to run mode.
//
// Run mode: spikes and EoT packets go to the core. When forwarding is on,
// each received spike or EoT is also re-sent, with its 32-bit word
// unchanged, to the forwarding destination, so that one layer can span
// several PEs in a chain. A PE receiving EoT from several sending PEs
// passes one EoT to the core per EOTNEED received ones.
//
// Outgoing packets: 32-bit spike words read from the Spike Address SRAM
// (and this PE's EoT words) get the 8-bit output-destination coordinates
// prepended to form 40-bit packets. Own and forwarded packets share the
// output FIFO; when both wait, they take turns.
//
// Follows the paper: the two modes, routing of program-time data to the
// memory interface, the 8+32-bit packet, forwarding. This design's own:
// command encoding, EOTNEED counting, reset into programming mode.
module router_if
  import yoso_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  // from the input spike FIFO
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [PKT_W-1:0] in_pkt,
  // to the output spike FIFO
  output logic             out_valid,
  input  logic             out_ready,
  output logic [PKT_W-1:0] out_pkt,
  // to the core
  output logic     core_valid,
  input  logic     core_ready,
  output core_in_t core_spk,
  // to / from the memory interface
  output logic     prog_mode,
  output logic     prog_valid,
  input  logic     prog_ready,
  output prog_wr_t prog,
  input  logic             own_valid,
  output logic             own_ready,
  input  logic [SPK_W-1:0] own_word,
  // reference registers
  output cfg_t cfg,
  // observation
  output logic fwd_event
);
  logic [SPK_W-1:0] w;
  ptype_e           ptype;
  logic [3:0]       op;

  sram_sel_e          sel_q;
  logic [WADDR_W-1:0] ptr_q;
  logic [15:0]        lo_q;
  logic [7:0]         eot_cnt_q;
  logic               prefer_own_q;

  assign w     = in_pkt[SPK_W-1:0];
  assign ptype = ptype_e'(w[31:30]);
  assign op    = w[31:28];

  // Run-mode decoding.
  logic is_spk, is_eot, eot_pass, need_core, need_fwd, core_ok, fwd_ok, fwd_grant;
  assign is_spk    = !prog_mode && (ptype == PT_SPIKE);
  assign is_eot    = !prog_mode && (ptype == PT_EOT);
  assign eot_pass  = (32'(eot_cnt_q) + 1) >= 32'(cfg.eot_need);
  assign need_core = is_spk || (is_eot && eot_pass);
  assign need_fwd  = (is_spk || is_eot) && cfg.fwd_en;
  assign core_ok   = !need_core || core_ready;

  assign core_valid = in_valid && need_core && (!need_fwd || fwd_grant);
  assign core_spk   = '{kind:  is_eot ? K_EOT : K_SPIKE,
                        p_ovr: w[23:16],
                        idx:   w[15:0]};

  // Output arbitration between forwarded and own packets.
  logic fwd_req, own_grant;
  assign fwd_req   = in_valid && need_fwd && core_ok;
  assign fwd_grant = fwd_req && out_ready && !(own_valid && prefer_own_q);
  assign own_grant = own_valid && out_ready && !fwd_grant;
  assign fwd_ok    = !need_fwd || fwd_grant;
  assign out_valid = fwd_grant || own_grant;
  assign out_pkt   = fwd_grant ? make_pkt(cfg.fwd_dest, w) : make_pkt(cfg.out_dest, own_word);
  assign own_ready = own_grant;
  assign fwd_event = fwd_grant;

  // Programming decoding.
  assign prog_valid = in_valid && prog_mode && (op == OP_DATA_HI);
  assign prog       = '{sel: sel_q, addr: ptr_q, data: {w[15:0], lo_q}};

  always_comb begin
    if (prog_mode) in_ready = (op == OP_DATA_HI) ? prog_ready : 1'b1;
    else           in_ready = core_ok && fwd_ok;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prog_mode    <= 1'b1;
      sel_q        <= SEL_ACC;
      ptr_q        <= '0;
      lo_q         <= '0;
      eot_cnt_q    <= '0;
      prefer_own_q <= 1'b0;
      cfg          <= '0;
      cfg.eot_need <= 8'd1;
    end else begin
      if (fwd_grant) prefer_own_q <= 1'b1;
      if (own_grant) prefer_own_q <= 1'b0;
      if (in_valid && in_ready) begin
        if (prog_mode) begin
          unique case (op)
            OP_SET_PTR: begin
              sel_q <= sram_sel_e'(w[25:24]);
              ptr_q <= w[15:0];
            end
            OP_DATA_LO: lo_q <= w[15:0];
            OP_DATA_HI: ptr_q <= ptr_q + 1'b1;
            OP_SET_REG: begin
              unique case (w[27:24])
                R_P:       cfg.p        <= w[CNT_W-1:0];
                R_M:       cfg.m        <= w[15:0];
                R_WBASE:   cfg.wbase    <= w[15:0];
                R_NEURONS: cfg.neurons  <= w[CNT_W-1:0];
                R_THR_LO:  cfg.thr[15:0] <= w[15:0];
                R_THR_HI:  cfg.thr[POT_W-1:16] <= w[POT_W-17:0];
                R_MODE:    cfg.softmax  <= w[0];
                R_OUTDEST: cfg.out_dest <= w[COORD_W-1:0];
                R_FWDDEST: cfg.fwd_dest <= w[COORD_W-1:0];
                R_FWDEN:   cfg.fwd_en   <= w[0];
                R_EOTNEED: cfg.eot_need <= w[7:0];
                default: ;
              endcase
            end
            OP_RUN: begin
              prog_mode <= 1'b0;
              eot_cnt_q <= '0;
            end
            default: ;
          endcase
        end else begin
          if (ptype == PT_PROG) prog_mode <= 1'b1;
          if (is_eot) eot_cnt_q <= eot_pass ? '0 : eot_cnt_q + 1'b1;
        end
      end
    end
  end
endmodule
