// yoso_pkg: widths, packet formats and shared types of the YOSO accelerator.
//
// Each processing element (PE) serves up to 256 neurons of one network
// layer. Spikes travel between PEs as 40-bit packets: an 8-bit destination
// coordinate (4-bit x, 4-bit y) followed by a 32-bit spike word. The 8-bit
// neuron address, the 32-bit spike word, the 8-bit coordinates and the
// 40-bit packet follow the paper, as do the per-PE SRAM sizes (Table 2a,
// with the Spike Address SRAM taken at the 256 x 32 bit that an 8-bit
// address and a 32-bit spike imply). The field layout inside the spike
// word, the programming opcodes and the reference-register map are this
// design's own choice.
//
// Run-mode spike word:
//   [31:30] type: 00 spike, 01 end-of-timestep (EoT), 11 enter programming
//   [23:16] access count P for this spike (0 = use reference register P)
//   [15:0]  index j of the pre-synaptic neuron
// Programming-mode word:
//   [31:28] opcode (OP_*), [27:24] register / [25:24] SRAM select,
//   [15:0] address or value
package yoso_pkg;

  localparam int unsigned NEURONS    = 256;   // neurons per PE
  localparam int unsigned NADDR_W    = 8;     // neuron address
  localparam int unsigned ACC_W      = 32;    // accumulated weight word
  localparam int unsigned POT_W      = 31;    // potential; +1 spiked bit = 32
  localparam int unsigned NEU_W      = POT_W + 1;
  localparam int unsigned WGT_W      = 8;     // 8-bit quantised weights
  localparam int unsigned WGT_DEPTH  = 40960; // 40 kB of 8-bit weights
  localparam int unsigned WADDR_W    = 16;
  localparam int unsigned SPK_W      = 32;    // spike word
  localparam int unsigned COORD_W    = 8;     // 4-bit x, 4-bit y
  localparam int unsigned PKT_W      = COORD_W + SPK_W;  // 40
  localparam int unsigned CNT_W      = 9;     // counts up to 256

  typedef enum logic [1:0] {
    PT_SPIKE = 2'b00,
    PT_EOT   = 2'b01,
    PT_RSVD  = 2'b10,
    PT_PROG  = 2'b11
  } ptype_e;

  // Kind of work item inside the core.
  typedef enum logic {
    K_SPIKE = 1'b0,   // add weights to accumulated weights
    K_EOT   = 1'b1    // add accumulated weights to potentials, check spikes
  } kind_e;

  // SRAM select for programming writes.
  typedef enum logic [1:0] {
    SEL_ACC = 2'd0,
    SEL_NEU = 2'd1,
    SEL_WGT = 2'd2,
    SEL_SPA = 2'd3
  } sram_sel_e;

  // Programming opcodes.
  localparam logic [3:0] OP_SET_PTR = 4'h1;  // [25:24] sel, [15:0] address
  localparam logic [3:0] OP_DATA_LO = 4'h2;  // [15:0] low half of data
  localparam logic [3:0] OP_DATA_HI = 4'h3;  // [15:0] high half, write, addr++
  localparam logic [3:0] OP_SET_REG = 4'h4;  // [27:24] register, [15:0] value
  localparam logic [3:0] OP_RUN     = 4'hF;  // leave programming mode

  // Reference-register indices (OP_SET_REG).
  localparam logic [3:0] R_P        = 4'd0;  // accesses per spike
  localparam logic [3:0] R_M        = 4'd1;  // weight address increment
  localparam logic [3:0] R_WBASE    = 4'd2;  // weight base address
  localparam logic [3:0] R_NEURONS  = 4'd3;  // neurons handled at EoT
  localparam logic [3:0] R_THR_LO   = 4'd4;  // threshold [15:0]
  localparam logic [3:0] R_THR_HI   = 4'd5;  // threshold [30:16]
  localparam logic [3:0] R_MODE     = 4'd6;  // bit0: softmax layer
  localparam logic [3:0] R_OUTDEST  = 4'd7;  // output destination
  localparam logic [3:0] R_FWDDEST  = 4'd8;  // forwarding destination
  localparam logic [3:0] R_FWDEN    = 4'd9;  // bit0: forwarding on
  localparam logic [3:0] R_EOTNEED  = 4'd10; // EoT packets per timestep

  // Reference registers as seen by the core and the router interface.
  typedef struct packed {
    logic [CNT_W-1:0]   p;
    logic [WADDR_W-1:0] m;
    logic [WADDR_W-1:0] wbase;
    logic [CNT_W-1:0]   neurons;
    logic signed [POT_W-1:0] thr;
    logic               softmax;
    logic [COORD_W-1:0] out_dest;
    logic [COORD_W-1:0] fwd_dest;
    logic               fwd_en;
    logic [7:0]         eot_need;
  } cfg_t;

  // Spike handed from the router interface to the core.
  typedef struct packed {
    kind_e              kind;
    logic [7:0]         p_ovr;   // 0 = use cfg.p
    logic [WADDR_W-1:0] idx;     // pre-synaptic neuron j
  } core_in_t;

  // Entry of the spiked-neuron FIFO (store module -> memory interface).
  typedef struct packed {
    logic               eot;
    logic [NADDR_W-1:0] addr;
  } spk_out_t;

  // LOAD -> COMPUTE FIFO entry.
  typedef struct packed {
    kind_e            kind;
    logic [CNT_W-1:0] count;
  } l2c_t;

  // LOAD -> STORE FIFO entry.
  typedef struct packed {
    kind_e              kind;
    logic [NADDR_W-1:0] addr;
    logic               first;
    logic               last;
  } l2s_t;

  // COMPUTE -> STORE FIFO entry.
  typedef struct packed {
    kind_e             kind;
    logic [ACC_W-1:0]  value;   // new accumulated weight, or potential
    logic              spiked;  // spiked flag read with the potential
  } c2s_t;

  // Programming write to one of the SRAMs.
  typedef struct packed {
    sram_sel_e          sel;
    logic [WADDR_W-1:0] addr;
    logic [31:0]        data;
  } prog_wr_t;

  // Per-cycle event flags of a PE, for observation and testing.
  typedef struct packed {
    logic raw_stall;   // a read waited on the RW protection register
    logic saturated;   // a saturating add clipped
    logic if_fire;     // an integrate-and-fire neuron spiked
    logic sm_fire;     // a softmax layer emitted its spike
    logic fwd;         // a packet was forwarded
    logic prog_mode;   // PE is in programming mode
    logic idle;        // PE has no work queued or in progress
  } pe_ev_t;

  localparam logic [SPK_W-1:0] EOT_WORD = {PT_EOT, 30'd0};

  function automatic logic [PKT_W-1:0] make_pkt(input logic [COORD_W-1:0] dest,
                                                 input logic [SPK_W-1:0] word);
    return {dest, word};
  endfunction

endpackage
