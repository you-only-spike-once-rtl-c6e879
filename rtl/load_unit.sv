// load_unit: the core's LOAD module, the access-pattern generator.
//
// A two-state machine (IDLE, ACTIVE), as in the paper. In IDLE it takes one
// spike from the incoming-spike FIFO and sets its four pattern registers:
// the address register, the access counter, the number of accesses P and
// the address increment M. Values the spike does not carry come from the
// reference registers written at program time (cfg). It then sends the
// spike kind and P to the compute module and enters ACTIVE.
//
// ACTIVE issues one access per cycle while every queue it feeds has room:
//   input spike from neuron j: weight address = WBASE + j + k*M and
//     accumulated-weight address k (read with intent to write), k = 0..P-1.
//     Weights are thus stored column-wise, w[i][j] at WBASE + j + i*M.
//   EoT: accumulated-weight address k (read only) and neuron address k
//     (read with intent to write), k = 0..NEURONS-1, tagged first/last so
//     that the store module can delimit a softmax layer.
// Every generated neuron address also goes to the store module through the
// LOAD-to-STORE FIFO. The order of issue and the tagging are this design's
// choices. P (or NEURONS) must be at least 1.
module load_unit
  import yoso_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  // incoming spikes
  input  logic     in_valid,
  output logic     in_ready,
  input  core_in_t in_spk,
  // read requests
  output logic               wgt_rd_valid,
  input  logic               wgt_rd_ready,
  output logic [WADDR_W-1:0] wgt_rd_addr,
  output logic               acc_rd_valid,
  input  logic               acc_rd_ready,
  output logic [NADDR_W-1:0] acc_rd_addr,
  output logic               acc_rd_intent,
  output logic               neu_rd_valid,
  input  logic               neu_rd_ready,
  output logic [NADDR_W-1:0] neu_rd_addr,
  output logic               neu_rd_intent,
  // to compute and store modules
  output logic l2c_valid,
  input  logic l2c_ready,
  output l2c_t l2c,
  output logic l2s_valid,
  input  logic l2s_ready,
  output l2s_t l2s,
  output logic busy
);
  typedef enum logic {S_IDLE, S_ACTIVE} state_e;
  state_e state;

  kind_e              kind_q;
  logic [WADDR_W-1:0] addr_q;   // address register
  logic [CNT_W-1:0]   cnt_q;    // accesses made
  logic [CNT_W-1:0]   p_q;      // accesses to make (P)
  logic [WADDR_W-1:0] m_q;      // address increment (M)

  logic [CNT_W-1:0] p_new;
  logic             go;         // issue one access this cycle

  always_comb begin
    if (in_spk.kind == K_EOT)      p_new = cfg.neurons;
    else if (in_spk.p_ovr != '0)   p_new = CNT_W'(in_spk.p_ovr);
    else                           p_new = cfg.p;
  end

  assign in_ready  = (state == S_IDLE) && l2c_ready;
  assign l2c_valid = (state == S_IDLE) && in_valid;
  assign l2c       = '{kind: in_spk.kind, count: p_new};

  always_comb begin
    if (kind_q == K_SPIKE) go = wgt_rd_ready && acc_rd_ready && l2s_ready;
    else                   go = acc_rd_ready && neu_rd_ready && l2s_ready;
    go = go && (state == S_ACTIVE);
  end

  assign wgt_rd_valid  = go && (kind_q == K_SPIKE);
  assign wgt_rd_addr   = addr_q;
  assign acc_rd_valid  = go;
  assign acc_rd_addr   = cnt_q[NADDR_W-1:0];
  assign acc_rd_intent = (kind_q == K_SPIKE);
  assign neu_rd_valid  = go && (kind_q == K_EOT);
  assign neu_rd_addr   = cnt_q[NADDR_W-1:0];
  assign neu_rd_intent = 1'b1;
  assign l2s_valid     = go;
  assign l2s           = '{kind:  kind_q,
                           addr:  cnt_q[NADDR_W-1:0],
                           first: (cnt_q == '0),
                           last:  (cnt_q == p_q - 1'b1)};
  assign busy          = (state == S_ACTIVE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      kind_q <= K_SPIKE;
      addr_q <= '0;
      cnt_q  <= '0;
      p_q    <= '0;
      m_q    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid && in_ready) begin
          kind_q <= in_spk.kind;
          addr_q <= cfg.wbase + in_spk.idx;
          m_q    <= cfg.m;
          p_q    <= p_new;
          cnt_q  <= '0;
          if (p_new != '0) state <= S_ACTIVE;
        end
        S_ACTIVE: if (go) begin
          addr_q <= addr_q + m_q;
          cnt_q  <= cnt_q + 1'b1;
          if (cnt_q == p_q - 1'b1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
