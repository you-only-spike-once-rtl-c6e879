// store_unit: the core's STORE module, write-back and spike generation.
//
// Pairs each result from the COMPUTE-to-STORE FIFO with the address from
// the LOAD-to-STORE FIFO (no reordering anywhere, so they match in order).
//   spike result: written to the Accumulated Weights SRAM.
//   EoT result, integrate-and-fire layer (cfg.softmax = 0): the neuron fires
//     if its new potential is at or above the threshold and it has not
//     fired before; the potential and the updated spiked bit are written to
//     the Neuron SRAM and the address of a firing neuron is pushed to the
//     spiked-neuron FIFO.
//   EoT result, softmax layer (cfg.softmax = 1): potentials are written
//     back and the largest one between the entries tagged first and last is
//     tracked; after the last entry the neuron holding it spikes, threshold
//     or not (first such neuron on a tie).
// After the entry tagged last of an EoT, an EoT marker is pushed to the
// spiked-neuron FIFO so that the next layer can advance its timestep.
// The threshold comparison (>=), the tie rule, and a softmax layer spiking
// at every timestep (inference ends at the first output spike) are this
// design's choices.
module store_unit
  import yoso_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  cfg_t cfg,
  input  logic c2s_valid,
  output logic c2s_ready,
  input  c2s_t c2s,
  input  logic l2s_valid,
  output logic l2s_ready,
  input  l2s_t l2s,
  // write requests
  output logic               acc_wr_valid,
  input  logic               acc_wr_ready,
  output logic [NADDR_W-1:0] acc_wr_addr,
  output logic [ACC_W-1:0]   acc_wr_data,
  output logic               neu_wr_valid,
  input  logic               neu_wr_ready,
  output logic [NADDR_W-1:0] neu_wr_addr,
  output logic [NEU_W-1:0]   neu_wr_data,
  // spiked neuron addresses and EoT markers
  output logic     spk_valid,
  input  logic     spk_ready,
  output spk_out_t spk,
  // observation
  output logic     if_fire,     // an integrate-and-fire neuron spiked
  output logic     sm_fire      // a softmax layer emitted its spike
);
  typedef enum logic [1:0] {S_RUN, S_SMAX, S_EOT} state_e;
  state_e state;

  logic signed [POT_W-1:0] max_q;
  logic [NADDR_W-1:0]      idx_q;

  logic                    both, go, fire, better;
  logic signed [POT_W-1:0] pot;

  assign both   = c2s_valid && l2s_valid && (state == S_RUN);
  assign pot    = c2s.value[POT_W-1:0];
  assign fire   = !cfg.softmax && !c2s.spiked && (pot >= cfg.thr);
  assign better = l2s.first || (pot > max_q);

  always_comb begin
    if (l2s.kind == K_SPIKE) go = both && acc_wr_ready;
    else                     go = both && neu_wr_ready && spk_ready;
  end

  assign c2s_ready    = go;
  assign l2s_ready    = go;
  assign acc_wr_valid = go && (l2s.kind == K_SPIKE);
  assign acc_wr_addr  = l2s.addr;
  assign acc_wr_data  = c2s.value;
  assign neu_wr_valid = go && (l2s.kind == K_EOT);
  assign neu_wr_addr  = l2s.addr;
  assign neu_wr_data  = {c2s.spiked | fire, pot};

  always_comb begin
    spk_valid = 1'b0;
    spk       = '{eot: 1'b0, addr: l2s.addr};
    unique case (state)
      S_RUN:   spk_valid = go && (l2s.kind == K_EOT) && fire;
      S_SMAX:  begin spk_valid = 1'b1; spk = '{eot: 1'b0, addr: idx_q}; end
      S_EOT:   begin spk_valid = 1'b1; spk = '{eot: 1'b1, addr: '0};    end
      default: ;
    endcase
  end

  assign if_fire = (state == S_RUN) && spk_valid && spk_ready;
  assign sm_fire = (state == S_SMAX) && spk_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_RUN;
      max_q <= '0;
      idx_q <= '0;
    end else begin
      unique case (state)
        S_RUN: if (go && (l2s.kind == K_EOT)) begin
          if (cfg.softmax && better) begin
            max_q <= pot;
            idx_q <= l2s.addr;
          end
          if (l2s.last) state <= cfg.softmax ? S_SMAX : S_EOT;
        end
        S_SMAX: if (spk_ready) state <= S_EOT;
        S_EOT:  if (spk_ready) state <= S_RUN;
        default: state <= S_RUN;
      endcase
    end
  end
endmodule
