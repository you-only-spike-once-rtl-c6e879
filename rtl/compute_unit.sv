// compute_unit: the core's COMPUTE module, saturating additions.
//
// A two-state machine (IDLE, ACTIVE), as in the paper. In IDLE it takes
// {kind, count} from the LOAD-to-COMPUTE FIFO. In ACTIVE it consumes count
// pairs of read responses, in request order, one pair per cycle:
//   spike: accumulated weight (32-bit) + sign-extended 8-bit weight,
//          saturated to 32 bits;
//   EoT:   potential (31-bit, from the neuron word {spiked, potential})
//          + accumulated weight, saturated to 31 bits; the spiked bit is
//          passed along unchanged.
// Each result goes to the COMPUTE-to-STORE FIFO with the kind. Saturating
// adders follow the paper; the widths are taken from the SRAM sizes.
module compute_unit
  import yoso_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic l2c_valid,
  output logic l2c_ready,
  input  l2c_t l2c,
  // read responses
  input  logic             acc_rsp_valid,
  output logic             acc_rsp_ready,
  input  logic [ACC_W-1:0] acc_rsp_data,
  input  logic             neu_rsp_valid,
  output logic             neu_rsp_ready,
  input  logic [NEU_W-1:0] neu_rsp_data,
  input  logic             wgt_rsp_valid,
  output logic             wgt_rsp_ready,
  input  logic [WGT_W-1:0] wgt_rsp_data,
  // results
  output logic c2s_valid,
  input  logic c2s_ready,
  output c2s_t c2s,
  output logic saturated   // observation: a sum was clipped this cycle
);
  typedef enum logic {S_IDLE, S_ACTIVE} state_e;
  state_e           state;
  kind_e            kind_q;
  logic [CNT_W-1:0] left_q;

  logic operands, go;
  logic signed [ACC_W:0]   sum_acc;   // 33 bits
  logic signed [ACC_W:0]   sum_pot;
  logic signed [ACC_W-1:0] acc_sat;
  logic signed [POT_W-1:0] pot_sat;
  logic                    sat_acc, sat_pot;

  localparam logic signed [ACC_W:0] ACC_MAX = (ACC_W+1)'( (64'sd1 <<< (ACC_W-1)) - 1);
  localparam logic signed [ACC_W:0] ACC_MIN = (ACC_W+1)'(-(64'sd1 <<< (ACC_W-1)));
  localparam logic signed [ACC_W:0] POT_MAX = (ACC_W+1)'( (64'sd1 <<< (POT_W-1)) - 1);
  localparam logic signed [ACC_W:0] POT_MIN = (ACC_W+1)'(-(64'sd1 <<< (POT_W-1)));

  always_comb begin
    sum_acc = $signed({acc_rsp_data[ACC_W-1], acc_rsp_data})
            + (ACC_W+1)'($signed(wgt_rsp_data));
    sum_pot = (ACC_W+1)'($signed(neu_rsp_data[POT_W-1:0]))
            + $signed({acc_rsp_data[ACC_W-1], acc_rsp_data});
    sat_acc = (sum_acc > ACC_MAX) || (sum_acc < ACC_MIN);
    sat_pot = (sum_pot > POT_MAX) || (sum_pot < POT_MIN);
    if (sum_acc > ACC_MAX)      acc_sat = ACC_MAX[ACC_W-1:0];
    else if (sum_acc < ACC_MIN) acc_sat = ACC_MIN[ACC_W-1:0];
    else                        acc_sat = sum_acc[ACC_W-1:0];
    if (sum_pot > POT_MAX)      pot_sat = POT_MAX[POT_W-1:0];
    else if (sum_pot < POT_MIN) pot_sat = POT_MIN[POT_W-1:0];
    else                        pot_sat = sum_pot[POT_W-1:0];
  end

  assign operands = (kind_q == K_SPIKE) ? (acc_rsp_valid && wgt_rsp_valid)
                                        : (acc_rsp_valid && neu_rsp_valid);
  assign go = (state == S_ACTIVE) && operands && c2s_ready;

  assign l2c_ready     = (state == S_IDLE);
  assign acc_rsp_ready = go;
  assign wgt_rsp_ready = go && (kind_q == K_SPIKE);
  assign neu_rsp_ready = go && (kind_q == K_EOT);
  assign c2s_valid     = go;
  always_comb begin
    c2s.kind = kind_q;
    if (kind_q == K_SPIKE) begin
      c2s.value  = acc_sat;
      c2s.spiked = 1'b0;
    end else begin
      c2s.value  = ACC_W'(pot_sat);
      c2s.spiked = neu_rsp_data[NEU_W-1];
    end
  end
  assign saturated = go && ((kind_q == K_SPIKE) ? sat_acc : sat_pot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      kind_q <= K_SPIKE;
      left_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (l2c_valid) begin
          kind_q <= l2c.kind;
          left_q <= l2c.count;
          if (l2c.count != '0) state <= S_ACTIVE;
        end
        S_ACTIVE: if (go) begin
          left_q <= left_q - 1'b1;
          if (left_q == CNT_W'(1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
