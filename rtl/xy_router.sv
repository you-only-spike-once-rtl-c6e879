// xy_router: five-port mesh router with dimension-ordered X-Y routing.
//
// Ports: 0 local PE, 1 north (+y), 2 east (+x), 3 south (-y), 4 west (-x).
// A 40-bit packet carries its destination in bits [39:36] (x) and [35:32]
// (y). A packet first travels along x until its column matches, then along
// y, then leaves on the local port. Each input port has a small FIFO; each
// output port picks among the inputs that want it in round-robin order and
// passes one packet per cycle on a valid/ready link.
//
// The paper builds its NoC on OpenSMART with X-Y routing but gives no
// router details; this is a plain buffered router that routes the same way,
// without OpenSMART's single-cycle multi-hop bypass. Packets whose
// destination lies off the mesh leave through the edge port they reach;
// the mesh uses x = 15 to address the host at the east edge.
module xy_router
  import yoso_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [3:0]       my_x,
  input  logic [3:0]       my_y,
  input  logic [4:0]       in_valid,
  output logic [4:0]       in_ready,
  input  logic [PKT_W-1:0] in_pkt [5],
  output logic [4:0]       out_valid,
  input  logic [4:0]       out_ready,
  output logic [PKT_W-1:0] out_pkt [5]
);
  localparam int unsigned P_LOCAL = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic [4:0]       q_valid, q_pop;
  logic [PKT_W-1:0] q_pkt [5];
  logic [2:0]       want [5];       // output port wanted by each input head
  logic [4:0]       req [5];        // req[o][i]: input i wants output o
  logic [4:0]       gnt [5];        // gnt[o][i]
  logic [2:0]       rr_q [5];       // round-robin pointer per output

  for (genvar i = 0; i < 5; i++) begin : g_in
    sync_fifo #(.WIDTH(PKT_W), .DEPTH(DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(in_valid[i]), .in_ready(in_ready[i]), .in_data(in_pkt[i]),
      .out_valid(q_valid[i]), .out_ready(q_pop[i]), .out_data(q_pkt[i]),
      .count());

    logic [3:0] dx, dy;
    assign dx = q_pkt[i][PKT_W-1 -: 4];
    assign dy = q_pkt[i][PKT_W-5 -: 4];
    always_comb begin
      if (dx > my_x)      want[i] = 3'(P_E);
      else if (dx < my_x) want[i] = 3'(P_W);
      else if (dy > my_y) want[i] = 3'(P_N);
      else if (dy < my_y) want[i] = 3'(P_S);
      else                want[i] = 3'(P_LOCAL);
    end
  end

  always_comb begin
    for (int o = 0; o < 5; o++)
      for (int i = 0; i < 5; i++)
        req[o][i] = q_valid[i] && (want[i] == 3'(o));
  end

  // Round-robin grant: first requester at or after rr_q[o].
  always_comb begin
    for (int o = 0; o < 5; o++) begin
      gnt[o] = '0;
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr_q[o]) + k) % 5;
        if (gnt[o] == '0 && req[o][i]) gnt[o][i] = 1'b1;
      end
    end
  end

  always_comb begin
    q_pop = '0;
    for (int o = 0; o < 5; o++) begin
      out_valid[o] = |gnt[o];
      out_pkt[o]   = '0;
      for (int i = 0; i < 5; i++) begin
        if (gnt[o][i]) begin
          out_pkt[o] = q_pkt[i];
          if (out_ready[o]) q_pop[i] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 5; o++) rr_q[o] <= '0;
    end else begin
      for (int o = 0; o < 5; o++) begin
        for (int i = 0; i < 5; i++) begin
          if (gnt[o][i] && out_ready[o]) rr_q[o] <= (i == 4) ? 3'd0 : 3'(i + 1);
        end
      end
    end
  end
endmodule
