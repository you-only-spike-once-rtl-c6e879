// yoso_top: the YOSO accelerator, a 2-D mesh of processing elements.
//
// X_DIM x Y_DIM tiles (6 x 7 = 42 PEs, the paper's configuration), each a
// PE attached to the local port of an X-Y router. Tile (x, y) has the
// 8-bit coordinate {x[3:0], y[3:0]}; north is +y, east is +x.
//
// Host connection (this design's choice; the paper does not describe how
// spikes enter and leave the chip): the west input port of each
// column-0 router is a host input, used both to program the PEs and to
// inject input-layer spikes and EoT packets. Packets addressed to x = 15
// travel east off the mesh and appear at the host outputs on the east edge
// of their row (y selects the row). Other edge ports are unused: their
// inputs are idle and their outputs are always ready (a packet addressed
// off the north or south edge is dropped).
//
// ev[y*X_DIM + x] carries the per-cycle event flags of tile (x, y).
module yoso_top
  import yoso_pkg::*;
#(
  parameter int unsigned X_DIM  = 6,
  parameter int unsigned Y_DIM  = 7,
  parameter int unsigned WDEPTH = WGT_DEPTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             host_in_valid [Y_DIM],
  output logic             host_in_ready [Y_DIM],
  input  logic [PKT_W-1:0] host_in_pkt   [Y_DIM],
  output logic             host_out_valid [Y_DIM],
  input  logic             host_out_ready [Y_DIM],
  output logic [PKT_W-1:0] host_out_pkt   [Y_DIM],
  output pe_ev_t           ev [X_DIM*Y_DIM]
);
  localparam int unsigned N = X_DIM * Y_DIM;
  localparam int unsigned P_LOCAL = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic [4:0]       ri_valid [N];
  logic [4:0]       ri_ready [N];
  logic [PKT_W-1:0] ri_pkt   [N][5];
  logic [4:0]       ro_valid [N];
  logic [4:0]       ro_ready [N];
  logic [PKT_W-1:0] ro_pkt   [N][5];

  for (genvar y = 0; y < Y_DIM; y++) begin : g_row
    for (genvar x = 0; x < X_DIM; x++) begin : g_col
      localparam int unsigned R = y * X_DIM + x;

      xy_router u_router (
        .clk, .rst_n,
        .my_x(4'(x)), .my_y(4'(y)),
        .in_valid(ri_valid[R]), .in_ready(ri_ready[R]), .in_pkt(ri_pkt[R]),
        .out_valid(ro_valid[R]), .out_ready(ro_ready[R]), .out_pkt(ro_pkt[R]));

      pe #(.WDEPTH(WDEPTH)) u_pe (
        .clk, .rst_n,
        .in_valid(ro_valid[R][P_LOCAL]), .in_ready(ro_ready[R][P_LOCAL]),
        .in_pkt(ro_pkt[R][P_LOCAL]),
        .out_valid(ri_valid[R][P_LOCAL]), .out_ready(ri_ready[R][P_LOCAL]),
        .out_pkt(ri_pkt[R][P_LOCAL]),
        .ev(ev[R]));

      // North neighbour (y+1) or edge.
      if (y + 1 < Y_DIM) begin : g_n
        assign ri_valid[R][P_N] = ro_valid[R + X_DIM][P_S];
        assign ri_pkt[R][P_N]   = ro_pkt[R + X_DIM][P_S];
        assign ro_ready[R][P_N] = ri_ready[R + X_DIM][P_S];
      end else begin : g_n_edge
        assign ri_valid[R][P_N] = 1'b0;
        assign ri_pkt[R][P_N]   = '0;
        assign ro_ready[R][P_N] = 1'b1;
      end

      // South neighbour (y-1) or edge.
      if (y > 0) begin : g_s
        assign ri_valid[R][P_S] = ro_valid[R - X_DIM][P_N];
        assign ri_pkt[R][P_S]   = ro_pkt[R - X_DIM][P_N];
        assign ro_ready[R][P_S] = ri_ready[R - X_DIM][P_N];
      end else begin : g_s_edge
        assign ri_valid[R][P_S] = 1'b0;
        assign ri_pkt[R][P_S]   = '0;
        assign ro_ready[R][P_S] = 1'b1;
      end

      // East neighbour (x+1) or host output.
      if (x + 1 < X_DIM) begin : g_e
        assign ri_valid[R][P_E] = ro_valid[R + 1][P_W];
        assign ri_pkt[R][P_E]   = ro_pkt[R + 1][P_W];
        assign ro_ready[R][P_E] = ri_ready[R + 1][P_W];
      end else begin : g_e_host
        assign ri_valid[R][P_E]  = 1'b0;
        assign ri_pkt[R][P_E]    = '0;
        assign host_out_valid[y] = ro_valid[R][P_E];
        assign host_out_pkt[y]   = ro_pkt[R][P_E];
        assign ro_ready[R][P_E]  = host_out_ready[y];
      end

      // West neighbour (x-1) or host input.
      if (x > 0) begin : g_w
        assign ri_valid[R][P_W] = ro_valid[R - 1][P_E];
        assign ri_pkt[R][P_W]   = ro_pkt[R - 1][P_E];
        assign ro_ready[R][P_W] = ri_ready[R - 1][P_E];
      end else begin : g_w_host
        assign ri_valid[R][P_W] = host_in_valid[y];
        assign ri_pkt[R][P_W]   = host_in_pkt[y];
        assign host_in_ready[y] = ri_ready[R][P_W];
        assign ro_ready[R][P_W] = 1'b1;
      end
    end
  end
endmodule
