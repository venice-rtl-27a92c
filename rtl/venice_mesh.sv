// venice_mesh: Venice's interconnection network of flash nodes.
//
// NR x NC router chips (one per flash chip) in a 2D mesh, each joined to its
// neighbours by a bidirectional link: two opposite channels of 8 data bits,
// NR*(NC-1) + NC*(NR-1) links in all (112 for the paper's 8 x 8 array).
// Flash controller r is attached to the LEFT port of router (r, 0), as in
// the paper's drawings. Router (r, c) serves flash chip ID r*NC + c; its
// I/O bus to that chip is a port of this module.
//
// Wiring rule: port p of one router faces port 3-p of its neighbour
// (RIGHT-LEFT, UP-DOWN); UP leads to row r-1. Edge ports that face nothing
// get idle inputs and a low ready bit. The `attempt_clr` broadcast (one line
// per flash controller) reaches every router.
//
// Lint note: SYNCASYNCNET on rst_n comes from the routers' assertions (see
// venice_router).
module venice_mesh
  import venice_pkg::*;
#(
  parameter int unsigned NR    = 8,
  parameter int unsigned NC    = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  flit_t         fc_to_net   [NR],
  output logic [NR-1:0] fc_in_rdy,
  output flit_t         net_to_fc   [NR],
  input  flit_t         chip_in     [NR*NC],
  output flit_t         chip_out    [NR*NC],
  input  logic [NR-1:0] attempt_clr,
  output rt_ev_t        ev          [NR*NC]
);
  flit_t            o_f  [NR][NC][NPORT];
  flit_t            i_f  [NR][NC][NPORT];
  logic [NPORT-1:0] i_rdy [NR][NC];
  logic [NPORT-1:0] o_rdy [NR][NC];

  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      // RIGHT
      if (c < NC-1) begin : g_r
        assign i_f[r][c][P_RIGHT]   = o_f[r][c+1][P_LEFT];
        assign o_rdy[r][c][P_RIGHT] = i_rdy[r][c+1][P_LEFT];
      end else begin : g_r_edge
        assign i_f[r][c][P_RIGHT]   = FLIT_IDLE;
        assign o_rdy[r][c][P_RIGHT] = 1'b0;
      end
      // UP (row r-1)
      if (r > 0) begin : g_u
        assign i_f[r][c][P_UP]   = o_f[r-1][c][P_DOWN];
        assign o_rdy[r][c][P_UP] = i_rdy[r-1][c][P_DOWN];
      end else begin : g_u_edge
        assign i_f[r][c][P_UP]   = FLIT_IDLE;
        assign o_rdy[r][c][P_UP] = 1'b0;
      end
      // DOWN (row r+1)
      if (r < NR-1) begin : g_d
        assign i_f[r][c][P_DOWN]   = o_f[r+1][c][P_UP];
        assign o_rdy[r][c][P_DOWN] = i_rdy[r+1][c][P_UP];
      end else begin : g_d_edge
        assign i_f[r][c][P_DOWN]   = FLIT_IDLE;
        assign o_rdy[r][c][P_DOWN] = 1'b0;
      end
      // LEFT (flash controller r in column 0)
      if (c > 0) begin : g_l
        assign i_f[r][c][P_LEFT]   = o_f[r][c-1][P_RIGHT];
        assign o_rdy[r][c][P_LEFT] = i_rdy[r][c-1][P_RIGHT];
      end else begin : g_l_fc
        assign i_f[r][c][P_LEFT]   = fc_to_net[r];
        assign o_rdy[r][c][P_LEFT] = 1'b1;
        assign net_to_fc[r]        = o_f[r][c][P_LEFT];
        assign fc_in_rdy[r]        = i_rdy[r][c][P_LEFT];
      end

      venice_router #(
        .NR(NR), .NC(NC), .NUM_FC(NR), .ROW(r), .COL(c), .DEPTH(DEPTH)
      ) u_router (
        .clk, .rst_n,
        .in_flit(i_f[r][c]), .in_rdy(i_rdy[r][c]),
        .out_flit(o_f[r][c]), .out_rdy(o_rdy[r][c]),
        .chip_in(chip_in[r*NC+c]), .chip_out(chip_out[r*NC+c]),
        .attempt_clr, .ev(ev[r*NC+c])
      );
    end
  end
endmodule
