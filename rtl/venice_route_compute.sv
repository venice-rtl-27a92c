// venice_route_compute: Venice's non-minimal fully-adaptive routing decision
// for one scout packet at one router (combinational).
//
// It follows the paper's routing algorithm. The router compares its own
// position with the destination chip in X (columns) and Y (rows) and takes
// one of nine cases. Cases 1-8 list the one or two ports that lead toward
// the destination (horizontal port first, then vertical) if they are free.
// Case 9 is ejection to the local flash chip. With two minimal candidates,
// rnd[0] picks one. With one, it is taken. With none, the packet is
// misrouted: the free ports other than the input link are listed in the
// order Up, Down, Right, Left, and entry rnd % count is taken. If no port is
// free, the packet goes back out of its input port (backtrack) and
// `found` is 0.
//
// Geometry: chip ID = row*NC + col, row 0 at the top (as in the paper's
// worked example), so a destination in a lower row is reached through DOWN.
// The paper's pseudo-code pairs a positive row difference with "Up"; this
// design follows the drawn example instead (see README).
//
// `free[p]` must already exclude non-existent ports, reserved links, ports
// this packet has tried at this router and the input port; the caller
// computes it. Port index = port code (0 RIGHT, 1 UP, 2 DOWN, 3 LEFT).
// nm_sel is 3 bits so that rnd % count can be formed for count = 3; its
// top bit is never set after the modulo and is reported as unused.
module venice_route_compute
  import venice_pkg::*;
#(
  parameter int unsigned NR = 8,
  parameter int unsigned NC = 8
) (
  input  logic [$clog2(NR)-1:0]    cur_row,
  input  logic [$clog2(NC)-1:0]    cur_col,
  input  logic [$clog2(NR*NC)-1:0] dest,
  input  logic [1:0]               in_port,
  input  logic [NPORT-1:0]         free,
  input  logic [1:0]               rnd,
  output logic                     eject,
  output logic                     found,
  output logic                     minimal,
  output logic [1:0]               out_port
);
  localparam int unsigned RW = $clog2(NR);
  localparam int unsigned CW = $clog2(NC);
  localparam int unsigned IW = $clog2(NR*NC);

  logic [RW-1:0] d_row;
  logic [CW-1:0] d_col;
  logic          go_right, go_left, go_down, go_up;
  logic [1:0]    h_port, v_port;
  logic          h_ok, v_ok;
  logic [1:0]    nm_list [4];
  logic [2:0]    nm_cnt;
  logic [2:0]    nm_sel;

  always_comb begin
    d_row = RW'(dest / IW'(NC));
    d_col = CW'(dest % IW'(NC));
    go_right = d_col > cur_col;
    go_left  = d_col < cur_col;
    go_down  = d_row > cur_row;
    go_up    = d_row < cur_row;
    eject    = !go_right && !go_left && !go_down && !go_up;

    h_port = go_right ? P_RIGHT : P_LEFT;
    v_port = go_down  ? P_DOWN  : P_UP;
    h_ok   = (go_right || go_left) && free[h_port];
    v_ok   = (go_down  || go_up)   && free[v_port];

    // non-minimal candidates, in the paper's order Up, Down, Right, Left
    nm_cnt = '0;
    for (int i = 0; i < 4; i++) nm_list[i] = 2'b00;
    if (free[P_UP]    && in_port != P_UP)    begin nm_list[nm_cnt[1:0]] = P_UP;    nm_cnt++; end
    if (free[P_DOWN]  && in_port != P_DOWN)  begin nm_list[nm_cnt[1:0]] = P_DOWN;  nm_cnt++; end
    if (free[P_RIGHT] && in_port != P_RIGHT) begin nm_list[nm_cnt[1:0]] = P_RIGHT; nm_cnt++; end
    if (free[P_LEFT]  && in_port != P_LEFT)  begin nm_list[nm_cnt[1:0]] = P_LEFT;  nm_cnt++; end
    nm_sel = (nm_cnt == 3'd0) ? 3'd0 : 3'({1'b0, rnd} % nm_cnt);

    found    = 1'b0;
    minimal  = 1'b0;
    out_port = in_port;
    if (eject) begin
      found    = 1'b1;
      minimal  = 1'b1;
      out_port = in_port;       // the router turns this into the chip port
    end else if (h_ok && v_ok) begin
      found    = 1'b1;
      minimal  = 1'b1;
      out_port = rnd[0] ? v_port : h_port;
    end else if (h_ok || v_ok) begin
      found    = 1'b1;
      minimal  = 1'b1;
      out_port = h_ok ? h_port : v_port;
    end else if (nm_cnt != 3'd0) begin
      found    = 1'b1;
      out_port = nm_list[nm_sel[1:0]];
    end
  end
endmodule
