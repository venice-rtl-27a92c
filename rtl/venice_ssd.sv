// venice_ssd: top level of the Venice flash array: request dispatch, one
// path engine per flash controller, and the mesh of router chips.
//
// Venice replaces the shared flash channels of an SSD with a low-cost
// network: a router chip next to every flash chip, linked in a 2D mesh, and
// flash controllers at the west edge. Before a controller sends a command,
// it reserves a whole conflict-free path to the target chip with a scout
// packet. The routers find that path with a non-minimal fully-adaptive
// algorithm and backtracking. The data then flows over that circuit
// without buffering.
//
// This module takes I/O requests {write, destination chip, page address,
// byte count} one per cycle (req_vld/req_rdy). venice_fc_select hands each
// one to the controller on the target chip's row if it is idle, else to the
// nearest idle controller. `req_fc` reports which controller took it: the
// host streams write data into that controller's fc_wdata port and
// collects read data from its fc_rdata port. fc_done pulses at the end of
// each request, with fc_tries = number of scout packets it took.
//
// The flash chips are outside this design: chip_out[i] / chip_in[i] is the
// 8-bit I/O bus (with a valid bit) of flash chip i = row*NC + col. The
// NAND chips themselves are commodity parts, modelled only in the
// testbenches. rt_ev gives each router's event strobes for monitoring.
//
// Defaults are the paper's main configuration: 8 x 8 mesh of flash nodes,
// 8 flash controllers (one per row), 8-bit links.
//
// Lint note: SYNCASYNCNET on rst_n comes from the assertions of the
// routers and controllers (see venice_router).
module venice_ssd
  import venice_pkg::*;
#(
  parameter int unsigned NR    = 8,
  parameter int unsigned NC    = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // requests
  input  logic                  req_vld,
  output logic                  req_rdy,
  input  io_req_t               req,
  output logic [$clog2(NR)-1:0] req_fc,
  // per flash controller data streams and completion
  input  logic [7:0]            fc_wdata     [NR],
  input  logic [NR-1:0]         fc_wdata_vld,
  output logic [NR-1:0]         fc_wdata_rdy,
  output logic [7:0]            fc_rdata     [NR],
  output logic [NR-1:0]         fc_rdata_vld,
  output logic [NR-1:0]         fc_done,
  output logic [7:0]            fc_tries     [NR],
  // flash chip I/O buses
  input  flit_t                 chip_in      [NR*NC],
  output flit_t                 chip_out     [NR*NC],
  // monitoring
  output rt_ev_t                rt_ev        [NR*NC]
);
  localparam int unsigned IW = $clog2(NR*NC);

  logic [NR-1:0] fc_idle, fc_attempt_clr, fc_in_rdy, fc_req_vld;
  flit_t         fc_to_net [NR];
  flit_t         net_to_fc [NR];
  logic          any_free;

  venice_fc_select #(.NR(NR), .NC(NC)) u_sel (
    .dest(IW'(req.dest)), .fc_free(fc_idle), .any_free, .sel(req_fc)
  );

  assign req_rdy = any_free;

  always_comb begin
    fc_req_vld = '0;
    if (req_vld && any_free) fc_req_vld[req_fc] = 1'b1;
  end

  for (genvar k = 0; k < NR; k++) begin : g_fc
    venice_fc #(.FC_ID(k)) u_fc (
      .clk, .rst_n,
      .req_vld(fc_req_vld[k]), .req_rdy(fc_idle[k]), .req,
      .wdata(fc_wdata[k]), .wdata_vld(fc_wdata_vld[k]), .wdata_rdy(fc_wdata_rdy[k]),
      .rdata(fc_rdata[k]), .rdata_vld(fc_rdata_vld[k]),
      .done(fc_done[k]), .tries(fc_tries[k]),
      .net_out(fc_to_net[k]), .net_rdy(fc_in_rdy[k]), .net_in(net_to_fc[k]),
      .attempt_clr(fc_attempt_clr[k])
    );
  end

  venice_mesh #(.NR(NR), .NC(NC), .DEPTH(DEPTH)) u_mesh (
    .clk, .rst_n, .fc_to_net, .fc_in_rdy, .net_to_fc, .chip_in, .chip_out,
    .attempt_clr(fc_attempt_clr), .ev(rt_ev)
  );

  // the packet ID field is 3 bits and the chip ID 6 bits wide
  initial begin
    assert (NR <= 8 && NR*NC <= 64)
      else $error("venice_ssd: at most 8 controllers and 64 chips fit the scout packet format");
  end
endmodule
