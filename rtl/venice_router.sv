// venice_router: the router chip of a Venice flash node.
//
// Venice places a small router chip next to each unmodified flash chip. The
// router has four mesh ports (RIGHT, UP, DOWN, LEFT; in column 0 the LEFT
// port goes to the row's flash controller) and the flash chip's I/O bus.
// It does two jobs:
//
// 1. Path reservation. Scout packets (two 8-bit flits) arrive in the
//    per-port two-flit buffers. Every second cycle the router takes one
//    whole packet, round-robin over the ports, and acts on it:
//    - reserve mode, port not yet held by this packet: a new hop. At the
//      destination, the chip port is reserved and the packet is turned
//      round (still in reserve mode) as the confirmation. Elsewhere the
//      routing algorithm (venice_route_compute) picks a free output port.
//      The router records {packet, entry, exit} in the reservation table
//      and forwards the packet. If no port is free, or the chip port is
//      already held, the packet goes back out of its input port in cancel
//      mode (backtrack).
//    - reserve mode on the exit port of the packet's row: the confirmation
//      on its way back to the controller; it leaves by the entry port.
//    - cancel mode on the exit port of the packet's row: a backtrack from
//      downstream. The row is removed and the routing is re-run from the
//      row's entry port. Ports the packet has already reserved here stay
//      excluded (tried mask), so each output port of a router is reserved
//      at most once per attempt. This is the paper's livelock bound.
//    - cancel mode on the entry port of the packet's row: release of the
//      path after the transfer (this design's choice of teardown). The row
//      is removed and the packet is passed on along the old exit port.
// 2. Circuit switching. Data bytes on reserved ports go through
//    venice_crossbar, one register per router.
//
// Choices of this design, not the paper's (see README): link channel with
// valid/scout flags and a ready bit for scout flits; routers decide only
// on cycles whose parity equals (ROW+COL) mod 2, so two neighbours never
// claim the same link in the same cycle; the per-packet tried mask is
// cleared by the `attempt_clr` broadcast when a controller starts a new
// attempt; ejection is marked by exit == entry in the table.
//
// Timing: a scout packet sits in an input buffer for at least one cycle
// and leaves two flits long, so a hop takes 3-4 cycles. Circuit data
// takes 1 cycle per router.
//
// Lint note: the assertions sample rst_n synchronously (to stay quiet in
// reset) while the flops use it as an asynchronous reset, which Verilator
// reports as SYNCASYNCNET. This is intended; assertions are not logic.
// Only the pid, entry and exit fields of the looked-up row are used, so the
// lint tool reports its other bits as unused.
module venice_router
  import venice_pkg::*;
#(
  parameter int unsigned NR     = 8,
  parameter int unsigned NC     = 8,
  parameter int unsigned NUM_FC = 8,
  parameter int unsigned ROW    = 0,
  parameter int unsigned COL    = 0,
  parameter int unsigned DEPTH  = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  flit_t             in_flit  [NPORT],
  output logic [NPORT-1:0]  in_rdy,
  output flit_t             out_flit [NPORT],
  input  logic [NPORT-1:0]  out_rdy,
  input  flit_t             chip_in,
  output flit_t             chip_out,
  input  logic [NUM_FC-1:0] attempt_clr,
  output rt_ev_t            ev
);
  localparam logic [0:0] COLOR = 1'((ROW + COL) % 2);
  localparam int unsigned IW = $clog2(NR*NC);
  // ports that exist and ports the routing algorithm may use
  localparam logic [NPORT-1:0] EXISTS = {1'b1, (ROW < NR-1), (ROW > 0), (COL < NC-1)};
  localparam logic [NPORT-1:0] ROUTABLE = {(COL > 0), (ROW < NR-1), (ROW > 0), (COL < NC-1)};

  // ---------------------------------------------------------------- buffers
  logic [NPORT-1:0] pkt_vld, pop;
  logic [7:0]       b_hdr  [NPORT];
  logic [7:0]       b_tail [NPORT];
  logic [NPORT-1:0] pending;   // scout traffic arriving or waiting per port

  for (genvar p = 0; p < NPORT; p++) begin : g_in
    venice_in_buf u_buf (
      .clk, .rst_n, .in(in_flit[p]), .rdy(in_rdy[p]), .pkt_vld(pkt_vld[p]),
      .hdr(b_hdr[p]), .tail(b_tail[p]), .pop(pop[p])
    );
    assign pending[p] = !in_rdy[p] || (in_flit[p].vld && in_flit[p].scout);
  end

  // ------------------------------------------------------- decision timing
  logic       phase;
  logic [1:0] rr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= 1'b0;
    else        phase <= ~phase;
  end
  wire decide = (phase == COLOR);

  logic       have;
  logic [1:0] s;
  always_comb begin
    have = 1'b0;
    s    = rr;
    for (int k = NPORT - 1; k >= 0; k--) begin
      if (pkt_vld[2'(rr + 2'(k))]) begin
        have = 1'b1;
        s    = 2'(rr + 2'(k));
      end
    end
  end

  logic [PID_W-1:0]  pid;
  logic [DEST_W-1:0] dest;
  logic              reserve;
  assign pid     = flit_pid(b_tail[s]);
  assign dest    = flit_dest(b_hdr[s]);
  assign reserve = flit_reserve(b_hdr[s]);

  // ------------------------------------------------------ reservation table
  logic                     lk_hit, lk_is_entry, tbl_full, eject_busy;
  rsv_entry_t               lk_row, ins_row;
  logic [$clog2(DEPTH)-1:0] lk_idx;
  logic [NPORT-1:0]         busy;
  rsv_entry_t               rows [DEPTH];
  logic                     do_ins, do_rm;
  logic                     can_go, fire;

  venice_rsv_table #(.DEPTH(DEPTH)) u_tbl (
    .clk, .rst_n, .lk_pid(pid), .lk_port(s), .lk_hit, .lk_row, .lk_idx, .lk_is_entry,
    .ins(fire && do_ins), .ins_row, .rm(fire && do_rm), .rm_idx(lk_idx), .busy, .eject_busy, .rows, .full(tbl_full)
  );

  // tried mask: output ports this packet has reserved here in this attempt
  logic [NPORT-1:0] tried [NUM_FC];

  // ------------------------------------------------------- routing decision
  logic [1:0]       rc_in;
  logic [NPORT-1:0] rc_free, busy_eff;
  logic             rc_eject, rc_found, rc_min;
  logic [1:0]       rc_out, rnd;

  venice_route_compute #(.NR(NR), .NC(NC)) u_rc (
    .cur_row(($clog2(NR))'(ROW)), .cur_col(($clog2(NC))'(COL)), .dest(IW'(dest)),
    .in_port(rc_in), .free(rc_free), .rnd, .eject(rc_eject), .found(rc_found),
    .minimal(rc_min), .out_port(rc_out)
  );

  // action of this cycle
  logic       act_send, act_mode, act_route, act_drop;
  logic [1:0] act_port;
  rt_ev_t     ev_n;

  always_comb begin
    // a backtrack re-routes from the row's entry port, with the row's ports freed
    rc_in    = s;
    busy_eff = busy;
    if (!reserve && lk_hit && !lk_is_entry) begin
      rc_in    = lk_row.entry;
      busy_eff = busy & ~(NPORT'(1) << lk_row.entry) & ~(NPORT'(1) << lk_row.exit_p);
    end
    rc_free = ROUTABLE & ~busy_eff & ~tried[pid] & ~(NPORT'(1) << rc_in)
            & ~(pending & ~(NPORT'(1) << s));

    act_send  = 1'b0;
    act_mode  = 1'b0;
    act_port  = s;
    act_route = 1'b0;
    act_drop  = 1'b0;
    do_ins    = 1'b0;
    do_rm     = 1'b0;
    ins_row   = '0;
    ev_n      = '0;
    if (reserve && !lk_hit) begin
      // new hop of a scout packet
      act_send = 1'b1;
      if (rc_eject) begin
        if (eject_busy) begin
          act_mode        = 1'b0;           // chip port held: back upstream
          act_port        = s;
          ev_n.eject_busy = 1'b1;
          ev_n.backtrack  = 1'b1;
        end else begin
          act_mode   = 1'b1;                // turn round as confirmation
          act_port   = s;
          do_ins     = 1'b1;
          ins_row    = '{pid: pid, entry: s, exit_p: s, valid: 1'b1};
          ev_n.eject = 1'b1;
        end
      end else if (rc_found) begin
        act_mode      = 1'b1;
        act_port      = rc_out;
        act_route     = 1'b1;
        do_ins        = 1'b1;
        ins_row       = '{pid: pid, entry: s, exit_p: rc_out, valid: 1'b1};
        ev_n.reserve  = 1'b1;
        ev_n.minimal  = rc_min;
        ev_n.misroute = !rc_min;
      end else begin
        act_mode       = 1'b0;
        act_port       = s;
        ev_n.backtrack = 1'b1;
      end
    end else if (reserve && lk_hit && !lk_is_entry) begin
      // confirmation travelling back to the flash controller
      act_send     = 1'b1;
      act_mode     = 1'b1;
      act_port     = lk_row.entry;
      ev_n.confirm = 1'b1;
    end else if (!reserve && lk_hit && !lk_is_entry) begin
      // backtrack from downstream: drop the row, try another port
      act_send = 1'b1;
      do_rm    = 1'b1;
      if (rc_found && !rc_eject) begin
        act_mode      = 1'b1;
        act_port      = rc_out;
        act_route     = 1'b1;
        do_ins        = 1'b1;
        ins_row       = '{pid: pid, entry: lk_row.entry, exit_p: rc_out, valid: 1'b1};
        ev_n.reserve  = 1'b1;
        ev_n.reroute  = 1'b1;
        ev_n.minimal  = rc_min;
        ev_n.misroute = !rc_min;
      end else begin
        act_mode       = 1'b0;
        act_port       = lk_row.entry;
        ev_n.backtrack = 1'b1;
      end
    end else if (!reserve && lk_hit && lk_is_entry) begin
      // release of a path after its transfer
      do_rm         = 1'b1;
      ev_n.teardown = 1'b1;
      if (lk_row.entry == lk_row.exit_p) begin
        act_drop = 1'b1;
      end else begin
        act_send = 1'b1;
        act_mode = 1'b0;
        act_port = lk_row.exit_p;
      end
    end else begin
      act_drop = 1'b1;                       // stray packet, discarded
    end
  end

  // ------------------------------------------------------------ output stage
  logic [1:0] o_cnt  [NPORT];
  logic [7:0] o_hdr  [NPORT];
  logic [7:0] o_tail [NPORT];
  flit_t      xb_out [NPORT];

  assign can_go = act_drop || (o_cnt[act_port] == 2'd0 && out_rdy[act_port] && EXISTS[act_port]);
  assign fire   = decide && have && can_go;
  assign ev     = fire ? ev_n : '0;

  always_comb begin
    pop = '0;
    if (fire) pop[s] = 1'b1;
  end

  venice_lfsr2 u_lfsr (.clk, .rst_n, .step(fire && act_route), .q(rnd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      for (int p = 0; p < NPORT; p++) begin
        o_cnt[p]  <= '0;
        o_hdr[p]  <= '0;
        o_tail[p] <= '0;
      end
      for (int i = 0; i < NUM_FC; i++) tried[i] <= '0;
    end else begin
      if (decide) rr <= rr + 2'd1;
      for (int p = 0; p < NPORT; p++)
        if (o_cnt[p] != 2'd0) o_cnt[p] <= o_cnt[p] - 2'd1;
      for (int i = 0; i < NUM_FC; i++)
        if (attempt_clr[i]) tried[i] <= '0;
      if (fire && act_send) begin
        o_cnt[act_port]  <= 2'd2;
        o_hdr[act_port]  <= hdr_flit(act_mode, dest);
        o_tail[act_port] <= tail_flit(act_mode, pid);
      end
      if (fire && act_route) tried[pid][act_port] <= 1'b1;
    end
  end

  venice_crossbar #(.DEPTH(DEPTH)) u_xb (
    .clk, .rst_n, .rows, .in_flit, .chip_in, .out_flit(xb_out), .chip_out
  );

  for (genvar p = 0; p < NPORT; p++) begin : g_out
    always_comb begin
      if (xb_out[p].vld)          out_flit[p] = xb_out[p];
      else if (o_cnt[p] == 2'd2)  out_flit[p] = '{vld: 1'b1, scout: 1'b1, data: o_hdr[p]};
      else if (o_cnt[p] == 2'd1)  out_flit[p] = '{vld: 1'b1, scout: 1'b1, data: o_tail[p]};
      else                        out_flit[p] = FLIT_IDLE;
    end
    // circuit data and scout flits never meet on one output
    always_ff @(posedge clk)
      if (rst_n) a_no_collision: assert (!(xb_out[p].vld && o_cnt[p] != 2'd0))
        else $error("router (%0d,%0d): data and scout flit collide on port %0d", ROW, COL, p);
  end

  // checks on the decision taken at each clock edge
  always_ff @(posedge clk) begin
    if (rst_n && fire) begin
      a_no_stray: assert (!act_drop || (!reserve && lk_hit && lk_is_entry))
        else $error("router (%0d,%0d): stray scout packet %h %h on port %0d", ROW, COL, b_hdr[s], b_tail[s], s);
      a_table_room: assert (!(do_ins && !do_rm) || !tbl_full)
        else $error("router (%0d,%0d): reservation table full", ROW, COL);
    end
  end
endmodule
