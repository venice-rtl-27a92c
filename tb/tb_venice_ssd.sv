// tb_venice_ssd: end-to-end test of the Venice flash array at its default
// size (8 x 8 flash nodes, 8 flash controllers), with a behavioural flash
// chip on every router.
//
// Phase 1  single read in an idle array. Checks: one scout packet, read data
//          correct, the bytes reach the controller exactly `distance`
//          cycles after the chip sends them (one register per router), and
//          back to back (Eq. 1 of the transfer-time model).
// Phase 2  hot spot: 8 concurrent reads to row 0, 4 of them to the same chip,
//          so controllers other than the closest are used, the chip port
//          is found held, packets backtrack, misroute and retry.
// Phase 3  random writes of 4 KB pages from all controllers, then reads of
//          every written page and of unwritten pages; all data compared.
// Every mechanism (minimal hop, misroute, backtrack, re-route after a
// backtrack, chip port held, confirmation, release, retry by the controller,
// non-closest controller, all controllers busy) must occur at least once.
module tb_venice_ssd;
  import venice_pkg::*;

  localparam int NR = 8, NC = 8, NCH = NR * NC;
  localparam int T_R = 3000, T_PROG = 100000;   // 3 us and 100 us at 1 GHz
  localparam int PAGE = 4096;
  localparam int N_RAND = 48;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                  req_vld;
  logic                  req_rdy;
  io_req_t               req;
  logic [$clog2(NR)-1:0] req_fc;
  logic [7:0]            fc_wdata [NR];
  logic [NR-1:0]         fc_wdata_vld, fc_wdata_rdy, fc_rdata_vld, fc_done;
  logic [7:0]            fc_rdata [NR];
  logic [7:0]            fc_tries [NR];
  flit_t                 chip_in  [NCH];
  flit_t                 chip_out [NCH];
  rt_ev_t                rt_ev    [NCH];

  venice_ssd dut (
    .clk, .rst_n, .req_vld, .req_rdy, .req, .req_fc,
    .fc_wdata, .fc_wdata_vld, .fc_wdata_rdy, .fc_rdata, .fc_rdata_vld,
    .fc_done, .fc_tries, .chip_in, .chip_out, .rt_ev
  );

  for (genvar i = 0; i < NCH; i++) begin : g_chip
    flash_chip_model #(.CHIP(i), .T_R(T_R), .T_PROG(T_PROG)) u_chip (
      .clk, .rst_n, .din(chip_out[i]), .dout(chip_in[i])
    );
  end

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  // ------------------------------------------------------- reference model
  function automatic logic [7:0] def_byte(input int chip, input int addr, input int i);
    return 8'((chip * 29 + addr * 13 + i * 7 + 5) & 255);
  endfunction
  function automatic logic [7:0] wr_byte(input int chip, input int addr, input int i);
    return 8'((chip * 71 + addr * 37 + i * 3 + (i >> 8) + 11) & 255);
  endfunction
  bit written [longint];

  // per-controller slot of the request it is serving
  bit   s_act   [NR];
  bit   s_wr    [NR];
  int   s_dest  [NR];
  int   s_addr  [NR];
  int   s_len   [NR];
  int   s_wi    [NR];
  int   s_ri    [NR];
  int   n_done = 0, n_issued = 0;
  int   data_errs = 0;

  // mechanism counters
  int c_min = 0, c_mis = 0, c_bt = 0, c_rr = 0, c_ej = 0, c_ejb = 0, c_conf = 0, c_td = 0;
  int c_retry = 0, c_far = 0, c_allbusy = 0;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NCH; i++) begin
      if (rt_ev[i].minimal)    c_min++;
      if (rt_ev[i].misroute)   c_mis++;
      if (rt_ev[i].backtrack)  c_bt++;
      if (rt_ev[i].reroute)    c_rr++;
      if (rt_ev[i].eject)      c_ej++;
      if (rt_ev[i].eject_busy) c_ejb++;
      if (rt_ev[i].confirm)    c_conf++;
      if (rt_ev[i].teardown)   c_td++;
    end
    if (req_vld && !req_rdy) c_allbusy++;
  end

  // write data streams and read data checking
  always_comb begin
    for (int k = 0; k < NR; k++) begin
      fc_wdata_vld[k] = s_act[k] && s_wr[k];
      fc_wdata[k]     = wr_byte(s_dest[k], s_addr[k], s_wi[k]);
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NR; k++) begin
      if (fc_wdata_vld[k] && fc_wdata_rdy[k]) s_wi[k]++;
      if (fc_rdata_vld[k]) begin
        logic [7:0] exp;
        exp = written.exists(s_dest[k] * 16777216 + s_addr[k]) ? wr_byte(s_dest[k], s_addr[k], s_ri[k])
                                                          : def_byte(s_dest[k], s_addr[k], s_ri[k]);
        if (fc_rdata[k] !== exp) data_errs++;
        s_ri[k]++;
      end
      if (fc_done[k]) begin
        if (s_wr[k]) check(s_wi[k] == s_len[k], $sformatf("FC%0d write byte count", k));
        else         check(s_ri[k] == s_len[k], $sformatf("FC%0d read byte count", k));
        if (fc_tries[k] > 1) c_retry++;
        s_act[k] = 1'b0;
        n_done++;
      end
    end
  end

  int last_fc;
  task automatic issue(input bit wr, input int dest, input int addr, input int len);
    @(negedge clk);
    req_vld   = 1'b1;
    req.write = wr;
    req.dest  = DEST_W'(dest);
    req.addr  = ADDR_W'(addr);
    req.len   = 16'(len);
    @(posedge clk);
    while (!req_rdy) @(posedge clk);
    last_fc        = int'(req_fc);
    s_act[req_fc]  = 1'b1;
    s_wr[req_fc]   = wr;
    s_dest[req_fc] = dest;
    s_addr[req_fc] = addr;
    s_len[req_fc]  = len;
    s_wi[req_fc]   = 0;
    s_ri[req_fc]   = 0;
    if (int'(req_fc) != dest / NC) c_far++;
    if (wr) written[dest * 16777216 + addr] = 1'b1;
    n_issued++;
    @(negedge clk);
    req_vld = 1'b0;
  endtask

  task automatic wait_all();
    while (n_done != n_issued) @(posedge clk);
  endtask

  // ---------------------------------------------------------------- phase 1
  longint t_chip, t_fc, t_fc_last;
  bit     got_chip, got_fc;
  always @(posedge clk) begin
    if (chip_in[5].vld && !got_chip) begin got_chip = 1; t_chip = cyc; end
    if (fc_rdata_vld[0]) begin
      if (!got_fc) begin got_fc = 1; t_fc = cyc; end
      t_fc_last = cyc;
    end
  end

  initial begin
    int nxt_addr [NCH];
    req_vld = 1'b0;
    req = '0;
    for (int k = 0; k < NR; k++) s_act[k] = 1'b0;
    for (int i = 0; i < NCH; i++) nxt_addr[i] = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // phase 1: read chip 5 (row 0, column 5) in an idle array
    issue(1'b0, 5, 24'h03A5C1, 64);
    check(last_fc == 0, "closest controller chosen in an idle array");
    wait_all();
    check(c_mis == 0 && c_bt == 0, "no misroute or backtrack in an idle array");
    check(got_chip && got_fc, "phase 1 data seen");
    check(t_fc - t_chip == 6, $sformatf("6-link path: data latency %0d cycles, expected 6", t_fc - t_chip));
    check(t_fc_last - t_fc == 63, "64 bytes arrive on consecutive cycles");
    check(data_errs == 0, "phase 1 read data");
    $display("phase 1 done at cycle %0d", cyc);

    // phase 2: hot spot on row 0
    fork
      begin
        issue(1'b0, 3, 201, 256);
        issue(1'b0, 3, 202, 256);
        issue(1'b0, 1, 201, 256);
        issue(1'b0, 3, 203, 256);
        issue(1'b0, 6, 201, 256);
        issue(1'b0, 3, 204, 256);
        issue(1'b0, 7, 201, 256);
        issue(1'b0, 2, 201, 256);
        issue(1'b0, 0, 201, 256);
      end
    join
    wait_all();
    check(data_errs == 0, "phase 2 read data");
    $display("phase 2 done at cycle %0d", cyc);

    // phase 3: random 4 KB page writes, then read everything back
    begin
      int d [N_RAND];
      int a [N_RAND];
      for (int j = 0; j < N_RAND; j++) begin
        d[j] = int'($urandom_range(NCH - 1));
        a[j] = nxt_addr[d[j]];
        nxt_addr[d[j]]++;
        issue(1'b1, d[j], a[j], PAGE);
      end
      wait_all();
      $display("phase 3 writes done at cycle %0d", cyc);
      for (int j = 0; j < N_RAND; j++) begin
        issue(1'b0, d[j], a[j], PAGE);
        if (j % 8 == 7) issue(1'b0, int'($urandom_range(NCH - 1)), 250, PAGE);
      end
      wait_all();
    end
    check(data_errs == 0, $sformatf("phase 3 read data (%0d byte errors)", data_errs));
    $display("phase 3 done at cycle %0d", cyc);

    $display("events: minimal=%0d misroute=%0d backtrack=%0d reroute=%0d eject=%0d eject_busy=%0d confirm=%0d teardown=%0d retry=%0d far_fc=%0d all_busy=%0d",
             c_min, c_mis, c_bt, c_rr, c_ej, c_ejb, c_conf, c_td, c_retry, c_far, c_allbusy);
    check(c_min > 0,     "minimal hop happened");
    check(c_mis > 0,     "misroute happened");
    check(c_bt > 0,      "backtrack happened");
    check(c_rr > 0,      "re-route after backtrack happened");
    check(c_ej == n_issued, "one chip-port reservation per request");
    check(c_ejb > 0,     "chip port found held");
    check(c_conf > 0,    "confirmation passed back");
    check(c_td > 0,      "path release happened");
    check(c_retry > 0,   "controller retried");
    check(c_far > 0,     "non-closest controller used");
    check(c_allbusy > 0, "all controllers busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d (issued %0d done %0d)", cyc, n_issued, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
