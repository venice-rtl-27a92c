// tb_venice_mesh: a 4 x 4 flash-node network with the testbench acting as
// the four flash controllers (one per row, on the left edge) and the flash
// chips. Checks:
//   - an idle network reserves a minimal path (one reservation per hop plus
//     the chip port) and returns the scout packet in reserve mode;
//   - circuit data crosses the path in one cycle per router, both ways,
//     back to back (the paper's [distance + size/width] x link latency);
//   - a second controller aiming at a held chip gets its packet back in
//     cancel mode, and succeeds after the first path is released;
//   - release removes exactly the rows of the path;
//   - four controllers working at the same time (reserve, data, release)
//     all succeed, retrying after a cancel, carry data without
//     interference, and leave the network empty afterwards.
module tb_venice_mesh;
  timeunit 1ns; timeprecision 100ps;
  import venice_pkg::*;
  localparam int NR = 4, NC = 4, NCH = NR * NC;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  flit_t         fc_to_net [NR];
  logic [NR-1:0] fc_in_rdy, attempt_clr;
  flit_t         net_to_fc [NR];
  flit_t         chip_in   [NCH];
  flit_t         chip_out  [NCH];
  rt_ev_t        ev        [NCH];

  venice_mesh #(.NR(NR), .NC(NC)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  int n_min = 0, n_mis = 0, n_ej = 0, n_ejb = 0, n_td = 0, n_bt = 0;
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < NCH; i++) begin
      n_min += ev[i].minimal; n_mis += ev[i].misroute; n_ej += ev[i].eject;
      n_ejb += ev[i].eject_busy; n_td += ev[i].teardown; n_bt += ev[i].backtrack;
    end

  // replies to each controller
  logic [15:0] rx [NR][$];
  logic [7:0]  rx_hdr [NR];
  always @(posedge clk) if (rst_n)
    for (int k = 0; k < NR; k++)
      if (net_to_fc[k].vld && net_to_fc[k].scout) begin
        if (!flit_is_tail(net_to_fc[k].data)) rx_hdr[k] = net_to_fc[k].data;
        else rx[k].push_back({rx_hdr[k], net_to_fc[k].data});
      end

  task automatic launch(input int k, input bit reserve, input int dest);
    @(negedge clk);
    while (!fc_in_rdy[k]) @(negedge clk);
    fc_to_net[k]   = '{vld: 1'b1, scout: 1'b1, data: hdr_flit(reserve, DEST_W'(dest))};
    attempt_clr[k] = reserve;
    @(negedge clk);
    attempt_clr[k] = 1'b0;
    fc_to_net[k]   = '{vld: 1'b1, scout: 1'b1, data: tail_flit(reserve, PID_W'(k))};
    @(negedge clk);
    fc_to_net[k]   = FLIT_IDLE;
  endtask

  // returns 1: reserved, 0: cancelled
  task automatic reply(input int k, input int dest, output bit ok);
    int t = 0;
    while (rx[k].size() == 0 && t < 2000) begin @(posedge clk); t++; end
    check(rx[k].size() != 0, $sformatf("FC%0d got a reply", k));
    ok = 0;
    if (rx[k].size() != 0) begin
      logic [15:0] g;
      g  = rx[k].pop_front();
      ok = flit_reserve(g[15:8]);
      check(flit_dest(g[15:8]) == DEST_W'(dest) && flit_pid(g[7:0]) == PID_W'(k),
            $sformatf("FC%0d reply carries its own packet", k));
    end
  endtask

  task automatic reserve_path(input int k, input int dest, output int tries);
    bit ok;
    tries = 0;
    do begin
      launch(k, 1'b1, dest);
      reply(k, dest, ok);
      tries++;
    end while (!ok && tries < 500);
    check(ok, $sformatf("FC%0d reserved a path to chip %0d", k, dest));
  endtask

  // data both ways over a reserved path; checks latency = routers on the path
  task automatic data_path(input int k, input int dest, input int lat, input int nbytes);
    logic [7:0] v [$];
    int t0, got;
    for (int n = 0; n < nbytes; n++) v.push_back(8'($urandom));
    for (int dir = 0; dir < 2; dir++) begin
      got = 0;
      fork
        begin
          @(negedge clk);
          t0 = int'(cyc);
          for (int n = 0; n < nbytes; n++) begin
            if (dir == 0) fc_to_net[k] = '{vld: 1'b1, scout: 1'b0, data: v[n]};
            else          chip_in[dest] = '{vld: 1'b1, scout: 1'b0, data: v[n]};
            @(negedge clk);
          end
          fc_to_net[k] = FLIT_IDLE; chip_in[dest] = FLIT_IDLE;
        end
        begin
          int t = 0;
          while (got < nbytes && t < 200) begin
            @(posedge clk); #0.5;
            t++;
            if ((dir == 0 && chip_out[dest].vld) || (dir == 1 && net_to_fc[k].vld && !net_to_fc[k].scout)) begin
              logic [7:0] d;
              d = (dir == 0) ? chip_out[dest].data : net_to_fc[k].data;
              check(d == v[got], $sformatf("FC%0d<->chip %0d byte %0d dir %0d", k, dest, got, dir));
              if (got == 0 && lat > 0)
                check(int'(cyc) - t0 == lat, $sformatf("latency %0d, expected %0d", int'(cyc) - t0, lat));
              got++;
            end
          end
          check(got == nbytes, $sformatf("FC%0d dir %0d all bytes arrived", k, dir));
        end
      join
    end
  endtask

  initial begin
    int tries;
    bit ok;
    for (int k = 0; k < NR; k++) begin fc_to_net[k] = FLIT_IDLE; rx_hdr[k] = '0; end
    for (int i = 0; i < NCH; i++) chip_in[i] = FLIT_IDLE;
    attempt_clr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);

    // 1. FC0 -> chip 10 (row 2, col 2) in an idle network
    reserve_path(0, 10, tries);
    check(tries == 1 && n_min == 4 && n_mis == 0 && n_ej == 1,
          $sformatf("minimal path: tries %0d minimal hops %0d misroutes %0d", tries, n_min, n_mis));
    // 2. data: 5 routers on the path -> 5 cycles
    data_path(0, 10, 5, 32);
    // 3. FC1 -> the same chip: chip port held
    launch(1, 1'b1, 10);
    reply(1, 10, ok);
    check(!ok && n_ejb >= 1, "held chip port returns a cancelled packet");
    // 4. release: five rows removed
    launch(0, 1'b0, 10);
    repeat (40) @(posedge clk);
    check(n_td == 5, $sformatf("release removed %0d rows, expected 5", n_td));
    check(rx[0].size() == 0, "release packet is not returned");
    reserve_path(1, 10, tries);
    check(tries == 1, "FC1 succeeds once the chip is released");
    data_path(1, 10, 4, 16);
    launch(1, 1'b0, 10);
    repeat (40) @(posedge clk);

    // 5. four controllers at once, all to column 3
    n_ej = 0; n_td = 0;
    fork
      begin int t; reserve_path(0, 15, t); data_path(0, 15, 0, 24); launch(0, 1'b0, 15); end
      begin int t; reserve_path(1, 11, t); data_path(1, 11, 0, 24); launch(1, 1'b0, 11); end
      begin int t; reserve_path(2, 7, t);  data_path(2, 7, 0, 24);  launch(2, 1'b0, 7);  end
      begin int t; reserve_path(3, 3, t);  data_path(3, 3, 0, 24);  launch(3, 1'b0, 3);  end
    join
    check(n_ej == 4, "four chip ports reserved");
    repeat (60) @(posedge clk);
    // 6. network empty again: minimal path to the far corner, 7 hops
    n_min = 0; n_mis = 0;
    reserve_path(0, 15, tries);
    check(tries == 1 && n_min == 6 && n_mis == 0, $sformatf("empty network after release: %0d hops", n_min));
    data_path(0, 15, 7, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
