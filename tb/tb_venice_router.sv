// tb_venice_router: one router at row 1, column 1 of a 4 x 4 array, with
// the testbench acting as its four neighbours and its flash chip. Walks
// through every router action of the paper's Venice network:
//   minimal hop, confirmation passed back, circuit data both ways with one
//   cycle per router, misroute when the minimal port is held, backtrack
//   when no port is left, re-route after a backtrack from downstream,
//   ejection to the flash chip, chip port held (cancel back), path release
//   (rows removed, chip port freed), and the tried mask cleared by a new
//   attempt of the controller.
module tb_venice_router;
  import venice_pkg::*;
  localparam int NR = 4, NC = 4, ROW = 1, COL = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  flit_t       in_flit  [NPORT];
  flit_t       out_flit [NPORT];
  logic [3:0]  in_rdy, out_rdy;
  flit_t       chip_in, chip_out;
  logic [7:0]  attempt_clr;
  rt_ev_t      ev;

  venice_router #(.NR(NR), .NC(NC), .ROW(ROW), .COL(COL)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // ------------------------------------------------ output packet monitor
  logic [15:0] rx [NPORT][$];
  logic [7:0]  rx_hdr [NPORT];
  bit          rx_h   [NPORT];
  int n_min = 0, n_mis = 0, n_bt = 0, n_rr = 0, n_ej = 0, n_ejb = 0, n_conf = 0, n_td = 0;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPORT; p++)
      if (out_flit[p].vld && out_flit[p].scout) begin
        if (!flit_is_tail(out_flit[p].data)) begin rx_hdr[p] = out_flit[p].data; rx_h[p] = 1; end
        else begin
          if (!rx_h[p]) begin failures++; $display("FAIL tail without header on port %0d", p); end
          rx[p].push_back({rx_hdr[p], out_flit[p].data});
          rx_h[p] = 0;
        end
      end
    n_min += ev.minimal;  n_mis += ev.misroute; n_bt += ev.backtrack; n_rr += ev.reroute;
    n_ej  += ev.eject;    n_ejb += ev.eject_busy; n_conf += ev.confirm; n_td += ev.teardown;
  end

  task automatic send(input int port, input bit reserve, input int dest, input int pid);
    @(negedge clk);
    while (!in_rdy[port]) @(negedge clk);
    in_flit[port] = '{vld: 1'b1, scout: 1'b1, data: hdr_flit(reserve, DEST_W'(dest))};
    @(negedge clk);
    in_flit[port] = '{vld: 1'b1, scout: 1'b1, data: tail_flit(reserve, PID_W'(pid))};
    @(negedge clk);
    in_flit[port] = FLIT_IDLE;
  endtask

  task automatic expect_pkt(input int port, input bit reserve, input int dest, input int pid, input string what);
    int t = 0;
    while (rx[port].size() == 0 && t < 40) begin @(posedge clk); t++; end
    if (rx[port].size() == 0) check(0, {what, ": no packet"});
    else begin
      logic [15:0] g;
      g = rx[port].pop_front();
      check(g == {hdr_flit(reserve, DEST_W'(dest)), tail_flit(reserve, PID_W'(pid))},
            $sformatf("%s: got %h on port %0d", what, g, port));
    end
    for (int p = 0; p < NPORT; p++)
      check(rx[p].size() == 0, $sformatf("%s: no other packet (port %0d)", what, p));
  endtask

  task automatic expect_nothing(input string what);
    repeat (20) @(posedge clk);
    for (int p = 0; p < NPORT; p++) check(rx[p].size() == 0, {what, ": nothing sent"});
  endtask

  // circuit data: byte in on port a arrives on port b (or the chip) next cycle
  task automatic data_check(input int a, input int b, input string what);
    for (int n = 0; n < 8; n++) begin
      logic [7:0] v;
      v = 8'($urandom);
      @(negedge clk);
      if (a < 0) chip_in = '{vld: 1'b1, scout: 1'b0, data: v};
      else       in_flit[a] = '{vld: 1'b1, scout: 1'b0, data: v};
      @(negedge clk);
      chip_in = FLIT_IDLE;
      if (a >= 0) in_flit[a] = FLIT_IDLE;
      if (b < 0) check(chip_out.vld && chip_out.data == v, {what, ": byte to chip after one cycle"});
      else       check(out_flit[b].vld && !out_flit[b].scout && out_flit[b].data == v,
                       {what, ": byte after one cycle"});
    end
  endtask

  initial begin
    for (int p = 0; p < NPORT; p++) begin in_flit[p] = FLIT_IDLE; rx_h[p] = 0; end
    chip_in = FLIT_IDLE; out_rdy = 4'b1111; attempt_clr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // 1. pid 1 from LEFT to chip (1,3): only minimal port is RIGHT
    send(P_LEFT, 1, 7, 1);
    expect_pkt(P_RIGHT, 1, 7, 1, "minimal hop RIGHT");
    // 2. confirmation from downstream goes back out of the entry port
    send(P_RIGHT, 1, 7, 1);
    expect_pkt(P_LEFT, 1, 7, 1, "confirmation back LEFT");
    // 3. circuit data both ways
    data_check(P_LEFT, P_RIGHT, "LEFT->RIGHT");
    data_check(P_RIGHT, P_LEFT, "RIGHT->LEFT");
    // 4. pid 2 from UP to (1,3): RIGHT held, so misroute DOWN (not UP: input)
    send(P_UP, 1, 7, 2);
    expect_pkt(P_DOWN, 1, 7, 2, "misroute DOWN");
    // 5. downstream backtracks pid 2: no port left, so backtrack out of UP
    send(P_DOWN, 0, 7, 2);
    expect_pkt(P_UP, 0, 7, 2, "backtrack UP");
    // 6. release of pid 1
    send(P_LEFT, 0, 7, 1);
    expect_pkt(P_RIGHT, 0, 7, 1, "release forwarded RIGHT");
    // 7. pid 3 from UP reaches its chip (1,1): chip port reserved, confirm back
    send(P_UP, 1, 5, 3);
    expect_pkt(P_UP, 1, 5, 3, "eject + confirm UP");
    data_check(P_UP, -1, "UP->chip");
    data_check(-1, P_UP, "chip->UP");
    // 8. pid 4 from DOWN to the same chip: chip port held, cancel back
    send(P_DOWN, 1, 5, 4);
    expect_pkt(P_DOWN, 0, 5, 4, "chip port held: cancel DOWN");
    // 9. release of pid 3 ends at this router
    send(P_UP, 0, 5, 3);
    expect_nothing("release at the destination");
    // 10. pid 4 again: now ejects
    send(P_DOWN, 1, 5, 4);
    expect_pkt(P_DOWN, 1, 5, 4, "eject after release");
    // 11. pid 5 from LEFT to (1,3): RIGHT; then backtrack from RIGHT -> re-route UP
    send(P_LEFT, 1, 7, 5);
    expect_pkt(P_RIGHT, 1, 7, 5, "pid 5 minimal RIGHT");
    send(P_RIGHT, 0, 7, 5);
    expect_pkt(P_UP, 1, 7, 5, "re-route UP after backtrack (DOWN is held by the chip row)");
    send(P_UP, 0, 7, 5);
    expect_pkt(P_LEFT, 0, 7, 5, "all ports tried: backtrack LEFT");
    // 12. new attempt: tried mask cleared, RIGHT is taken again
    @(negedge clk); attempt_clr[5] = 1'b1; @(negedge clk); attempt_clr[5] = 1'b0;
    send(P_LEFT, 1, 7, 5);
    expect_pkt(P_RIGHT, 1, 7, 5, "after a new attempt RIGHT is tried again");
    // 13. without the clear the tried mask keeps RIGHT and UP excluded
    send(P_RIGHT, 0, 7, 5);
    expect_pkt(P_UP, 1, 7, 5, "re-route UP (RIGHT tried)");
    send(P_UP, 0, 7, 5);
    expect_pkt(P_LEFT, 0, 7, 5, "backtrack LEFT again");

    repeat (5) @(posedge clk);
    check(n_min > 0 && n_mis > 0 && n_bt > 0 && n_rr > 0 && n_ej == 2 && n_ejb == 1 && n_conf > 0 && n_td > 0,
          $sformatf("events min%0d mis%0d bt%0d rr%0d ej%0d ejb%0d conf%0d td%0d",
                    n_min, n_mis, n_bt, n_rr, n_ej, n_ejb, n_conf, n_td));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
