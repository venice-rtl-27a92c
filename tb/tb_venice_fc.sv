// tb_venice_fc: the flash-controller path engine against a testbench model
// of its router and the far end of the circuit. Checks the scout packet
// format (header = reserve + destination, tail = reserve + controller ID),
// the attempt-clear pulse, retry at once after a cancelled packet, the
// command bytes, write data streaming with gaps, read data delivery, the
// release packet, the done pulse with the attempt count, waiting while the
// router input is not ready, and that each stage starts the cycle after
// the previous one ends.
module tb_venice_fc;
  timeunit 1ns; timeprecision 100ps;
  import venice_pkg::*;
  localparam int FC_ID = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic       req_vld, req_rdy, wdata_vld, wdata_rdy, rdata_vld, done, net_rdy, attempt_clr;
  io_req_t    req;
  logic [7:0] wdata, rdata, tries;
  flit_t      net_out, net_in;

  venice_fc #(.FC_ID(FC_ID)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // everything the controller sends, with the cycle it was sent
  flit_t  tx   [$];
  longint tx_t [$];
  int     n_clr = 0, n_done = 0;
  logic [7:0] last_tries;
  always @(posedge clk) if (rst_n) begin
    if (net_out.vld) begin
      tx.push_back(net_out); tx_t.push_back(cyc);
      check(net_rdy || !net_out.scout || flit_is_tail(net_out.data), "header only sent when the router is ready");
    end
    if (attempt_clr) n_clr++;
    if (done) begin n_done++; last_tries = tries; end
  end

  task automatic get(output flit_t f, output longint t);
    int w = 0;
    while (tx.size() == 0 && w < 500) begin @(posedge clk); #0.5; w++; end
    if (tx.size() == 0) begin check(0, "controller sent nothing"); f = FLIT_IDLE; t = 0; end
    else begin f = tx.pop_front(); t = tx_t.pop_front(); end
  endtask

  task automatic expect_scout(input bit reserve, input int dest, output longint t_end);
    flit_t f; longint t;
    get(f, t);
    check(f.scout && f.data == hdr_flit(reserve, DEST_W'(dest)), $sformatf("scout header %h", f.data));
    get(f, t);
    check(f.scout && f.data == tail_flit(reserve, PID_W'(FC_ID)), $sformatf("scout tail %h", f.data));
    t_end = t;
  endtask

  task automatic reply(input bit reserve, input int dest, output longint t_end);
    repeat ($urandom_range(3, 10)) @(negedge clk);
    net_in = '{vld: 1'b1, scout: 1'b1, data: hdr_flit(reserve, DEST_W'(dest))};
    @(negedge clk);
    net_in = '{vld: 1'b1, scout: 1'b1, data: tail_flit(reserve, PID_W'(FC_ID))};
    t_end = cyc;
    @(negedge clk);
    net_in = FLIT_IDLE;
  endtask

  task automatic expect_cmd(input logic [7:0] op, input int addr, input int len, input longint t_rep);
    flit_t f; longint t;
    logic [7:0] e [6];
    e = '{op, 8'(addr >> 16), 8'(addr >> 8), 8'(addr), 8'(len >> 8), 8'(len)};
    for (int i = 0; i < 6; i++) begin
      get(f, t);
      check(!f.scout && f.data == e[i], $sformatf("command byte %0d = %h, expected %h", i, f.data, e[i]));
      check(t == t_rep + 1 + i, $sformatf("command byte %0d at +%0d", i, t - t_rep));
    end
  endtask

  task automatic issue(input bit wr, input int dest, input int addr, input int len);
    @(negedge clk);
    check(req_rdy, "idle controller is ready");
    req_vld = 1'b1;
    req = '{write: wr, dest: DEST_W'(dest), addr: ADDR_W'(addr), len: 16'(len)};
    @(negedge clk);
    req_vld = 1'b0;
    check(!req_rdy, "busy controller is not ready");
  endtask

  // write data source with random gaps
  int wr_i = 0;
  always @(negedge clk) begin
    wdata_vld <= ($urandom_range(3) != 0);
    wdata     <= 8'(wr_i * 7 + 1);
  end
  always @(posedge clk) if (wdata_vld && wdata_rdy) wr_i++;

  // read data checker
  int rd_got = 0;
  always @(posedge clk) if (rdata_vld) begin
    check(rdata == 8'(rd_got ^ 8'h5a), $sformatf("read byte %0d", rd_got));
    rd_got++;
  end
  initial begin
    flit_t f; longint t, tr;
    int clr0;
    req_vld = 0; req = '0; net_in = FLIT_IDLE; net_rdy = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // ---- write of 20 bytes to chip 9, page 3; first attempt cancelled
    net_rdy = 1'b0;                      // router input busy for a while
    issue(1'b1, 9, 3, 20);
    repeat (6) @(negedge clk);
    check(tx.size() == 0, "no scout packet while the router is not ready");
    net_rdy = 1'b1;
    clr0 = n_clr;
    expect_scout(1'b1, 9, t);
    check(n_clr == clr0 + 1, "attempt clear pulsed with the header");
    reply(1'b0, 9, tr);                  // cancelled: no path
    expect_scout(1'b1, 9, t);
    check(t == tr + 2, $sformatf("retry starts at once (%0d cycles after the reply)", t - tr));
    check(n_clr == clr0 + 2, "attempt clear pulsed again");
    reply(1'b1, 9, tr);                  // path reserved
    expect_cmd(OP_WRITE, 3, 20, tr);
    wr_i = 0;
    for (int i = 0; i < 20; i++) begin
      get(f, t);
      check(!f.scout && f.data == 8'(i * 7 + 1), $sformatf("write byte %0d", i));
    end
    expect_scout(1'b0, 9, t);            // release
    repeat (3) @(negedge clk);
    check(n_done == 1 && last_tries == 2, $sformatf("done with %0d tries", last_tries));
    check(req_rdy, "ready again");

    // ---- read of 300 bytes from chip 40, page 77; first attempt succeeds
    rd_got = 0;
    issue(1'b0, 40, 24'h0A1B2C, 300);
    expect_scout(1'b1, 40, t);
    reply(1'b1, 40, tr);
    expect_cmd(OP_READ, 24'h0A1B2C, 300, tr);
    fork
      begin
        for (int i = 0; i < 300; i++) begin
          @(negedge clk);
          net_in = '{vld: ($urandom_range(4) != 0), scout: 1'b0, data: 8'(i ^ 8'h5a)};
          while (!net_in.vld) begin
            @(negedge clk);
            net_in = '{vld: ($urandom_range(4) != 0), scout: 1'b0, data: 8'(i ^ 8'h5a)};
          end
        end
        @(negedge clk);
        net_in = FLIT_IDLE;
      end
    join
    check(rd_got == 300, $sformatf("%0d read bytes delivered", rd_got));
    expect_scout(1'b0, 40, t);
    repeat (3) @(negedge clk);
    check(n_done == 2 && last_tries == 1, "read done in one try");
    check(tx.size() == 0, "nothing extra sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
