// tb_venice_crossbar: checks circuit switching: a row joins entry and exit
// ports both ways with one cycle of delay, a chip-port row joins a port and
// the flash chip bus, scout flits and unreserved ports are not switched.
module tb_venice_crossbar;
  import venice_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  rsv_entry_t rows [DEPTH];
  flit_t in_flit [4];
  flit_t out_flit [4];
  flit_t chip_in, chip_out;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  venice_crossbar dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic flit_t dbyte(input logic [7:0] d);
    return '{vld: 1'b1, scout: 1'b0, data: d};
  endfunction

  initial begin
    for (int i = 0; i < DEPTH; i++) rows[i] = '0;
    for (int p = 0; p < 4; p++) in_flit[p] = FLIT_IDLE;
    chip_in = FLIT_IDLE;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    rows[0] = '{pid: 3'd1, entry: P_LEFT, exit_p: P_UP, valid: 1'b1};
    rows[2] = '{pid: 3'd4, entry: P_DOWN, exit_p: P_DOWN, valid: 1'b1};
    for (int n = 0; n < 40; n++) begin
      logic [7:0] a, b, c, e;
      a = 8'($urandom); b = 8'($urandom); c = 8'($urandom); e = 8'($urandom);
      in_flit[P_LEFT]  = dbyte(a);
      in_flit[P_UP]    = dbyte(b);
      in_flit[P_DOWN]  = dbyte(c);
      in_flit[P_RIGHT] = dbyte(8'h55);     // unreserved port
      chip_in          = dbyte(e);
      @(negedge clk);
      check(out_flit[P_UP].vld && out_flit[P_UP].data == a, "LEFT -> UP");
      check(out_flit[P_LEFT].vld && out_flit[P_LEFT].data == b, "UP -> LEFT");
      check(chip_out.vld && chip_out.data == c, "DOWN -> chip");
      check(out_flit[P_DOWN].vld && out_flit[P_DOWN].data == e, "chip -> DOWN");
      check(!out_flit[P_RIGHT].vld, "unreserved port idle");
    end
    in_flit[P_LEFT] = '{vld: 1'b1, scout: 1'b1, data: 8'h45};
    @(negedge clk);
    check(!out_flit[P_UP].vld, "scout flit not switched");
    rows[0].valid = 1'b0;
    in_flit[P_LEFT] = dbyte(8'h12);
    @(negedge clk);
    check(!out_flit[P_UP].vld, "released row not switched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
