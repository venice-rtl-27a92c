// tb_venice_rsv_table: checks insert, lookup by (packet, port) on entry and
// exit ports, the busy mask, the chip-port (exit == entry) flag, removal,
// same-cycle remove + insert, and the full flag.
module tb_venice_rsv_table;
  import venice_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [2:0] lk_pid;
  logic [1:0] lk_port, lk_idx, rm_idx;
  logic lk_hit, lk_is_entry, ins, rm, eject_busy, full;
  rsv_entry_t lk_row, ins_row;
  logic [3:0] busy;
  rsv_entry_t rows [DEPTH];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  venice_rsv_table dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic put(input int pid, input int en, input int ex);
    ins_row = '{pid: 3'(pid), entry: 2'(en), exit_p: 2'(ex), valid: 1'b1};
    ins = 1'b1;
    @(negedge clk);
    ins = 1'b0;
  endtask

  task automatic look(input int pid, input int port);
    @(negedge clk);
    lk_pid = 3'(pid); lk_port = 2'(port);
    @(posedge clk);
  endtask

  initial begin
    ins = 0; rm = 0; rm_idx = 0; ins_row = '0; lk_pid = 0; lk_port = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(busy == 4'b0000 && !eject_busy && !full, "empty after reset");
    put(5, 3, 1);              // paper's example row: packet 5, entry LEFT, exit UP
    look(5, 3); check(lk_hit && lk_is_entry && lk_row.exit_p == 2'd1, "lookup by entry port");
    look(5, 1); check(lk_hit && !lk_is_entry && lk_row.entry == 2'd3, "lookup by exit port");
    look(4, 1); check(!lk_hit, "other packet misses");
    look(5, 0); check(!lk_hit, "other port misses");
    check(busy == 4'b1010, "busy mask");
    put(2, 2, 2);              // packet 2 ejects via DOWN
    check(eject_busy && busy == 4'b1110, "chip-port row");
    look(2, 2); check(lk_hit && lk_is_entry, "chip-port row lookup");
    put(6, 0, 0);
    check(busy == 4'b1111 && !full, "three rows hold all four ports");
    look(5, 3);
    @(negedge clk);
    rm = 1'b1; rm_idx = lk_idx;
    ins_row = '{pid: 3'd1, entry: 2'd3, exit_p: 2'd0, valid: 1'b1};
    ins = 1'b1;
    @(negedge clk);
    rm = 1'b0; ins = 1'b0;
    look(5, 3); check(!lk_hit, "removed row gone");
    look(1, 3); check(lk_hit && lk_row.exit_p == 2'd0, "same-cycle remove + insert");
    for (int i = 0; i < DEPTH; i++) begin
      rm = 1'b1; rm_idx = 2'(i);
      @(negedge clk);
    end
    rm = 1'b0;
    check(busy == 4'b0000 && !eject_busy && !full, "all removed");
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
