// venice_rsv_table: the router reservation table.
//
// Each row holds {packet ID, entry port, exit port, valid}, with the field
// widths of the paper's router figure (3 + 2 + 2 + 1 bits). A valid row
// connects its entry and exit ports both ways for the circuit of that
// packet. The paper gives only four port codes, so this design marks the
// row that connects a port to the local flash chip (the ejection port) with
// exit == entry.
//
// Lookup (combinational): the row of packet `lk_pid` that holds port
// `lk_port` as entry or exit. A port belongs to at most one valid row, so
// the hit is unique. `busy` is the set of ports held by any row and
// `eject_busy` tells whether the flash chip port is held.
// Updates (at the clock edge): `rm` clears row `rm_idx`, then `ins` writes
// `ins_row` into the lowest free row (after the removal, so both may happen
// in one cycle). The number of rows (DEPTH) is this design's choice; a port
// belongs to at most one row, so no more than two rows are valid at a time.
//
// Lint note: the assertions sample rst_n synchronously (to stay quiet in
// reset) while the flops use it as an asynchronous reset, which Verilator
// reports as SYNCASYNCNET. This is intended; assertions are not logic.
module venice_rsv_table
  import venice_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [PID_W-1:0]         lk_pid,
  input  logic [1:0]               lk_port,
  output logic                     lk_hit,
  output rsv_entry_t               lk_row,
  output logic [$clog2(DEPTH)-1:0] lk_idx,
  output logic                     lk_is_entry,
  input  logic                     ins,
  input  rsv_entry_t               ins_row,
  input  logic                     rm,
  input  logic [$clog2(DEPTH)-1:0] rm_idx,
  output logic [NPORT-1:0]         busy,
  output logic                     eject_busy,
  output rsv_entry_t               rows [DEPTH],
  output logic                     full
);
  rsv_entry_t tbl [DEPTH];
  logic [$clog2(DEPTH)-1:0] free_idx;
  logic                     have_free;

  always_comb begin
    lk_hit      = 1'b0;
    lk_row      = '0;
    lk_idx      = '0;
    lk_is_entry = 1'b0;
    busy        = '0;
    eject_busy  = 1'b0;
    for (int i = 0; i < DEPTH; i++) begin
      if (tbl[i].valid) begin
        busy[tbl[i].entry]  = 1'b1;
        busy[tbl[i].exit_p] = 1'b1;
        if (tbl[i].entry == tbl[i].exit_p) eject_busy = 1'b1;
        if (tbl[i].pid == lk_pid && (tbl[i].entry == lk_port || tbl[i].exit_p == lk_port)) begin
          lk_hit      = 1'b1;
          lk_row      = tbl[i];
          lk_idx      = ($clog2(DEPTH))'(i);
          lk_is_entry = (tbl[i].entry == lk_port);
        end
      end
    end
    // lowest row that is free once a same-cycle removal is applied
    have_free = 1'b0;
    free_idx  = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!tbl[i].valid || (rm && rm_idx == ($clog2(DEPTH))'(i))) begin
        have_free = 1'b1;
        free_idx  = ($clog2(DEPTH))'(i);
      end
    end
    full = !have_free;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) tbl[i] <= '0;
    end else begin
      if (rm) tbl[rm_idx].valid <= 1'b0;
      if (ins && have_free) begin
        tbl[free_idx]       <= ins_row;
        tbl[free_idx].valid <= 1'b1;
      end
    end
  end

  assign rows = tbl;

  // a new row must not claim a port that another row already holds
  // (a port freed by the same-cycle removal may be reused)
  property p_no_double_claim;
    @(posedge clk) disable iff (!rst_n)
      (ins && !rm) |-> (!busy[ins_row.entry] && !busy[ins_row.exit_p]);
  endproperty
  a_no_double_claim: assert property (p_no_double_claim);
  a_not_full: assert property (@(posedge clk) disable iff (!rst_n) ins |-> have_free);
endmodule
