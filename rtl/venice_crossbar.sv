// venice_crossbar: circuit-switched data path of a router.
//
// Venice uses circuit switching: once a scout packet has reserved a path,
// command and data bytes cross each router without buffering. For every
// valid reservation row this block joins the entry and exit ports in both
// directions: a data byte (scout = 0) arriving on one of them leaves on the
// other one cycle later. A row with exit == entry joins its port to the
// flash chip I/O bus instead. Scout flits are never switched here.
//
// Timing: one register stage per router, so a byte crosses `d` routers in
// `d` cycles, matching the paper's transfer-time formula
// [distance + size/link_width] x link latency.
module venice_crossbar
  import venice_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  rsv_entry_t rows     [DEPTH],
  input  flit_t      in_flit  [NPORT],
  input  flit_t      chip_in,
  output flit_t      out_flit [NPORT],
  output flit_t      chip_out
);
  flit_t nxt [NPORT];
  flit_t nxt_chip;

  function automatic flit_t as_data(input flit_t f);
    flit_t r;
    r       = f;
    r.vld   = f.vld && !f.scout;
    r.scout = 1'b0;
    return r;
  endfunction

  always_comb begin
    for (int p = 0; p < NPORT; p++) nxt[p] = FLIT_IDLE;
    nxt_chip = FLIT_IDLE;
    for (int i = 0; i < DEPTH; i++) begin
      if (rows[i].valid) begin
        if (rows[i].entry == rows[i].exit_p) begin
          nxt_chip             = as_data(in_flit[rows[i].entry]);
          nxt[rows[i].entry]   = as_data(chip_in);
        end else begin
          nxt[rows[i].exit_p]  = as_data(in_flit[rows[i].entry]);
          nxt[rows[i].entry]   = as_data(in_flit[rows[i].exit_p]);
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORT; p++) out_flit[p] <= FLIT_IDLE;
      chip_out <= FLIT_IDLE;
    end else begin
      for (int p = 0; p < NPORT; p++) out_flit[p] <= nxt[p];
      chip_out <= nxt_chip;
    end
  end
endmodule
