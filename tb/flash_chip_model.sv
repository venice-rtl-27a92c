// flash_chip_model: behavioural model of one NAND flash chip as seen on its
// 8-bit I/O bus (not synthesizable; testbench use only).
//
// It accepts the command bytes the flash controllers send over a reserved
// circuit: {opcode, page address (3 bytes, high first), byte count
// (2 bytes, high first)}. For a write it takes `len`
// data bytes, stores them, and is then busy for T_PROG cycles. For a read it
// waits T_R cycles (plus any busy time left), then returns `len` bytes on
// consecutive cycles. A page that was never written reads as
// def_byte(CHIP, addr, i). Timing is counted in clock cycles.
module flash_chip_model
  import venice_pkg::*;
#(
  parameter int unsigned CHIP   = 0,
  parameter int unsigned T_R    = 30,
  parameter int unsigned T_PROG = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t din,
  output flit_t dout
);
  function automatic logic [7:0] def_byte(input int chip, input int addr, input int i);
    return 8'((chip * 29 + addr * 13 + i * 7 + 5) & 255);
  endfunction

  logic [7:0] mem [longint];
  int   st;            // 0 op, 1/7/8 addr, 6 len hi, 2 len lo, 3 wdata, 4 read wait, 5 read out
  logic wr;
  int   addr, len, i, busy, wait_c;
  int   n_reads, n_writes, first_out_cycle;
  int   cyc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= 0; busy <= 0; wait_c <= 0; i <= 0; n_reads <= 0; n_writes <= 0;
      dout <= FLIT_IDLE; cyc <= 0; wr <= 1'b0; addr <= 0; len <= 0;
      first_out_cycle <= 0;
    end else begin
      cyc  <= cyc + 1;
      dout <= FLIT_IDLE;
      if (busy > 0) busy <= busy - 1;
      case (st)
        0: if (din.vld) begin wr <= (din.data == OP_WRITE); st <= 1; end
        1: if (din.vld) begin addr <= int'(din.data) << 16; st <= 7; end
        7: if (din.vld) begin addr <= addr + (int'(din.data) << 8); st <= 8; end
        8: if (din.vld) begin addr <= addr + int'(din.data); st <= 6; end
        6: if (din.vld) begin len <= int'(din.data) * 256; st <= 2; end
        2: if (din.vld) begin
             len <= len + int'(din.data); i <= 0;
             if (wr) st <= (len + int'(din.data) == 0) ? 0 : 3;
             else begin st <= 4; wait_c <= T_R + busy; end
           end
        3: if (din.vld) begin
             mem[longint'(addr) * 65536 + i] = din.data;
             i <= i + 1;
             if (i + 1 == len) begin st <= 0; busy <= T_PROG; n_writes <= n_writes + 1; end
           end
        4: if (wait_c <= 1) begin st <= 5; i <= 0; end
           else wait_c <= wait_c - 1;
        5: begin
             dout.vld  <= 1'b1;
             dout.data <= mem.exists(longint'(addr) * 65536 + i) ? mem[longint'(addr) * 65536 + i] : def_byte(CHIP, addr, i);
             if (i == 0) first_out_cycle <= cyc + 1;
             i <= i + 1;
             if (i + 1 == len) begin st <= 0; n_reads <= n_reads + 1; end
           end
        default: st <= 0;
      endcase
    end
  end
endmodule
