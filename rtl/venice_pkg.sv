// venice_pkg: types and constants shared by the Venice flash-node network.
//
// Scout packet (two 8-bit flits). The field layout follows the paper's figure
// of the packet for 64 chips and 8 flash controllers:
//   header flit = {type[1:0], destination chip ID[5:0]}
//   tail flit   = {type[1:0], source flash controller ID[2:0], 3 unused bits}
//   type[1] (first bit)  : 0 header flit, 1 tail flit
//   type[0] (second bit) : 0 cancel mode, 1 reserve mode
// The source flash controller ID doubles as the packet ID.
//
// Port codes follow the paper's router figure: 00 RIGHT, 01 UP, 10 DOWN,
// 11 LEFT. This design puts row 0 at the top, so UP leads to row-1.
//
// Link channel (this design's choice): one direction of a link carries a
// flit_t per cycle; `scout` separates scout flits from circuit data bytes.
//
// Lint note: when a single module is checked alone, the constants and
// field-access helpers it does not use are reported as unused.
package venice_pkg;

  localparam int unsigned PID_W   = 3;   // packet ID = flash controller ID
  localparam int unsigned DEST_W  = 6;   // destination flash chip ID
  localparam int unsigned NPORT   = 4;   // mesh ports per router
  localparam int unsigned ADDR_W  = 24;  // page address sent in the command

  typedef enum logic [1:0] {
    P_RIGHT = 2'b00,
    P_UP    = 2'b01,
    P_DOWN  = 2'b10,
    P_LEFT  = 2'b11
  } port_e;

  // one direction of a link
  typedef struct packed {
    logic       vld;
    logic       scout;   // 1: scout packet flit, 0: circuit data byte
    logic [7:0] data;
  } flit_t;

  // router reservation table row: packet ID, entry port, exit port, valid.
  // exit == entry marks a row that connects the entry port to the flash chip.
  typedef struct packed {
    logic [PID_W-1:0] pid;
    logic [1:0]       entry;
    logic [1:0]       exit_p;
    logic             valid;
  } rsv_entry_t;

  // host-side I/O request handed to a flash controller
  typedef struct packed {
    logic              write;
    logic [DEST_W-1:0] dest;
    logic [ADDR_W-1:0] addr;   // page address within the chip
    logic [15:0]       len;    // number of data bytes (a 4 KB page = 4096)
  } io_req_t;

  // per-router event strobes, one cycle each (counted by testbenches)
  typedef struct packed {
    logic reserve;     // a link was reserved for a scout packet
    logic minimal;     // ... on a minimal path
    logic misroute;    // ... on a non-minimal path
    logic backtrack;   // a scout packet was sent back upstream in cancel mode
    logic reroute;     // a backtracked packet was sent out on another port
    logic eject;       // the flash chip port was reserved (destination reached)
    logic eject_busy;  // destination reached but its chip port was held
    logic confirm;     // a confirmed scout packet was passed back to its source
    logic teardown;    // a reservation row was released
  } rt_ev_t;

  localparam flit_t FLIT_IDLE = '{vld: 1'b0, scout: 1'b0, data: 8'h00};

  // flit builders / field access
  function automatic logic [7:0] hdr_flit(input logic reserve, input logic [DEST_W-1:0] dest);
    return {1'b0, reserve, dest};
  endfunction

  function automatic logic [7:0] tail_flit(input logic reserve, input logic [PID_W-1:0] pid);
    return {1'b1, reserve, pid, 3'b000};
  endfunction

  function automatic logic flit_is_tail(input logic [7:0] f);
    return f[7];
  endfunction

  function automatic logic flit_reserve(input logic [7:0] f);
    return f[6];
  endfunction

  function automatic logic [DEST_W-1:0] flit_dest(input logic [7:0] f);
    return f[DEST_W-1:0];
  endfunction

  function automatic logic [PID_W-1:0] flit_pid(input logic [7:0] f);
    return f[5:3];
  endfunction

  // opcodes of the command byte sent over a reserved circuit (own choice)
  localparam logic [7:0] OP_READ  = 8'h01;
  localparam logic [7:0] OP_WRITE = 8'h02;

endpackage
