// venice_fc: the Venice path engine of one flash controller.
//
// A Venice flash controller does not send a command until it owns a whole
// path to the target chip. For each I/O request this engine:
//   1. sends a scout packet in reserve mode (header: destination chip,
//      tail: this controller's ID, which is also the packet ID) into the
//      router it is attached to, and pulses `attempt_clr` so every router
//      forgets which ports this packet tried in an earlier attempt;
//   2. waits for the scout packet to come back. In cancel mode, no path
//      was found, and it retries at once with a new scout packet (as the
//      paper prescribes). In reserve mode, the path is reserved both ways;
//   3. sends the command over the circuit as six data bytes {opcode, page
//      address (3 bytes, high first), byte count (2 bytes, high first)}.
//      For a write it then streams `len` bytes from
//      `wdata`. For a read it receives `len` bytes and hands them out on
//      `rdata`;
//   4. releases the path by sending the scout packet in cancel mode along
//      it, then pulses `done` with the number of scout packets used.
// Steps 1, 2 and the packet format are the paper's. The command byte
// format, holding the path during the chip's read time, and release by a
// cancel-mode packet are this design's choices.
//
// Interface: request handshake req_vld/req_rdy (req_rdy = idle). Write data
// is a valid/ready stream; read data is valid-only (circuit switching has
// no back-pressure). net_* is the link to router (row, 0); the ready bit is
// that router's input-buffer-empty flag.
// `rdata` is the link's data wire itself, not a register: read bytes come
// straight off the circuit, so those 8 output bits follow an input.
//
// Lint note: the assertions sample rst_n synchronously (to stay quiet in
// reset) while the flops use it as an asynchronous reset, which Verilator
// reports as SYNCASYNCNET. This is intended; assertions are not logic.
module venice_fc
  import venice_pkg::*;
#(
  parameter int unsigned FC_ID = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_vld,
  output logic       req_rdy,
  input  io_req_t    req,
  input  logic [7:0] wdata,
  input  logic       wdata_vld,
  output logic       wdata_rdy,
  output logic [7:0] rdata,
  output logic       rdata_vld,
  output logic       done,
  output logic [7:0] tries,
  output flit_t      net_out,
  input  logic       net_rdy,
  input  flit_t      net_in,
  output logic       attempt_clr
);
  typedef enum logic [3:0] {
    S_IDLE, S_LAUNCH_H, S_LAUNCH_T, S_WAIT, S_CMD, S_WDATA, S_RDATA,
    S_TEAR_H, S_TEAR_T, S_DONE
  } state_e;

  state_e     st;
  io_req_t    r;
  logic [2:0] cmd_i;
  logic [15:0] cnt;
  logic       got_hdr;
  logic       rep_reserve;

  localparam logic [PID_W-1:0] PID = PID_W'(FC_ID);

  assign req_rdy   = (st == S_IDLE);
  assign wdata_rdy = (st == S_WDATA);
  assign done      = (st == S_DONE);
  assign rdata     = net_in.data;
  assign rdata_vld = (st == S_RDATA) && net_in.vld && !net_in.scout;

  always_comb begin
    net_out     = FLIT_IDLE;
    attempt_clr = 1'b0;
    unique case (st)
      S_LAUNCH_H: if (net_rdy) begin
        net_out     = '{vld: 1'b1, scout: 1'b1, data: hdr_flit(1'b1, r.dest)};
        attempt_clr = 1'b1;
      end
      S_LAUNCH_T: net_out = '{vld: 1'b1, scout: 1'b1, data: tail_flit(1'b1, PID)};
      S_CMD: begin
        net_out.vld = 1'b1;
        unique case (cmd_i)
          3'd0:    net_out.data = r.write ? OP_WRITE : OP_READ;
          3'd1:    net_out.data = r.addr[23:16];
          3'd2:    net_out.data = r.addr[15:8];
          3'd3:    net_out.data = r.addr[7:0];
          3'd4:    net_out.data = r.len[15:8];
          default: net_out.data = r.len[7:0];
        endcase
      end
      S_WDATA: if (wdata_vld) net_out = '{vld: 1'b1, scout: 1'b0, data: wdata};
      S_TEAR_H: if (net_rdy) net_out = '{vld: 1'b1, scout: 1'b1, data: hdr_flit(1'b0, r.dest)};
      S_TEAR_T: net_out = '{vld: 1'b1, scout: 1'b1, data: tail_flit(1'b0, PID)};
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= S_IDLE;
      r           <= '0;
      cmd_i       <= '0;
      cnt         <= '0;
      tries       <= '0;
      got_hdr     <= 1'b0;
      rep_reserve <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (req_vld) begin
          r     <= req;
          tries <= '0;
          st    <= S_LAUNCH_H;
        end
        S_LAUNCH_H: if (net_rdy) begin
          tries   <= tries + 8'd1;
          got_hdr <= 1'b0;
          st      <= S_LAUNCH_T;
        end
        S_LAUNCH_T: st <= S_WAIT;
        S_WAIT: if (net_in.vld && net_in.scout) begin
          if (!flit_is_tail(net_in.data)) begin
            got_hdr     <= 1'b1;
            rep_reserve <= flit_reserve(net_in.data);
          end else if (got_hdr) begin
            cmd_i <= '0;
            st    <= rep_reserve ? S_CMD : S_LAUNCH_H;   // cancel: retry at once
          end
        end
        S_CMD: begin
          cmd_i <= cmd_i + 3'd1;
          if (cmd_i == 3'd5) begin
            cnt <= '0;
            if (r.len == 16'd0) st <= S_TEAR_H;
            else               st <= r.write ? S_WDATA : S_RDATA;
          end
        end
        S_WDATA: if (wdata_vld) begin
          cnt <= cnt + 16'd1;
          if (cnt + 16'd1 == r.len) st <= S_TEAR_H;
        end
        S_RDATA: if (net_in.vld && !net_in.scout) begin
          cnt <= cnt + 16'd1;
          if (cnt + 16'd1 == r.len) st <= S_TEAR_H;
        end
        S_TEAR_H: if (net_rdy) st <= S_TEAR_T;
        S_TEAR_T: st <= S_DONE;
        S_DONE:   st <= S_IDLE;
        default:  st <= S_IDLE;
      endcase
    end
  end

  // only one scout packet of this controller is in the network at a time
  a_one_scout: assert property (@(posedge clk) disable iff (!rst_n)
    (net_in.vld && net_in.scout) |-> (st == S_WAIT));
endmodule
