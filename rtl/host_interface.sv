// host_interface -- request decoder between the host link and the chip.
//
// The host issues requests with a valid/ready handshake (a request is taken
// in a cycle where host_req_valid and host_req_ready are both high):
//  HOST_PUSH_INSTR  host_req_data[51:0] is an instr_t, pushed into the
//                   instruction FIFO (ready while the FIFO is not full);
//  HOST_WRITE_UB    host_req_data is a Q15.48 value; it is sent through the
//                   forward converter and its RNS digits are written into
//                   lane host_req_lane of row host_req_addr of every digit
//                   slice's unified buffer FWD_LAT cycles later;
//  HOST_READ_UB     the RNS value at (host_req_addr, host_req_lane) is read
//                   from all unified buffers, sent through the reverse
//                   converter and returned on host_rsp_* REV_LAT+1 cycles
//                   later, in request order.
// A read waits until earlier writes have landed (no read-after-write hazard).
// Buffer accesses are accepted only while the controller is idle, so they
// never collide with instruction execution; busy stays high while
// conversions are in flight, which holds back the next instruction.
//
// The paper only names the host interface (and the PCIe link beyond it, not
// part of this RTL); the request set and handshake are this design's choice.
module host_interface
  import rns_pkg::*;
#(
  parameter int unsigned LANES    = 256,
  parameter int unsigned UB_DEPTH = 4096,
  localparam int unsigned UB_AW   = $clog2(UB_DEPTH),
  localparam int unsigned LW      = $clog2(LANES),
  localparam int unsigned TAG_W   = UB_AW + LW
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host side
  input  logic                         host_req_valid,
  output logic                         host_req_ready,
  input  host_cmd_e                    host_req_cmd,
  input  logic [15:0]                  host_req_addr,
  input  logic [15:0]                  host_req_lane,
  input  logic [BIN_W-1:0]             host_req_data,
  output logic                         host_rsp_valid,
  output logic [BIN_W-1:0]             host_rsp_data,
  output logic                         host_rsp_ovf,
  // controller
  input  logic                         ctrl_idle,
  output logic                         busy,
  output logic                         instr_push,
  output instr_t                       instr_data,
  input  logic                         instr_full,
  // forward converter
  output logic                         fwd_in_valid,
  output logic [TAG_W-1:0]             fwd_in_tag,
  output logic [BIN_W-1:0]             fwd_in_data,
  input  logic                         fwd_out_valid,
  input  logic [TAG_W-1:0]             fwd_out_tag,
  input  rns_word_t                    fwd_out_word,
  // unified buffers (same address and lane in every digit slice)
  output logic                         ub_wr_en,
  output logic [UB_AW-1:0]             ub_wr_addr,
  output logic [LANES-1:0]             ub_wr_mask,
  output rns_word_t                    ub_wr_word,
  output logic                         ub_rd_en,
  output logic [UB_AW-1:0]             ub_rd_addr,
  input  logic [N_DIGITS-1:0][LANES-1:0][DW-1:0] ub_rd_rows,
  // reverse converter
  output logic                         rev_in_valid,
  output rns_word_t                    rev_in_word,
  input  logic                         rev_out_valid,
  input  logic [BIN_W-1:0]             rev_out_data,
  input  logic                         rev_out_ovf
);
  logic accept;
  logic [7:0] inflight;      // conversions in flight
  logic [7:0] wr_inflight;   // of which writes (a read waits for them)

  always_comb begin
    unique case (host_req_cmd)
      HOST_PUSH_INSTR: host_req_ready = !instr_full;
      HOST_WRITE_UB:   host_req_ready = ctrl_idle && (inflight != 8'hff);
      HOST_READ_UB:    host_req_ready = ctrl_idle && (inflight != 8'hff) && (wr_inflight == 0);
      default:         host_req_ready = 1'b1;   // unknown commands are dropped
    endcase
  end
  assign accept = host_req_valid && host_req_ready;

  assign instr_push   = accept && (host_req_cmd == HOST_PUSH_INSTR);
  assign instr_data   = instr_t'(host_req_data[$bits(instr_t)-1:0]);

  assign fwd_in_valid = accept && (host_req_cmd == HOST_WRITE_UB);
  assign fwd_in_tag   = {UB_AW'(host_req_addr), LW'(host_req_lane)};
  assign fwd_in_data  = host_req_data;

  assign ub_wr_en     = fwd_out_valid;
  assign ub_wr_addr   = fwd_out_tag[TAG_W-1 -: UB_AW];
  assign ub_wr_mask   = LANES'(1) << fwd_out_tag[LW-1:0];
  assign ub_wr_word   = fwd_out_word;

  assign ub_rd_en     = accept && (host_req_cmd == HOST_READ_UB);
  assign ub_rd_addr   = UB_AW'(host_req_addr);

  // The row arrives one cycle after the read; pick the lane then.
  logic          rd_pending;
  logic [LW-1:0] rd_lane;
  always_ff @(posedge clk) begin
    if (!rst_n) rd_pending <= 1'b0;
    else        rd_pending <= ub_rd_en;
    rd_lane <= LW'(host_req_lane);
  end
  assign rev_in_valid = rd_pending;
  always_comb
    for (int d = 0; d < int'(N_DIGITS); d++) rev_in_word[d] = ub_rd_rows[d][rd_lane];

  assign host_rsp_valid = rev_out_valid;
  assign host_rsp_data  = rev_out_data;
  assign host_rsp_ovf   = rev_out_ovf;

  // Conversions in flight.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      inflight    <= '0;
      wr_inflight <= '0;
    end else begin
      inflight    <= inflight + 8'(fwd_in_valid || ub_rd_en) - 8'(fwd_out_valid) - 8'(rev_out_valid);
      wr_inflight <= wr_inflight + 8'(fwd_in_valid) - 8'(fwd_out_valid);
    end
  end
  assign busy = (inflight != 0);

  a_ub_only_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (fwd_in_valid || ub_rd_en) |-> ctrl_idle)
    else $error("host_interface: buffer access while instructions execute");
endmodule
