// acs_hw_top: GPU-side hardware of the out-of-order kernel scheduler.
//
// The host runtime sends each kernel as a launch packet: an 8-bit kernel
// identifier and the identifiers of the earlier kernels it depends on, as far
// as the host's possibly stale record of the window knows. The upstream load
// module refines that list against the kernels actually in the window and
// blocks kernels the host could not have checked; the scheduling window keeps
// up to N kernels with their upstream lists and states, offers ready kernels
// to the GPU's kernel dispatch unit, and updates itself when the GPU reports a
// kernel complete, with no round trip to the host.
//
// Ports: lp_* carries launch packets in (valid/ready); disp_* offers the
// identifier of a ready kernel to the dispatch unit (valid/ready); cpl_* takes
// the identifier of a kernel that finished (valid/ready). The status outputs
// show whether a packet is held back by the scheduled-list limit, whether the
// window is full, which kernel is the oldest in the window and how many
// kernels were inserted after it, and (stale_drop) each stale upstream entry
// that was dropped.
//
// Timing: a kernel enters the window in N cycles after acceptance and can be
// dispatched the cycle after that if it waits for nothing. A completion takes
// one cycle plus an N-1 cycle scan; a kernel freed by it can be dispatched
// the cycle after its upstream entry was cleared. Only one insertion or
// completion is in progress at a time.
//
// The structure (a host-maintained input queue and scheduled list, and a
// window plus upstream load module on the GPU) follows the paper; the port
// protocol is this implementation's.
module acs_hw_top
  import acs_pkg::*;
#(
  parameter int unsigned N = 32,
  parameter int unsigned M = N - 1,
  localparam int unsigned NU = N - 1
) (
  input  logic          clk,
  input  logic          rst_n,

  input  logic          lp_valid,
  output logic          lp_ready,
  input  kid_t          lp_kid,
  input  logic [NU-1:0] lp_up_vld,
  input  kid_t          lp_up_id [NU],

  output logic          disp_valid,
  output kid_t          disp_kid,
  input  logic          disp_ready,

  input  logic          cpl_valid,
  input  kid_t          cpl_kid,
  output logic          cpl_ready,

  output logic          blocked,
  output logic          window_full,
  output kid_t          oldest_kid,
  output logic [KID_W:0] newer_cnt,
  output logic          stale_drop
);

  localparam int unsigned IW = (NU > 1) ? $clog2(NU) : 1;

  logic          ins_req, ins_ack, ins_active, ins_done, ins_up_vld;
  kid_t          ins_kid, ins_up_id;
  logic [IW-1:0] ins_idx;
  logic [N-1:0]  slot_used;
  kid_t          slot_kid [N];

  upstream_load_module #(.N(N), .M(M)) u_ulm (
    .clk, .rst_n,
    .lp_valid, .lp_ready, .lp_kid, .lp_up_vld, .lp_up_id,
    .ins_req, .ins_kid, .ins_ack, .ins_active, .ins_idx,
    .ins_up_vld, .ins_up_id, .ins_done,
    .slot_used, .slot_kid,
    .blocked, .stale_drop, .oldest_kid, .newer_cnt
  );

  sched_window #(.N(N)) u_win (
    .clk, .rst_n,
    .ins_req, .ins_kid, .ins_ack, .ins_active, .ins_idx,
    .ins_up_vld, .ins_up_id, .ins_done,
    .cpl_valid, .cpl_kid, .cpl_ready,
    .disp_valid, .disp_kid, .disp_ready,
    .slot_used, .slot_kid, .full(window_full)
  );

endmodule
