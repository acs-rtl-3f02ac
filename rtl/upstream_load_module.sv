// upstream_load_module: turns the host's stale upstream list into the one
// the scheduling window stores, and holds back kernels the host could not
// have checked.
//
// The host computes the upstream list of a kernel against its own record of
// the last M kernels it sent (the scheduled list), without waiting to hear
// which of them have finished. That list can be wrong in two ways:
//
//   1. It can name kernels that have completed and left the window. Each
//      named identifier is therefore looked up among the kernels in the window
//      (a compare against every occupied slot) while the kernel is inserted,
//      one identifier per cycle, and is dropped when no slot holds it.
//   2. It would miss a kernel older than the last M the host remembers that is
//      still in the window. The module follows the oldest kernel in the window
//      (the occupied slot whose identifier lies furthest behind the newest one
//      inserted) and does not offer a new kernel to the window while it would
//      have more than M kernels newer than that oldest one (blocked).
//
// Interface: a launch packet (lp_*) is taken on lp_valid && lp_ready into a
// one-packet buffer; it holds the kernel identifier and N-1 upstream slots,
// each with a valid bit. The buffer offers the kernel to the window (ins_req)
// and, during the window's insertion, answers each ins_idx in the same cycle
// with the refined entry (ins_up_vld, ins_up_id). The buffer is free again the
// cycle after ins_done. stale_drop pulses for every upstream entry dropped
// under rule 1; oldest_kid and newer_cnt show the tracked oldest kernel.
//
// Following the paper: the refinement against the window's kernels, the
// tracking of the oldest scheduled kernel with an 8-bit identifier and the
// blocking rule with the scheduled-list size M. Choices of this
// implementation: kernel identifiers issued by the host in launch order,
// modulo 256, so that "newer" is the distance from the oldest identifier; the
// default M = N-1, so that a stale list always fits the N-1 upstream slots of
// a packet; finding the oldest kernel by a search over the slots every
// cycle instead of keeping it in a register with a counter; the one-packet
// buffer and the handshakes.
module upstream_load_module
  import acs_pkg::*;
#(
  parameter int unsigned N = 32,
  parameter int unsigned M = N - 1,
  localparam int unsigned NU = N - 1,
  localparam int unsigned IW = (NU > 1) ? $clog2(NU) : 1
) (
  input  logic          clk,
  input  logic          rst_n,

  // launch packets from the host's command queue
  input  logic          lp_valid,
  output logic          lp_ready,
  input  kid_t          lp_kid,
  input  logic [NU-1:0] lp_up_vld,
  input  kid_t          lp_up_id [NU],

  // insertion port of the scheduling window
  output logic          ins_req,
  output kid_t          ins_kid,
  input  logic          ins_ack,
  input  logic          ins_active,
  input  logic [IW-1:0] ins_idx,
  output logic          ins_up_vld,
  output kid_t          ins_up_id,
  input  logic          ins_done,

  // contents of the scheduling window
  input  logic [N-1:0]  slot_used,
  input  kid_t          slot_kid [N],

  // status
  output logic          blocked,
  output logic          stale_drop,
  output kid_t          oldest_kid,
  output logic [KID_W:0] newer_cnt
);

  logic          pkt_q;          // buffer holds a packet
  logic          pkt_ins_q;      // its insertion has started
  kid_t          pkt_kid_q;
  logic [NU-1:0] pkt_vld_q;
  kid_t          pkt_id_q [NU];
  kid_t          newest_q;       // last kernel inserted

  // --------------------------------------------------- packet buffer
  assign lp_ready = !pkt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_q     <= 1'b0;
      pkt_ins_q <= 1'b0;
      pkt_kid_q <= '0;
      pkt_vld_q <= '0;
      newest_q  <= '0;
      for (int i = 0; i < NU; i++) pkt_id_q[i] <= '0;
    end else begin
      if (lp_valid && lp_ready) begin
        pkt_q     <= 1'b1;
        pkt_kid_q <= lp_kid;
        pkt_vld_q <= lp_up_vld;
        for (int i = 0; i < NU; i++) pkt_id_q[i] <= lp_up_id[i];
      end
      if (ins_ack) begin
        pkt_ins_q <= 1'b1;
        newest_q  <= pkt_kid_q;
      end
      if (ins_done) begin
        pkt_q     <= 1'b0;
        pkt_ins_q <= 1'b0;
      end
    end
  end

  // ------------------------------------------ oldest kernel in the window
  // age of a slot = how many kernels were launched after it, up to the newest
  always_comb begin
    newer_cnt  = '0;
    oldest_kid = newest_q;
    for (int s = 0; s < N; s++) begin
      kid_t age;
      age = newest_q - slot_kid[s];
      if (slot_used[s] && {1'b0, age} >= newer_cnt) begin
        newer_cnt  = {1'b0, age};
        oldest_kid = slot_kid[s];
      end
    end
  end

  // kernels newer than the oldest one once the waiting kernel is inserted
  logic [KID_W:0] would_be_newer;
  assign would_be_newer = {1'b0, kid_t'(pkt_kid_q - newest_q)} + newer_cnt;

  assign blocked = pkt_q && !pkt_ins_q && (|slot_used) && (would_be_newer > (KID_W+1)'(M));
  assign ins_req = pkt_q && !pkt_ins_q && !blocked;
  assign ins_kid = pkt_kid_q;

  // ------------------------------------------- refinement of the list
  logic in_window;
  always_comb begin
    in_window = 1'b0;
    for (int s = 0; s < N; s++)
      if (slot_used[s] && slot_kid[s] == pkt_id_q[ins_idx]) in_window = 1'b1;
  end

  assign ins_up_id  = pkt_id_q[ins_idx];
  assign ins_up_vld = ins_active && pkt_vld_q[ins_idx] && in_window;
  assign stale_drop = ins_active && pkt_vld_q[ins_idx] && !in_window;

  // the window only accepts a kernel that is offered to it
  always_ff @(posedge clk) begin
    if (ins_ack)
      a_ack_only_on_req: assert (ins_req)
        else $error("window accepted an insertion that was not requested");
  end

endmodule
