// sched_window: the hardware scheduling window of the out-of-order kernel
// scheduler.
//
// The window has N slots. A slot holds the 8-bit identifier of a kernel, the
// identifiers of up to N-1 upstream kernels (the kernels it must wait for),
// kept in an SRAM bank of its own (upstream_bank), and a 2-bit state: free,
// pending, ready or executing. Three operations change it:
//
//   Insertion (N cycles). In the cycle the window accepts ins_req it writes
//   ins_kid into the lowest free slot and marks the slot pending. In the N-1
//   cycles that follow it presents ins_idx = 0 .. N-2 and writes entry ins_idx
//   of the slot's bank when the upstream load module marks it live
//   (ins_up_vld). In the last of those cycles the slot becomes ready if no
//   entry was live and stays pending otherwise. ins_ack pulses in the first
//   cycle, ins_done in the last.
//
//   Completion (1 + N-1 cycles). In the cycle it accepts a completion
//   (cpl_valid && cpl_ready) the window frees the slot of the completed kernel
//   and starts a read of entry 0 of every bank. In the N-1 cycles that follow
//   every bank is scanned in parallel, one entry per cycle; a live entry equal
//   to the completed identifier is cleared. A pending slot whose live entries
//   are all cleared becomes ready in that same cycle.
//
//   Dispatch. Whenever a slot is ready, disp_valid is high and disp_kid names
//   the ready kernel in the lowest-numbered slot; when disp_ready is also high
//   that slot becomes executing. Dispatch proceeds during insertions and scans.
//
// Insertion and completion share the banks, so only one of them runs at a
// time. A waiting completion goes first. cpl_ready and ins_ack are only given
// in the idle state. slot_used and slot_kid show the window's contents to the
// upstream load module.
//
// Following the paper: N slots, 8-bit kernel and upstream identifiers, one
// SRAM bank of N-1 upstream identifiers per slot, a 2-bit state, removal of a
// completed kernel, a completion update of N-1 cycles per slot and an
// insertion of N cycles. Choices of this implementation: the live bit kept per
// bank entry in flip-flops, the fourth state code for a free slot, the
// lowest-free-slot insertion, the lowest-slot dispatch priority, completion
// before insertion, and the valid/ready handshakes.
module sched_window
  import acs_pkg::*;
#(
  parameter int unsigned N = 32,
  localparam int unsigned NU = N - 1,                       // upstream entries per slot
  localparam int unsigned IW = (NU > 1) ? $clog2(NU) : 1,   // entry index width
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1      // slot index width
) (
  input  logic          clk,
  input  logic          rst_n,

  // insertion, driven by the upstream load module
  input  logic          ins_req,
  input  kid_t          ins_kid,
  output logic          ins_ack,
  output logic          ins_active,
  output logic [IW-1:0] ins_idx,
  input  logic          ins_up_vld,
  input  kid_t          ins_up_id,
  output logic          ins_done,

  // completion of a kernel by the GPU
  input  logic          cpl_valid,
  input  kid_t          cpl_kid,
  output logic          cpl_ready,

  // dispatch of a ready kernel to the GPU's kernel dispatch unit
  output logic          disp_valid,
  output kid_t          disp_kid,
  input  logic          disp_ready,

  // window contents, for the upstream load module
  output logic [N-1:0]  slot_used,
  output kid_t          slot_kid [N],
  output logic          full
);

  typedef enum logic [1:0] {W_IDLE, W_INSERT, W_SCAN} wstate_e;

  wstate_e          wst_q;
  logic [IW-1:0]    idx_q;
  logic [SW-1:0]    ins_slot_q;
  kid_t             cpl_kid_q;
  slot_state_e      st_q   [N];
  kid_t             kid_q  [N];
  logic [NU-1:0]    live_q [N];

  // ---------------------------------------------------------------- status
  logic [N-1:0] is_ready;
  always_comb begin
    for (int s = 0; s < N; s++) begin
      slot_used[s] = (st_q[s] != SLOT_FREE);
      slot_kid[s]  = kid_q[s];
      is_ready[s]  = (st_q[s] == SLOT_READY);
    end
  end
  assign full = &slot_used;

  // lowest free slot, lowest ready slot, slot of the completing kernel
  logic [SW-1:0] free_slot, rdy_slot, cpl_slot;
  logic          cpl_hit;
  always_comb begin
    free_slot = '0;
    rdy_slot  = '0;
    cpl_slot  = '0;
    cpl_hit   = 1'b0;
    for (int s = N - 1; s >= 0; s--) begin
      if (!slot_used[s]) free_slot = SW'(s);
      if (is_ready[s])   rdy_slot  = SW'(s);
      if (st_q[s] == SLOT_EXECUTING && kid_q[s] == cpl_kid) begin
        cpl_slot = SW'(s);
        cpl_hit  = 1'b1;
      end
    end
  end

  assign disp_valid = |is_ready;
  assign disp_kid   = kid_q[rdy_slot];
  wire   disp_fire  = disp_valid && disp_ready;

  assign cpl_ready  = (wst_q == W_IDLE);
  wire   cpl_fire   = cpl_valid && cpl_ready;
  assign ins_ack    = (wst_q == W_IDLE) && !cpl_valid && ins_req && !full;
  assign ins_active = (wst_q == W_INSERT);
  assign ins_idx    = idx_q;
  wire   last_beat  = (idx_q == IW'(NU - 1));
  assign ins_done   = ins_active && last_beat;

  // ---------------------------------------------------------- SRAM banks
  logic [IW-1:0] bank_addr;
  kid_t          bank_rdata [N];
  logic          bank_en    [N];
  logic          bank_we    [N];

  always_comb begin
    // a scan reads entry idx_q+1 while it compares entry idx_q; the accepting
    // cycle of a completion reads entry 0
    bank_addr = (wst_q == W_SCAN) ? idx_q + IW'(1) : idx_q;
    if (cpl_fire) bank_addr = '0;
    for (int s = 0; s < N; s++) begin
      bank_we[s] = ins_active && ins_up_vld && (ins_slot_q == SW'(s));
      bank_en[s] = bank_we[s] || cpl_fire || (wst_q == W_SCAN && !last_beat);
    end
  end

  for (genvar s = 0; s < N; s++) begin : g_bank
    upstream_bank #(.DEPTH(NU), .WIDTH(KID_W)) u_bank (
      .clk  (clk),
      .en   (bank_en[s]),
      .we   (bank_we[s]),
      .addr (bank_addr),
      .wdata(ins_up_id),
      .rdata(bank_rdata[s])
    );
  end

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst_q      <= W_IDLE;
      idx_q      <= '0;
      ins_slot_q <= '0;
      cpl_kid_q  <= '0;
    end else begin
      unique case (wst_q)
        W_IDLE: begin
          idx_q <= '0;
          if (cpl_fire) begin
            wst_q     <= W_SCAN;
            cpl_kid_q <= cpl_kid;
          end else if (ins_ack) begin
            wst_q      <= W_INSERT;
            ins_slot_q <= free_slot;
          end
        end
        W_INSERT, W_SCAN: begin
          idx_q <= idx_q + IW'(1);
          if (last_beat) wst_q <= W_IDLE;
        end
        default: wst_q <= W_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------- slot state
  // upstream list of each slot after this cycle: an entry is marked live
  // while it is written during insertion and cleared when a scan finds the
  // completed kernel in it
  logic [NU-1:0] live_n  [N];
  logic [N-1:0]  loading;
  always_comb begin
    for (int s = 0; s < N; s++) begin
      live_n[s]  = live_q[s];
      loading[s] = ins_active && (ins_slot_q == SW'(s));
      if (loading[s] && ins_up_vld)
        live_n[s][idx_q] = 1'b1;
      if (wst_q == W_SCAN && live_q[s][idx_q] && bank_rdata[s] == cpl_kid_q)
        live_n[s][idx_q] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N; s++) begin
        st_q[s]   <= SLOT_FREE;
        kid_q[s]  <= '0;
        live_q[s] <= '0;
      end
    end else begin
      for (int s = 0; s < N; s++) begin
        live_q[s] <= live_n[s];

        // state
        if (cpl_fire && cpl_hit && cpl_slot == SW'(s)) begin
          st_q[s] <= SLOT_FREE;                       // completed: leaves the window
        end else if (disp_fire && rdy_slot == SW'(s)) begin
          st_q[s] <= SLOT_EXECUTING;
        end else if (ins_ack && free_slot == SW'(s)) begin
          st_q[s]   <= SLOT_PENDING;
          kid_q[s]  <= ins_kid;
          live_q[s] <= '0;
        end else if (st_q[s] == SLOT_PENDING && (!loading[s] || last_beat) && live_n[s] == '0) begin
          st_q[s] <= SLOT_READY;                      // no upstream kernel left
        end
      end
    end
  end

  // ---------------------------------------------------------- assertions
  // a completion names a kernel that is executing in the window; a dispatch
  // offer is not withdrawn before it is taken
  logic disp_wait_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      disp_wait_q <= 1'b0;
    end else begin
      disp_wait_q <= disp_valid && !disp_ready;
      if (cpl_fire)
        a_cpl_known: assert (cpl_hit)
          else $error("completion of kernel %0d, which is not executing in the window", cpl_kid);
      if (disp_wait_q)
        a_disp_stable: assert (disp_valid) else $error("dispatch offer withdrawn");
    end
  end

endmodule
