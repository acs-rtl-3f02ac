// tb_upstream_load_module: self-checking test of the upstream load module.
//
// The testbench plays the host and the scheduling window. The host sends
// kernels with identifiers in launch order and upstream lists that mix
// kernels still in the window with kernels that already left it. The window
// model keeps a set of kernel identifiers, accepts the module's requests and
// steps ins_idx through N-1 beats per insertion; kernels leave it at random,
// except that the oldest one is kept until the module has blocked for a
// while, so the scheduled-list limit M is reached again and again.
//
// Checked: every beat's refined entry (live only when it names a kernel in
// the window), the stale_drop pulses, the blocked and ins_req outputs
// against the M rule computed from the model, the reported oldest kernel,
// and the packet-buffer handshake (lp_ready).
module tb_upstream_load_module;
  import acs_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned N  = 32;
  localparam int unsigned M  = N - 1;
  localparam int unsigned NU = N - 1;
  localparam int unsigned IW = $clog2(NU);
  localparam int NPKT = 400;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          lp_valid = 1'b0, lp_ready;
  kid_t          lp_kid = '0;
  logic [NU-1:0] lp_up_vld = '0;
  kid_t          lp_up_id [NU];
  logic          ins_req, ins_ack = 1'b0, ins_active = 1'b0, ins_done = 1'b0;
  kid_t          ins_kid;
  logic [IW-1:0] ins_idx = '0;
  logic          ins_up_vld, stale_drop, blocked;
  kid_t          ins_up_id, oldest_kid;
  logic [KID_W:0] newer_cnt;
  logic [N-1:0]  slot_used = '0;
  kid_t          slot_kid [N];

  upstream_load_module #(.N(N), .M(M)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // window model: slot s holds sequence number win_seq[s] when slot_used[s]
  int win_seq [N];
  int newest = -1;
  int n_block = 0, n_drop = 0, n_keep = 0;

  function automatic bit in_window(input kid_t k);
    for (int s = 0; s < N; s++) if (slot_used[s] && slot_kid[s] == k) return 1;
    return 0;
  endfunction

  function automatic int oldest_seq();
    int o;
    o = -1;
    for (int s = 0; s < N; s++) if (slot_used[s] && (o < 0 || win_seq[s] < o)) o = win_seq[s];
    return o;
  endfunction

  task automatic remove_seq(input int q);
    for (int s = 0; s < N; s++) if (slot_used[s] && win_seq[s] == q) slot_used[s] = 1'b0;
  endtask

  initial begin
    foreach (slot_kid[s]) slot_kid[s] = '0;
    foreach (lp_up_id[i]) lp_up_id[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int p = 0; p < NPKT; p++) begin
      int blk_cycles;
      // ---- host sends kernel p
      lp_kid = kid_t'(p);
      for (int i = 0; i < NU; i++) begin
        lp_up_vld[i] = ($urandom_range(3) == 0) && p > 0;
        if (p > 0) lp_up_id[i] = kid_t'(p - 1 - $urandom_range(p > 31 ? 30 : p - 1));
        else       lp_up_id[i] = '0;
      end
      #2;
      check(lp_ready, "buffer free before a packet");
      lp_valid = 1'b1;
      @(negedge clk);
      lp_valid = 1'b0;
      #2;
      check(!lp_ready, "buffer busy while a packet is held");

      // ---- wait until the module offers it; check the M rule
      blk_cycles = 0;
      forever begin
        int o;
        bit exp_blk;
        o = oldest_seq();
        exp_blk = (o >= 0) && (p - o > int'(M));
        check(blocked == exp_blk, $sformatf("kernel %0d: blocked=%0d, expected %0d (oldest %0d)",
                                            p, blocked, exp_blk, o));
        check(ins_req == !exp_blk, "ins_req is the inverse of blocked");
        if (o >= 0) check(oldest_kid == kid_t'(o), $sformatf("oldest kernel %0d, expected %0d", oldest_kid, o));
        if (exp_blk) n_block++;
        if (ins_req && slot_used != '1) break;
        blk_cycles++;
        if (slot_used == '1 || blk_cycles > 3) remove_seq(o);  // the oldest completes
        @(negedge clk);
        #2;
      end
      check(ins_kid == kid_t'(p), "ins_kid");
      ins_ack = 1'b1;
      @(negedge clk);
      ins_ack = 1'b0;
      // the window places the kernel in a free slot
      for (int s = 0; s < N; s++) if (!slot_used[s]) begin
        slot_used[s] = 1'b1;
        slot_kid[s]  = kid_t'(p);
        win_seq[s]   = p;
        break;
      end
      newest = p;

      // ---- N-1 beats
      for (int i = 0; i < NU; i++) begin
        bit exp_vld;
        ins_active = 1'b1;
        ins_idx    = IW'(i);
        ins_done   = (i == NU - 1);
        #2;
        exp_vld = lp_up_vld[i] && in_window(lp_up_id[i]);
        check(ins_up_vld == exp_vld, $sformatf("kernel %0d entry %0d: live=%0d expected %0d",
                                               p, i, ins_up_vld, exp_vld));
        check(stale_drop == (lp_up_vld[i] && !exp_vld), "stale_drop");
        if (exp_vld) begin
          check(ins_up_id == lp_up_id[i], "refined identifier");
          n_keep++;
        end
        if (stale_drop) n_drop++;
        @(negedge clk);
      end
      ins_active = 1'b0;
      ins_done   = 1'b0;
      #2;
      check(lp_ready, "buffer free after the insertion");

      // ---- some kernels complete, but the oldest stays until it blocks
      begin
        int o;
        o = oldest_seq();
        for (int s = 0; s < N; s++)
          if (slot_used[s] && win_seq[s] != o && $urandom_range(2) == 0) slot_used[s] = 1'b0;
      end
      @(negedge clk);
    end

    check(n_block > 0, "the scheduled-list limit blocked at least once");
    check(n_drop > 0 && n_keep > 0, "both stale and live upstream entries seen");
    $display("blocked cycles %0d, dropped entries %0d, kept entries %0d", n_block, n_drop, n_keep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
