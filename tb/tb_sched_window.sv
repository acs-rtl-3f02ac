// tb_sched_window: self-checking test of the scheduling window.
//
// The testbench plays both neighbours of the window: it inserts kernels with
// upstream lists that name only kernels still in the window (the refinement
// the upstream load module would have done), accepts dispatches and reports
// completions like the GPU would.
//
// Part 1 replays the four-kernel example of the window figure: K1 and K2
// wait for nothing, K3 waits for K1, K4 for K1, K2 and K3. It checks which
// kernel is offered at each point, that an insertion takes N cycles and a
// completion scan N-1 cycles after the accepting cycle.
// Part 2 runs several hundred kernels with random dependencies, random
// dispatch stalls and random execution times, and checks that no kernel is
// dispatched before all its upstream kernels completed, that every kernel is
// dispatched once, that a kernel whose upstream kernels have all completed is
// offered once the window is idle, and that the window drains.
module tb_sched_window;
  import acs_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned N  = 32;
  localparam int unsigned NU = N - 1;
  localparam int unsigned IW = $clog2(NU);
  localparam int NK = 600;             // kernels in the random part

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          ins_req = 1'b0, ins_ack, ins_active, ins_done;
  kid_t          ins_kid = '0;
  logic [IW-1:0] ins_idx;
  logic          ins_up_vld;
  kid_t          ins_up_id;
  logic          cpl_valid = 1'b0, cpl_ready;
  kid_t          cpl_kid = '0;
  logic          disp_valid, disp_ready = 1'b0;
  kid_t          disp_kid;
  logic [N-1:0]  slot_used;
  kid_t          slot_kid [N];
  logic          full;

  sched_window #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // upstream list presented during the current insertion
  logic [NU-1:0] up_vld;
  kid_t          up_id [NU];
  assign ins_up_vld = ins_active && up_vld[ins_idx];
  assign ins_up_id  = up_id[ins_idx];

  // bookkeeping by kernel sequence number
  bit in_win   [NK+8];
  bit done_k   [NK+8];
  bit disp_k   [NK+8];
  int deps     [NK+8][$];
  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // insert kernel `seq` with upstream kernels `ups`; returns cycles from ack
  // to done, inclusive
  task automatic insert(input int seq, input int ups[$], output int len);
    up_vld = '0;
    foreach (up_id[i]) up_id[i] = kid_t'($urandom);
    foreach (ups[j]) begin
      int p;
      do p = $urandom_range(NU - 1); while (up_vld[p]);
      up_vld[p] = 1'b1;
      up_id[p]  = kid_t'(ups[j]);
    end
    deps[seq] = ups;
    ins_kid = kid_t'(seq);
    ins_req = 1'b1;
    #2;                           // handshakes are sampled after the drivers settle
    while (!ins_ack) begin
      @(negedge clk);
      #2;
    end
    @(posedge clk);
    in_win[seq] = 1'b1;
    // drop upstream kernels that completed while the request waited, as the
    // upstream load module would
    foreach (up_vld[p])
      if (up_vld[p]) begin
        bit live;
        live = 0;
        foreach (ups[j]) if (kid_t'(ups[j]) == up_id[p] && in_win[ups[j]]) live = 1;
        up_vld[p] = live;
      end
    @(negedge clk);
    ins_req = 1'b0;
    len = 1;                      // the accepting cycle
    while (ins_active) begin
      len++;
      @(negedge clk);
    end
  endtask

  task automatic complete(input int seq, output int busy);
    cpl_kid   = kid_t'(seq);
    cpl_valid = 1'b1;
    #2;
    while (!cpl_ready) begin
      @(negedge clk);
      #2;
    end
    @(posedge clk);
    done_k[seq] = 1'b1;
    in_win[seq] = 1'b0;
    @(negedge clk);
    cpl_valid = 1'b0;
    busy = 0;                     // cycles after the accepting one
    while (!cpl_ready) begin
      busy++;
      @(negedge clk);
    end
  endtask

  // watch every dispatch: all upstream kernels must have completed
  int dispatched = 0;
  always @(negedge clk) begin
    int seq;
    #2;                           // sampled before the edge that dispatches
    if (rst_n && disp_valid && disp_ready) begin
    seq = -1;
    for (int k = 0; k < NK + 8; k++)
      if (in_win[k] && kid_t'(k) == disp_kid && !disp_k[k]) seq = k;
    check(seq >= 0, $sformatf("dispatch of unknown kernel %0d", disp_kid));
    if (seq >= 0) begin
      disp_k[seq] = 1'b1;
      dispatched++;
      foreach (deps[seq][j])
        check(done_k[deps[seq][j]], $sformatf("kernel %0d dispatched before upstream %0d completed",
                                              seq, deps[seq][j]));
    end
    end
  end

  int len, busy;
  int none[$];
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---------------- part 1: the four-kernel example (K1..K4)
    insert(1, none, len);
    check(len == N, $sformatf("insertion took %0d cycles, expected %0d", len, N));
    check(disp_valid && disp_kid == 1, "K1 ready after insertion");
    insert(2, none, len);
    insert(3, {1}, len);
    insert(4, {1, 2, 3}, len);
    check(len == N, "insertion with upstream list takes N cycles");
    // dispatch K1 and K2
    disp_ready = 1'b1;
    @(negedge clk);
    @(negedge clk);
    disp_ready = 1'b0;
    check(disp_k[1] && disp_k[2], "K1 and K2 dispatched");
    check(!disp_valid, "K3 and K4 are pending, nothing offered");
    complete(1, busy);
    check(busy == N - 1, $sformatf("completion scan took %0d cycles, expected %0d", busy, N - 1));
    check(disp_valid && disp_kid == 3, "K3 ready once K1 completed");
    disp_ready = 1'b1;
    @(negedge clk);
    disp_ready = 1'b0;
    check(!disp_valid, "K4 still pending");
    complete(2, busy);
    check(!disp_valid, "K4 still waits for K3");
    complete(3, busy);
    check(disp_valid && disp_kid == 4, "K4 ready once K1..K3 completed");
    disp_ready = 1'b1;
    @(negedge clk);
    disp_ready = 1'b0;
    complete(4, busy);
    check(slot_used == '0, "window empty after the example");
    for (int k = 1; k <= 4; k++) begin
      in_win[k] = 0;
    end

    // ---------------- part 2: random kernels
    fork
      // inserter
      begin
        for (int s = 8; s < NK + 8; s++) begin
          int ups[$];
          ups.delete();
          for (int k = s - 1; k >= 8 && k > s - 64; k--)
            if (in_win[k] && ups.size() < NU && $urandom_range(3) == 0) ups.push_back(k);
          insert(s, ups, len);
          check(len == N, "insertion length");
          repeat ($urandom_range(4)) @(negedge clk);
        end
      end
      // dispatch stalls
      forever begin
        disp_ready = ($urandom_range(3) != 0);
        @(negedge clk);
      end
      // progress: with the window idle, a kernel whose upstream kernels all
      // completed must be offered
      forever begin
        repeat (8) @(negedge clk);
        if (cpl_ready && !ins_active && !ins_ack && !disp_valid) begin
          for (int k = 8; k < NK + 8; k++) if (in_win[k] && !disp_k[k]) begin
            bit free_k;
            free_k = 1;
            foreach (deps[k][j]) if (!done_k[deps[k][j]]) free_k = 0;
            if (free_k) check(0, $sformatf("kernel %0d is free but not offered", k));
          end
        end
      end
    join_none
    // GPU: complete a random executing kernel now and then
    begin
      static int ncpl = 0;
      while (ncpl < NK) begin
        int cand[$];
        cand.delete();
        for (int k = 8; k < NK + 8; k++)
          if (disp_k[k] && !done_k[k]) cand.push_back(k);
        if (cand.size() != 0 && $urandom_range(2) == 0) begin
          complete(cand[$urandom_range(cand.size() - 1)], busy);
          check(busy == N - 1, "completion scan length");
          ncpl++;
        end else @(negedge clk);
      end
    end
    disable fork;
    repeat (2) @(negedge clk);
    check(dispatched == NK + 4, $sformatf("dispatched %0d kernels, expected %0d", dispatched, NK + 4));
    check(slot_used == '0, "window drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
