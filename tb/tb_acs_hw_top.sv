// tb_acs_hw_top: end-to-end test of the scheduler hardware at its default
// size (N = 32 slots, M = 31), with behavioural models of the host runtime
// and of the GPU around it.
//
// Host model. Every kernel reads one or two address ranges and writes one,
// chosen at random in a small address space so that kernels often conflict.
// The host keeps its scheduled list, the last M kernels it sent, and gives
// each new kernel an upstream list of the kernels in that list it conflicts
// with (a write of one overlapping a read or write of the other, ranges
// overlapping when start1 < end2 and end1 > start2). It never learns which
// kernels finished, so the list goes stale. Identifiers are the launch
// sequence number modulo 256.
//
// GPU model. Dispatched kernels run concurrently for random times. Up to
// kernel 400 every 61st kernel runs for a long time, so that more than M
// kernels pass it and the scheduled-list limit blocks; kernels 450 to 499 all
// run slowly, so that the window fills. Finished kernels are reported one at
// a time on the completion port; dispatch is refused at random.
//
// Checked: (1) an independent kernel sent to an idle, empty window is offered
// N+1 cycles after its packet is taken (one cycle in the packet buffer, N to
// insert) and a completion holds the window for N-1 cycles; (2) no kernel is
// dispatched before every earlier kernel it conflicts with has completed,
// including conflicts older than the host's scheduled list; (3) every kernel
// is dispatched exactly once and the window drains. Each mechanism must occur
// at least once: stale entries dropped, insertion blocked by M, window full,
// dispatch refused, completion made to wait, several kernels executing at
// once, a kernel released by a completion, identifiers wrapping past 255.
module tb_acs_hw_top;
  import acs_pkg::*;
  timeunit 1ns;
  timeprecision 100ps;

  localparam int unsigned N  = 32;     // must match the top's defaults
  localparam int unsigned M  = N - 1;
  localparam int unsigned NU = N - 1;
  localparam int NK    = 700;          // kernels in the random phase
  localparam int FIRST = 2;            // kernels of the directed phase
  localparam int TOT   = FIRST + NK;
  localparam int ASPACE = 8192;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          lp_valid = 1'b0, lp_ready;
  kid_t          lp_kid = '0;
  logic [NU-1:0] lp_up_vld = '0;
  kid_t          lp_up_id [NU];
  logic          disp_valid, disp_ready = 1'b0;
  kid_t          disp_kid;
  logic          cpl_valid = 1'b0, cpl_ready;
  kid_t          cpl_kid = '0;
  logic          blocked, window_full, stale_drop;
  kid_t          oldest_kid;
  logic [KID_W:0] newer_cnt;

  acs_hw_top dut (.*);

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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- kernel table
  int  rd_lo [TOT][2], rd_hi [TOT][2], n_rd [TOT];
  int  wr_lo [TOT], wr_hi [TOT];
  int  dur   [TOT];
  bit  sent  [TOT], disp [TOT], done [TOT];
  int  n_true_deps [TOT];

  function automatic bit overlap(input int a_lo, input int a_hi, input int b_lo, input int b_hi);
    return (a_lo < b_hi) && (a_hi > b_lo);
  endfunction

  // kernel b (later) conflicts with kernel a (earlier)
  function automatic bit conflict(input int a, input int b);
    if (overlap(wr_lo[b], wr_hi[b], wr_lo[a], wr_hi[a])) return 1;
    for (int i = 0; i < n_rd[a]; i++)
      if (overlap(wr_lo[b], wr_hi[b], rd_lo[a][i], rd_hi[a][i])) return 1;
    for (int i = 0; i < n_rd[b]; i++)
      if (overlap(rd_lo[b][i], rd_hi[b][i], wr_lo[a], wr_hi[a])) return 1;
    return 0;
  endfunction

  function automatic void make_kernel(input int k, input bit independent);
    int len;
    n_rd[k] = 1 + $urandom_range(1);
    for (int i = 0; i < 2; i++) begin
      len = 16 + $urandom_range(240);
      rd_lo[k][i] = $urandom_range(ASPACE - 257);
      rd_hi[k][i] = rd_lo[k][i] + len;
    end
    len = 16 + $urandom_range(240);
    wr_lo[k] = $urandom_range(ASPACE - 257);
    wr_hi[k] = wr_lo[k] + len;
    if (independent) begin          // private ranges above the shared space
      n_rd[k]     = 1;
      rd_lo[k][0] = ASPACE + 512 * k;
      rd_hi[k][0] = rd_lo[k][0] + 64;
      wr_lo[k]    = rd_hi[k][0];
      wr_hi[k]    = wr_lo[k] + 64;
    end
    if (k % 61 == 60 && k < 400)  dur[k] = 4000 + $urandom_range(1000);
    else if (k >= 450 && k < 500) dur[k] = 3000 + $urandom_range(500);
    else                           dur[k] = 10 + $urandom_range(300);
  endfunction

  // --------------------------------------------------------- host model
  // sends kernel k with its stale upstream list
  task automatic host_send(input int k);
    int n;
    n = 0;
    lp_up_vld = '0;
    foreach (lp_up_id[i]) lp_up_id[i] = kid_t'($urandom);
    for (int a = k - 1; a >= 0 && a >= k - int'(M); a--)
      if (conflict(a, k)) begin
        lp_up_vld[n] = 1'b1;
        lp_up_id[n]  = kid_t'(a);
        n++;
      end
    lp_kid   = kid_t'(k);
    lp_valid = 1'b1;
    #2;
    while (!lp_ready) begin
      @(negedge clk);
      #2;
    end
    @(posedge clk);
    sent[k] = 1'b1;
    @(negedge clk);
    lp_valid = 1'b0;
  endtask

  // ---------------------------------------------------------- GPU model
  int finish_at [TOT];
  int cpl_q [$];
  int cycle = 0;
  int n_exec = 0, max_exec = 0;
  int n_disp = 0, n_wait_disp = 0, n_wait_cpl = 0, n_block = 0, n_full = 0;
  int n_drop = 0, n_released = 0, n_wrap = 0;
  bit random_phase = 1'b0;       // models run freely only in the random phase
  always @(posedge clk) cycle++;

  // dispatch: sampled before the edge that takes it
  always @(negedge clk) begin
    #2;
    if (rst_n) begin
      if (blocked)                   n_block++;
      if (window_full)               n_full++;
      if (stale_drop)                n_drop++;
      if (disp_valid && !disp_ready) n_wait_disp++;
      if (cpl_valid && !cpl_ready)   n_wait_cpl++;
      if (disp_valid && disp_ready) begin
        int k;
        k = -1;
        for (int j = 0; j < TOT; j++)
          if (sent[j] && !disp[j] && kid_t'(j) == disp_kid) k = j;
        check(k >= 0, $sformatf("dispatch of unknown kernel %0d", disp_kid));
        if (k >= 0) begin
          int nd;
          nd = 0;
          for (int a = 0; a < k; a++)
            if (conflict(a, k)) begin
              nd++;
              check(done[a], $sformatf("kernel %0d dispatched before kernel %0d it conflicts with completed",
                                       k, a));
            end
          n_true_deps[k] = nd;
          if (nd > 0) n_released++;
          if (k > 255) n_wrap++;
          disp[k]      = 1'b1;
          finish_at[k] = cycle + 1 + dur[k];
          n_disp++;
          n_exec++;
          if (n_exec > max_exec) max_exec = n_exec;
        end
      end
    end
  end

  // kernels that reach their finish time queue up for the completion port
  always @(negedge clk) begin
    for (int j = 0; j < TOT; j++)
      if (disp[j] && !done[j] && finish_at[j] == cycle) cpl_q.push_back(j);
  end

  // completion port: one kernel at a time
  initial begin
    forever begin
      @(negedge clk);
      if (cpl_q.size() != 0 && random_phase) begin
        int k;
        k = cpl_q.pop_front();
        cpl_kid   = kid_t'(k);
        cpl_valid = 1'b1;
        #2;
        while (!cpl_ready) begin
          @(negedge clk);
          #2;
        end
        @(posedge clk);
        done[k] = 1'b1;
        n_exec--;
        @(negedge clk);
        cpl_valid = 1'b0;
      end
    end
  end

  always @(negedge clk) if (random_phase) disp_ready = ($urandom_range(4) != 0);

  // ------------------------------------------------------------ stimulus
  initial begin
    int t, busy;
    foreach (lp_up_id[i]) lp_up_id[i] = '0;
    for (int k = 0; k < TOT; k++) make_kernel(k, k < FIRST);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- directed: latency of one independent kernel
    host_send(0);              // returns at the negedge after the packet was taken
    t = 1;
    while (!disp_valid) begin
      @(negedge clk);
      t++;
    end
    check(t == N + 1, $sformatf("first kernel offered %0d cycles after its packet, expected %0d", t, N + 1));
    check(disp_kid == 0, "first kernel offered");
    disp_ready = 1'b1;
    @(negedge clk);
    disp_ready = 1'b0;
    check(disp[0], "first kernel dispatched");
    // complete it by hand and time the scan
    cpl_kid   = 8'd0;
    cpl_valid = 1'b1;
    @(posedge clk);
    done[0] = 1'b1;
    n_exec--;
    @(negedge clk);
    cpl_valid = 1'b0;
    busy = 0;
    while (!cpl_ready) begin
      busy++;
      @(negedge clk);
    end
    check(busy == N - 1, $sformatf("completion held the window %0d cycles, expected %0d", busy, N - 1));
    host_send(1);
    while (!disp_valid) @(negedge clk);
    disp_ready = 1'b1;
    @(negedge clk);
    disp_ready = 1'b0;
    cpl_kid   = 8'd1;
    cpl_valid = 1'b1;
    @(posedge clk);
    done[1] = 1'b1;
    n_exec--;
    @(negedge clk);
    cpl_valid = 1'b0;
    while (!cpl_ready) @(negedge clk);

    // ---- random phase
    random_phase = 1'b1;
    for (int k = FIRST; k < TOT; k++) begin
      host_send(k);
      repeat ($urandom_range(2)) @(negedge clk);
    end
    // drain
    t = 0;
    while (n_disp < TOT || cpl_q.size() != 0 || n_exec != 0) begin
      @(negedge clk);
      t++;
      if (t > 200000) break;
    end
    repeat (N + 4) @(negedge clk);

    for (int k = 0; k < TOT; k++) check(disp[k] && done[k], $sformatf("kernel %0d never ran", k));
    check(n_disp == TOT, $sformatf("%0d dispatches for %0d kernels", n_disp, TOT));
    check(!disp_valid && !blocked, "window drained");
    check(n_drop     > 0, "stale upstream entries dropped");
    check(n_block    > 0, "insertion blocked by the scheduled-list limit");
    check(n_full     > 0, "window full");
    check(n_wait_disp > 0, "dispatch refused by the GPU");
    check(n_wait_cpl > 0, "completion made to wait");
    check(max_exec   > 1, "several kernels executing at once");
    check(n_released > 0, "kernels released by completions");
    check(n_wrap     > 0, "kernel identifiers wrapped past 255");
    $display("dropped %0d, blocked %0d, full %0d, disp refused %0d, cpl waits %0d, max concurrent %0d, released %0d, wrapped %0d",
             n_drop, n_block, n_full, n_wait_disp, n_wait_cpl, max_exec, n_released, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
