// tb_upstream_bank: self-checking test of one slot's upstream-identifier
// SRAM bank. Writes random words to every entry, reads them back in random
// order and checks that each word appears exactly one cycle after its read
// and that rdata holds across writes and idle cycles. A reference array in
// the testbench gives the expected words. The bank is tested at the window's
// default size, 31 words of 8 bits; the checks of the one-cycle read latency
// and of the held read data test this implementation's own port timing.
module tb_upstream_bank;
  localparam int unsigned DEPTH = 31;
  localparam int unsigned WIDTH = 8;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             en, we;
  logic [AW-1:0]    addr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] held;
  int checks = 0, failures = 0;

  upstream_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: rdata=%h expected %h", what, rdata, exp);
    end
  endtask

  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    @(negedge clk);
    // fill every entry
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = WIDTH'($urandom);
      en = 1; we = 1; addr = AW'(i); wdata = model[i];
      @(negedge clk);
    end
    en = 0; we = 0;
    // random reads, each checked one cycle later
    for (int n = 0; n < 400; n++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      en = 1; we = 0; addr = AW'(a);
      @(negedge clk);
      check(model[a], "read");
      held = model[a];
      // a write must not disturb rdata
      if ($urandom_range(1) != 0) begin
        int b;
        b = $urandom_range(DEPTH - 1);
        model[b] = WIDTH'($urandom);
        en = 1; we = 1; addr = AW'(b); wdata = model[b];
        @(negedge clk);
        check(held, "hold over write");
      end
      en = 0;
      @(negedge clk);
      check(held, "hold while idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
