// upstream_bank: the single-port SRAM bank of one scheduling-window slot.
//
// Each slot of the scheduling window keeps the identifiers of its upstream
// kernels (the kernels it waits for) in a bank of its own, DEPTH = N-1 words
// of WIDTH = 8 bits. The bank has one port: in a cycle with en=1 it either
// writes wdata to addr (we=1) or reads addr (we=0). Reads are synchronous:
// rdata holds the word one cycle after the read and keeps it until the next
// read. A write does not change rdata.
//
// The depth and the 8-bit word follow the paper; one bank per slot also
// follows it. The single port and the synchronous read are choices of this
// implementation, made so the array maps onto an ordinary SRAM macro. The
// bank holds no valid bits: which words are live is tracked by the window.
module upstream_bank #(
  parameter int unsigned DEPTH = 31,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
