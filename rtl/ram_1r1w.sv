// ram_1r1w: synchronous RAM with one read port and one write port, the
// behaviour of an on-chip SRAM or register-file bank.
//
// A read returns the word at `raddr` on the next clock (`rdata` is
// registered). A write to `waddr` takes effect at the clock edge; a read of
// the same address in the same cycle returns the old word. The RAM has no
// reset: every word is written before it is read. Written as a plain array so
// that synthesis can map it to a memory macro. Used for the training-data
// memory (first X~, then the pre-computed Z in the same words) and for the two
// data caches that hold the N-element ADMM vectors.
module ram_1r1w #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
