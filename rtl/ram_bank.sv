// ram_bank: simple dual-port memory bank with a two-cycle registered read.
//
// Stands for one on-chip RAM block (an UltraRAM of 4K x 64 bits in the sketch
// rows, one of the S queue banks in the priority queue array). One write port
// and one read port, both synchronous to clk. The read address is registered
// on the first edge and the array word on the second, so rdata shows the word
// at raddr two cycles after raddr was presented. A read and a write of the
// same address on the same edge return the old word (read-first). The array
// has no reset; its users clear it by writing zeros.
//
// The source gives the block size (4K x 64), the registered memory output and
// the two-cycle read of the queue banks; the read-first collision rule is this
// design's choice.
module ram_bank #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    raddr_q;

  always_ff @(posedge clk) begin
    raddr_q <= raddr;
    rdata   <= mem[raddr_q];
    if (we) mem[waddr] <= wdata;
  end

endmodule
