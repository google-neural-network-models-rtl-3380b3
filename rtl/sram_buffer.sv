// sram_buffer: single-port on-chip SRAM buffer, the storage behind every
// parameter and activation buffer of Mensa-G (Pascal: 128 kB parameter and
// 256 kB activation buffer; Pavlov: 128 kB activation buffer; Jacquard:
// 128 kB parameter and 128 kB activation buffer). The capacities are the
// paper's; the organisation (one port, word width chosen by the user so that
// one word feeds one cycle of the PE array) is this design's own.
//
// Interface: en selects the buffer for one access; we=1 writes wdata to addr,
// we=0 reads addr. Timing: synchronous, rdata is valid the cycle after a read
// and holds its value until the next read (as an SRAM macro output latch does).
// Written as an array so that synthesis can map it onto a memory macro.
module sram_buffer #(
  parameter int unsigned WIDTH = 8,       // bits per word
  parameter int unsigned DEPTH = 131072,  // words (128 kB at WIDTH = 8)
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
