// bram_dp -- simple dual-port block RAM (one write port, one read port).
//
// Used for the decoded trace memory and the instrumented data memory. Port A
// is written by a memory controller; port B is read by the processor side
// (through a bus-to-BRAM bridge that is outside this design) to fetch the
// results. Both ports share one clock. A read returns the word one cycle after
// rd_en (registered output, as FPGA block RAMs do); a read and a write of the
// same word in one cycle return the old word.
//
// The default size, 2048 words of 32 bits, is two 36-Kbit block RAM tiles,
// the number of tiles each memory occupies in the reported implementation.
// The contents start at zero, as an FPGA block RAM does after configuration.
module bram_dp #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  // port A: write
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] din,
  // port B: read
  input  logic             rd_en,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] dout
);

  logic [WIDTH-1:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= din;
  end

  always_ff @(posedge clk) begin
    if (rd_en) dout <= mem[raddr];
  end

endmodule
