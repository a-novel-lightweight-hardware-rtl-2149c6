// mem_ctrl -- memory controller that stores a stream of 32-bit values.
//
// Each cycle in which wr_en is high, the value on wr_data is written to the
// next word of a block RAM, starting at word 0. Two instances are used: one
// stores the decoded trace addresses (trace_en / i_sync_address of the PFT
// decoder), the other stores the instrumented data (instrument_enable /
// instrumented_data).
//
// The design gives this block's function and its place between the decoder
// and the memories; how it works inside is this implementation's choice:
// the BRAM write port is registered (write happens one cycle after wr_en),
// the address counts words, and when the memory is full further values are
// dropped (the first DEPTH values are kept) and 'full' stays high until reset.
// 'count' is the number of words written so far. The write enable has a
// power-up value of 0 so that nothing is written before the first reset.
module mem_ctrl #(
  parameter int unsigned DEPTH  = 2048,   // words in the memory
  parameter int unsigned WIDTH  = 32,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,            // synchronous, active high
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  // block RAM write port
  output logic             bram_we,
  output logic [AW-1:0]    bram_addr,
  output logic [WIDTH-1:0] bram_din,
  // status
  output logic [AW:0]      count,
  output logic             full,
  output logic             dropped         // one-cycle pulse: a value was lost
);

  assign full = (count == (AW+1)'(DEPTH));

  // The write enable powers up low (as FPGA registers do), so that the block
  // RAM sees no write before the first reset edge.
  logic we_q = 1'b0;
  assign bram_we = we_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      count     <= '0;
      we_q      <= 1'b0;
      bram_addr <= '0;
      bram_din  <= '0;
      dropped   <= 1'b0;
    end else begin
      we_q    <= wr_en && !full;
      dropped <= wr_en && full;
      if (wr_en && !full) begin
        bram_addr <= count[AW-1:0];
        bram_din  <= wr_data;
        count     <= count + 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) count <= (AW+1)'(DEPTH));

endmodule
