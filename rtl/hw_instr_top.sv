// hw_instr_top -- FPGA side of the debug-trace instrumentation system.
//
// A program on the ARM core sends a 32-bit value to the programmable logic by
// writing it to the core's context ID register; the core's trace macrocell,
// with context ID tracing enabled, puts that value into the next I-Sync packet
// of its Program Flow Trace, and the trace port carries the raw trace into the
// FPGA. This top decodes that trace and keeps two records in block RAM:
//   * the decoded trace: every traced address (I-Sync, branch targets,
//     waypoints), written by memory controller 1 into the decoded trace memory;
//   * the instrumented data: every context ID value, written by memory
//     controller 2 into the instrumented data memory.
// Both memories have a read port (trace_rd_* / instr_rd_*) for the processor,
// which in the reference system reads them through a vendor AXI BRAM bridge.
//
// Data path: data -> pft_decoder -> mem_ctrl -> bram_dp (x2), all on one
// clock. A value reaches its memory two cycles after the decoder's enable
// pulse (mem_ctrl register, then the RAM write); a read returns one cycle
// after rd_en. The processor, trace macrocell, trace port unit and pin
// interface are outside this design; 'data' is where the trace port lands.
module hw_instr_top
  import pft_pkg::*;
#(
  parameter logic [1:0]  CTXTID    = 2'b11,   // context ID bytes: 00/01/10/11 = 0/1/2/4
  parameter int unsigned DATA_W    = 32,      // trace port width
  parameter int unsigned MEM_DEPTH = 2048,    // words per memory
  localparam int unsigned AW       = $clog2(MEM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst,              // synchronous, active high
  input  logic [DATA_W-1:0] data,             // raw trace from the trace port
  // decoded trace memory read port
  input  logic              trace_rd_en,
  input  logic [AW-1:0]     trace_rd_addr,
  output word_t             trace_rd_data,
  // instrumented data memory read port
  input  logic              instr_rd_en,
  input  logic [AW-1:0]     instr_rd_addr,
  output word_t             instr_rd_data,
  // status
  output logic [AW:0]       trace_count,
  output logic [AW:0]       instr_count,
  output logic              trace_full,
  output logic              instr_full,
  output logic              trace_dropped,    // pulse: an address was lost (memory full)
  output logic              instr_dropped,    // pulse: a value was lost (memory full)
  output logic              synced,
  output pkt_e              pkt_event
);

  word_t i_sync_address, instrumented_data;
  logic  trace_en, instrument_enable;

  pft_decoder #(.CTXTID(CTXTID), .DATA_W(DATA_W)) u_pft_decoder (
    .clk, .rst, .data,
    .i_sync_address, .trace_en, .instrumented_data, .instrument_enable,
    .synced, .pkt_event
  );

  // memory controller 1 + decoded trace memory
  logic          t_we;
  logic [AW-1:0] t_waddr;
  word_t         t_din;

  mem_ctrl #(.DEPTH(MEM_DEPTH), .WIDTH(32)) u_mem_ctrl_1 (
    .clk, .rst, .wr_en(trace_en), .wr_data(i_sync_address),
    .bram_we(t_we), .bram_addr(t_waddr), .bram_din(t_din),
    .count(trace_count), .full(trace_full), .dropped(trace_dropped)
  );

  bram_dp #(.DEPTH(MEM_DEPTH), .WIDTH(32)) u_decoded_trace_mem (
    .clk, .we(t_we), .waddr(t_waddr), .din(t_din),
    .rd_en(trace_rd_en), .raddr(trace_rd_addr), .dout(trace_rd_data)
  );

  // memory controller 2 + instrumented data memory
  logic          d_we;
  logic [AW-1:0] d_waddr;
  word_t         d_din;

  mem_ctrl #(.DEPTH(MEM_DEPTH), .WIDTH(32)) u_mem_ctrl_2 (
    .clk, .rst, .wr_en(instrument_enable), .wr_data(instrumented_data),
    .bram_we(d_we), .bram_addr(d_waddr), .bram_din(d_din),
    .count(instr_count), .full(instr_full), .dropped(instr_dropped)
  );

  bram_dp #(.DEPTH(MEM_DEPTH), .WIDTH(32)) u_instr_data_mem (
    .clk, .we(d_we), .waddr(d_waddr), .din(d_din),
    .rd_en(instr_rd_en), .raddr(instr_rd_addr), .dout(instr_rd_data)
  );

endmodule
