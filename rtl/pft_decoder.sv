// pft_decoder -- Program Flow Trace decoder.
//
// Recovers, on the fly, the traced program addresses and the instrumented
// data from the raw PFT byte stream that the CPU's trace macrocell exports
// through the trace port. The instrumented data are the bytes of the context
// ID carried by I-Sync packets: software writes the value it wants to send
// into the CPU's context ID register, and the trace hardware forwards it.
//
// Structure (as in the design's block diagram): the input is registered
// (data -> data_reg); a global FSM recognises packet headers and starts one of
// three packet FSMs (I-Sync, branch address, waypoint) with a start pulse and
// waits for its stop; every output is registered.
//
// Interface:
//   data[31:0]         trace port input. One PFT byte per cycle is decoded,
//                      from data[7:0]; bits 31:8 are not used (the trace port
//                      is 8 bits wide in this configuration).
//   i_sync_address     current traced address: set by I-Sync packets (the
//                      four address bytes, assembled least significant byte
//                      first, as received) and updated by branch address and
//                      waypoint packets.
//   trace_en           one-cycle pulse when i_sync_address holds a new value.
//   instrumented_data  context ID value of the last I-Sync packet.
//   instrument_enable  one-cycle pulse when instrumented_data is new.
//   pkt_event          kind of packet recognised (monitoring only).
// Timing: a packet of n bytes whose header is on data in cycle t gives its
// result (instrument_enable / trace_en for the last field) in cycle t+n+1:
// one cycle for the input register, n cycles to receive the bytes, the
// output register taking the last byte's combinational result.
module pft_decoder
  import pft_pkg::*;
#(
  parameter logic [1:0] CTXTID = 2'b11,   // context ID size: 00/01/10/11 = 0/1/2/4 bytes
  parameter int unsigned DATA_W = 32      // trace port width
) (
  input  logic              clk,
  input  logic              rst,          // synchronous, active high
  input  logic [DATA_W-1:0] data,
  output word_t             i_sync_address,
  output logic              trace_en,
  output word_t             instrumented_data,
  output logic              instrument_enable,
  output logic              synced,
  output pkt_e              pkt_event
);

  byte_t data_reg;
  logic  start_i, start_b, start_w, stop_i, stop_b, stop_w;
  pkt_e  pkt;
  logic [2:0] global_state_reg, i_sync_state_reg;
  logic  cur_thumb;

  always_ff @(posedge clk) begin
    if (rst) data_reg <= '0;
    else     data_reg <= data[7:0];
  end

  pft_global_fsm #(.CTXTID(CTXTID)) u_global (
    .clk, .rst, .data_reg, .stop_i, .stop_b, .stop_w,
    .start_i, .start_b, .start_w, .synced, .pkt, .global_state_reg
  );

  logic  i_addr_valid, i_ctx_valid;
  word_t i_address, i_ctx_value, i_addr_acc, i_ctx_acc;

  pft_isync_fsm #(.CTXTID(CTXTID)) u_isync (
    .clk, .rst, .start(start_i), .data_reg, .stop(stop_i),
    .addr_valid(i_addr_valid), .address(i_address),
    .ctx_valid(i_ctx_valid), .ctx_value(i_ctx_value),
    .i_sync_address(i_addr_acc), .instrumented_data(i_ctx_acc),
    .state_reg_o(i_sync_state_reg)
  );

  logic  b_addr_valid, b_thumb, b_exc_valid;
  word_t b_address;

  pft_branch_fsm u_branch (
    .clk, .rst, .start(start_b), .data_reg,
    .base_addr(i_sync_address), .base_thumb(cur_thumb), .stop(stop_b),
    .addr_valid(b_addr_valid), .address(b_address), .thumb(b_thumb),
    .exc_valid(b_exc_valid)
  );

  logic  w_addr_valid, w_thumb;
  word_t w_address;

  pft_waypoint_fsm u_waypoint (
    .clk, .rst, .start(start_w), .data_reg,
    .base_addr(i_sync_address), .base_thumb(cur_thumb), .stop(stop_w),
    .addr_valid(w_addr_valid), .address(w_address), .thumb(w_thumb)
  );

  // registered outputs
  always_ff @(posedge clk) begin
    if (rst) begin
      i_sync_address    <= '0;
      cur_thumb         <= 1'b0;
      trace_en          <= 1'b0;
      instrumented_data <= '0;
      instrument_enable <= 1'b0;
      pkt_event         <= PKT_NONE;
    end else begin
      trace_en          <= i_addr_valid | b_addr_valid | w_addr_valid;
      instrument_enable <= i_ctx_valid;
      pkt_event         <= pkt;
      if (i_addr_valid) begin
        i_sync_address <= i_address;
        cur_thumb      <= i_address[0];   // PFT: bit 0 of the I-Sync address is the Thumb bit
      end else if (b_addr_valid) begin
        i_sync_address <= b_address;
        cur_thumb      <= b_thumb;
      end else if (w_addr_valid) begin
        i_sync_address <= w_address;
        cur_thumb      <= w_thumb;
      end
      if (i_ctx_valid) instrumented_data <= i_ctx_value;
    end
  end

  // only one packet FSM is active, so at most one address source per cycle
  assert property (@(posedge clk) disable iff (rst)
                   $onehot0({i_addr_valid, b_addr_valid, w_addr_valid}));

endmodule
