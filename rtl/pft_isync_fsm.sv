// pft_isync_fsm -- I-Sync packet FSM of the PFT decoder.
//
// An I-Sync packet is the header 0x08, four address bytes (least significant
// first), one information byte and 0, 1, 2 or 4 context ID bytes. The context
// ID bytes carry the value the instrumented program wrote to the CPU's context
// ID register, so they are the instrumented data.
//
// States and transitions follow the I-Sync state diagram of the design:
// wait_state -> i_sync (count the four address bytes) -> i_sync_ib ->
// ctxtid_1 / ctxtid_2 / ctxtid_3 (count 1, 2 or 4 bytes) -> wait_state, or
// i_sync_ib -> wait_state directly when CTXTID is "00".
//
// Interface and timing (all inputs are the registered trace byte and the
// start pulse from the global FSM):
//   * start is high for one cycle, in the cycle the header byte is in
//     data_reg; the FSM leaves wait_state on it.
//   * addr_valid/address are combinational and valid in the cycle the fourth
//     address byte is in data_reg; i_sync_address is the progressively built
//     address register (byte k appears the cycle after it is received).
//   * ctx_valid/ctx_value are combinational and valid in the cycle the last
//     context ID byte is in data_reg; fewer than four bytes are zero-extended.
//     instrumented_data is the progressively built register.
//   * stop is registered: high for one cycle, the cycle after the last byte of
//     the packet, i.e. when the next header is in data_reg.
// The one-cycle start pulse, the combinational valid outputs and the
// registered stop are choices of this implementation.
module pft_isync_fsm
  import pft_pkg::*;
#(
  parameter logic [1:0] CTXTID = 2'b11   // context ID size: 00/01/10/11 = 0/1/2/4 bytes
) (
  input  logic   clk,
  input  logic   rst,                    // synchronous, active high
  input  logic   start,
  input  byte_t  data_reg,
  output logic   stop,
  output logic   addr_valid,
  output word_t  address,
  output logic   ctx_valid,
  output word_t  ctx_value,
  output word_t  i_sync_address,
  output word_t  instrumented_data,
  output logic [2:0] state_reg_o
);

  typedef enum logic [2:0] {
    WAIT_STATE, I_SYNC, I_SYNC_IB, CTXTID_1, CTXTID_2, CTXTID_3
  } isync_state_e;

  isync_state_e i_sync_state_reg, i_sync_state_next;
  logic [2:0]   count, count_next;   // bytes received in the current state
  word_t        addr_acc, ctx_acc;

  assign state_reg_o = i_sync_state_reg;

  // byte merged into the accumulators at the current count position
  word_t addr_merged, ctx_merged;
  always_comb begin
    addr_merged = addr_acc;
    addr_merged[8*count[1:0] +: 8] = data_reg;
    ctx_merged = ctx_acc;
    ctx_merged[8*count[1:0] +: 8] = data_reg;
  end

  always_comb begin
    i_sync_state_next = i_sync_state_reg;
    count_next        = count;
    addr_valid        = 1'b0;
    ctx_valid         = 1'b0;
    unique case (i_sync_state_reg)
      WAIT_STATE: begin
        count_next = '0;
        if (start) i_sync_state_next = I_SYNC;
      end
      I_SYNC: begin
        count_next = count + 3'd1;
        if (count_next == 3'd4) begin
          addr_valid        = 1'b1;
          count_next        = '0;
          i_sync_state_next = I_SYNC_IB;
        end
      end
      I_SYNC_IB: begin
        count_next = '0;
        unique case (CTXTID)
          2'b00: i_sync_state_next = WAIT_STATE;
          2'b01: i_sync_state_next = CTXTID_1;
          2'b10: i_sync_state_next = CTXTID_2;
          2'b11: i_sync_state_next = CTXTID_3;
        endcase
      end
      CTXTID_1, CTXTID_2, CTXTID_3: begin
        count_next = count + 3'd1;
        if (count_next == 3'(ctxtid_bytes(CTXTID))) begin
          ctx_valid         = 1'b1;
          count_next        = '0;
          i_sync_state_next = WAIT_STATE;
        end
      end
      default: i_sync_state_next = WAIT_STATE;
    endcase
  end

  assign address   = addr_merged;
  assign ctx_value = ctx_merged;

  always_ff @(posedge clk) begin
    if (rst) begin
      i_sync_state_reg <= WAIT_STATE;
      count            <= '0;
      addr_acc         <= '0;
      ctx_acc          <= '0;
      stop             <= 1'b0;
    end else begin
      i_sync_state_reg <= i_sync_state_next;
      count            <= count_next;
      // stop: the packet ended in this cycle
      stop <= (i_sync_state_reg != WAIT_STATE) && (i_sync_state_next == WAIT_STATE);
      if (i_sync_state_reg == WAIT_STATE && start) begin
        addr_acc <= '0;
        ctx_acc  <= '0;
      end
      if (i_sync_state_reg == I_SYNC) addr_acc <= addr_merged;
      if (i_sync_state_reg inside {CTXTID_1, CTXTID_2, CTXTID_3}) ctx_acc <= ctx_merged;
    end
  end

  assign i_sync_address    = addr_acc;
  assign instrumented_data = ctx_acc;

  // a start while a packet is still being decoded would be a global FSM error
  assert property (@(posedge clk) disable iff (rst) start |-> i_sync_state_reg == WAIT_STATE);

endmodule
