// pft_branch_fsm -- branch address packet FSM of the PFT decoder.
//
// A branch address packet starts with a header byte whose bit 0 is 1; the
// header is also the first address byte. Each address byte carries 7 bits of
// payload and a continuation flag in bit 7; at most five address bytes are
// sent, and the fifth one gives the instruction set (ARM/Thumb) and, in bit 6,
// whether exception information bytes follow (one or two, again with a
// continuation flag in bit 7). Address bits the packet does not carry keep
// the value of the previous traced address (base_addr).
//
// The design names this FSM and says it works like the I-Sync FSM
// (start from the global FSM, stop back when the packet is decoded); the byte
// layout above is the PFT protocol's, and the state split (wait / address /
// exception) is this implementation's.
//
// Timing: start is a one-cycle pulse in the header cycle (the FSM consumes the
// header byte in that cycle). addr_valid, address and thumb are combinational
// in the cycle the last address byte is in data_reg. stop is registered and
// high the cycle after the last byte of the packet. exc_valid pulses with the
// last exception byte.
module pft_branch_fsm
  import pft_pkg::*;
(
  input  logic  clk,
  input  logic  rst,         // synchronous, active high
  input  logic  start,
  input  byte_t data_reg,
  input  word_t base_addr,   // previous traced address
  input  logic  base_thumb,  // current instruction set: 1 = Thumb
  output logic  stop,
  output logic  addr_valid,
  output word_t address,
  output logic  thumb,
  output logic  exc_valid
);

  typedef enum logic [1:0] {WAIT_STATE, ADDR, EXC} bap_state_e;

  bap_state_e  state_reg, state_next;
  logic [2:0]  count;            // address bytes already stored
  logic        exc_count;        // exception bytes already received
  byte_t       b [4];            // stored address bytes 0..3

  // combinational view with the current byte put at position 'idx'
  byte_t      c0, c1, c2, c3;
  logic [2:0] idx;
  logic       last_addr_byte;
  logic       exc_follows;

  always_comb begin
    idx = (state_reg == WAIT_STATE) ? 3'd0 : count;
    c0 = (idx == 3'd0) ? data_reg : b[0];
    c1 = (idx == 3'd1) ? data_reg : b[1];
    c2 = (idx == 3'd2) ? data_reg : b[2];
    c3 = (idx == 3'd3) ? data_reg : b[3];
    last_addr_byte = (idx == 3'd4) || !data_reg[7];
    exc_follows    = (idx == 3'd4) && data_reg[6];
    thumb   = (idx == 3'd4) ? byte4_thumb(data_reg) : base_thumb;
    address = merge_address(base_addr, c0, c1, c2, c3, data_reg, 32'(idx) + 1, thumb);
  end

  always_comb begin
    state_next = state_reg;
    addr_valid = 1'b0;
    exc_valid  = 1'b0;
    unique case (state_reg)
      WAIT_STATE:
        if (start) begin
          addr_valid = last_addr_byte;
          state_next = last_addr_byte ? WAIT_STATE : ADDR;
        end
      ADDR:
        if (last_addr_byte) begin
          addr_valid = 1'b1;
          state_next = exc_follows ? EXC : WAIT_STATE;
        end
      EXC:
        if (!data_reg[7] || exc_count) begin
          exc_valid  = 1'b1;
          state_next = WAIT_STATE;
        end
      default: state_next = WAIT_STATE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_reg <= WAIT_STATE;
      count     <= '0;
      exc_count <= 1'b0;
      stop      <= 1'b0;
      b         <= '{default: '0};
    end else begin
      state_reg <= state_next;
      stop      <= (state_reg == ADDR || state_reg == EXC || start) && (state_next == WAIT_STATE);
      if (state_next == ADDR) begin
        if (idx < 3'd4) b[idx[1:0]] <= data_reg;
        count <= idx + 3'd1;
      end else begin
        count <= '0;
      end
      exc_count <= (state_reg == EXC);
    end
  end

  assert property (@(posedge clk) disable iff (rst) start |-> state_reg == WAIT_STATE);

endmodule
