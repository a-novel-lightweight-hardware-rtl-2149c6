// pft_waypoint_fsm -- waypoint update packet FSM of the PFT decoder.
//
// A waypoint update packet is the header 0x72 followed by one to five
// address bytes laid out like those of a branch address packet (7 payload
// bits, bit 7 = continuation, the fifth byte giving the instruction set) and,
// when bit 6 of the fifth byte is set, one information byte. The new address
// keeps the bits of the previous traced address that the packet does not
// carry.
//
// The design names this FSM and states that it has the same start/stop
// mechanism as the I-Sync FSM; the byte layout is the PFT protocol's and the
// states (wait / address / info) are this implementation's.
//
// Timing: start is a one-cycle pulse in the header cycle. addr_valid, address
// and thumb are combinational in the cycle the last address byte is in
// data_reg. stop is registered, high the cycle after the last packet byte.
module pft_waypoint_fsm
  import pft_pkg::*;
(
  input  logic  clk,
  input  logic  rst,         // synchronous, active high
  input  logic  start,
  input  byte_t data_reg,
  input  word_t base_addr,
  input  logic  base_thumb,
  output logic  stop,
  output logic  addr_valid,
  output word_t address,
  output logic  thumb
);

  typedef enum logic [1:0] {WAIT_STATE, ADDR, INFO} wp_state_e;

  wp_state_e  state_reg, state_next;
  logic [2:0] count;          // address bytes already stored
  byte_t      b [4];

  byte_t c0, c1, c2, c3;
  logic  last_addr_byte;

  always_comb begin
    c0 = (count == 3'd0) ? data_reg : b[0];
    c1 = (count == 3'd1) ? data_reg : b[1];
    c2 = (count == 3'd2) ? data_reg : b[2];
    c3 = (count == 3'd3) ? data_reg : b[3];
    last_addr_byte = (count == 3'd4) || !data_reg[7];
    thumb   = (count == 3'd4) ? byte4_thumb(data_reg) : base_thumb;
    address = merge_address(base_addr, c0, c1, c2, c3, data_reg, 32'(count) + 1, thumb);
  end

  always_comb begin
    state_next = state_reg;
    addr_valid = 1'b0;
    unique case (state_reg)
      WAIT_STATE: if (start) state_next = ADDR;
      ADDR:
        if (last_addr_byte) begin
          addr_valid = 1'b1;
          state_next = (count == 3'd4 && data_reg[6]) ? INFO : WAIT_STATE;
        end
      INFO:    state_next = WAIT_STATE;
      default: state_next = WAIT_STATE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_reg <= WAIT_STATE;
      count     <= '0;
      stop      <= 1'b0;
      b         <= '{default: '0};
    end else begin
      state_reg <= state_next;
      stop      <= (state_reg != WAIT_STATE) && (state_next == WAIT_STATE);
      if (state_reg == ADDR && state_next == ADDR) begin
        b[count[1:0]] <= data_reg;
        count         <= count + 3'd1;
      end else begin
        count <= '0;
      end
    end
  end

  assert property (@(posedge clk) disable iff (rst) start |-> state_reg == WAIT_STATE);

endmodule
