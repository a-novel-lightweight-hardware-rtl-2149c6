// pft_global_fsm -- global FSM of the PFT decoder.
//
// The global FSM reads the registered trace byte, recognises packet headers
// and hands the three multi-byte packet types that carry addresses or
// instrumented data to their own FSMs: I-Sync (start_i/stop_i), branch
// address (start_b/stop_b) and waypoint update (start_w/stop_w). While one of
// those FSMs runs, the global FSM waits for its stop; in the cycle stop is
// high the byte in data_reg is already the next header and is decoded at
// once, so back-to-back packets are decoded without bubbles. The other packet
// types are decoded here: a-sync (five or more 0x00 then 0x80), atom, trigger,
// exception return and ignore (one byte each), context ID (header plus the
// CTXTID-selected number of bytes), VMID (header plus one byte) and timestamp
// (header plus continuation-flagged bytes, at most nine).
//
// After reset, and after a reserved header byte, the FSM is out of sync and
// ignores everything until an a-sync packet.
//
// The start/stop handshake and the split of work between the global FSM and
// the packet FSMs follow the design description; the state encoding, the
// one-cycle start pulse and the out-of-sync handling are this
// implementation's. pkt reports, for one cycle, the kind of each packet
// whose header (or a-sync end) was recognised; it is for monitoring only.
module pft_global_fsm
  import pft_pkg::*;
#(
  parameter logic [1:0] CTXTID = 2'b11
) (
  input  logic  clk,
  input  logic  rst,          // synchronous, active high
  input  byte_t data_reg,
  input  logic  stop_i,
  input  logic  stop_b,
  input  logic  stop_w,
  output logic  start_i,
  output logic  start_b,
  output logic  start_w,
  output logic  synced,
  output pkt_e  pkt,
  output logic [2:0] global_state_reg
);

  typedef enum logic [2:0] {
    G_NO_SYNC,      // waiting for an a-sync packet
    G_HEADER,       // synchronised, next byte is a header
    G_ZEROS,        // inside an a-sync packet
    G_WAIT_I,       // I-Sync FSM running
    G_WAIT_B,       // branch address FSM running
    G_WAIT_W,       // waypoint FSM running
    G_PAYLOAD,      // skipping a fixed number of payload bytes
    G_TIMESTAMP     // skipping continuation-flagged timestamp bytes
  } global_state_e;

  global_state_e state_reg, state_next;
  logic [2:0]    zeros, zeros_next;     // 0x00 bytes seen, saturating
  logic [3:0]    remain, remain_next;   // payload bytes left / timestamp bytes seen

  localparam int unsigned CTX_BYTES = ctxtid_bytes(CTXTID);

  assign global_state_reg = state_reg;
  assign synced           = (state_reg != G_NO_SYNC);

  logic hdr_slot;
  always_comb begin
    unique case (state_reg)
      G_HEADER:  hdr_slot = 1'b1;
      G_WAIT_I:  hdr_slot = stop_i;
      G_WAIT_B:  hdr_slot = stop_b;
      G_WAIT_W:  hdr_slot = stop_w;
      default:   hdr_slot = 1'b0;
    endcase
  end

  always_comb begin
    state_next  = state_reg;
    zeros_next  = zeros;
    remain_next = remain;
    start_i     = 1'b0;
    start_b     = 1'b0;
    start_w     = 1'b0;
    pkt         = PKT_NONE;

    if (hdr_slot) begin
      state_next = G_HEADER;
      if (data_reg == HDR_ASYNC_ZERO) begin
        state_next = G_ZEROS;
        zeros_next = 3'd1;
      end else if (data_reg == HDR_ISYNC) begin
        start_i = 1'b1; pkt = PKT_ISYNC; state_next = G_WAIT_I;
      end else if (data_reg[0]) begin
        start_b = 1'b1; pkt = PKT_BRANCH; state_next = G_WAIT_B;
      end else if (data_reg == HDR_WAYPOINT) begin
        start_w = 1'b1; pkt = PKT_WAYPOINT; state_next = G_WAIT_W;
      end else if (data_reg[7]) begin
        pkt = PKT_ATOM;
      end else if (data_reg == HDR_TRIGGER) begin
        pkt = PKT_TRIGGER;
      end else if (data_reg == HDR_EXC_RETURN) begin
        pkt = PKT_EXC_RETURN;
      end else if (data_reg == HDR_IGNORE) begin
        pkt = PKT_IGNORE;
      end else if (data_reg == HDR_CONTEXTID) begin
        pkt = PKT_CONTEXTID;
        if (CTX_BYTES != 0) begin
          state_next  = G_PAYLOAD;
          remain_next = 4'(CTX_BYTES);
        end
      end else if (data_reg == HDR_VMID) begin
        pkt = PKT_VMID; state_next = G_PAYLOAD; remain_next = 4'd1;
      end else if (data_reg[7:3] == 5'b01000 && data_reg[1:0] == 2'b10) begin
        pkt = PKT_TIMESTAMP; state_next = G_TIMESTAMP; remain_next = 4'd0;
      end else begin
        pkt = PKT_BAD; state_next = G_NO_SYNC; zeros_next = '0;
      end
    end else begin
      unique case (state_reg)
        G_NO_SYNC, G_ZEROS: begin
          if (data_reg == HDR_ASYNC_ZERO) begin
            zeros_next = (zeros == 3'd7) ? zeros : zeros + 3'd1;
          end else if (data_reg == HDR_ASYNC_END && zeros >= 3'(ASYNC_ZEROS)) begin
            pkt        = PKT_ASYNC;
            state_next = G_HEADER;
            zeros_next = '0;
          end else begin
            if (state_reg == G_ZEROS) pkt = PKT_BAD;
            state_next = G_NO_SYNC;
            zeros_next = '0;
          end
        end
        G_PAYLOAD: begin
          remain_next = remain - 4'd1;
          if (remain == 4'd1) state_next = G_HEADER;
        end
        G_TIMESTAMP: begin
          remain_next = remain + 4'd1;
          if (!data_reg[7] || remain == 4'd8) state_next = G_HEADER;
        end
        default: ;   // waiting for a packet FSM's stop
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_reg <= G_NO_SYNC;
      zeros     <= '0;
      remain    <= '0;
    end else begin
      state_reg <= state_next;
      zeros     <= zeros_next;
      remain    <= remain_next;
    end
  end

  // at most one packet FSM is started at a time
  assert property (@(posedge clk) disable iff (rst) $onehot0({start_i, start_b, start_w}));

endmodule
