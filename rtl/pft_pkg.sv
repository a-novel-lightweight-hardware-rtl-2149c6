// pft_pkg -- types, header encodings and address helpers shared by the
// Program Flow Trace (PFT) decoder modules.
//
// The decoder consumes the raw PFT byte stream that a CoreSight PTM emits
// through the TPIU. The header byte values below are those of the PFT
// protocol (eleven packet types); the packet layout that the design follows
// for the I-Sync packet (header, four address bytes, information byte,
// context ID bytes, least significant byte first) can be read off the raw
// trace examples the design was built against. The branch-address byte layout
// (7 payload bits per byte, bit 7 = continuation, fifth byte carrying the
// instruction set and an exception flag) follows the PFT protocol and is not
// spelled out further in the design description.
package pft_pkg;

  typedef logic [7:0]  byte_t;
  typedef logic [31:0] word_t;

  // Header byte encodings (PFT protocol).
  localparam byte_t HDR_ASYNC_ZERO = 8'h00;  // a-sync: five or more 0x00 ...
  localparam byte_t HDR_ASYNC_END  = 8'h80;  // ... followed by 0x80
  localparam byte_t HDR_ISYNC      = 8'h08;
  localparam byte_t HDR_WAYPOINT   = 8'h72;
  localparam byte_t HDR_TRIGGER    = 8'h0C;
  localparam byte_t HDR_CONTEXTID  = 8'h6E;
  localparam byte_t HDR_VMID       = 8'h3C;
  localparam byte_t HDR_EXC_RETURN = 8'h76;
  localparam byte_t HDR_IGNORE     = 8'h66;
  // Timestamp headers are 0b0100_0x10 (0x42, 0x46).
  // Branch address headers have bit 0 set; atoms are 0b1xxx_xxx0.

  // Minimum number of 0x00 bytes before 0x80 that form an a-sync packet.
  localparam int unsigned ASYNC_ZEROS = 5;

  // Kind of packet whose header the global FSM recognised this cycle.
  typedef enum logic [3:0] {
    PKT_NONE,
    PKT_ASYNC,       // a-sync completed (0x80 after the zeros)
    PKT_ISYNC,
    PKT_BRANCH,
    PKT_WAYPOINT,
    PKT_ATOM,
    PKT_TRIGGER,
    PKT_CONTEXTID,
    PKT_VMID,
    PKT_TIMESTAMP,
    PKT_EXC_RETURN,
    PKT_IGNORE,
    PKT_BAD          // reserved header: synchronisation lost
  } pkt_e;

  // Number of context ID bytes for the 2-bit ctxtid setting:
  // "00" none, "01" one, "10" two, "11" four.
  function automatic int unsigned ctxtid_bytes(logic [1:0] ctxtid);
    case (ctxtid)
      2'b00:   return 0;
      2'b01:   return 1;
      2'b10:   return 2;
      default: return 4;
    endcase
  endfunction

  // Fifth address byte of a branch / waypoint address: instruction set.
  // ARM 0bxE00_1aaa, Thumb 0bxE01_aaaa (Jazelle is not supported and is
  // treated as ARM).
  function automatic logic byte4_thumb(byte_t b);
    return (b[5:4] == 2'b01);
  endfunction

  // Rebuild a branch target address from the previous address and the
  // address bytes received so far (nbytes of them, byte 0 first). Bits that
  // the packet does not carry keep their previous value.
  //   ARM  : byte0[6:1]->A[7:2], byte1..3[6:0]->A[14:8],A[21:15],A[28:22],
  //          byte4[2:0]->A[31:29]; A[1:0] = 0.
  //   Thumb: byte0[6:1]->A[6:1], byte1..3[6:0]->A[13:7],A[20:14],A[27:21],
  //          byte4[3:0]->A[31:28]; A[0] = 0.
  function automatic word_t merge_address(word_t base, byte_t b0, byte_t b1,
                                          byte_t b2, byte_t b3, byte_t b4,
                                          int unsigned nbytes, logic thumb);
    word_t a = base;
    if (!thumb) begin
      a[1:0] = 2'b00;
      a[7:2] = b0[6:1];
      if (nbytes > 1) a[14:8]  = b1[6:0];
      if (nbytes > 2) a[21:15] = b2[6:0];
      if (nbytes > 3) a[28:22] = b3[6:0];
      if (nbytes > 4) a[31:29] = b4[2:0];
    end else begin
      a[0]   = 1'b0;
      a[6:1] = b0[6:1];
      if (nbytes > 1) a[13:7]  = b1[6:0];
      if (nbytes > 2) a[20:14] = b2[6:0];
      if (nbytes > 3) a[27:21] = b3[6:0];
      if (nbytes > 4) a[31:28] = b4[3:0];
    end
    return a;
  endfunction

endpackage
