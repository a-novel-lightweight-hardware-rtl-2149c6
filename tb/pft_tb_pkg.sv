// pft_tb_pkg -- testbench-side PFT trace generator.
//
// Builds raw PFT byte streams the way a trace macrocell would emit them, so
// that the decoder can be checked against values worked out independently:
// the encoder goes from a target address to bytes (the decoder goes the other
// way), and records the addresses and context ID values the decoder is
// expected to recover.
package pft_tb_pkg;

  class pft_stream;
    byte unsigned bytes[$];        // the raw stream
    int unsigned  exp_addr[$];     // expected decoded trace, in order
    int unsigned  exp_ctx[$];      // expected instrumented data, in order
    int unsigned  cur_addr;        // address the decoder will hold
    bit           cur_thumb;
    int unsigned  ctx_bytes = 4;   // context ID size the PTM is set to

    function void async_pkt(int unsigned zeros = 5);
      repeat (zeros) bytes.push_back(8'h00);
      bytes.push_back(8'h80);
    endfunction

    // I-Sync: header, 4 address bytes LSB first, info byte, context ID bytes.
    function void isync(int unsigned addr, int unsigned ctx, byte unsigned info = 8'h21);
      bytes.push_back(8'h08);
      for (int i = 0; i < 4; i++) bytes.push_back(8'((addr >> (8*i)) & 'hff));
      bytes.push_back(info);
      for (int i = 0; i < int'(ctx_bytes); i++) bytes.push_back(8'((ctx >> (8*i)) & 'hff));
      exp_addr.push_back(addr);
      if (ctx_bytes != 0)
        exp_ctx.push_back(ctx_bytes == 4 ? ctx : (ctx & ((32'h1 << (8*ctx_bytes)) - 1)));
      cur_addr  = addr;
      cur_thumb = addr[0];
    endfunction

    // Address fields of a target: field k goes into address byte k.
    static function int unsigned field(int unsigned a, bit thumb, int k);
      if (!thumb) case (k)
        0: return (a >> 2)  & 'h3f;
        1: return (a >> 8)  & 'h7f;
        2: return (a >> 15) & 'h7f;
        3: return (a >> 22) & 'h7f;
        default: return (a >> 29) & 'h7;
      endcase
      else case (k)
        0: return (a >> 1)  & 'h3f;
        1: return (a >> 7)  & 'h7f;
        2: return (a >> 14) & 'h7f;
        3: return (a >> 21) & 'h7f;
        default: return (a >> 28) & 'hf;
      endcase
    endfunction

    // Fewest address bytes that let the decoder rebuild 'target' from the
    // current address (5 when the instruction set changes).
    function int min_bytes(int unsigned target, bit thumb);
      int unsigned lo_bits[4] = thumb ? '{7, 14, 21, 28} : '{8, 15, 22, 29};
      if (thumb != cur_thumb) return 5;
      for (int k = 0; k < 4; k++)
        if ((target >> lo_bits[k]) == (cur_addr >> lo_bits[k])) return k + 1;
      return 5;
    endfunction

    // Address bytes shared by branch and waypoint packets.
    function void addr_bytes(int unsigned target, bit thumb, int n, bit exc, bit is_branch);
      for (int k = 0; k < n; k++) begin
        bit c = (k < n - 1);
        byte unsigned b;
        if (k == 0)      b = 8'({c, 6'(field(target, thumb, 0)), is_branch});
        else if (k < 4)  b = 8'({c, 7'(field(target, thumb, k))});
        else             b = thumb ? 8'({1'b0, exc, 2'b01, 4'(field(target, 1, 4))})
                                   : 8'({1'b0, exc, 3'b001, 3'(field(target, 0, 4))});
        bytes.push_back(b);
      end
      cur_addr  = thumb ? (target & ~32'h1) : (target & ~32'h3);
      cur_thumb = thumb;
      exp_addr.push_back(cur_addr);
    endfunction

    // Branch address packet; n = 0 picks the fewest bytes. exc_bytes (0..2)
    // exception information bytes are added when n is 5.
    function void branch(int unsigned target, bit thumb, int n = 0, int exc_bytes = 0);
      int m = min_bytes(target, thumb);
      if (n < m) n = m;
      if (exc_bytes != 0) n = 5;
      addr_bytes(target, thumb, n, exc_bytes != 0, 1'b1);
      if (exc_bytes == 1) bytes.push_back(8'h08);
      if (exc_bytes == 2) begin bytes.push_back(8'h88); bytes.push_back(8'h01); end
    endfunction

    // Waypoint update packet: header 0x72 then address bytes, optional info byte.
    function void waypoint(int unsigned target, bit thumb, int n = 0, bit info = 0);
      int m = min_bytes(target, thumb);
      bytes.push_back(8'h72);
      if (n < m) n = m;
      if (info) n = 5;
      addr_bytes(target, thumb, n, info, 1'b0);
      if (info) bytes.push_back(8'h00);
    endfunction

    function void atom();       bytes.push_back(8'h84); endfunction
    function void trigger();    bytes.push_back(8'h0C); endfunction
    function void exc_return(); bytes.push_back(8'h76); endfunction
    function void ignore();     bytes.push_back(8'h66); endfunction
    function void vmid(byte unsigned v); bytes.push_back(8'h3C); bytes.push_back(v); endfunction
    function void contextid(int unsigned v);
      bytes.push_back(8'h6E);
      for (int i = 0; i < int'(ctx_bytes); i++) bytes.push_back(8'((v >> (8*i)) & 'hff));
    endfunction
    function void timestamp(int n);   // n bytes of timestamp value, 1..9
      bytes.push_back(8'h42);
      for (int i = 0; i < n; i++) bytes.push_back(8'((i < n - 1) ? 8'h80 | 8'(i) : 8'h05));
    endfunction
  endclass

endpackage
