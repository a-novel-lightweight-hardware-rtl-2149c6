// tb_pft_global_fsm -- self-checking testbench of the PFT global FSM.
//
// The testbench plays the three packet FSMs: for an I-Sync, branch address or
// waypoint packet it raises the matching stop one cycle after the packet's
// last byte. A random schedule of all eleven packet types (payload bytes
// random) is built first, with the expected start pulses and packet events
// per cycle; the FSM's outputs are compared cycle by cycle. The schedule
// also holds a reserved header, bytes that must be ignored while out of
// sync, and the a-sync that restores synchronisation.
module tb_pft_global_fsm;
  import pft_pkg::*;

  localparam int N = 4000;

  logic  clk = 0, rst = 1;
  byte_t data_reg = '0;
  logic  stop_i = 0, stop_b = 0, stop_w = 0;
  logic  start_i, start_b, start_w, synced;
  pkt_e  pkt;
  logic [2:0] global_state_reg;

  pft_global_fsm dut (.*);

  always #5 clk = ~clk;

  byte_t s_data [N];
  logic  s_stop_i [N], s_stop_b [N], s_stop_w [N];
  pkt_e  s_pkt [N];
  logic  s_synced [N];
  int    len = 0;
  int    checks = 0, failures = 0;
  int    seen[pkt_e];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic void put(byte_t b, pkt_e k = PKT_NONE, bit sy = 1);
    s_data[len] = b; s_pkt[len] = k; s_synced[len] = sy; len++;
  endfunction

  // multi-byte packet handled by a packet FSM: stop one cycle after last byte
  function automatic void fsm_pkt(byte_t hdr, pkt_e k, int payload);
    put(hdr, k);
    repeat (payload) put(8'($urandom));
    if (k == PKT_ISYNC)  s_stop_i[len] = 1;
    if (k == PKT_BRANCH) s_stop_b[len] = 1;
    if (k == PKT_WAYPOINT) s_stop_w[len] = 1;
  endfunction

  function automatic void async_pkt(int zeros, bit was_synced);
    repeat (zeros) put(8'h00, PKT_NONE, was_synced);
    put(8'h80, PKT_ASYNC, was_synced);
  endfunction

  initial begin : watchdog
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, n;
    foreach (s_data[i]) begin
      s_data[i] = 0; s_stop_i[i] = 0; s_stop_b[i] = 0; s_stop_w[i] = 0;
      s_pkt[i] = PKT_NONE; s_synced[i] = 0;
    end
    // not synchronised yet: an I-Sync header must be ignored
    put(8'h08, PKT_NONE, 0); put(8'h00, PKT_NONE, 0);
    async_pkt(5, 0);
    while (len < N - 40) begin
      k = $urandom_range(0, 12);
      case (k)
        0: fsm_pkt(8'h08, PKT_ISYNC, 9);
        1: fsm_pkt(8'($urandom) | 8'h01, PKT_BRANCH, int'($urandom_range(0, 6)));
        2: fsm_pkt(8'h72, PKT_WAYPOINT, int'($urandom_range(1, 6)));
        3: put((8'($urandom) | 8'h80) & 8'hFE, PKT_ATOM);
        4: put(8'h0C, PKT_TRIGGER);
        5: put(8'h76, PKT_EXC_RETURN);
        6: put(8'h66, PKT_IGNORE);
        7: begin put(8'h6E, PKT_CONTEXTID); repeat (4) put(8'($urandom)); end
        8: begin put(8'h3C, PKT_VMID); put(8'($urandom)); end
        9: begin
             n = $urandom_range(1, 9);
             put($urandom_range(0, 1) ? 8'h46 : 8'h42, PKT_TIMESTAMP);
             for (int i = 0; i < n; i++)
               put((i < n - 1) ? (8'($urandom) | 8'h80) : (n == 9 ? 8'($urandom) : 8'($urandom) & 8'h7F));
           end
        10: async_pkt($urandom_range(5, 8), 1);
        11: if ($urandom_range(0, 3) == 0) begin
              // reserved header: sync lost, then an I-Sync that must be ignored
              put(8'h0A, PKT_BAD, 1);
              s_synced[len - 1] = 1;
              put(8'h08, PKT_NONE, 0);
              repeat (3) put(8'h11, PKT_NONE, 0);
              async_pkt(6, 0);
            end
        default: put(8'h84, PKT_ATOM);
      endcase
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < len; c++) begin
      @(posedge clk);
      data_reg <= s_data[c];
      stop_i <= s_stop_i[c]; stop_b <= s_stop_b[c]; stop_w <= s_stop_w[c];
      @(negedge clk);
      check(start_i == (s_pkt[c] == PKT_ISYNC), $sformatf("cycle %0d start_i", c));
      check(start_b == (s_pkt[c] == PKT_BRANCH), $sformatf("cycle %0d start_b", c));
      check(start_w == (s_pkt[c] == PKT_WAYPOINT), $sformatf("cycle %0d start_w", c));
      check(pkt == s_pkt[c], $sformatf("cycle %0d pkt %s expected %s (byte %h)", c, pkt.name(), s_pkt[c].name(), s_data[c]));
      // synced reflects the state before this byte is consumed
      check(synced == s_synced[c], $sformatf("cycle %0d synced", c));
      seen[pkt]++;
    end
    for (int e = int'(PKT_ASYNC); e <= int'(PKT_BAD); e++)
      check(seen.exists(pkt_e'(e)), $sformatf("packet kind %s never seen", pkt_e'(e)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
