// tb_hw_instr_top -- end-to-end testbench of the instrumentation top.
//
// A random PFT stream with every packet type goes through the whole path
// (trace port -> decoder -> memory controllers -> block RAMs); both memories
// are then read back through their read ports and compared with the
// addresses and context ID values the testbench encoder recorded. Memories
// are shrunk to 64 words so that the overflow path (full / dropped) is
// exercised. It counts how often each mechanism happened -- every packet
// type, back-to-back packets, ARM/Thumb switches, exception bytes, loss and
// recovery of synchronisation, memory overflow -- and counts a failure for
// any that never happened.
module tb_hw_instr_top;
  import pft_pkg::*;
  import pft_tb_pkg::*;

  localparam int DEPTH = 64;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst = 1;
  logic [31:0] data = '0;
  logic trace_rd_en = 0, instr_rd_en = 0;
  logic [AW-1:0] trace_rd_addr = '0, instr_rd_addr = '0;
  word_t trace_rd_data, instr_rd_data;
  logic [AW:0] trace_count, instr_count;
  logic trace_full, instr_full, trace_dropped, instr_dropped, synced;
  pkt_e pkt_event;

  hw_instr_top #(.MEM_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int pkt_seen[pkt_e];
  int n_trace_drop = 0, n_instr_drop = 0, n_sync_lost = 0, n_resync = 0;
  logic synced_q = 0;

  always @(negedge clk) if (!rst) begin
    if (pkt_event != PKT_NONE) pkt_seen[pkt_event]++;
    n_trace_drop += int'(trace_dropped);
    n_instr_drop += int'(instr_dropped);
    if (synced_q && !synced) n_sync_lost++;
    if (!synced_q && synced) n_resync++;
    synced_q <= synced;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(byte unsigned q[$]);
    // bits 31:8 of the trace port carry noise, which the decoder must ignore
    foreach (q[i]) begin @(posedge clk); data <= {24'($urandom), q[i]}; end
  endtask

  task automatic read_back(int unsigned exp_a[$], int unsigned exp_c[$], bit fresh);
    int na = (exp_a.size() < DEPTH) ? exp_a.size() : DEPTH;
    int nc = (exp_c.size() < DEPTH) ? exp_c.size() : DEPTH;
    check(trace_count == (AW+1)'(na), $sformatf("trace_count %0d expected %0d", trace_count, na));
    check(instr_count == (AW+1)'(nc), $sformatf("instr_count %0d expected %0d", instr_count, nc));
    for (int i = 0; i <= DEPTH; i++) begin
      @(posedge clk);
      trace_rd_en <= (i < DEPTH); trace_rd_addr <= AW'(i);
      instr_rd_en <= (i < DEPTH); instr_rd_addr <= AW'(i);
      @(negedge clk);
      // words past the count are zero only if the memory was never written
      // before (a reset clears the controllers, not the memories)
      if (i > 0 && (fresh || i - 1 < na))
        check(trace_rd_data == ((i - 1 < na) ? exp_a[i-1] : 0),
              $sformatf("trace word %0d = %h expected %h", i - 1, trace_rd_data, (i - 1 < na) ? exp_a[i-1] : 0));
      if (i > 0 && (fresh || i - 1 < nc))
        check(instr_rd_data == ((i - 1 < nc) ? exp_c[i-1] : 0),
              $sformatf("data word %0d = %h expected %h", i - 1, instr_rd_data, (i - 1 < nc) ? exp_c[i-1] : 0));
    end
    trace_rd_en <= 0; instr_rd_en <= 0;
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pft_stream s;
    int n_switch = 0, n_exc = 0;
    bit th;
    int unsigned r, t;
    repeat (3) @(posedge clk);
    rst <= 0;

    // phase 1: random stream that overflows both 64-word memories
    s = new();
    s.async_pkt(5);
    s.isync(32'h0001_06a0, 32'hfff0_0001);
    for (int i = 0; i < 800; i++) begin
      r = $urandom_range(0, 13);
      t = $urandom;
      th = s.cur_thumb;
      case (r)
        0, 1: s.isync(t & ~32'h1, $urandom);
        2:  s.branch(s.cur_addr ^ (t & 32'h0000_0ffc), s.cur_thumb);
        3:  s.branch(t, ~s.cur_thumb);
        4:  begin s.branch(t, s.cur_thumb, 0, int'($urandom_range(1, 2))); n_exc++; end
        5:  s.waypoint(s.cur_addr ^ (t & 32'h0000_00fc), s.cur_thumb, 0, t[0]);
        6:  s.atom();
        7:  s.trigger();
        8:  s.exc_return();
        9:  s.ignore();
        10: s.contextid(t);
        11: s.vmid(8'(t));
        12: s.timestamp(int'($urandom_range(1, 9)));
        default: s.async_pkt(int'($urandom_range(5, 7)));
      endcase
      if (s.cur_thumb != th) n_switch++;
    end
    send(s.bytes);
    repeat (4) @(posedge clk);
    data <= '0;
    @(negedge clk);
    check(trace_full && instr_full, "both memories filled");
    read_back(s.exp_addr, s.exp_ctx, 1'b1);

    // phase 2: reset, lose sync on a reserved header, recover with a-sync
    @(posedge clk); rst <= 1;
    @(posedge clk); rst <= 0;
    s = new();
    s.async_pkt(5);
    s.isync(32'h0002_0000, 32'hfff0_0002);
    s.branch(32'h0002_0040, 1'b0);
    send(s.bytes);
    send('{8'h0A});                                  // reserved header
    send('{8'h08, 8'h00, 8'h00, 8'h03, 8'h00, 8'h21, 8'hde, 8'had, 8'hbe, 8'hef}); // ignored
    s.bytes.delete();
    s.async_pkt(6);
    s.isync(32'h0004_0000, 32'hffe0_0001);
    send(s.bytes);
    repeat (4) @(posedge clk);
    data <= '0;
    @(negedge clk);
    read_back(s.exp_addr, s.exp_ctx, 1'b0);

    // mechanisms
    for (int e = int'(PKT_ASYNC); e <= int'(PKT_BAD); e++) begin
      check(pkt_seen.exists(pkt_e'(e)), $sformatf("packet kind %s never seen", pkt_e'(e)));
      $display("mechanism %-16s : %0d", pkt_e'(e), pkt_seen.exists(pkt_e'(e)) ? pkt_seen[pkt_e'(e)] : 0);
    end
    $display("mechanism ARM/Thumb switch : %0d", n_switch);
    $display("mechanism exception bytes  : %0d", n_exc);
    $display("mechanism sync lost        : %0d", n_sync_lost);
    $display("mechanism resync           : %0d", n_resync);
    $display("mechanism trace overflow   : %0d", n_trace_drop);
    $display("mechanism data overflow    : %0d", n_instr_drop);
    check(n_switch > 0, "ARM/Thumb switch never happened");
    check(n_exc > 0, "exception bytes never sent");
    check(n_sync_lost > 0, "sync never lost");
    check(n_resync > 1, "resync never happened");
    check(n_trace_drop > 0, "decoded trace memory never overflowed");
    check(n_instr_drop > 0, "instrumented data memory never overflowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
