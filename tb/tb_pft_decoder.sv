// tb_pft_decoder -- self-checking testbench of the PFT decoder.
//
// 1. The I-Sync example of the decoder timing diagram (address bytes
//    c8 14 10 00, context ID cd ab 34 12): checks the decoded address
//    0x001014c8, the instrumented value 0x1234abcd and the latency of n+1
//    cycles (n = 10 bytes) from the header on 'data' to instrument_enable.
// 2. A raw trace captured from the reference board (a-sync, seven I-Sync
//    packets with context IDs, branch address packets): checks every decoded
//    address and instrumented value against values worked out by hand.
// 3. A random stream with every packet type, from the testbench encoder.
module tb_pft_decoder;
  import pft_pkg::*;
  import pft_tb_pkg::*;

  logic clk = 0, rst = 1;
  logic [31:0] data = '0;
  word_t i_sync_address, instrumented_data;
  logic  trace_en, instrument_enable, synced;
  pkt_e  pkt_event;

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  int unsigned got_addr[$], got_ctx[$];
  int unsigned ie_cycle[$];
  int pkt_count[pkt_e];

  pft_decoder dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (!rst) begin
    if (trace_en) got_addr.push_back(i_sync_address);
    if (instrument_enable) begin got_ctx.push_back(instrumented_data); ie_cycle.push_back(cyc); end
    if (pkt_event != PKT_NONE) pkt_count[pkt_event]++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(byte unsigned q[$]);
    foreach (q[i]) begin @(posedge clk); data <= {24'h0, q[i]}; end
  endtask

  task automatic idle(int n);
    repeat (n) begin @(posedge clk); data <= '0; end
    @(negedge clk);
  endtask

  task automatic compare(int unsigned exp_a[$], int unsigned exp_c[$], string tag);
    check(got_addr.size() == exp_a.size(), $sformatf("%s: %0d addresses, expected %0d", tag, got_addr.size(), exp_a.size()));
    foreach (exp_a[i]) if (i < got_addr.size())
      check(got_addr[i] == exp_a[i], $sformatf("%s: address %0d = %h, expected %h", tag, i, got_addr[i], exp_a[i]));
    check(got_ctx.size() == exp_c.size(), $sformatf("%s: %0d data values, expected %0d", tag, got_ctx.size(), exp_c.size()));
    foreach (exp_c[i]) if (i < got_ctx.size())
      check(got_ctx[i] == exp_c[i], $sformatf("%s: data %0d = %h, expected %h", tag, i, got_ctx[i], exp_c[i]));
    got_addr.delete(); got_ctx.delete(); ie_cycle.delete();
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    byte unsigned q[$];
    int unsigned hdr_cycle;
    pft_stream s;
    repeat (3) @(posedge clk);
    rst <= 0;

    // ---- 1. timing-diagram example ----
    send('{8'h00, 8'h00, 8'h00, 8'h00, 8'h00, 8'h80});
    @(posedge clk); data <= 32'h08; hdr_cycle = cyc + 1;   // cyc steps at this edge
    send('{8'hc8, 8'h14, 8'h10, 8'h00, 8'h21, 8'hcd, 8'hab, 8'h34, 8'h12, 8'h73, 8'h86});
    idle(4);
    check(synced, "synchronised after a-sync");
    check(ie_cycle.size() == 1 && ie_cycle[0] - hdr_cycle == 11,
          $sformatf("latency header->instrument_enable = %0d, expected n+1 = 11",
                    ie_cycle.size() ? ie_cycle[0] - hdr_cycle : -1));
    // 0x73 is a one-byte branch packet: A[7:2] = 0x39 -> 0x001014e4
    compare('{32'h001014c8, 32'h001014e4}, '{32'h1234abcd}, "timing example");

    // ---- 2. raw trace from the board ----
    q = '{8'h00,8'h00,8'h00,8'h00,8'h00,8'h80, 8'h08,8'h78,
          8'h04,8'h01,8'h00,8'h21,8'hf4,8'hee,8'h03,8'h00,
          8'h8b,8'h03, 8'h08,8'h8c,8'h04,8'h01,8'h00,8'h21,
          8'hf4,8'hee,8'h03,8'h00, 8'h9d,8'h03, 8'h08,8'h98,
          8'h04,8'h01,8'h00,8'h21, 8'hff,8'hff,8'hff,8'hff,
          8'h9d,8'h03, 8'h08,8'ha8,8'h04,8'h01,8'h00,8'h21,
          8'hdd,8'hdd,8'hdd,8'hdd, 8'h85,8'h03, 8'h08,8'hb4,
          8'h04,8'h01,8'h00,8'h21, 8'hdd,8'hdd,8'hdd,8'hdd,
          8'h9d,8'h03, 8'h08,8'hc4,8'h04,8'h01,8'h00,8'h21,
          8'haa,8'haa,8'haa,8'haa, 8'h9d,8'h03, 8'h08,8'hd4,
          8'h04,8'h01,8'h00,8'h21, 8'h11,8'h11,8'h11,8'h11,
          8'hfd,8'hbc,8'hcf,8'hdb,8'h0d,8'h01, 8'h00,8'h00};
    send(q);
    idle(4);
    compare('{32'h00010478, 32'h00010314, 32'h0001048c, 32'h00010338,
              32'h00010498, 32'h00010338, 32'h000104a8, 32'h00010308,
              32'h000104b4, 32'h00010338, 32'h000104c4, 32'h00010338,
              32'h000104d4, 32'hb6e7bcf8, 32'hb6e7bc00},
            '{32'h0003eef4, 32'h0003eef4, 32'hffffffff, 32'hdddddddd,
              32'hdddddddd, 32'haaaaaaaa, 32'h11111111}, "board trace");

    // ---- 3. random stream with every packet type ----
    s = new();
    s.async_pkt(7);
    s.isync(32'h00010000, 32'hfff00001);
    for (int i = 0; i < 150; i++) begin
      int unsigned r, t;
      r = $urandom_range(0, 13);
      t = $urandom;
      case (r)
        0:  s.isync(t & ~32'h1, $urandom);
        1:  s.branch(t, 1'b0);
        2:  s.branch(s.cur_addr ^ (t & 32'h0000_3ffc), s.cur_thumb);
        3:  s.branch(t, 1'b1);
        4:  s.branch(t, s.cur_thumb, 0, int'($urandom_range(1, 2)));
        5:  s.waypoint(s.cur_addr ^ (t & 32'h0000_00fc), s.cur_thumb);
        6:  s.waypoint(t, ~s.cur_thumb, 0, t[0]);
        7:  s.atom();
        8:  s.trigger();
        9:  s.exc_return();
        10: s.ignore();
        11: s.contextid(t);
        12: s.vmid(8'(t));
        default: s.timestamp(int'($urandom_range(1, 9)));
      endcase
    end
    send(s.bytes);
    idle(4);
    compare(s.exp_addr, s.exp_ctx, "random stream");
    check(pkt_count[PKT_BAD] == 0, "no reserved header seen");
    foreach (pkt_count[k]) $display("packets %s: %0d", k.name(), pkt_count[k]);

    // ---- 4. a reserved header loses sync; a-sync recovers it ----
    send('{8'h0a});
    idle(2);
    check(!synced, "reserved header drops synchronisation");
    s = new();
    s.isync(32'h00020000, 32'h0badf00d);   // ignored while out of sync
    s.async_pkt(5);
    send(s.bytes);
    s = new();
    s.isync(32'h00030000, 32'h600df00d);
    send(s.bytes);
    idle(4);
    check(synced, "a-sync restores synchronisation");
    compare('{32'h00030000}, '{32'h600df00d}, "resync");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
