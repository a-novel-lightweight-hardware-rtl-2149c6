// tb_hw_instr_full -- full-size run of the instrumentation top (default
// parameters: 4-byte context IDs, two 2048-word memories).
//
// Workload: the double-free example. The instrumented program sends, through
// the context ID register, 0xfff00001 (malloc A), 0xfff00002 (malloc C),
// 0xffe00001 (free A), 0xfff00003 (malloc B), 0xffe00001 (free A again):
// upper 12 bits 0xfff = malloc, 0xffe = free, lower 20 bits = region. Each
// value travels in the context ID field of an I-Sync packet; between them the
// program's control flow produces branch address packets (targets taken from
// a decoded trace of that program) and atoms. After the run the testbench
// reads both 2048-word memories through their read ports, checks every word,
// and then plays the role of the checking software: it counts allocations
// and frees per region from the instrumented data memory and must find that
// region 1 was freed twice but allocated once.
//
// Second workload: after a reset, the raw trace captured on the board for the
// same kind of program (a-sync, seven I-Sync packets whose context IDs are
// 0x0003eef4 twice, 0xffffffff, 0xdddddddd twice, 0xaaaaaaaa, 0x11111111,
// branch packets in between and a five-byte branch into a library) is fed to
// the top. Both memories are read back up to their word counts and compared
// with addresses and values decoded by hand from the bytes. The reset
// restarts the controllers at word 0; the memories keep the first run's words
// beyond the new counts, so only the new words are checked.
module tb_hw_instr_full;
  import pft_pkg::*;
  import pft_tb_pkg::*;

  localparam int DEPTH = 2048;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst = 1;
  logic [31:0] data = '0;
  logic trace_rd_en = 0, instr_rd_en = 0;
  logic [AW-1:0] trace_rd_addr = '0, instr_rd_addr = '0;
  word_t trace_rd_data, instr_rd_data;
  logic [AW:0] trace_count, instr_count;
  logic trace_full, instr_full, trace_dropped, instr_dropped, synced;
  pkt_e pkt_event;

  hw_instr_top dut (.*);

  always #2 clk = ~clk;   // 250 MHz

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pft_stream s;
    static int unsigned values[5] = '{32'hfff00001, 32'hfff00002, 32'hffe00001, 32'hfff00003, 32'hffe00001};
    static int unsigned flow[48] = '{
      32'h106a0, 32'h10358, 32'h106c0, 32'h104d4, 32'h106ec, 32'hb6e3ec88, 32'h1057c, 32'h10378,
      32'h10598, 32'h1039c, 32'h105a0, 32'h103c0, 32'h105b8, 32'h1039c, 32'h105c0, 32'h103c0,
      32'h105d8, 32'h10384, 32'h105e0, 32'h103c0, 32'h105f0, 32'h10378, 32'h10600, 32'h1039c,
      32'h10608, 32'h103c0, 32'h10620, 32'h10384, 32'h10628, 32'h103c0, 32'h10638, 32'h10390,
      32'h10644, 32'h10378, 32'h10654, 32'h10378, 32'h10660, 32'h1050c, 32'h1066c, 32'h10390,
      32'h10678, 32'h10378, 32'h10690, 32'hb6e3ecf8, 32'hb6e3ec00, 32'h10700, 32'h106a4, 32'h106a8};
    int unsigned word_a[$], word_c[$];
    int mallocs[int unsigned], frees[int unsigned];
    int unsigned v;
    int ncycles;
    static byte_t board[] = '{
      8'h00,8'h00,8'h00,8'h00,8'h00,8'h80, 8'h08,8'h78,
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
    static int unsigned board_addr[15] = '{
      32'h00010478, 32'h00010314, 32'h0001048c, 32'h00010338,
      32'h00010498, 32'h00010338, 32'h000104a8, 32'h00010308,
      32'h000104b4, 32'h00010338, 32'h000104c4, 32'h00010338,
      32'h000104d4, 32'hb6e7bcf8, 32'hb6e7bc00};
    static int unsigned board_ctx[7] = '{
      32'h0003eef4, 32'h0003eef4, 32'hffffffff, 32'hdddddddd,
      32'hdddddddd, 32'haaaaaaaa, 32'h11111111};

    repeat (3) @(posedge clk);
    rst <= 0;

    s = new();
    s.async_pkt(5);
    for (int i = 0; i < 48; i++) begin
      if (i == 0) s.isync(flow[0], 32'h0);   // trace start (filter range begins at 0x106a0)
      else        s.branch(flow[i], 1'b0);
      s.atom();
      if (i % 9 == 8) s.isync(s.cur_addr + 32'h4, values[i / 9]);   // syscall returns
    end
    foreach (s.bytes[i]) begin @(posedge clk); data <= 32'(s.bytes[i]); end
    repeat (4) @(posedge clk);
    data <= '0;
    @(negedge clk);

    ncycles = 0;
    for (int i = 0; i <= DEPTH; i++) begin
      @(posedge clk);
      trace_rd_en <= (i < DEPTH); trace_rd_addr <= AW'(i);
      instr_rd_en <= (i < DEPTH); instr_rd_addr <= AW'(i);
      @(negedge clk);
      if (i > 0) begin word_a.push_back(trace_rd_data); word_c.push_back(instr_rd_data); end
    end

    check(trace_count == (AW+1)'(s.exp_addr.size()), $sformatf("trace_count %0d expected %0d", trace_count, s.exp_addr.size()));
    check(instr_count == (AW+1)'(s.exp_ctx.size()), $sformatf("instr_count %0d expected %0d", instr_count, s.exp_ctx.size()));
    check(!trace_full && !instr_full, "memories not full");
    for (int i = 0; i < DEPTH; i++) begin
      v = (i < s.exp_addr.size()) ? s.exp_addr[i] : 0;
      check(word_a[i] == v, $sformatf("trace word %0d = %h expected %h", i, word_a[i], v));
      v = (i < s.exp_ctx.size()) ? s.exp_ctx[i] : 0;
      check(word_c[i] == v, $sformatf("data word %0d = %h expected %h", i, word_c[i], v));
    end
    $display("instrumented data memory: %h %h %h %h %h %h %h",
             word_c[0], word_c[1], word_c[2], word_c[3], word_c[4], word_c[5], word_c[6]);

    // the checking software: malloc = 0xfff, free = 0xffe in the upper 12 bits
    for (int i = 0; i < int'(instr_count); i++) begin
      if (word_c[i][31:20] == 12'hfff) mallocs[word_c[i][19:0]]++;
      if (word_c[i][31:20] == 12'hffe) frees[word_c[i][19:0]]++;
    end
    check(mallocs[1] == 1 && frees[1] == 2, "region 1: one malloc, two frees -> double free detected");
    check(mallocs[2] == 1 && !frees.exists(2), "region 2: allocated, never freed");
    $display("region 1: %0d malloc, %0d free -> %s", mallocs[1], frees[1],
             frees[1] > mallocs[1] ? "DOUBLE FREE" : "ok");

    // ---- second workload: raw board trace ----
    @(posedge clk); rst <= 1;
    @(posedge clk); @(posedge clk); rst <= 0;
    foreach (board[i]) begin @(posedge clk); data <= 32'(board[i]); end
    repeat (4) @(posedge clk);
    data <= '0;
    @(negedge clk);
    check(trace_count == 15, $sformatf("board trace: trace_count %0d expected 15", trace_count));
    check(instr_count == 7, $sformatf("board trace: instr_count %0d expected 7", instr_count));
    word_a.delete(); word_c.delete();
    for (int i = 0; i <= 15; i++) begin
      @(posedge clk);
      trace_rd_en <= (i < 15); trace_rd_addr <= AW'(i);
      instr_rd_en <= (i < 7);  instr_rd_addr <= AW'(i);
      @(negedge clk);
      if (i > 0) begin word_a.push_back(trace_rd_data); word_c.push_back(instr_rd_data); end
    end
    foreach (board_addr[i])
      check(word_a[i] == board_addr[i], $sformatf("board trace word %0d = %h expected %h", i, word_a[i], board_addr[i]));
    foreach (board_ctx[i])
      check(word_c[i] == board_ctx[i], $sformatf("board data word %0d = %h expected %h", i, word_c[i], board_ctx[i]));
    $display("board trace instrumented data: %h %h %h %h %h %h %h",
             word_c[0], word_c[1], word_c[2], word_c[3], word_c[4], word_c[5], word_c[6]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
