// tb_pft_isync_fsm -- self-checking testbench of the I-Sync packet FSM.
//
// Four instances, one per context ID size (none, 1, 2 and 4 bytes), each fed
// back-to-back I-Sync packets with random addresses and context IDs. Every
// cycle it checks that the address is reported with the fourth address byte,
// the context ID (zero-extended) with its last byte, and that stop pulses
// exactly in the cycle after the last byte, when the next header arrives.
module tb_pft_isync_fsm;
  import pft_pkg::*;

  logic clk = 0, rst = 1;
  int checks = 0, failures = 0;
  int done = 0;

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  for (genvar g = 0; g < 4; g++) begin : g_ctx
    localparam logic [1:0] CT = 2'(g);
    localparam int NCTX = (g == 3) ? 4 : g;
    logic  start = 0, stop, addr_valid, ctx_valid;
    byte_t data_reg = '0;
    word_t address, ctx_value, i_sync_address, instrumented_data;
    logic [2:0] st;

    pft_isync_fsm #(.CTXTID(CT)) dut (
      .clk, .rst, .start, .data_reg, .stop, .addr_valid, .address,
      .ctx_valid, .ctx_value, .i_sync_address, .instrumented_data, .state_reg_o(st)
    );

    initial begin
      byte unsigned pkt[$];
      word_t a, c, cexp;
      int last;
      @(negedge rst);
      for (int p = 0; p < 20; p++) begin
        a = $urandom; c = $urandom;
        cexp = (NCTX == 4) ? c : (c & ((32'h1 << (8*NCTX)) - 1));
        pkt = '{8'h08, a[7:0], a[15:8], a[23:16], a[31:24], 8'h21};
        for (int i = 0; i < NCTX; i++) pkt.push_back(c[8*i +: 8]);
        last = pkt.size() - 1;
        for (int j = 0; j <= last; j++) begin
          @(posedge clk); start <= (j == 0); data_reg <= pkt[j];
          @(negedge clk);
          check(addr_valid == (j == 4), $sformatf("ctx%0d pkt%0d byte%0d addr_valid", g, p, j));
          if (j == 4) check(address == a, $sformatf("ctx%0d address %h exp %h", g, address, a));
          check(ctx_valid == (NCTX > 0 && j == last), $sformatf("ctx%0d pkt%0d byte%0d ctx_valid", g, p, j));
          if (NCTX > 0 && j == last)
            check(ctx_value == cexp, $sformatf("ctx%0d value %h exp %h", g, ctx_value, cexp));
          check(stop == (j == 0 && p > 0), $sformatf("ctx%0d pkt%0d byte%0d stop=%0b", g, p, j, stop));
        end
      end
      @(posedge clk); start <= 0; data_reg <= 8'h84;
      @(negedge clk); check(stop, $sformatf("ctx%0d final stop", g));
      check(i_sync_address == a, $sformatf("ctx%0d address register", g));
      if (NCTX > 0) check(instrumented_data == cexp, $sformatf("ctx%0d data register", g));
      @(posedge clk);
      @(negedge clk); check(!stop, $sformatf("ctx%0d stop is one cycle", g));
      done++;
    end
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (done == 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
