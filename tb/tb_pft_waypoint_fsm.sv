// tb_pft_waypoint_fsm -- self-checking testbench of the waypoint update FSM.
//
// Random waypoint targets, ARM and Thumb, with 1 to 5 address bytes and an
// optional information byte, are encoded by the testbench encoder and fed
// back-to-back. Checks: the rebuilt address and instruction set in the cycle
// of the last address byte (and only then), and stop exactly one cycle after
// the packet's last byte.
module tb_pft_waypoint_fsm;
  import pft_pkg::*;
  import pft_tb_pkg::*;

  logic  clk = 0, rst = 1;
  logic  start = 0, stop, addr_valid, thumb;
  byte_t data_reg = '0;
  word_t base_addr = 32'h0001_0000, address;
  logic  base_thumb = 0;
  int checks = 0, failures = 0;
  int n_info = 0, n_thumb = 0, n_len[6];

  pft_waypoint_fsm dut (.*);

  always #5 clk = ~clk;

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
    int naddr, last;
    bit tt, info;
    word_t t;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int p = 0; p < 400; p++) begin
      s = new();
      s.cur_addr = base_addr; s.cur_thumb = base_thumb;
      t  = $urandom;
      tt = ($urandom_range(0, 3) == 0) ? ~base_thumb : base_thumb;
      case ($urandom_range(0, 3))
        0: t = base_addr ^ (t & 32'h0000_00ff);
        1: t = base_addr ^ (t & 32'h0000_7fff);
        2: t = base_addr ^ (t & 32'h003f_ffff);
        default: ;
      endcase
      info = ($urandom_range(0, 4) == 0);
      s.waypoint(t, tt, int'($urandom_range(0, 5)), info);
      last  = s.bytes.size() - 1;
      naddr = s.bytes.size() - 1 - int'(info);
      n_len[naddr]++; n_info += info; n_thumb += s.cur_thumb;
      for (int j = 0; j <= last; j++) begin
        @(posedge clk); start <= (j == 0); data_reg <= s.bytes[j];
        @(negedge clk);
        check(addr_valid == (j == naddr), $sformatf("pkt%0d byte%0d addr_valid", p, j));
        if (j == naddr) begin
          check(address == s.exp_addr[0], $sformatf("pkt%0d address %h exp %h", p, address, s.exp_addr[0]));
          check(thumb == s.cur_thumb, $sformatf("pkt%0d thumb", p));
        end
        check(stop == (j == 0 && p > 0), $sformatf("pkt%0d byte%0d stop", p, j));
      end
      base_addr  = s.exp_addr[0];
      base_thumb = s.cur_thumb;
    end
    @(posedge clk); start <= 0; data_reg <= 8'h00;
    @(negedge clk); check(stop, "final stop");
    @(posedge clk);
    @(negedge clk); check(!stop, "stop lasts one cycle");
    for (int k = 1; k <= 5; k++) check(n_len[k] > 0, $sformatf("some %0d-byte addresses", k));
    check(n_info > 0 && n_thumb > 0, "information byte and Thumb covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
