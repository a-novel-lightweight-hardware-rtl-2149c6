// tb_bram_dp -- self-checking testbench of the dual-port block RAM.
//
// Checks that every word reads zero before it is written, then performs
// random writes and reads (including same-cycle read and write of one word,
// which must return the old value) against an array model. Read data is
// checked one cycle after rd_en, and must hold while rd_en is low.
module tb_bram_dp;
  localparam int DEPTH = 64;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  logic we = 0, rd_en = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [31:0] din = '0, dout;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  bram_dp #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    bit rd;
    foreach (model[i]) model[i] = '0;
    // initial contents are zero
    for (int a = 0; a < DEPTH; a++) begin
      @(posedge clk); rd_en <= 1; raddr <= AW'(a);
      @(negedge clk); if (a > 0) check(dout == 0, $sformatf("word %0d not zero at start", a - 1));
    end
    rd = 0;
    exp = model[DEPTH-1];   // last word read by the sweep above
    for (int c = 0; c < 2000; c++) begin
      @(posedge clk);
      we    <= $urandom_range(0, 1); waddr <= AW'($urandom); din <= $urandom;
      rd_en <= $urandom_range(0, 1);
      raddr <= ($urandom_range(0, 3) == 0) ? waddr : AW'($urandom);
      @(negedge clk);
      if (rd) check(dout == exp, $sformatf("cycle %0d read %h expected %h", c, dout, exp));
      else check(dout == exp, "read data holds without rd_en");
      // model the request now on the ports (read before write)
      rd = rd_en;
      if (rd_en) exp = model[raddr];
      if (we) model[waddr] = din;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
