// tb_mem_ctrl -- self-checking testbench of the memory controller.
//
// A small instance (16 words) receives random values with random gaps. Each
// cycle the testbench checks the block RAM write port against its own model
// (write one cycle after wr_en, to consecutive words from 0), the word count,
// the full flag and the dropped pulse once the memory is full. A second
// phase after reset checks that writing starts again at word 0.
module tb_mem_ctrl;
  localparam int DEPTH = 16;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst = 1;
  logic wr_en = 0;
  logic [31:0] wr_data = '0;
  logic bram_we, full, dropped;
  logic [AW-1:0] bram_addr;
  logic [31:0] bram_din;
  logic [AW:0] count;
  int checks = 0, failures = 0;

  mem_ctrl #(.DEPTH(DEPTH), .WIDTH(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;               // values accepted so far (model)
    bit exp_we, exp_drop;
    int n_drop;
    logic [31:0] exp_din;
    for (int phase = 0; phase < 2; phase++) begin
      rst <= 1; wr_en <= 0;
      repeat (2) @(posedge clk);
      rst <= 0;
      n = 0; n_drop = 0; exp_we = 0; exp_drop = 0; exp_din = '0;
      for (int c = 0; c < 120; c++) begin
        @(posedge clk);
        wr_en   <= ($urandom_range(0, 2) != 0);
        wr_data <= $urandom;
        @(negedge clk);
        // the port shows the previous cycle's request
        check(bram_we == exp_we, $sformatf("phase %0d cycle %0d bram_we", phase, c));
        if (exp_we) begin
          check(bram_addr == AW'(n - 1), $sformatf("bram_addr %0d expected %0d", bram_addr, n - 1));
          check(bram_din == exp_din, "bram_din");
        end
        check(dropped == exp_drop, $sformatf("cycle %0d dropped", c));
        check(count == (AW+1)'(n), $sformatf("count %0d expected %0d", count, n));
        check(full == (n == DEPTH), "full flag");
        // model this cycle's request
        exp_we   = wr_en && (n < DEPTH);
        exp_drop = wr_en && (n == DEPTH);
        n_drop  += int'(exp_drop);
        if (exp_we) begin exp_din = wr_data; n++; end
      end
      check(n == DEPTH && full, $sformatf("phase %0d memory filled", phase));
      check(n_drop > 0, "overflow happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
