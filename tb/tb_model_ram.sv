// tb_model_ram: writes random words, reads them back with one cycle of
// latency, and checks the read-first behaviour when a word is read and
// written in the same cycle, against an array model.
module tb_model_ram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 64, D = 16;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [$clog2(D)-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;

  model_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [D];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      wr_en = 1'b1; wr_addr = 4'(a); wr_data = {$urandom(), $urandom()};
      ref_mem[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int n = 0; n < 400; n++) begin
      logic [W-1:0] expect_d;
      rd_en   = 1'b1;
      rd_addr = 4'($urandom());
      wr_en   = $urandom() % 2;
      wr_addr = ($urandom() % 3 == 0) ? rd_addr : 4'($urandom());
      wr_data = {$urandom(), $urandom()};
      expect_d = ref_mem[rd_addr];           // read-first: old contents
      @(negedge clk);
      check(rd_data == expect_d, $sformatf("read %0d", rd_addr));
      if (wr_en) ref_mem[wr_addr] = wr_data;
    end
    // rd_en low keeps the output
    begin
      logic [W-1:0] held;
      held = rd_data;
      rd_en = 1'b0; wr_en = 1'b0; rd_addr = rd_addr + 1'b1;
      @(negedge clk);
      check(rd_data == held, "output held while rd_en is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
