// tb_sync_fifo: random pushes and pops against a queue model. Checks the
// show-ahead output, count, full and empty every cycle, including pushes
// into a full FIFO being refused by the surrounding logic.
module tb_sync_fifo;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 16, D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0, rd_en = 1'b0, full, empty;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [$clog2(D+1)-1:0] count;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phase-dependent bias fills and drains the FIFO
      int bias;
      bias = ((cyc / 200) % 2 == 0) ? 3 : 1;
      wr_en   = (($urandom() % 4) < bias) && (q.size() < D);
      rd_en   = (($urandom() % 4) < 4 - bias) && (q.size() > 0);
      wr_data = W'($urandom());
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
      @(negedge clk);
      check(32'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      check(full == (q.size() == D), "full flag");
      check(empty == (q.size() == 0), "empty flag");
      if (q.size() > 0) check(rd_data == q[0], $sformatf("head %h vs %h", rd_data, q[0]));
    end
    wr_en = 1'b0; rd_en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
