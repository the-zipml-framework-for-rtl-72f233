// tb_gradient_calc: random dot products, labels and shifts, including values
// that saturate, against (dot - b) >>> shift clipped to 32 bits; checks the
// one-cycle latency.
module tb_gradient_calc;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic dot_valid = 1'b0, err_valid;
  logic signed [63:0] dot = '0;
  logic signed [31:0] b = '0, err;
  logic [5:0] gamma_shift = '0;

  gradient_calc dut (.*);

  int checks = 0, failures = 0;

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
    for (int n = 0; n < 500; n++) begin
      longint e;
      logic signed [31:0] expect_e;
      bit v;
      v = ($urandom() % 4) != 0;
      dot_valid = v;
      case ($urandom() % 3)
        0: dot = 64'(signed'($urandom()));
        1: dot = {$urandom(), $urandom()} >>> ($urandom() % 40);
        default: dot = 64'(signed'($urandom() % 100000)) - 50000;
      endcase
      b = $urandom();
      gamma_shift = 6'($urandom() % 34);
      e = (longint'(dot) - longint'(b)) >>> gamma_shift;
      if (e > 64'sd2147483647) expect_e = 32'sh7fffffff;
      else if (e < -64'sd2147483648) expect_e = 32'sh80000000;
      else expect_e = 32'(e);
      @(negedge clk);
      check(err_valid == v, "err_valid one cycle after dot_valid");
      if (v) check(err == expect_e, $sformatf("err %0d expected %0d (dot %0d b %0d sh %0d)",
                                              err, expect_e, dot, b, gamma_shift));
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
