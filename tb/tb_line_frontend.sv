// tb_line_frontend: checks the front end at QBITS = 2 (a line passes through
// as one group, one line per cycle) and at QBITS = 1 (a line leaves as its
// lower then its upper half on consecutive cycles, one line per two cycles),
// including the enable gate.
module tb_line_frontend;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         en2 = 1'b0, v2 = 1'b0, r2, gv2;
  logic [511:0] d2 = '0, g2;
  logic         en1 = 1'b0, v1 = 1'b0, r1, gv1;
  logic [511:0] d1 = '0;
  logic [255:0] g1;

  line_frontend #(.QBITS(2)) u_q2 (.clk, .rst_n, .enable(en2), .line_valid(v2), .line_ready(r2),
                                   .line_data(d2), .grp_valid(gv2), .grp_data(g2));
  line_frontend #(.QBITS(1)) u_q1 (.clk, .rst_n, .enable(en1), .line_valid(v1), .line_ready(r1),
                                   .line_data(d1), .grp_valid(gv1), .grp_data(g1));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  logic [255:0] got [$];
  always @(posedge clk) if (rst_n && gv1) got.push_back(g1);

  initial begin
    logic [511:0] lines [8];
    int cyc0, cyc1, cyc;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // QBITS = 2: pass-through
    for (int n = 0; n < 50; n++) begin
      en2 = $urandom() % 2; v2 = $urandom() % 2;
      for (int w = 0; w < 16; w++) d2[w*32 +: 32] = $urandom();
      #1;
      check(r2 == en2, "Q2 ready follows enable");
      check(gv2 == (en2 && v2), "Q2 group valid");
      check(g2 == d2, "Q2 group data");
      @(negedge clk);
    end
    en2 = 1'b0; v2 = 1'b0;
    // QBITS = 1: split, lines offered back to back
    for (int n = 0; n < 8; n++) for (int w = 0; w < 16; w++) lines[n][w*32 +: 32] = $urandom();
    en1 = 1'b1;
    cyc = 0; cyc0 = -1; cyc1 = -1;
    for (int n = 0; n < 8; n++) begin
      v1 = 1'b1; d1 = lines[n];
      forever begin
        #1;
        if (r1) break;
        @(negedge clk); cyc++;
      end
      if (n == 0) cyc0 = cyc;
      if (n == 7) cyc1 = cyc;
      @(negedge clk); cyc++;
    end
    v1 = 1'b0;
    repeat (3) @(negedge clk);
    check(cyc1 - cyc0 == 14, $sformatf("Q1 rate: 8 lines accepted over %0d cycles", cyc1 - cyc0 + 1));
    check(got.size() == 16, $sformatf("Q1 produced %0d halves", got.size()));
    for (int n = 0; n < 8 && 2*n+1 < got.size(); n++) begin
      check(got[2*n]   == lines[n][255:0],   $sformatf("line %0d lower half", n));
      check(got[2*n+1] == lines[n][511:256], $sformatf("line %0d upper half", n));
    end
    // enable low: nothing taken
    en1 = 1'b0; v1 = 1'b1;
    #1;
    check(!r1 && !gv1, "Q1 gated by enable");
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
