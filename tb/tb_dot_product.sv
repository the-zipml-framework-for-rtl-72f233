// tb_dot_product: samples of one to four groups with random codes, model
// words and lane masks, streamed back to back and with gaps. Checks each
// dot product against a sum computed here and that dot_valid comes
// log2(K)+2 cycles after the sample's last group.
module tb_dot_product;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int Q = 2, K = 8, XW = 32, AW = 64;
  localparam int S = (1 << Q) - 1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0, in_last = 1'b0, dot_valid;
  logic [K*Q-1:0]  in_code = '0;
  logic [K-1:0]    in_mask = '0;
  logic [K*XW-1:0] x_word = '0;
  logic signed [AW-1:0] dot;

  dot_product #(.QBITS(Q), .K(K), .X_W(XW), .ACC_W(AW)) dut (.*);

  int checks = 0, failures = 0;
  longint exp_q [$];
  longint due_q [$];
  longint cycle = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && dot_valid) begin
      if (exp_q.size() == 0) check(0, "unexpected dot_valid");
      else begin
        longint e, t;
        e = exp_q.pop_front();
        t = due_q.pop_front();
        check(dot == e, $sformatf("dot %0d expected %0d", dot, e));
        check(cycle == t, $sformatf("dot at cycle %0d expected %0d", cycle, t));
      end
    end
  end

  initial begin
    int nsamp;
    nsamp = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int smp = 0; smp < 200; smp++) begin
      int g;
      longint sum;
      g = 1 + $urandom() % 4;
      sum = 0;
      for (int j = 0; j < g; j++) begin
        in_valid = 1'b1;
        in_last  = (j == g - 1);
        for (int i = 0; i < K; i++) begin
          logic [Q-1:0] c;
          logic signed [XW-1:0] xv;
          c  = Q'($urandom());
          xv = (smp % 10 == 0) ? XW'($urandom()) : XW'(int'($urandom() % 200000) - 100000);
          in_code[i*Q +: Q] = c;
          x_word[i*XW +: XW] = xv;
          in_mask[i] = ($urandom() % 8) != 0;
          if (in_mask[i]) sum += longint'(2 * int'(c) - S) * longint'(xv);
        end
        if (in_last) begin
          exp_q.push_back(sum);
          due_q.push_back(cycle + $clog2(K) + 2);
        end
        @(negedge clk);
        in_valid = 1'b0; in_last = 1'b0;
        if (smp % 3 == 0) repeat ($urandom() % 3) @(negedge clk);
      end
      nsamp++;
    end
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d dot products missing", exp_q.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
