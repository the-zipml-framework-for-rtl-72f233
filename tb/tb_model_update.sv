// tb_model_update: drives gradient scalars into the update stage with a
// memory model (read-first, one-cycle read) and an a-fifo model around it.
// First samples of four groups (13 features, so the last group is partly
// masked), then back-to-back samples of one group, which need forwarding.
// Checks the memory after every phase, the write timing (group g of a sample
// written g+1 cycles after err_valid), the sample_done count and that the
// forwarding path was used.
module tb_model_update;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int Q = 2, K = 4, XW = 32, D = 8;
  localparam int S = (1 << Q) - 1;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [15:0] n_features = 16'd13;
  logic [$clog2(D+1)-1:0] n_groups = 4'd4;
  logic err_valid = 1'b0;
  logic signed [XW-1:0] err = '0;
  logic [K*Q-1:0] a_code;
  logic a_pop, xl_rd_en, xl_wr_en, busy, sample_done, bypass_hit;
  logic [$clog2(D)-1:0] xl_rd_addr, xl_wr_addr;
  logic [K*XW-1:0] xl_rd_data, xl_wr_data;

  model_update #(.QBITS(Q), .K(K), .X_W(XW), .DEPTH(D)) dut (.*);

  // memory and fifo models
  logic [K*XW-1:0] mem [D];
  logic [K*Q-1:0]  fifo [$];
  always @(posedge clk) begin
    if (xl_rd_en) xl_rd_data <= mem[xl_rd_addr];
    if (xl_wr_en) mem[xl_wr_addr] <= xl_wr_data;
    if (rst_n && a_pop) void'(fifo.pop_front());
  end
  assign a_code = (fifo.size() > 0) ? fifo[0] : '0;

  int checks = 0, failures = 0, n_done = 0, n_byp = 0;
  longint cycle = 0;
  longint wr_due [$];
  logic signed [XW-1:0] gold [D*K];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (sample_done) n_done <= n_done + 1;
      if (bypass_hit)  n_byp  <= n_byp + 1;
      if (xl_wr_en) begin
        if (wr_due.size() == 0) check(0, "unexpected write");
        else begin
          longint t;
          t = wr_due.pop_front();
          check(cycle == t, $sformatf("write at %0d expected %0d", cycle, t));
        end
      end
    end
  end

  function automatic logic signed [XW-1:0] sat(input longint v);
    if (v > 64'sd2147483647) return 32'sh7fffffff;
    if (v < -64'sd2147483648) return 32'sh80000000;
    return XW'(v);
  endfunction

  task automatic one_sample(input int ng, input int gap);
    logic signed [XW-1:0] e;
    e = ($urandom() % 5 == 0) ? XW'($urandom()) : XW'(int'($urandom() % 20000) - 10000);
    for (int g = 0; g < ng; g++) begin
      logic [K*Q-1:0] c;
      c = (K*Q)'($urandom());
      fifo.push_back(c);
      for (int i = 0; i < K; i++) begin
        int f;
        f = g * K + i;
        if (f < int'(n_features))
          gold[f] = sat(longint'(gold[f]) - longint'(e) * longint'(2 * int'(c[i*Q +: Q]) - S));
      end
      wr_due.push_back(cycle + 1 + g);
    end
    err_valid = 1'b1; err = e;
    @(negedge clk);
    err_valid = 1'b0;
    repeat (ng - 1 + gap) @(negedge clk);
  endtask

  task automatic compare(input string phase);
    repeat (4) @(negedge clk);
    for (int a = 0; a < D; a++)
      for (int i = 0; i < K; i++)
        check($signed(mem[a][i*XW +: XW]) == gold[a*K + i],
              $sformatf("%s: word %0d lane %0d %0d vs %0d", phase, a, i,
                        $signed(mem[a][i*XW +: XW]), gold[a*K + i]));
  endtask

  initial begin
    for (int a = 0; a < D; a++)
      for (int i = 0; i < K; i++) begin
        gold[a*K + i] = XW'(int'($urandom() % 100000) - 50000);
        mem[a][i*XW +: XW] = gold[a*K + i];
      end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int s = 0; s < 30; s++) one_sample(4, (s % 3 == 0) ? 2 : 0);
    compare("four groups");
    n_groups = 4'd1; n_features = 16'd3;
    for (int s = 0; s < 30; s++) one_sample(1, (s % 5 == 0) ? 1 : 0);
    compare("one group");
    check(n_done == 60, $sformatf("sample_done %0d times", n_done));
    check(n_byp > 0, "forwarding never used");
    check(fifo.size() == 0, "a fifo not drained");
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
