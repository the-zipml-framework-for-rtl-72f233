// tb_sgd_controller: runs the controller alone through two epochs of 20
// samples of 10 features (three groups of K = 4) in mini-batches of 6, with a
// simple delay model of the datapath: dot_valid 5 cycles after a sample's
// last group and sample_done n_groups+2 cycles after that. Checks the order
// label line / feature lines, the group indices, that no group enters while
// stalled, that every batch end waits for the last update and then copies
// words 0..n_groups-1, the label index and b-fifo pops, and the done pulse.
module tb_sgd_controller;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int Q = 2, K = 4, D = 8, AD = 40;
  localparam int NF = 10, NS = 20, BS = 6, G = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done, line_valid = 1'b0;
  logic expect_label, label_push, fe_enable, grp_last, b_pop, dot_valid, sample_done;
  logic cp_rd_en, cp_wr_en, stalled, grp_fire;
  logic [$clog2(D+1)-1:0] n_groups;
  logic [$clog2(D)-1:0] grp_idx, cp_rd_addr, cp_wr_addr;
  logic [3:0] lab_idx;
  logic [$clog2(AD+1)-1:0] a_count = '0;

  assign grp_fire = fe_enable && line_valid;

  sgd_controller #(.QBITS(Q), .K(K), .DEPTH(D), .A_DEPTH(AD)) dut (
    .clk, .rst_n, .start, .n_features(16'(NF)), .num_samples(32'(NS)), .batch_size(16'(BS)),
    .n_groups, .busy, .done, .line_valid, .expect_label, .label_push, .fe_enable,
    .b_full(1'b0), .a_count, .grp_fire, .grp_idx, .grp_last, .dot_valid, .lab_idx, .b_pop,
    .sample_done, .cp_rd_en, .cp_rd_addr, .cp_wr_en, .cp_wr_addr, .stalled
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  longint dot_t [$], done_t [$];
  int accepted [$];     // 1 = label line, 0 = feature group
  int grp_seen [$];
  int copies [$];
  int n_done_pulse = 0, n_pop = 0, n_dot = 0, samples_done = 0, samples_in = 0;
  int last_copy_wait_ok = 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  assign dot_valid   = (dot_t.size() > 0) && (dot_t[0] == cycle);
  assign sample_done = (done_t.size() > 0) && (done_t[0] == cycle);

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (label_push) accepted.push_back(1);
      if (grp_fire) begin
        accepted.push_back(0);
        grp_seen.push_back(int'(grp_idx));
        if (stalled) check(0, "group accepted while stalled");
        if (grp_last != (int'(grp_idx) == G - 1)) check(0, "grp_last flag");
        if (grp_last) begin
          dot_t.push_back(cycle + 5);
          done_t.push_back(cycle + 5 + G + 2);
          samples_in++;
        end
      end
      if (dot_valid) begin
        void'(dot_t.pop_front());
        check(int'(lab_idx) == (n_dot % NS) % 16, $sformatf("label index %0d for sample %0d", lab_idx, n_dot));
        check(b_pop == (((n_dot % NS) % 16 == 15) || (n_dot % NS == NS - 1)), $sformatf("b_pop for sample %0d", n_dot));
        n_dot++;
      end
      if (b_pop) n_pop++;
      if (sample_done) begin
        void'(done_t.pop_front());
        samples_done++;
      end
      if (cp_rd_en && samples_done != samples_in) last_copy_wait_ok = 0;
      if (cp_wr_en) copies.push_back(int'(cp_wr_addr));
      if (done) n_done_pulse++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int e = 0; e < 2; e++) begin
      int lab_expected;
      accepted.delete(); grp_seen.delete(); copies.delete();
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      check(busy, "busy after start");
      check(n_groups == 4'(G), "n_groups = ceil(n/K)");
      line_valid = 1'b1;
      while (busy) @(negedge clk);
      line_valid = 1'b0;
      @(negedge clk);
      // expected stream: L, 16 samples x G groups, L, 4 samples x G groups
      check(accepted.size() == 2 + NS * G, $sformatf("%0d lines taken", accepted.size()));
      lab_expected = 0;
      for (int i = 0; i < accepted.size(); i++) begin
        bit is_lab;
        is_lab = (i == 0) || (i == 1 + 16 * G);
        if (accepted[i] != int'(is_lab)) lab_expected++;
      end
      check(lab_expected == 0, "label lines at the wrong place");
      for (int i = 0; i < grp_seen.size(); i++)
        if (grp_seen[i] != i % G) begin
          check(0, $sformatf("group index %0d at %0d", grp_seen[i], i));
          break;
        end
      check(copies.size() == G * ((NS + BS - 1) / BS), $sformatf("%0d copy writes", copies.size()));
      for (int i = 0; i < copies.size(); i++)
        if (copies[i] != i % G) begin
          check(0, "copy address order");
          break;
        end
    end
    check(last_copy_wait_ok == 1, "copy started before the batch's updates were done");
    check(n_done_pulse == 2, $sformatf("done pulsed %0d times", n_done_pulse));
    check(n_pop == 4, $sformatf("b fifo popped %0d times", n_pop));
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
