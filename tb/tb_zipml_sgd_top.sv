// tb_zipml_sgd_top: end-to-end test of the quantized SGD pipeline at all four
// precisions (Q1, Q2, Q4, Q8), each with a small model memory, several
// epochs, mini-batches, two or more label lines, padded lanes and random gaps
// in the input stream. Every instance checks its final model bit for bit
// against a golden model, the sample latency of log2(K)+5 cycles and the
// input rate. The testbench also fails if a mechanism of the design never
// happened: batch copy, input stall, label line, forwarding in the update
// stage, Q1 line split. A fifth instance trains with mini-batches of one
// sample, where every sample is followed by a copy of the model.
module tb_zipml_sgd_top;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int   chk [5], fl [5], byp [5], stl [5], cpy [5], lab [5], spl [5], lat [5];
  logic fin [5];

  zipml_bench #(.QBITS(1), .MAX_FEATURES(512), .NF(200), .NS(20), .BS(4),  .EPOCHS(2), .SEED(11)) b_q1 (
    .clk, .checks(chk[0]), .failures(fl[0]), .finished(fin[0]), .n_bypass(byp[0]), .n_stall(stl[0]),
    .n_copy(cpy[0]), .n_label(lab[0]), .n_split(spl[0]), .n_lat(lat[0]));
  zipml_bench #(.QBITS(2), .MAX_FEATURES(512), .NF(300), .NS(40), .BS(8),  .EPOCHS(2), .SEED(12)) b_q2 (
    .clk, .checks(chk[1]), .failures(fl[1]), .finished(fin[1]), .n_bypass(byp[1]), .n_stall(stl[1]),
    .n_copy(cpy[1]), .n_label(lab[1]), .n_split(spl[1]), .n_lat(lat[1]));
  zipml_bench #(.QBITS(4), .MAX_FEATURES(256), .NF(100), .NS(24), .BS(16), .EPOCHS(2), .SEED(13)) b_q4 (
    .clk, .checks(chk[2]), .failures(fl[2]), .finished(fin[2]), .n_bypass(byp[2]), .n_stall(stl[2]),
    .n_copy(cpy[2]), .n_label(lab[2]), .n_split(spl[2]), .n_lat(lat[2]));
  zipml_bench #(.QBITS(8), .MAX_FEATURES(128), .NF(20),  .NS(36), .BS(5),  .EPOCHS(2), .SEED(14)) b_q8 (
    .clk, .checks(chk[3]), .failures(fl[3]), .finished(fin[3]), .n_bypass(byp[3]), .n_stall(stl[3]),
    .n_copy(cpy[3]), .n_label(lab[3]), .n_split(spl[3]), .n_lat(lat[3]));
  zipml_bench #(.QBITS(8), .MAX_FEATURES(128), .NF(40),  .NS(20), .BS(1),  .EPOCHS(2), .SEED(15)) b_bs1 (
    .clk, .checks(chk[4]), .failures(fl[4]), .finished(fin[4]), .n_bypass(byp[4]), .n_stall(stl[4]),
    .n_copy(cpy[4]), .n_label(lab[4]), .n_split(spl[4]), .n_lat(lat[4]));

  int checks, failures;

  task automatic mech(input int count, input string name);
    checks++;
    $display("mechanism %-28s happened %0d times", name, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", name);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4]);
    @(posedge clk);
    checks = 0; failures = 0;
    for (int i = 0; i < 5; i++) begin
      checks   += chk[i];
      failures += fl[i];
    end
    mech(cpy[0] + cpy[1] + cpy[2] + cpy[3], "batch copy x_loading->x");
    // BS = 1: 2 epochs x 20 samples, each copy writes the 2 words in use
    mech((cpy[4] == 2 * 20 * 2) ? 1 : 0, "copy after every sample (BS=1)");
    mech(stl[0] + stl[1] + stl[2] + stl[3], "input stall (cycles)");
    mech((lab[0] >= 4 ? 1 : 0) + (lab[1] >= 6 ? 1 : 0), "several label lines");
    mech(byp[3], "update forwarding");
    mech(spl[0], "Q1 line split");
    mech(lat[0] + lat[1] + lat[2] + lat[3] + lat[4], "latency measurement");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1] + chk[2] + chk[3] + chk[4],
             fl[0] + fl[1] + fl[2] + fl[3] + fl[4] + 1);
    $finish;
  end
endmodule
