// tb_zipml_full: the pipeline at its default configuration (2-bit samples,
// K = 128 lanes, room for 8192 features) trained for two epochs on two
// synthetic regression problems side by side: one with 100 features (the
// size of the "Synthetic 100" data set) and one with 5000 features (the
// dimension of the largest classification set). Only a few dozen samples
// of each are simulated. Every epoch ends with a bit-exact comparison of all
// 64 model words against the golden model; latency, input rate and the
// falling training loss are checked as well.
module tb_zipml_full;
  timeunit 1ns;
  timeprecision 1ps;

  import zipml_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int   chk [2], fl [2], byp [2], stl [2], cpy [2], lab [2], spl [2], lat [2];
  logic fin [2];

  for (genvar u = 0; u < 2; u++) begin : g_run
    localparam int NF = (u == 0) ? 100 : 5000;
    localparam int NS = (u == 0) ? 40 : 20;
    logic rst_n, start, busy, done, line_valid, line_ready, mdl_wr_en, mdl_rd_en;
    logic [15:0] n_features, batch_size;
    logic [31:0] num_samples;
    logic [SHIFT_W-1:0] gamma_shift;
    logic [LINE_BITS-1:0] line_data;
    logic [5:0] mdl_addr;
    logic [128*32-1:0] mdl_wr_data, mdl_rd_data;

    zipml_sgd_top dut (.*);

    zipml_harness #(.QBITS(2), .MAX_FEATURES(8192), .NF(NF), .NS(NS), .BS(16), .EPOCHS(2),
                    .SEED(21 + u)) u_h (
      .clk, .rst_n, .start, .n_features, .num_samples, .batch_size, .gamma_shift,
      .busy, .done, .line_valid, .line_ready, .line_data,
      .mdl_wr_en, .mdl_rd_en, .mdl_addr, .mdl_wr_data, .mdl_rd_data,
      .pr_grp_last(dut.grp_valid && dut.grp_last),
      .pr_first_write(dut.upd_wr_en && dut.upd_wr_addr == '0),
      .pr_bypass(dut.bypass_hit),
      .pr_stalled(dut.stalled),
      .pr_copy_write(dut.cp_wr_en),
      .pr_label_push(dut.label_push),
      .pr_second_half(1'b0),
      .checks(chk[u]), .failures(fl[u]), .finished(fin[u]), .n_bypass(byp[u]), .n_stall(stl[u]),
      .n_copy(cpy[u]), .n_label(lab[u]), .n_split(spl[u]), .n_lat(lat[u])
    );
  end

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
    wait (fin[0] && fin[1]);
    @(posedge clk);
    checks = chk[0] + chk[1];
    failures = fl[0] + fl[1];
    mech(cpy[0] + cpy[1], "batch copy x_loading->x");
    mech(stl[0] + stl[1], "input stall (cycles)");
    mech(lab[0] >= 6 ? 1 : 0, "several label lines");
    mech(byp[0], "update forwarding");
    mech(lat[0] + lat[1], "latency measurement");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", chk[0] + chk[1], fl[0] + fl[1] + 1);
    $finish;
  end
endmodule
