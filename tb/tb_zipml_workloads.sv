// tb_zipml_workloads: the default pipeline (2-bit samples, K = 128 lanes,
// room for 8192 features) at the feature counts of the evaluated data sets
// that the full-size testbench does not already cover: 8 (cadata, cod-rna),
// 10 (Synthetic 10), 12 (cpusmall), 90 (YearPrediction) and 1000
// (Synthetic 1000). The real data are not available to a simulation, so each
// run trains on 32 synthetic regression samples of that width for two epochs
// in mini-batches of 16 (one of the evaluated batch sizes). Every instance
// compares the whole model bit for bit with a golden model after each epoch
// and checks the log2(K)+5 latency, the input rate and that the loss falls.
// The feature counts are the data sets'; samples, epochs and data are this
// testbench's own choice.
module tb_zipml_workloads;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N = 5;
  localparam int NF_OF [N] = '{8, 10, 12, 90, 1000};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int   chk [N], fl [N], byp [N], stl [N], cpy [N], lab [N], spl [N], lat [N];
  logic fin [N];

  for (genvar u = 0; u < N; u++) begin : g_run
    zipml_bench #(.QBITS(2), .MAX_FEATURES(8192), .NF(NF_OF[u]), .NS(32), .BS(16), .EPOCHS(2),
                  .SEED(31 + u)) u_b (
      .clk, .checks(chk[u]), .failures(fl[u]), .finished(fin[u]), .n_bypass(byp[u]),
      .n_stall(stl[u]), .n_copy(cpy[u]), .n_label(lab[u]), .n_split(spl[u]), .n_lat(lat[u]));
  end

  int checks, failures;

  initial begin
    repeat (2) @(posedge clk);
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4]);
    @(posedge clk);
    checks = 0; failures = 0;
    for (int i = 0; i < N; i++) begin
      checks   += chk[i] + 1;
      failures += fl[i];
      // every sample of both epochs must have had its latency measured
      if (lat[i] != 2 * 32) begin
        failures++;
        $display("FAIL %0d features: %0d latency measurements, expected %0d",
                 NF_OF[i], lat[i], 2 * 32);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c, f;
    repeat (100000) @(posedge clk);
    c = 0; f = 1;
    for (int i = 0; i < N; i++) begin
      c += chk[i];
      f += fl[i];
    end
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
