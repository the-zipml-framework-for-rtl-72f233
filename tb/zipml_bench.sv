// zipml_bench: one zipml_sgd_top at a chosen precision and model size,
// driven by zipml_harness. The results and event counts leave on ports so a
// testbench can run several precisions side by side.
module zipml_bench
  import zipml_pkg::*;
#(
  parameter int QBITS        = 2,
  parameter int MAX_FEATURES = 512,
  parameter int NF           = 200,
  parameter int NS           = 40,
  parameter int BS           = 8,
  parameter int EPOCHS       = 2,
  parameter int SEED         = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished,
  output int   n_bypass,
  output int   n_stall,
  output int   n_copy,
  output int   n_label,
  output int   n_split,
  output int   n_lat
);
  localparam int K  = lanes_for(QBITS);
  localparam int AW = $clog2(MAX_FEATURES / K);

  logic rst_n, start, busy, done, line_valid, line_ready, mdl_wr_en, mdl_rd_en;
  logic [15:0] n_features, batch_size;
  logic [31:0] num_samples;
  logic [SHIFT_W-1:0] gamma_shift;
  logic [LINE_BITS-1:0] line_data;
  logic [AW-1:0] mdl_addr;
  logic [K*32-1:0] mdl_wr_data, mdl_rd_data;

  zipml_sgd_top #(.QBITS(QBITS), .MAX_FEATURES(MAX_FEATURES)) dut (.*);

  zipml_harness #(.QBITS(QBITS), .MAX_FEATURES(MAX_FEATURES), .NF(NF), .NS(NS), .BS(BS),
                  .EPOCHS(EPOCHS), .SEED(SEED)) u_h (
    .clk, .rst_n, .start, .n_features, .num_samples, .batch_size, .gamma_shift,
    .busy, .done, .line_valid, .line_ready, .line_data,
    .mdl_wr_en, .mdl_rd_en, .mdl_addr, .mdl_wr_data, .mdl_rd_data,
    .pr_grp_last(dut.grp_valid && dut.grp_last),
    .pr_first_write(dut.upd_wr_en && dut.upd_wr_addr == '0),
    .pr_bypass(dut.bypass_hit),
    .pr_stalled(dut.stalled),
    .pr_copy_write(dut.cp_wr_en),
    .pr_label_push(dut.label_push),
    .pr_second_half(dut.grp_valid && !dut.line_ready && !dut.expect_label && QBITS == 1 && dut.u_ctrl.state == 3'd1 && dut.grp_idx[0]),
    .checks, .failures, .finished, .n_bypass, .n_stall, .n_copy, .n_label, .n_split, .n_lat
  );
endmodule
