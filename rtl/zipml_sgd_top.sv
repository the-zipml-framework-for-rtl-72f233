// zipml_sgd_top: quantized mini-batch SGD for linear models with double
// sampling (the Q1/Q2/Q4/Q8 FPGA-SGD pipeline).
//
// Each training sample arrives as 64B cache lines in which every feature
// carries two independent stochastic quantizations Q'(a) and Q''(a). The
// pipeline computes, for one sample,
//     x_loading <- x_loading - gamma * (Q'(a).x - b) * Q''(a)
// which is an unbiased gradient step because the two quantizations are
// independent. Stages, one feature group of K lanes per cycle:
//   line_frontend   64B line -> group (Q1 splits a line into two halves)
//   dot_product     K multipliers, log2(K)-level adder tree, accumulator
//   a fifo          Q''(a) waits here until Q'(a).x is known
//   b fifo          label lines
//   gradient_calc   gamma * (Q'(a).x - b): subtractor and shift
//   model_update    K multipliers and K subtractors into "x loading"
//   sgd_controller  line/label sorting, counters, "batch size reached?",
//                   stall and copy of "x loading" into "x"
// The model x used by the dot product stays fixed for a mini-batch; the
// updates collect in x loading and are copied into x at the end of the batch.
//
// Timing: one line per cycle for QBITS = 2, 4, 8 (64B/cycle) and one line per
// two cycles for QBITS = 1 (32B/cycle). From the cycle the last group of a
// sample leaves the front end to the cycle its first model word is written
// takes log2(K)+5 cycles (12 cycles for K = 128), the latency the pipeline
// figures give. The stage structure and these figures follow the paper; the
// memory layout, the fixed-point formats, the label-line format and the host
// model port are this design's choices (see the README).
//
// Host model port (mdl_*): usable only while busy is low. A write stores the
// word into both x and x loading; a read returns x one cycle later.
module zipml_sgd_top
  import zipml_pkg::*;
#(
  parameter int QBITS        = 2,
  parameter int MAX_FEATURES = 8192,
  parameter int X_W          = 32,
  parameter int ACC_W        = 64,
  parameter int B_DEPTH      = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration and control
  input  logic                          start,
  input  logic [15:0]                   n_features,
  input  logic [31:0]                   num_samples,
  input  logic [15:0]                   batch_size,
  input  logic [SHIFT_W-1:0]            gamma_shift,
  output logic                          busy,
  output logic                          done,
  // cache-line stream from the sample store
  input  logic                          line_valid,
  output logic                          line_ready,
  input  logic [LINE_BITS-1:0]          line_data,
  // host access to the model
  input  logic                          mdl_wr_en,
  input  logic                          mdl_rd_en,
  input  logic [$clog2(MAX_FEATURES/lanes_for(QBITS))-1:0] mdl_addr,
  input  logic [lanes_for(QBITS)*X_W-1:0] mdl_wr_data,
  output logic [lanes_for(QBITS)*X_W-1:0] mdl_rd_data
);

  localparam int K       = lanes_for(QBITS);
  localparam int DEPTH   = MAX_FEATURES / K;
  localparam int AW      = $clog2(DEPTH);
  localparam int A_DEPTH = DEPTH + 32;   // one sample plus the groups in flight
  localparam int WW      = K * X_W;
  localparam int CW      = K * QBITS;

  // ---------------------------------------------------------------- control
  logic                          expect_label, label_push, fe_enable;
  logic                          b_full, b_empty, b_pop;
  logic [$clog2(B_DEPTH+1)-1:0]  b_count;
  logic [$clog2(A_DEPTH+1)-1:0]  a_count;
  logic                          a_full, a_empty, a_pop;
  logic                          grp_valid, grp_last;
  logic [AW-1:0]                 grp_idx;
  logic [2*CW-1:0]               grp_data;
  logic                          dot_valid, err_valid, sample_done;
  logic [$clog2(LABELS_PER_LINE)-1:0] lab_idx;
  logic                          cp_rd_en, cp_wr_en;
  logic [AW-1:0]                 cp_rd_addr, cp_wr_addr;
  logic [$clog2(DEPTH+1)-1:0]    n_groups;
  logic                          stalled;
  logic                          fe_line_ready;

  sgd_controller #(.QBITS(QBITS), .K(K), .DEPTH(DEPTH), .A_DEPTH(A_DEPTH), .NF_W(16)) u_ctrl (
    .clk, .rst_n, .start, .n_features, .num_samples, .batch_size,
    .n_groups, .busy, .done,
    .line_valid, .expect_label, .label_push, .fe_enable, .b_full, .a_count,
    .grp_fire(grp_valid), .grp_idx, .grp_last,
    .dot_valid, .lab_idx, .b_pop, .sample_done,
    .cp_rd_en, .cp_rd_addr, .cp_wr_en, .cp_wr_addr, .stalled
  );

  line_frontend #(.QBITS(QBITS), .K(K)) u_frontend (
    .clk, .rst_n, .enable(fe_enable), .line_valid(line_valid && !expect_label),
    .line_ready(fe_line_ready), .line_data, .grp_valid, .grp_data
  );

  assign line_ready = label_push || (fe_line_ready && !expect_label);

  // Split each group into the two quantized samples of every lane.
  logic [CW-1:0] code1, code2;
  always_comb begin
    for (int i = 0; i < K; i++) begin
      code1[i*QBITS +: QBITS] = grp_data[i*2*QBITS         +: QBITS];
      code2[i*QBITS +: QBITS] = grp_data[i*2*QBITS + QBITS +: QBITS];
    end
  end

  // ------------------------------------------------------------- b fifo
  logic [LINE_BITS-1:0] b_line;
  sync_fifo #(.WIDTH(LINE_BITS), .DEPTH(B_DEPTH)) u_b_fifo (
    .clk, .rst_n, .wr_en(label_push), .wr_data(line_data),
    .rd_en(b_pop), .rd_data(b_line), .full(b_full), .empty(b_empty), .count(b_count)
  );

  // ------------------------------------------------------------- a fifo
  logic [CW-1:0] a_head;
  sync_fifo #(.WIDTH(CW), .DEPTH(A_DEPTH)) u_a_fifo (
    .clk, .rst_n, .wr_en(grp_valid), .wr_data(code2),
    .rd_en(a_pop), .rd_data(a_head), .full(a_full), .empty(a_empty), .count(a_count)
  );

  // ------------------------------------------------------------- model x
  logic          x_rd_en, x_wr_en;
  logic [AW-1:0] x_rd_addr, x_wr_addr;
  logic [WW-1:0] x_rd_data, x_wr_data, xl_rd_data;

  assign x_rd_en   = grp_valid || (mdl_rd_en && !busy);
  assign x_rd_addr = grp_valid ? grp_idx : mdl_addr;
  assign x_wr_en   = cp_wr_en || (mdl_wr_en && !busy);
  assign x_wr_addr = cp_wr_en ? cp_wr_addr : mdl_addr;
  assign x_wr_data = cp_wr_en ? xl_rd_data : mdl_wr_data;
  assign mdl_rd_data = x_rd_data;

  model_ram #(.WIDTH(WW), .DEPTH(DEPTH)) u_x (
    .clk, .wr_en(x_wr_en), .wr_addr(x_wr_addr), .wr_data(x_wr_data),
    .rd_en(x_rd_en), .rd_addr(x_rd_addr), .rd_data(x_rd_data)
  );

  // ------------------------------------------------------- dot product
  // The group is registered while the x word is read (one-cycle RAM).
  logic            s0_valid, s0_last;
  logic [CW-1:0]   s0_code;
  logic [K-1:0]    s0_mask;
  logic [K-1:0]    mask_c;
  logic signed [ACC_W-1:0] dot;

  always_comb begin
    for (int i = 0; i < K; i++)
      mask_c[i] = (32'(grp_idx) * 32'(K) + 32'(i)) < 32'(n_features);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_valid <= 1'b0;
      s0_last  <= 1'b0;
      s0_code  <= '0;
      s0_mask  <= '0;
    end else begin
      s0_valid <= grp_valid;
      s0_last  <= grp_valid && grp_last;
      s0_code  <= code1;
      s0_mask  <= mask_c;
    end
  end

  dot_product #(.QBITS(QBITS), .K(K), .X_W(X_W), .ACC_W(ACC_W)) u_dot (
    .clk, .rst_n, .in_valid(s0_valid), .in_last(s0_last), .in_code(s0_code),
    .in_mask(s0_mask), .x_word(x_rd_data), .dot_valid, .dot
  );

  // ------------------------------------------------------- gradient
  logic signed [LABEL_BITS-1:0] b_val;
  logic signed [X_W-1:0]        err;
  assign b_val = b_line[lab_idx*LABEL_BITS +: LABEL_BITS];

  gradient_calc #(.ACC_W(ACC_W), .X_W(X_W), .LABEL_W(LABEL_BITS), .SHIFT_W(SHIFT_W)) u_grad (
    .clk, .rst_n, .dot_valid, .dot, .b(b_val), .gamma_shift, .err_valid, .err
  );

  // ------------------------------------------------------- model update
  logic          upd_rd_en, upd_wr_en, upd_busy, bypass_hit;
  logic [AW-1:0] upd_rd_addr, upd_wr_addr;
  logic [WW-1:0] upd_wr_data;

  model_update #(.QBITS(QBITS), .K(K), .X_W(X_W), .DEPTH(DEPTH), .NF_W(16)) u_update (
    .clk, .rst_n, .n_features, .n_groups, .err_valid, .err,
    .a_code(a_head), .a_pop,
    .xl_rd_en(upd_rd_en), .xl_rd_addr(upd_rd_addr), .xl_rd_data,
    .xl_wr_en(upd_wr_en), .xl_wr_addr(upd_wr_addr), .xl_wr_data(upd_wr_data),
    .busy(upd_busy), .sample_done, .bypass_hit
  );

  // ------------------------------------------------------- model x loading
  logic          xl_rd_en, xl_wr_en;
  logic [AW-1:0] xl_rd_addr, xl_wr_addr;
  logic [WW-1:0] xl_wr_data;

  assign xl_rd_en   = upd_rd_en || cp_rd_en;
  assign xl_rd_addr = cp_rd_en ? cp_rd_addr : upd_rd_addr;
  assign xl_wr_en   = upd_wr_en || (mdl_wr_en && !busy);
  assign xl_wr_addr = upd_wr_en ? upd_wr_addr : mdl_addr;
  assign xl_wr_data = upd_wr_en ? upd_wr_data : mdl_wr_data;

  model_ram #(.WIDTH(WW), .DEPTH(DEPTH)) u_x_loading (
    .clk, .wr_en(xl_wr_en), .wr_addr(xl_wr_addr), .wr_data(xl_wr_data),
    .rd_en(xl_rd_en), .rd_addr(xl_rd_addr), .rd_data(xl_rd_data)
  );

  // ------------------------------------------------------- protocol checks
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_label_ready: assert (!(dot_valid) || (!b_empty));
    end
  end
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_q2_ready: assert (!(a_pop) || (!a_empty));
    end
  end
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_copy_alone: assert (!(cp_rd_en && upd_rd_en));
    end
  end
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_a_overrun: assert (!(grp_valid && a_full));
    end
  end

endmodule
