// model_update: the "Model update" stage of the quantized SGD pipeline.
//
// When err_valid brings gamma*(Q'(a)x - b) for a sample, the stage walks over
// the n_groups feature groups of that sample, one group per cycle. For each
// group it pops the second quantized sample Q''(a) from the a fifo, forms
// err * Q''(a)_i in K fixed multipliers, reads the matching word of the
// "x loading" memory and writes back x_i - err * Q''(a)_i through K fixed
// subtractors. This is the datapath of the pipeline figures; the two-stage
// timing, the saturation and the forwarding below are this design's choices.
//
// Timing: cycle e (err_valid) issues group 0: a-fifo pop, memory read and the
// products are registered. Cycle e+1 writes group 0 back. Group g is written
// in cycle e+1+g; sample_done pulses with the write of the last group. A new
// err_valid may arrive in the cycle after the last group was issued.
//
// Forwarding: the memory returns old data when a word is read in the cycle it
// is written. That happens when two consecutive samples update the same word
// back to back (samples of a single group); the stage then uses the value it
// is writing instead of the memory output (bypass_hit pulses).
module model_update
  import zipml_pkg::*;
#(
  parameter int QBITS    = 2,
  parameter int K        = 128,
  parameter int X_W      = 32,
  parameter int DEPTH    = 64,
  parameter int NF_W     = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NF_W-1:0]           n_features,
  input  logic [$clog2(DEPTH+1)-1:0] n_groups,
  // gradient scalar from gradient_calc
  input  logic                      err_valid,
  input  logic signed [X_W-1:0]     err,
  // head of the a fifo
  input  logic [K*QBITS-1:0]        a_code,     // Q''(a) codes of one group
  output logic                      a_pop,
  // "x loading" memory ports
  output logic                      xl_rd_en,
  output logic [$clog2(DEPTH)-1:0]  xl_rd_addr,
  input  logic [K*X_W-1:0]          xl_rd_data,
  output logic                      xl_wr_en,
  output logic [$clog2(DEPTH)-1:0]  xl_wr_addr,
  output logic [K*X_W-1:0]          xl_wr_data,
  // status
  output logic                      busy,        // groups of a sample still to issue
  output logic                      sample_done,
  output logic                      bypass_hit
);

  localparam int AW = $clog2(DEPTH);
  localparam int PW = X_W + 10;   // product width: err times a level

  logic                  active_q;
  logic [AW-1:0]         g_q;
  logic signed [X_W-1:0] err_q;

  // issue stage
  logic                  issue;
  logic [AW-1:0]         cur_g;
  logic signed [X_W-1:0] cur_err;
  logic                  cur_last;

  assign issue    = err_valid || active_q;
  assign cur_g    = err_valid ? '0 : g_q;
  assign cur_err  = err_valid ? err : err_q;
  assign cur_last = ({{(32-AW){1'b0}}, cur_g} + 32'd1) == 32'(n_groups);

  assign a_pop      = issue;
  assign xl_rd_en   = issue;
  assign xl_rd_addr = cur_g;
  assign busy       = active_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      g_q      <= '0;
      err_q    <= '0;
    end else if (issue) begin
      active_q <= !cur_last;
      g_q      <= cur_g + 1'b1;
      err_q    <= cur_err;
    end
  end

  // K fixed multipliers, registered together with the write address.
  logic signed [PW-1:0] prod_q [K];
  logic                 wb_valid, wb_last;
  logic [AW-1:0]        wb_addr;
  logic                 fwd_q;
  logic [K*X_W-1:0]     fwd_data_q;

  always_ff @(posedge clk) begin
    for (int i = 0; i < K; i++) begin
      logic signed [PW-1:0] lvl_e, err_e;
      logic [31:0]          feat;
      lvl_e = PW'(decode_level(8'(a_code[i*QBITS +: QBITS]), QBITS));
      err_e = PW'(cur_err);
      feat  = 32'(cur_g) * 32'(K) + 32'(i);
      prod_q[i] <= (feat < 32'(n_features)) ? lvl_e * err_e : '0;
    end
    wb_addr    <= cur_g;
    fwd_data_q <= xl_wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_valid <= 1'b0;
      wb_last  <= 1'b0;
      fwd_q    <= 1'b0;
    end else begin
      wb_valid <= issue;
      wb_last  <= issue && cur_last;
      fwd_q    <= issue && xl_wr_en && (xl_wr_addr == cur_g);
    end
  end

  // K fixed subtractors with saturation to the model format.
  localparam logic signed [PW-1:0] MAXV = PW'({1'b0, {(X_W-1){1'b1}}});
  localparam logic signed [PW-1:0] MINV = -MAXV - 1;

  logic [K*X_W-1:0] old_word;
  assign old_word = fwd_q ? fwd_data_q : xl_rd_data;

  always_comb begin
    for (int i = 0; i < K; i++) begin
      logic signed [PW-1:0] nv;
      nv = PW'($signed(old_word[i*X_W +: X_W])) - prod_q[i];
      if (nv > MAXV)      xl_wr_data[i*X_W +: X_W] = X_W'(MAXV);
      else if (nv < MINV) xl_wr_data[i*X_W +: X_W] = X_W'(MINV);
      else                xl_wr_data[i*X_W +: X_W] = X_W'(nv);
    end
  end

  assign xl_wr_en    = wb_valid;
  assign xl_wr_addr  = wb_addr;
  assign sample_done = wb_last;
  assign bypass_hit  = wb_valid && fwd_q;

  // A new sample may only start once the previous one has been issued.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_overlap: assert (!(err_valid && active_q));
    end
  end

endmodule
