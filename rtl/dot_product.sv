// dot_product: the "Dot product" stage of the quantized SGD pipeline.
//
// For every feature group it multiplies the K first-sample levels Q'(a)_i by
// the model entries x_i (K fixed-point multipliers), sums the K products with
// a binary adder tree of log2(K) registered levels, and adds the group sum to
// an accumulator that runs over all groups of one sample. When the group
// flagged in_last has been added, dot_valid pulses for one cycle with
// Q'(a)x on dot. The multipliers, the adder tree and the accumulator with its
// feedback loop follow the pipeline figures; the register placement and the
// widths are this design's choices.
//
// Timing: a group presented in cycle t reaches the accumulator in cycle
// t+1+log2(K); dot_valid for a sample is high in cycle t+2+log2(K) after its
// last group. One group is accepted every cycle; there is no back-pressure.
// Lanes whose in_mask bit is 0 (padding beyond the last feature) contribute 0.
module dot_product
  import zipml_pkg::*;
#(
  parameter int QBITS = 2,
  parameter int K     = 128,
  parameter int X_W   = 32,
  parameter int ACC_W = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [K*QBITS-1:0]      in_code,   // Q'(a) codes, lane i at [i*QBITS +: QBITS]
  input  logic [K-1:0]            in_mask,
  input  logic [K*X_W-1:0]        x_word,    // x_i at [i*X_W +: X_W]
  output logic                    dot_valid,
  output logic signed [ACC_W-1:0] dot
);

  localparam int LV = $clog2(K);

  // Level 0 holds the registered products, level l the sums after l adders.
  logic signed [ACC_W-1:0] tree [LV+1][K];
  logic [LV:0]             vld;
  logic [LV:0]             lst;
  logic signed [ACC_W-1:0] acc;

  // K fixed multipliers: level times model entry, zero for padding lanes.
  logic signed [ACC_W-1:0] prod [K];

  always_comb begin
    for (int i = 0; i < K; i++) begin
      logic signed [9:0]      lvl;
      logic signed [X_W-1:0]  xi;
      logic signed [X_W+9:0]  p;
      lvl     = decode_level(8'(in_code[i*QBITS +: QBITS]), QBITS);
      xi      = $signed(x_word[i*X_W +: X_W]);
      p       = lvl * xi;
      prod[i] = in_mask[i] ? ACC_W'(p) : '0;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < K; i++) tree[0][i] <= prod[i];
    for (int l = 1; l <= LV; l++) begin
      for (int i = 0; i < (K >> l); i++) begin
        tree[l][i] <= tree[l-1][2*i] + tree[l-1][2*i+1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld       <= '0;
      lst       <= '0;
      acc       <= '0;
      dot       <= '0;
      dot_valid <= 1'b0;
    end else begin
      vld <= {vld[LV-1:0], in_valid};
      lst <= {lst[LV-1:0], in_valid && in_last};
      dot_valid <= 1'b0;
      if (vld[LV]) begin
        if (lst[LV]) begin
          dot       <= acc + tree[LV][0];
          dot_valid <= 1'b1;
          acc       <= '0;
        end else begin
          acc <= acc + tree[LV][0];
        end
      end
    end
  end

endmodule
