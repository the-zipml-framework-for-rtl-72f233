// gradient_calc: the "Gradient calculation" stage of the quantized pipeline.
//
// One fixed-point subtractor forms Q'(a)x - b and one arithmetic right shift
// multiplies it by the step size gamma = 2^-gamma_shift, as in the pipeline
// figures ("1 fixed adder", "1 bit-shift"). The result is saturated to the
// X_W-bit model format; saturation is this design's choice.
//
// Timing: registered, one cycle from dot_valid to err_valid. The label b is
// sampled in the same cycle as dot_valid. b and the model share one fixed-
// point scale; the host folds the quantization scale into gamma and b.
module gradient_calc #(
  parameter int ACC_W   = 64,
  parameter int X_W     = 32,
  parameter int LABEL_W = 32,
  parameter int SHIFT_W = 6
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      dot_valid,
  input  logic signed [ACC_W-1:0]   dot,
  input  logic signed [LABEL_W-1:0] b,
  input  logic [SHIFT_W-1:0]        gamma_shift,
  output logic                      err_valid,
  output logic signed [X_W-1:0]     err
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'({1'b0, {(X_W-1){1'b1}}});
  localparam logic signed [ACC_W-1:0] MINV = -MAXV - 1;

  logic signed [ACC_W-1:0] diff, scaled;
  assign diff   = dot - ACC_W'(b);
  assign scaled = diff >>> gamma_shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_valid <= 1'b0;
      err       <= '0;
    end else begin
      err_valid <= dot_valid;
      if (dot_valid) begin
        if (scaled > MAXV)      err <= X_W'(MAXV);
        else if (scaled < MINV) err <= X_W'(MINV);
        else                    err <= X_W'(scaled);
      end
    end
  end

endmodule
