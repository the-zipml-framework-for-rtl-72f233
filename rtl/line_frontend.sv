// line_frontend: turns the stream of 64B feature lines into feature groups.
//
// For QBITS = 2, 4 and 8 a cache line is one group of K = 128, 64 or 32
// features and passes straight through, so the pipeline takes one line per
// cycle (64B/cycle). For QBITS = 1 a line holds 256 features; the datapath
// does not widen, so the line is split into two 32B halves of K = 128
// features that leave on consecutive cycles (32B/cycle), as the Q1 pipeline
// figure shows ("Split one 64B cache-line into 2 parts"). The lower half,
// features 0..127 of the line, goes first; that order is this design's choice.
//
// Interface: line_valid/line_ready handshake on the input; enable gates the
// acceptance of a new line. grp_valid/grp_data are a one-cycle strobe with no
// back-pressure: the controller guarantees room downstream before enabling.
// Pass-through is combinational; the Q1 upper half is held in a register.
// The parameter default is QBITS = 1, the precision at which this block has
// work to do (the Q1 split); the top level sets QBITS for the whole pipeline.
module line_frontend
  import zipml_pkg::*;
#(
  parameter int QBITS = 1,
  parameter int K     = lanes_for(QBITS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,
  input  logic                   line_valid,
  output logic                   line_ready,
  input  logic [LINE_BITS-1:0]   line_data,
  output logic                   grp_valid,
  output logic [2*QBITS*K-1:0]   grp_data
);

  localparam int GW = 2 * QBITS * K;

  if (QBITS == 1) begin : g_split
    logic          half1_q;
    logic [GW-1:0] hold_q;

    assign line_ready = enable && !half1_q;
    assign grp_valid  = half1_q || (enable && line_valid);
    assign grp_data   = half1_q ? hold_q : line_data[GW-1:0];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        half1_q <= 1'b0;
        hold_q  <= '0;
      end else if (half1_q) begin
        half1_q <= 1'b0;
      end else if (enable && line_valid) begin
        half1_q <= 1'b1;
        hold_q  <= line_data[2*GW-1:GW];
      end
    end
  end else begin : g_pass
    assign line_ready = enable;
    assign grp_valid  = enable && line_valid;
    assign grp_data   = line_data[GW-1:0];
  end

endmodule
