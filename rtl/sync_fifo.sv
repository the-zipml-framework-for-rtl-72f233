// sync_fifo: single-clock first-in first-out buffer with show-ahead output.
//
// Used twice in the pipeline: as the "a fifo", which keeps the second
// quantized sample Q''(a) of every feature group until the dot product of its
// sample is finished, and as the "b fifo", which keeps label lines until the
// gradient stage reads them. The pipeline figures name both FIFOs; their depth,
// width and this show-ahead behaviour are this design's choices.
//
// Interface: push when wr_en is high (ignored when full), pop when rd_en is
// high (ignored when empty). rd_data always shows the oldest entry, so a word
// can be read in the same cycle it is popped. count and the flags update on
// the clock edge. Storage is a plain array that synthesis maps to RAM.
module sync_fifo #(
  parameter int WIDTH = 512,
  parameter int DEPTH = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [WIDTH-1:0]             wr_data,
  input  logic                         rd_en,
  output logic [WIDTH-1:0]             rd_data,
  output logic                         full,
  output logic                         empty,
  output logic [$clog2(DEPTH+1)-1:0]   count
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  logic do_wr, do_rd;
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= next_ptr(wr_ptr);
      if (do_rd) rd_ptr <= next_ptr(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A push into a full FIFO or a pop from an empty one is a protocol error of
  // the surrounding control.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_overflow: assert (!(wr_en && full));
    end
  end
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_underflow: assert (!(rd_en && empty));
    end
  end

endmodule
