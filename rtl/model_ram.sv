// model_ram: on-chip model memory, one model word per address.
//
// The design holds the model twice: "x", which the dot product reads, and
// "x loading", which collects the updated model during a mini-batch and is
// copied into "x" when the batch size is reached. Both are instances of this
// module. A word holds the model entries of one feature group (K lanes of
// X_W bits). The two memories are named in the pipeline figures; their word
// organisation and port timing are this design's choices.
//
// Interface: one write port and one read port. Reads are synchronous with a
// latency of one cycle and return the old contents when the same address is
// written in the same cycle (read-first); the update stage forwards around
// that case itself.
module model_ram #(
  parameter int WIDTH = 4096,
  parameter int DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
