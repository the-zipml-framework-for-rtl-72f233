// sgd_controller: sequences one epoch of quantized mini-batch SGD.
//
// It decides, for every cache line offered on the input, whether it is a
// label line (16 labels b of 32 bits, for the next 16 samples) or a feature
// line, counts feature groups and samples, and implements the "batch size is
// reached?" decision of the pipeline figures: after the last group of a
// mini-batch enters the pipeline it stops taking input (stall), waits until
// the model update of that batch has been written into "x loading", and then
// copies "x loading" word by word into "x", which the dot product reads. The
// decision and the two model copies are the paper's; the label-line layout,
// the drain-then-copy sequence and the start/done handshake are this design's.
//
// Stream layout expected per epoch: a label line, then the feature lines of
// up to 16 samples, then the next label line, and so on. Each sample takes
// whole lines, n_groups = ceil(n_features / K) groups of K features rounded
// up to whole lines (two groups per line for QBITS = 1); the lanes beyond
// n_features are masked in the datapath.
//
// Timing: start (one cycle, while idle) latches nothing but clears the
// counters; the configuration inputs must stay stable while busy. done pulses
// for one cycle after the last copy of the epoch. Label selection for the
// gradient stage is combinational with dot_valid.
module sgd_controller
  import zipml_pkg::*;
#(
  parameter int QBITS = 2,
  parameter int K     = lanes_for(QBITS),
  parameter int DEPTH = 64,             // model words (max groups per sample)
  parameter int A_DEPTH = 128,          // a fifo depth
  parameter int NF_W  = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          start,
  input  logic [NF_W-1:0]               n_features,
  input  logic [31:0]                   num_samples,
  input  logic [15:0]                   batch_size,
  output logic [$clog2(DEPTH+1)-1:0]    n_groups,
  output logic                          busy,
  output logic                          done,
  // input line classification
  input  logic                          line_valid,
  output logic                          expect_label,
  output logic                          label_push,
  output logic                          fe_enable,
  input  logic                          b_full,
  input  logic [$clog2(A_DEPTH+1)-1:0]  a_count,
  // groups leaving the front end
  input  logic                          grp_fire,
  output logic [$clog2(DEPTH)-1:0]      grp_idx,
  output logic                          grp_last,
  // gradient side
  input  logic                          dot_valid,
  output logic [$clog2(LABELS_PER_LINE)-1:0] lab_idx,
  output logic                          b_pop,
  input  logic                          sample_done,
  // x loading -> x copy
  output logic                          cp_rd_en,
  output logic [$clog2(DEPTH)-1:0]      cp_rd_addr,
  output logic                          cp_wr_en,
  output logic [$clog2(DEPTH)-1:0]      cp_wr_addr,
  output logic                          stalled
);

  localparam int AW  = $clog2(DEPTH);
  localparam int GW  = $clog2(DEPTH+1);
  localparam int GPL = groups_per_line(QBITS);
  localparam int LW  = $clog2(LABELS_PER_LINE);

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_DRAIN, S_COPY, S_COPY_END} state_t;
  state_t state;

  logic [AW-1:0]  grp_in;
  logic [31:0]    samp_in, samp_out, samp_done;
  logic [15:0]    batch_in;
  logic [4:0]     lab_left;
  logic [AW-1:0]  cp_idx;

  // Groups per sample: ceil(n/K), rounded up to whole lines.
  logic [31:0] groups_c;
  always_comb begin
    groups_c = (32'(n_features) + 32'(K*GPL) - 1) / 32'(K*GPL) * 32'(GPL);
  end

  assign busy         = (state != S_IDLE);
  assign stalled      = (state == S_DRAIN) || (state == S_COPY) || (state == S_COPY_END);
  assign expect_label = (lab_left == '0) && (grp_in == '0);
  assign label_push   = (state == S_RUN) && expect_label && line_valid && !b_full;
  assign fe_enable    = (state == S_RUN) && !expect_label &&
                        (32'(a_count) + 32'(GPL) <= 32'(A_DEPTH));
  assign grp_idx      = grp_in;
  assign grp_last     = (32'(grp_in) + 1 == 32'(n_groups));

  assign lab_idx = LW'(samp_out[LW-1:0]);
  assign b_pop   = dot_valid && ((samp_out[LW-1:0] == LW'(LABELS_PER_LINE - 1)) ||
                                 (samp_out + 1 == num_samples));

  assign cp_rd_en   = (state == S_COPY);
  assign cp_rd_addr = cp_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      n_groups   <= '0;
      grp_in     <= '0;
      samp_in    <= '0;
      samp_out   <= '0;
      samp_done  <= '0;
      batch_in   <= '0;
      lab_left   <= '0;
      cp_idx     <= '0;
      cp_wr_en   <= 1'b0;
      cp_wr_addr <= '0;
      done       <= 1'b0;
    end else begin
      done       <= 1'b0;
      cp_wr_en   <= cp_rd_en;
      cp_wr_addr <= cp_idx;
      if (dot_valid)   samp_out  <= samp_out + 1;
      if (sample_done) samp_done <= samp_done + 1;

      case (state)
        S_IDLE: begin
          if (start) begin
            state     <= S_RUN;
            n_groups  <= GW'(groups_c);
            grp_in    <= '0;
            samp_in   <= '0;
            samp_out  <= '0;
            samp_done <= '0;
            batch_in  <= '0;
            lab_left  <= '0;
          end
        end
        S_RUN: begin
          if (label_push) lab_left <= 5'(LABELS_PER_LINE);
          if (grp_fire) begin
            if (grp_in == '0) lab_left <= lab_left - 1'b1;
            if (grp_last) begin
              grp_in  <= '0;
              samp_in <= samp_in + 1;
              if (batch_in + 1 == batch_size || samp_in + 1 == num_samples) begin
                batch_in <= '0;
                state    <= S_DRAIN;
              end else begin
                batch_in <= batch_in + 1'b1;
              end
            end else begin
              grp_in <= grp_in + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          if (samp_done == samp_in) begin
            state  <= S_COPY;
            cp_idx <= '0;
          end
        end
        S_COPY: begin
          if (32'(cp_idx) + 1 == 32'(n_groups)) state <= S_COPY_END;
          else                                  cp_idx <= cp_idx + 1'b1;
        end
        S_COPY_END: begin
          // the last word is written this cycle
          if (samp_in == num_samples) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_groups_only_when_running: assert (!(grp_fire) || ((state == S_RUN) || (QBITS == 1)));
    end
  end
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_label_first: assert (!(label_push && grp_fire && grp_in == '0));
    end
  end

endmodule
