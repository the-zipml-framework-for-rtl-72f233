// zipml_harness: drives one zipml_sgd_top through whole training epochs and
// checks it against a golden model written independently of the RTL.
//
// It builds a synthetic least-squares regression problem (random true model
// w*, features uniform in [-1, 1], labels b = a.w*), quantizes every feature
// twice with independent stochastic rounding onto 2^QBITS levels, loads a
// random initial model through the host port, streams the label and feature
// lines for EPOCHS epochs and, after each epoch, reads the model back and
// compares every word with the golden model, which applies the same
// fixed-point rules (sum of level*x, (dot-b)>>>shift saturated to 32 bits,
// x - err*level saturated) in the same mini-batch order.
//
// It also checks the latency from the last group of a sample to its first
// model write (log2(K)+5 cycles), the input rate in a gap-free batch (one
// line per cycle, one per two cycles for QBITS = 1), that the training loss
// computed on the unquantized data falls, and counts how often label lines,
// batch copies, stalls, forwarding and Q1 line splits happened.
//
// The DUT is instantiated by the caller; this module only sees its ports and
// a few internal strobes passed in as probes.
module zipml_harness
  import zipml_pkg::*;
#(
  parameter int QBITS        = 2,
  parameter int MAX_FEATURES = 8192,
  parameter int X_W          = 32,
  parameter int NF           = 200,   // features per sample
  parameter int NS           = 40,    // samples per epoch
  parameter int BS           = 8,     // mini-batch size (at most 16)
  parameter int EPOCHS       = 2,
  parameter int SEED         = 1
) (
  input  logic                      clk,
  output logic                      rst_n,
  output logic                      start,
  output logic [15:0]               n_features,
  output logic [31:0]               num_samples,
  output logic [15:0]               batch_size,
  output logic [SHIFT_W-1:0]        gamma_shift,
  input  logic                      busy,
  input  logic                      done,
  output logic                      line_valid,
  input  logic                      line_ready,
  output logic [LINE_BITS-1:0]      line_data,
  output logic                      mdl_wr_en,
  output logic                      mdl_rd_en,
  output logic [$clog2(MAX_FEATURES/lanes_for(QBITS))-1:0] mdl_addr,
  output logic [lanes_for(QBITS)*X_W-1:0] mdl_wr_data,
  input  logic [lanes_for(QBITS)*X_W-1:0] mdl_rd_data,
  // probes
  input  logic                      pr_grp_last,     // last group of a sample leaves the front end
  input  logic                      pr_first_write,  // model word 0 written by the update stage
  input  logic                      pr_bypass,
  input  logic                      pr_stalled,
  input  logic                      pr_copy_write,
  input  logic                      pr_label_push,
  input  logic                      pr_second_half,
  output int                        checks,
  output int                        failures,
  output logic                      finished,
  output int                        n_bypass,
  output int                        n_stall,
  output int                        n_copy,
  output int                        n_label,
  output int                        n_split,
  output int                        n_lat
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int K     = lanes_for(QBITS);
  localparam int GPL   = groups_per_line(QBITS);
  localparam int DEPTH = MAX_FEATURES / K;
  localparam int S     = (1 << QBITS) - 1;
  localparam int FPL   = K * GPL;                 // features per line
  localparam int LPS   = (NF + FPL - 1) / FPL;    // lines per sample
  localparam int FRAC  = 16;                      // fraction bits of x

  // dataset
  real             w_true [NF];
  real             a_real [NS][NF];
  real             b_real [NS];
  logic [7:0]      c1 [NS][NF];
  logic [7:0]      c2 [NS][NF];
  logic signed [31:0] b_int [NS];
  // golden model
  logic signed [X_W-1:0] xg  [DEPTH*K];
  logic signed [X_W-1:0] xlg [DEPTH*K];

  int unsigned seed_state;
  longint cycle;
  int shift_e [EPOCHS];

  function automatic real urand();  // uniform in [0,1)
    return real'($urandom()) / 4294967296.0;
  endfunction

  function automatic logic [7:0] quantize(input real v);
    real u, p;
    int  l;
    u = (v + 1.0) / 2.0 * real'(S);
    l = int'($floor(u));
    if (l >= S) l = S - 1;
    if (l < 0) l = 0;
    p = u - real'(l);
    return 8'((urand() < p) ? l + 1 : l);
  endfunction

  function automatic longint lvl(input logic [7:0] c);
    return longint'(2 * int'(c) - S);
  endfunction

  function automatic logic signed [X_W-1:0] sat(input longint v);
    longint mx;
    mx = (longint'(1) <<< (X_W - 1)) - 1;
    if (v > mx) return X_W'(mx);
    if (v < -mx - 1) return X_W'(-mx - 1);
    return X_W'(v);
  endfunction

  function automatic real loss_of(input logic signed [X_W-1:0] m [DEPTH*K]);
    real l, d;
    l = 0.0;
    for (int k = 0; k < NS; k++) begin
      d = -b_real[k];
      for (int i = 0; i < NF; i++) d += a_real[k][i] * real'(m[i]) / real'(1 << FRAC);
      l += d * d;
    end
    return l / real'(NS);
  endfunction

  task automatic golden_epoch(input int sh);
    int bcount;
    bcount = 0;
    for (int k = 0; k < NS; k++) begin
      longint dot, e;
      logic signed [X_W-1:0] err;
      dot = 0;
      for (int i = 0; i < NF; i++) dot += lvl(c1[k][i]) * longint'(xg[i]);
      e   = (dot - longint'(b_int[k])) >>> sh;
      err = sat(e);
      for (int i = 0; i < NF; i++) xlg[i] = sat(longint'(xlg[i]) - longint'(err) * lvl(c2[k][i]));
      bcount++;
      if (bcount == BS || k == NS - 1) begin
        bcount = 0;
        for (int i = 0; i < DEPTH * K; i++) xg[i] = xlg[i];
      end
    end
  endtask

  function automatic logic [LINE_BITS-1:0] feature_line(input int k, input int l);
    logic [LINE_BITS-1:0] d;
    d = '0;
    for (int p = 0; p < FPL; p++) begin
      int f;
      f = l * FPL + p;
      if (f < NF) begin
        d[p*2*QBITS         +: QBITS] = QBITS'(c1[k][f]);
        d[p*2*QBITS + QBITS +: QBITS] = QBITS'(c2[k][f]);
      end else begin
        d[p*2*QBITS +: 2*QBITS] = QBITS'($urandom());  // junk in padding lanes
      end
    end
    return d;
  endfunction

  function automatic logic [LINE_BITS-1:0] label_line(input int first);
    logic [LINE_BITS-1:0] d;
    d = '0;
    for (int j = 0; j < LABELS_PER_LINE; j++)
      if (first + j < NS) d[j*LABEL_BITS +: LABEL_BITS] = b_int[first + j];
    return d;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL [Q%0d] %s", QBITS, what);
    end
  endtask

  // send one line; returns the cycle it was accepted
  task automatic send_line(input logic [LINE_BITS-1:0] d, input bit gaps, output longint acc_cycle);
    if (gaps) begin
      while (($urandom() % 4) == 0) @(negedge clk);
    end
    line_valid = 1'b1;
    line_data  = d;
    forever begin
      #1;
      if (line_ready) break;
      @(negedge clk);
    end
    acc_cycle = cycle;
    @(negedge clk);
    line_valid = 1'b0;
  endtask

  // ------------------------------------------------ monitors
  longint lat_q [$];
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n) begin
      if (pr_grp_last) lat_q.push_back(cycle);
      if (pr_first_write) begin
        if (lat_q.size() == 0) check(0, "model write without a sample");
        else begin
          longint t0;
          t0 = lat_q.pop_front();
          check(cycle - t0 == longint'($clog2(K) + 5),
                $sformatf("latency %0d, expected %0d", cycle - t0, $clog2(K) + 5));
          n_lat <= n_lat + 1;
        end
      end
      if (pr_bypass)      n_bypass <= n_bypass + 1;
      if (pr_stalled)     n_stall  <= n_stall + 1;
      if (pr_copy_write)  n_copy   <= n_copy + 1;
      if (pr_label_push)  n_label  <= n_label + 1;
      if (pr_second_half) n_split  <= n_split + 1;
    end
  end

  // ------------------------------------------------ stimulus
  initial begin
    real loss0, loss1;
    longint acc_c, first_c, last_c;
    checks = 0; failures = 0; finished = 1'b0;
    n_bypass = 0; n_stall = 0; n_copy = 0; n_label = 0; n_split = 0; n_lat = 0;
    cycle = 0;
    rst_n = 1'b0; start = 1'b0; line_valid = 1'b0; line_data = '0;
    mdl_wr_en = 1'b0; mdl_rd_en = 1'b0; mdl_addr = '0; mdl_wr_data = '0;
    n_features  = 16'(NF);
    num_samples = 32'(NS);
    batch_size  = 16'(BS);
    gamma_shift = '0;
    void'($urandom(SEED));

    // problem and quantized data
    for (int i = 0; i < NF; i++) w_true[i] = (urand() * 2.0 - 1.0) / real'(NF) * 4.0;
    for (int k = 0; k < NS; k++) begin
      b_real[k] = 0.0;
      for (int i = 0; i < NF; i++) begin
        a_real[k][i] = urand() * 2.0 - 1.0;
        b_real[k] += a_real[k][i] * w_true[i];
        c1[k][i] = quantize(a_real[k][i]);
        c2[k][i] = quantize(a_real[k][i]);
      end
      // b in the scale of the dot product: S * 2^FRAC
      b_int[k] = 32'(longint'($rtoi(b_real[k] * real'(S) * real'(1 << FRAC))));
    end
    // step size gamma = S^2 / 2^shift, about 1/(2*BS*NF) in real terms,
    // halved in each later epoch (diminishing step size)
    for (int e = 0; e < EPOCHS; e++)
      shift_e[e] = $clog2(S * S * 2 * BS * NF) + e;

    // initial model, also in padding lanes and unused words
    for (int i = 0; i < DEPTH * K; i++) begin
      xg[i]  = X_W'(int'($urandom() % 32768) - 16384);
      xlg[i] = xg[i];
    end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int w = 0; w < DEPTH; w++) begin
      mdl_wr_en = 1'b1;
      mdl_addr  = ($bits(mdl_addr))'(w);
      for (int i = 0; i < K; i++) mdl_wr_data[i*X_W +: X_W] = xg[w*K + i];
      @(negedge clk);
    end
    mdl_wr_en = 1'b0;
    loss0 = loss_of(xg);

    for (int e = 0; e < EPOCHS; e++) begin
      bit gaps;
      gaps = (e % 2 == 0);
      gamma_shift = SHIFT_W'(shift_e[e]);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      first_c = -1; last_c = -1;
      for (int k = 0; k < NS; k++) begin
        if (k % LABELS_PER_LINE == 0) send_line(label_line(k), gaps, acc_c);
        for (int l = 0; l < LPS; l++) begin
          send_line(feature_line(k, l), gaps, acc_c);
          if (k == 0 && l == 0) first_c = acc_c;
          if (k == BS - 1 && l == LPS - 1) last_c = acc_c;
        end
      end
      // wait for the end of the epoch
      while (busy) @(negedge clk);
      golden_epoch(shift_e[e]);
      if (!gaps)
        check(last_c - first_c == longint'((BS * LPS - 1) * GPL),
              $sformatf("rate: %0d lines took %0d cycles", BS * LPS, last_c - first_c + 1));
      // read back the model
      for (int w = 0; w < DEPTH; w++) begin
        mdl_rd_en = 1'b1;
        mdl_addr  = ($bits(mdl_addr))'(w);
        @(negedge clk);
        mdl_rd_en = 1'b0;
        begin
          bit ok;
          ok = 1'b1;
          for (int i = 0; i < K; i++)
            if ($signed(mdl_rd_data[i*X_W +: X_W]) != xg[w*K + i]) begin
              if (ok && failures < 20)
                $display("  epoch %0d word %0d lane %0d: got %0d expected %0d", e, w, i,
                         $signed(mdl_rd_data[i*X_W +: X_W]), xg[w*K + i]);
              ok = 1'b0;
            end
          check(ok, $sformatf("model word %0d after epoch %0d", w, e));
        end
      end
    end
    loss1 = loss_of(xg);
    $display("[Q%0d K=%0d NF=%0d NS=%0d BS=%0d] loss %f -> %f", QBITS, K, NF, NS, BS, loss0, loss1);
    check(loss1 < loss0, "training loss did not fall");
    check(n_lat == EPOCHS * NS, $sformatf("latency measured %0d times", n_lat));
    finished = 1'b1;
  end

endmodule
