// min_finder: index of the smallest of N distances, in one combinational step.
//
// The published "sort" circuit: for every candidate i a block of N-1
// comparators compares distance i with each other distance and an adder counts
// how many of them are smaller than distance i.  All N blocks work in parallel,
// and the candidate whose count is zero is the minimum.  The paper's text says
// each comparator tests "larger", its figure prints a greater-or-equal box.
// Both are used here so that ties are resolved: distance i is counted against
// a lower-index candidate j when d[i] >= d[j] and against a higher-index one
// when d[i] > d[j].  Exactly one count is then zero, the lowest-index minimum.
// That tie rule is this implementation's choice.
//
// Interface: d[i] are the N distances; idx is the winning index, min_val its
// distance and cnt[i] the per-candidate counts.  Purely combinational; the
// caller registers idx (one clock cycle, as in the paper).
module min_finder #(
  parameter int N     = 9,
  parameter int DW    = 7,
  parameter int IDX_W = (N > 1) ? $clog2(N) : 1,
  parameter int CNT_W = $clog2(N)
) (
  input  logic [N-1:0][DW-1:0]    d,
  output logic [IDX_W-1:0]        idx,
  output logic [DW-1:0]           min_val,
  output logic [N-1:0][CNT_W-1:0] cnt
);

  // One comparator bank plus adder per candidate.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      cnt[i] = '0;
      for (int j = 0; j < N; j++) begin
        if (j < i) begin
          cnt[i] = cnt[i] + CNT_W'(d[i] >= d[j]);
        end else if (j > i) begin
          cnt[i] = cnt[i] + CNT_W'(d[i] > d[j]);
        end
      end
    end
  end

  // Zero-count detection; the tie rule makes it one-hot, so an OR of the
  // masked indices is the encoder.
  logic [N-1:0] is_min;

  always_comb begin
    idx     = '0;
    min_val = '0;
    for (int i = 0; i < N; i++) begin
      is_min[i] = (cnt[i] == '0);
      if (is_min[i]) begin
        idx     = idx | IDX_W'(i);
        min_val = min_val | d[i];
      end
    end
  end

endmodule
