// tb_min_finder: checks the parallel minimum circuit on 9 distances.  The
// expected index is the first smallest value found by a linear scan; the
// per-candidate counts are recomputed as "how many others are smaller, with
// ties going to the lower index".  Small value ranges force many ties.
module tb_min_finder;

  localparam int N  = 9;
  localparam int DW = 7;

  logic [N-1:0][DW-1:0] d;
  logic [3:0]           idx;
  logic [DW-1:0]        min_val;
  logic [N-1:0][3:0]    cnt;
  int                   checks = 0, failures = 0;
  int                   ties = 0;

  min_finder #(.N(N), .DW(DW)) dut (.d(d), .idx(idx), .min_val(min_val), .cnt(cnt));

  task automatic check();
    int exp_idx = 0, exp_min = int'(d[0]), c, nmin = 0;
    for (int i = 1; i < N; i++) if (int'(d[i]) < exp_min) begin exp_min = int'(d[i]); exp_idx = i; end
    for (int i = 0; i < N; i++) if (int'(d[i]) == exp_min) nmin++;
    if (nmin > 1) ties++;
    #1;
    checks++;
    if (int'(idx) != exp_idx || int'(min_val) != exp_min) begin
      failures++;
      $display("FAIL idx=%0d min=%0d expected %0d/%0d (d=%p)", idx, min_val, exp_idx, exp_min, d);
    end
    for (int i = 0; i < N; i++) begin
      c = 0;
      for (int j = 0; j < N; j++) begin
        if (j < i && d[i] >= d[j]) c++;
        if (j > i && d[i] >  d[j]) c++;
      end
      checks++;
      if (int'(cnt[i]) != c) begin
        failures++;
        $display("FAIL cnt[%0d]=%0d expected %0d", i, cnt[i], c);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) d[i] = 7'd81;
    check();
    for (int k = 0; k < N; k++) begin
      for (int i = 0; i < N; i++) d[i] = 7'd40;
      d[k] = 7'd3;
      check();
    end
    for (int t = 0; t < 3000; t++) begin
      automatic int hi = (t % 2 == 0) ? 3 : 81;
      for (int i = 0; i < N; i++) d[i] = DW'($urandom_range(0, hi));
      check();
    end
    checks++;
    if (ties == 0) begin failures++; $display("FAIL no ties exercised"); end
    $display("ties exercised: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
