// tb_hamming_distance: checks the XOR-and-sum distance of two 81-bit blocks
// against a bit-by-bit mismatch count, on corner cases and random blocks of
// varying density.
module tb_hamming_distance;

  localparam int N = 81;

  logic [N-1:0] a, b;
  logic [6:0]   hd;
  int           checks = 0, failures = 0;

  hamming_distance #(.N(N)) dut (.a(a), .b(b), .hd(hd));

  task automatic check(input string what);
    int exp = 0;
    for (int i = 0; i < N; i++) if (a[i] != b[i]) exp++;
    #1;
    checks++;
    if (int'(hd) != exp) begin
      failures++;
      $display("FAIL %s: hd=%0d expected %0d", what, hd, exp);
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
    a = '0; b = '0;  check("equal zero");
    a = '1; b = '1;  check("equal ones");
    a = '0; b = '1;  check("all differ");
    for (int i = 0; i < N; i++) begin
      a = '0; b = '0; b[i] = 1'b1; check("single bit");
    end
    for (int t = 0; t < 2000; t++) begin
      automatic int dens = $urandom_range(0, 8);
      for (int i = 0; i < N; i++) begin
        a[i] = ($urandom_range(0, 7) < dens);
        b[i] = ($urandom_range(0, 7) < dens);
      end
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
