// tb_rotation_control: checks the reset roles, the t-2d -> t -> t-d -> t-2d
// rotation on each enable pulse, and that slice_in_time drops exactly when
// slice_duration cycles have passed since the last rotation.
module tb_rotation_control;

  logic        clk = 0, rst_n = 0, enable = 0;
  logic [31:0] slice_duration;
  logic [1:0]  idx_t, idx_td, idx_t2d;
  logic        slice_in_time;
  logic [31:0] elapsed;
  int          checks = 0, failures = 0;
  int          m_t, m_td, m_t2d, tmp;

  always #5 clk = ~clk;

  rotation_control dut (
    .clk(clk), .rst_n(rst_n), .enable(enable), .slice_duration(slice_duration),
    .idx_t(idx_t), .idx_td(idx_td), .idx_t2d(idx_t2d), .slice_in_time(slice_in_time),
    .elapsed(elapsed)
  );

  task automatic expect_roles(input string what);
    checks++;
    if (int'(idx_t) != m_t || int'(idx_td) != m_td || int'(idx_t2d) != m_t2d) begin
      failures++;
      $display("FAIL %s roles %0d/%0d/%0d expected %0d/%0d/%0d", what, idx_t, idx_td, idx_t2d, m_t, m_td, m_t2d);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    slice_duration = 32'd50;
    m_t = 0; m_td = 1; m_t2d = 2;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    expect_roles("reset");
    for (int n = 0; n < 30; n++) begin
      automatic int dur = $urandom_range(1, 200);
      automatic int cyc = 0;
      slice_duration = 32'(dur);
      // rotate, then time the slice
      enable = 1;
      @(posedge clk); #1;
      enable = 0;
      tmp = m_t2d; m_t2d = m_td; m_td = m_t; m_t = tmp;
      expect_roles("rotate");
      while (slice_in_time && cyc < 1000) begin
        @(posedge clk); #1;
        cyc++;
      end
      checks++;
      if (cyc != dur) begin
        failures++;
        $display("FAIL slice_in_time lasted %0d cycles, duration %0d", cyc, dur);
      end
      repeat ($urandom_range(0, 5)) @(posedge clk);
      #1;
      checks++;
      if (slice_in_time) begin failures++; $display("FAIL slice_in_time rose without rotation"); end
      expect_roles("hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
