// tb_slice_ram: random pixel sets, row clears and row reads on one 240x180
// slice, compared with an array model.  Checks the zero initial contents and
// the one-cycle read latency.
module tb_slice_ram;
  import of_pkg::*;

  localparam int W = 240, H = 180;

  logic         clk = 0;
  slice_req_t   req;
  logic [W-1:0] dout;
  bit   [W-1:0] model [H];
  int           checks = 0, failures = 0;

  always #5 clk = ~clk;

  slice_ram #(.W(W), .H(H)) dut (.clk(clk), .req(req), .dout(dout));

  task automatic do_read(input int row);
    req = '{en: 1'b1, set: 1'b0, clr: 1'b0, row: COORD_W'(row), col: '0};
    @(posedge clk); #1;
    req = SLICE_IDLE;
    checks++;
    if (dout !== model[row]) begin
      failures++;
      $display("FAIL row %0d read %h expected %h", row, dout, model[row]);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = SLICE_IDLE;
    for (int r = 0; r < H; r++) model[r] = '0;
    @(posedge clk); #1;
    for (int r = 0; r < H; r += 7) do_read(r);
    for (int t = 0; t < 6000; t++) begin
      automatic int op = $urandom_range(0, 9);
      automatic int r = $urandom_range(0, H - 1);
      automatic int c = $urandom_range(0, W - 1);
      if (op < 6) begin
        req = '{en: 1'b1, set: 1'b1, clr: 1'b0, row: COORD_W'(r), col: COORD_W'(c)};
        model[r][c] = 1'b1;
        @(posedge clk); #1;
        req = SLICE_IDLE;
      end else if (op == 6) begin
        req = '{en: 1'b1, set: 1'b0, clr: 1'b1, row: COORD_W'(r), col: '0};
        model[r] = '0;
        @(posedge clk); #1;
        req = SLICE_IDLE;
      end else begin
        do_read(r);
      end
    end
    for (int r = 0; r < H; r++) do_read(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
