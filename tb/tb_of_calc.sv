// tb_of_calc: the block-matching datapath against the reference model.
//
// Slices t-d and t-2d are modelled here as row memories with one cycle of
// read latency.  Three kinds of scene are used: random textures of random
// density, events near the sensor border (zero padding), and a texture that
// moved by a known (dx,dy) between t-2d and t-d, for which the direction code
// must be (dy+1)*3+(dx+1).  All 9 distances, the direction and its distance
// are checked, and so is the latency: 11 read cycles plus one SAD/HD and one
// Get-Minimum cycle, 13 cycles from the first read to the result.  The block
// size can be changed in one place (BD) to check other radii.
module tb_of_calc;
  import of_pkg::*;
  import tb_ref_pkg::*;

  // Change BD (odd) to test other block sizes; widths and latency follow.
  localparam int W = 240, H = 180, BD = 9, S = 1, NC = 9;
  localparam int HDW = $clog2(BD * BD + 1);
  localparam int LAT = BD + 2 * S + 2;

  logic                 clk = 0, rst_n = 0;
  logic                 start = 0, hd_en = 0, min_en = 0, rd_last;
  logic [COORD_W-1:0]   ev_x = '0, ev_y = '0;
  slice_req_t           td_req, t2d_req;
  logic [W-1:0]         td_dout, t2d_dout;
  logic [NC-1:0][HDW-1:0] hd;
  logic [DIR_W-1:0]     dir;
  logic [HDW-1:0]       min_hd;
  img_t                 td_img, t2d_img;
  int                   checks = 0, failures = 0;
  int                   n_border = 0, n_shift_ok = 0, n_ties = 0;

  always #5 clk = ~clk;

  of_calc #(.W(W), .H(H), .BLOCK_DIM(BD), .SEARCH_R(S)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .ev_x(ev_x), .ev_y(ev_y),
    .td_req(td_req), .t2d_req(t2d_req), .td_dout(td_dout), .t2d_dout(t2d_dout),
    .rd_last(rd_last), .hd_en(hd_en), .min_en(min_en), .hd(hd), .dir(dir), .min_hd(min_hd)
  );

  // Row memories with one cycle of read latency.
  always_ff @(posedge clk) begin
    if (td_req.en)  td_dout  <= td_img[td_req.row][W-1:0];
    if (t2d_req.en) t2d_dout <= t2d_img[t2d_req.row][W-1:0];
  end

  task automatic fill_random(input int dens);
    for (int y = 0; y < 256; y++) begin
      td_img[y] = '0; t2d_img[y] = '0;
      if (y < H)
        for (int x = 0; x < W; x++) begin
          td_img[y][x]  = ($urandom_range(0, 99) < dens);
          t2d_img[y][x] = ($urandom_range(0, 99) < dens);
        end
    end
  endtask

  // t-2d holds a texture, t-d the same texture moved by (-dx,-dy): the block
  // at the event in t-d is found at offset (dx,dy) in t-2d.
  task automatic fill_shifted(input int dx, input int dy);
    for (int y = 0; y < 256; y++) begin td_img[y] = '0; t2d_img[y] = '0; end
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) t2d_img[y][x] = ($urandom_range(0, 1) == 1);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) td_img[y][x] = pix(t2d_img, x + dx, y + dy, W, H);
  endtask

  // Run one match the way the controller sequences it and check the result.
  task automatic run_match(input int x, input int y, input int want_dir);
    int hds [25];
    int best, nmin, cyc;
    ref_match(td_img, t2d_img, x, y, W, H, BD, S, hds, best, nmin);
    if (nmin > 1) n_ties++;
    ev_x = COORD_W'(x); ev_y = COORD_W'(y);
    start = 1;
    @(posedge clk); #1;
    start = 0;
    cyc = 0;
    while (!rd_last) begin @(posedge clk); #1; cyc++; end
    @(posedge clk); #1; cyc++;            // last read cycle
    hd_en = 1;
    @(posedge clk); #1; cyc++;
    hd_en = 0; min_en = 1;
    @(posedge clk); #1; cyc++;
    min_en = 0;
    checks++;
    if (cyc != LAT) begin failures++; $display("FAIL latency %0d cycles, expected %0d", cyc, LAT); end
    for (int i = 0; i < NC; i++) begin
      checks++;
      if (int'(hd[i]) != hds[i]) begin
        failures++;
        $display("FAIL (%0d,%0d) hd[%0d]=%0d expected %0d", x, y, i, hd[i], hds[i]);
      end
    end
    checks++;
    if (int'(dir) != best || int'(min_hd) != hds[best]) begin
      failures++;
      $display("FAIL (%0d,%0d) dir=%0d/%0d expected %0d/%0d", x, y, dir, min_hd, best, hds[best]);
    end
    if (want_dir >= 0) begin
      checks++;
      if (int'(dir) != want_dir) begin
        failures++;
        $display("FAIL (%0d,%0d) shifted scene dir=%0d expected %0d", x, y, dir, want_dir);
      end else n_shift_ok++;
    end
    repeat ($urandom_range(0, 2)) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int sc = 0; sc < 6; sc++) begin
      fill_random(5 + sc * 15);
      for (int e = 0; e < 30; e++) run_match($urandom_range(0, W - 1), $urandom_range(0, H - 1), -1);
      // border and corner events
      run_match(0, 0, -1);          run_match(W - 1, H - 1, -1);
      run_match(0, H - 1, -1);      run_match(W - 1, 0, -1);
      run_match($urandom_range(0, 4), $urandom_range(0, H - 1), -1);
      run_match($urandom_range(W - 5, W - 1), $urandom_range(0, H - 1), -1);
      n_border += 6;
    end
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        fill_shifted(dx, dy);
        for (int e = 0; e < 6; e++)
          run_match($urandom_range(10, W - 11), $urandom_range(10, H - 11), (dy + 1) * 3 + (dx + 1));
      end
    checks++;
    if (n_ties == 0) begin failures++; $display("FAIL no tied distances exercised"); end
    $display("border events %0d, shifted scenes matched %0d, ties %0d", n_border, n_shift_ok, n_ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
