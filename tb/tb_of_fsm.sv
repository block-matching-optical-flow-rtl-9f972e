// tb_of_fsm: the controller with its datapath, against modelled slice
// memories addressed by role.
//
// The testbench plays the three slices (t, t-d, t-2d) with one cycle of read
// latency, drives slice_in_time directly and acts as sequencer and monitor.
// Per event it checks the state sequence of the state diagram (including 11
// Read Blocks cycles), the pixel written into slice t, the flow event against
// the reference matcher, rejection of out-of-range addresses, that a sender
// slow to release its request is not served twice, that Send Data holds while
// the acknowledge is high, and that Timeout Check "no" clears every row of the
// oldest slice once and pulses rot_enable once t_prev returning to IDLE.
module tb_of_fsm;
  import of_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 240, H = 180, BD = 9, S = 1;

  logic        clk = 0, rst_n = 0;
  logic        in_req_n = 1, in_ack_n, out_req_n, out_ack_n = 1;
  dvs_event_t  in_data = '0;
  of_event_t   out_data;
  slice_req_t  t_req, td_req, t2d_req;
  logic [W-1:0] td_dout, t2d_dout;
  logic        rot_enable, slice_in_time = 1;
  of_state_t   state;
  logic [6:0]  min_hd;

  always #5 clk = ~clk;

  of_fsm #(.W(W), .H(H), .BLOCK_DIM(BD), .SEARCH_R(S)) dut (
    .clk(clk), .rst_n(rst_n),
    .in_req_n(in_req_n), .in_data(in_data), .in_ack_n(in_ack_n),
    .out_req_n(out_req_n), .out_data(out_data), .out_ack_n(out_ack_n),
    .t_req(t_req), .td_req(td_req), .t2d_req(t2d_req), .td_dout(td_dout), .t2d_dout(t2d_dout),
    .rot_enable(rot_enable), .slice_in_time(slice_in_time), .state(state), .min_hd(min_hd)
  );

  img_t img [3];          // by role: 0 = t, 1 = t-d, 2 = t-2d
  int   checks = 0, failures = 0;
  int   n_events = 0, n_reject = 0, n_slow = 0, n_stall = 0, n_rot = 0, n_clr = 0, n_writes = 0;
  int   clr_seen [H];

  // Role memories.
  always @(posedge clk) begin
    if (td_req.en && !td_req.set && !td_req.clr)   td_dout  <= img[1][td_req.row][W-1:0];
    if (t2d_req.en && !t2d_req.set && !t2d_req.clr) t2d_dout <= img[2][t2d_req.row][W-1:0];
    if (t_req.en && t_req.set) begin img[0][t_req.row][t_req.col] = 1'b1; n_writes++; end
    if (t2d_req.en && t2d_req.clr) begin img[2][t2d_req.row] = '0; clr_seen[t2d_req.row]++; n_clr++; end
    checks++;
    if ((td_req.en && (td_req.set || td_req.clr)) || (t_req.en && !t_req.set) || (t2d_req.en && t2d_req.set)) begin
      failures++;
      $display("FAIL unexpected memory operation");
    end
    if (rot_enable) begin
      automatic row_t tmp [256];
      tmp = img[2]; img[2] = img[1]; img[1] = img[0]; img[0] = tmp;
      n_rot++;
    end
  end

  // State trace.
  of_state_t trace [$];
  always @(posedge clk) if (rst_n) trace.push_back(state);

  task automatic expect_trace(input of_state_t want [$], input string what);
    checks++;
    if (trace != want) begin
      failures++;
      $display("FAIL %s: state trace %p", what, trace);
    end
  endtask

  task automatic handshake_in(input int x, input int y, input int hold);
    in_data  = '{pol: 1'b1, y: COORD_W'(y), x: COORD_W'(x)};
    in_req_n = 0;
    while (in_ack_n) @(posedge clk);
    #1;
    repeat (hold) @(posedge clk);   // a slow sender keeps its request low
    #1 in_req_n = 1;
  endtask

  // One event; slice_in_time chosen by the caller; ack_delay cycles of stall.
  task automatic one_event(input int x, input int y, input int hold, input int ack_delay, input bit in_time);
    int hds [25];
    int best, nmin;
    bit valid;
    of_state_t want [$];
    img_t t_prev;
    valid = (x < W) && (y < H);
    if (valid) ref_match(img[1], img[2], x, y, W, H, BD, S, hds, best, nmin);
    t_prev = img[0];
    slice_in_time = in_time;
    trace.delete();
    handshake_in(x, y, hold);
    if (hold > 0) n_slow++;
    if (!valid) begin
      n_reject++;
      while (state != S_IDLE || !in_ack_n) @(posedge clk);
      repeat (3) @(posedge clk);
      want = '{S_IDLE, S_READ, S_DATA_CHECK};
      checks++;
      if (img[0] != t_prev) begin failures++; $display("FAIL rejected event written"); end
      while (trace.size() > 3) void'(trace.pop_back());
      expect_trace(want, "reject");
      return;
    end
    n_events++;
    while (out_req_n) @(posedge clk);
    #1;
    checks++;
    if (out_data != '{pol: 1'b1, y: COORD_W'(y), x: COORD_W'(x), dir: DIR_W'(best)}) begin
      failures++;
      $display("FAIL (%0d,%0d) out %p expected dir %0d", x, y, out_data, best);
    end
    if (ack_delay > 0) n_stall++;
    repeat (ack_delay) @(posedge clk);
    #1;
    checks++;
    if (out_req_n || state != S_SEND_DATA) begin failures++; $display("FAIL send not held during stall"); end
    out_ack_n = 0;
    while (!out_req_n) @(posedge clk);
    #1 out_ack_n = 1;
    while (state != S_IDLE) @(posedge clk);
    repeat (2) @(posedge clk);
    #1;
    checks++;
    t_prev[y][x] = 1'b1;
    if (in_time && img[0] != t_prev) begin failures++; $display("FAIL slice t contents after (%0d,%0d) in_time=%0d hold=%0d", x, y, in_time, hold); end
    // Compare state runs: the order of the diagram, 11 Read Blocks cycles,
    // one SAD/HD and one Get Minimum cycle, Send Data held through the
    // stall, H rotation cycles.
    want = '{S_IDLE, S_READ, S_DATA_CHECK, S_EXTRACT_EVENTS, S_READ_BLOCKS, S_SAD_HD,
             S_GET_MINIMUM, S_SEND_DATA, S_TIMEOUT_CHECK};
    if (!in_time) want.push_back(S_RAM_ROTATION);
    want.push_back(S_IDLE);
    begin
      automatic of_state_t runs [$];
      automatic int        lens [$];
      foreach (trace[i]) begin
        if (runs.size() == 0 || runs[$] != trace[i]) begin runs.push_back(trace[i]); lens.push_back(1); end
        else lens[$] = lens[$] + 1;
      end
      checks++;
      if (runs != want) begin
        failures++;
        $display("FAIL state order %p", runs);
      end else begin
        checks++;
        if (lens[4] != 11 || lens[5] != 1 || lens[6] != 1 || lens[7] < ack_delay + 1 || lens[7] > ack_delay + 2 + hold
            || (!in_time && lens[9] != H)) begin
          failures++;
          $display("FAIL state run lengths %p (ack delay %0d)", lens, ack_delay);
        end
      end
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 3; r++)
      for (int y = 0; y < 256; y++) begin
        img[r][y] = '0;
        if (r > 0 && y < H)
          for (int x = 0; x < W; x++) img[r][y][x] = ($urandom_range(0, 3) == 0);
      end
    for (int y = 0; y < H; y++) clr_seen[y] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    #1;
    for (int e = 0; e < 300; e++) begin
      automatic int kind = $urandom_range(0, 19);
      automatic int x = $urandom_range(0, W - 1);
      automatic int y = $urandom_range(0, H - 1);
      if (kind == 0) x = $urandom_range(W, 255);
      if (kind == 1) y = $urandom_range(H, 255);
      one_event(x, y, (kind == 2) ? $urandom_range(1, 30) : 0, $urandom_range(0, 3),
                !(e == 100 || e == 200));
      if (e == 100 || e == 200) begin
        checks++;
        foreach (clr_seen[i]) if (clr_seen[i] != 1) begin
          failures++;
          $display("FAIL row %0d cleared %0d times", i, clr_seen[i]);
          break;
        end
        checks++;
        if (img[0] != '{default: '0}) begin failures++; $display("FAIL new slice t not empty"); end
        foreach (clr_seen[i]) clr_seen[i] = 0;
      end
    end
    $display("events %0d, rejected %0d, slow senders %0d, stalls %0d, rotations %0d, rows cleared %0d",
             n_events, n_reject, n_slow, n_stall, n_rot, n_clr);
    checks++; if (n_rot != 2)        begin failures++; $display("FAIL %0d rotations, expected 2", n_rot); end
    checks++; if (n_writes != n_events) begin failures++; $display("FAIL %0d writes for %0d events", n_writes, n_events); end
    checks++; if (n_reject == 0 || n_slow == 0 || n_stall == 0) begin failures++; $display("FAIL mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
