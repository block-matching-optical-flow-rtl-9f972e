// tb_of_top: end-to-end test of the optical-flow core at its default size
// (240x180 sensor, 9x9 blocks, 9 directions).
//
// A sequencer model sends events over the active-low four-phase input
// handshake; a monitor model acknowledges flow events after a random delay.
// The scene is a random texture inside a window that moves by a known step
// between slices; noise events anywhere (including the sensor border) and
// events with out-of-range addresses are mixed in.  The testbench keeps its
// own copy of the three slices, rotates it when the core reports a new
// collecting slice, and checks every flow event against the reference
// matcher.  Slice rotations are caused by lowering slice_duration before the
// last event of a slice.
//
// Mechanisms that must each occur at least once: accepted events, rejected
// addresses (Data Check "no"), send stalls (monitor slow to acknowledge),
// Timeout Check "yes", RAM rotations, border events, tied distances.  The
// time from input acknowledge to output request is checked against the
// 15-cycle path (Data Check, Extract Events, 11 row reads, SAD/HD, Get
// Minimum), and the share of flow events that report the true motion is
// checked to be above one half.
module tb_of_top;
  import of_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = SENSOR_W, H = SENSOR_H, BD = DEF_BLOCK_DIM, S = DEF_SEARCH_R;
  localparam int TEX_W = 48, TEX_H = 36;
  localparam int N_SLICE = 8;

  logic        clk = 0, rst_n = 0;
  logic [31:0] slice_duration = 32'hFFFF_FFFF;
  logic        in_req_n = 1, in_ack_n, out_req_n, out_ack_n = 1;
  dvs_event_t  in_data = '0;
  of_event_t   out_data;
  of_state_t   state;
  logic [6:0]  min_hd;
  logic [1:0]  idx_t;

  always #10 clk = ~clk;   // 50 MHz

  of_top dut (
    .clk(clk), .rst_n(rst_n), .slice_duration(slice_duration),
    .in_req_n(in_req_n), .in_data(in_data), .in_ack_n(in_ack_n),
    .out_req_n(out_req_n), .out_data(out_data), .out_ack_n(out_ack_n),
    .state(state), .min_hd(min_hd), .idx_t(idx_t)
  );

  int checks = 0, failures = 0;
  int n_events = 0, n_reject = 0, n_stall = 0, n_timeout_yes = 0, n_rotation = 0;
  int n_border = 0, n_ties = 0, n_out = 0, n_true = 0, n_scored = 0;
  longint cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------- slice model
  img_t mimg [3];
  int   m_t = 0, m_td = 1, m_t2d = 2;

  always @(idx_t) begin
    if (rst_n) begin
      int old_t2d;
      old_t2d = m_t2d;
      m_t2d = m_td; m_td = m_t; m_t = old_t2d;
      for (int y = 0; y < 256; y++) mimg[m_t][y] = '0;
      n_rotation++;
      checks++;
      if (int'(idx_t) != m_t) begin
        failures++;
        $display("FAIL rotation to %0d, expected %0d", idx_t, m_t);
      end
    end
  end

  // expected flow events, in order
  typedef struct { of_event_t ev; int true_dir; } exp_t;
  exp_t   exp_q [$];

  // Cycle of the last input-acknowledge fall and of each output-request
  // fall, both sampled at the clock edge.
  logic   ack_d = 1, req_d = 1;
  longint t_ack = 0, lat = 0;
  always @(posedge clk) begin
    if (ack_d && !in_ack_n) t_ack = cyc;
    if (req_d && !out_req_n) lat = cyc - t_ack;
    ack_d <= in_ack_n;
    req_d <= out_req_n;
  end

  // ------------------------------------------------------------- sequencer
  task automatic send_event(input int x, input int y, input bit pol, input int true_dir);
    int hds [25];
    int best, nmin;
    bit valid;
    valid = (x < W) && (y < H);
    while (!in_ack_n) @(posedge clk);
    #1;
    in_data  = '{pol: pol, y: COORD_W'(y), x: COORD_W'(x)};
    in_req_n = 0;
    while (in_ack_n) @(posedge clk);
    #1;
    in_req_n = 1;
    if (valid) begin
      n_events++;
      if (x < 4 || y < 4 || x > W - 5 || y > H - 5) n_border++;
      ref_match(mimg[m_td], mimg[m_t2d], x, y, W, H, BD, S, hds, best, nmin);
      if (nmin > 1) n_ties++;
      mimg[m_t][y][x] = 1'b1;
      exp_q.push_back('{ev: '{pol: pol, y: COORD_W'(y), x: COORD_W'(x), dir: DIR_W'(best)},
                        true_dir: true_dir});
    end else begin
      n_reject++;
    end
    repeat ($urandom_range(0, 3)) @(posedge clk);
  endtask

  // ------------------------------------------------------------- monitor
  initial begin
    forever begin
      @(posedge clk);
      if (!out_req_n) begin
        automatic int dly = $urandom_range(0, 3);
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL unexpected flow event %p", out_data);
        end else begin
          automatic exp_t e = exp_q.pop_front();
          if (out_data != e.ev) begin
            failures++;
            $display("FAIL flow event %p expected %p", out_data, e.ev);
          end
          checks++;
          #1;
          if (lat != 15) begin
            failures++;
            $display("FAIL input-ack to output-req %0d cycles, expected 15", lat);
          end
          if (e.true_dir >= 0) begin
            n_scored++;
            if (int'(out_data.dir) == e.true_dir) n_true++;
          end
        end
        n_out++;
        if (dly > 0) n_stall++;
        repeat (dly) begin
          @(posedge clk); #1;
          checks++;
          if (out_req_n) begin failures++; $display("FAIL request dropped before acknowledge"); end
        end
        #1 out_ack_n = 0;
        while (!out_req_n) @(posedge clk);
        #1 out_ack_n = 1;
      end
    end
  end

  // Timeout Check "yes" = back to IDLE without rotation.
  of_state_t prev_state;
  always @(posedge clk) begin
    if (prev_state == S_TIMEOUT_CHECK && state == S_IDLE) n_timeout_yes++;
    prev_state <= state;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------- scene
  bit tex [TEX_H][TEX_W];

  initial begin
    int ox [N_SLICE], oy [N_SLICE];
    int vx, vy, tdir;
    longint t0;

    for (int i = 0; i < 3; i++) for (int y = 0; y < 256; y++) mimg[i][y] = '0;
    for (int y = 0; y < TEX_H; y++) for (int x = 0; x < TEX_W; x++) tex[y][x] = ($urandom_range(0, 99) < 30);
    // window position per slice: steps right, then down-right, then down
    ox[0] = 90; oy[0] = 70;
    for (int k = 1; k < N_SLICE; k++) begin
      vx = (k < 4) ? 1 : (k < 6) ? 1 : 0;
      vy = (k < 4) ? 0 : 1;
      ox[k] = ox[k-1] + vx;
      oy[k] = oy[k-1] + vy;
    end

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    t0 = cyc;

    for (int k = 0; k < N_SLICE; k++) begin
      // true direction code: block in t-d found in t-2d at offset -(step k-1)
      tdir = -1;
      if (k >= 2) tdir = (-(oy[k-1] - oy[k-2]) + 1) * 3 + (-(ox[k-1] - ox[k-2]) + 1);
      // the texture's pixels, sent in random order
      begin
        automatic int idx [$];
        automatic int qx [$], qy [$];
        for (int y = 0; y < TEX_H; y++)
          for (int x = 0; x < TEX_W; x++)
            if (tex[y][x]) begin qx.push_back(ox[k] + x); qy.push_back(oy[k] + y); end
        for (int i = 0; i < qx.size(); i++) idx.push_back(i);
        idx.shuffle();
        for (int i = 0; i < idx.size(); i++) begin
          if (i == idx.size() - 1) slice_duration = 32'd1;   // rotate after this one
          // only events away from the window edge see the full texture
          send_event(qx[idx[i]], qy[idx[i]], 1'($urandom_range(0, 1)),
                     (qx[idx[i]] >= ox[k] + 6 && qx[idx[i]] < ox[k] + TEX_W - 6 &&
                      qy[idx[i]] >= oy[k] + 6 && qy[idx[i]] < oy[k] + TEX_H - 6) ? tdir : -1);
          if (i % 40 == 7) begin
            // noise event anywhere, sometimes on the border
            if ($urandom_range(0, 1) == 1)
              send_event($urandom_range(0, 1) ? 0 : W - 1, $urandom_range(0, H - 1), 1'b0, -1);
            else
              send_event($urandom_range(0, W - 1), $urandom_range(0, 1) ? 0 : H - 1, 1'b1, -1);
          end
          if (i % 50 == 13) send_event($urandom_range(W, 255), $urandom_range(0, 255), 1'b0, -1);
          if (i % 50 == 31) send_event($urandom_range(0, 255), $urandom_range(H, 255), 1'b1, -1);
        end
        slice_duration = 32'hFFFF_FFFF;
      end
    end
    while (exp_q.size() != 0 || !out_req_n || state != S_IDLE) @(posedge clk);
    repeat (5) @(posedge clk);

    $display("events %0d, flow events %0d, rejected %0d, send stalls %0d, timeout-yes %0d, rotations %0d",
             n_events, n_out, n_reject, n_stall, n_timeout_yes, n_rotation);
    $display("border events %0d, tied distances %0d, true direction %0d of %0d, %0d cycles",
             n_border, n_ties, n_true, n_scored, cyc - t0);
    checks++; if (n_out != n_events) begin failures++; $display("FAIL flow events %0d != events %0d", n_out, n_events); end
    checks++; if (n_events == 0)      begin failures++; $display("FAIL no event processed"); end
    checks++; if (n_reject == 0)      begin failures++; $display("FAIL no Data Check rejection"); end
    checks++; if (n_stall == 0)       begin failures++; $display("FAIL no send stall"); end
    checks++; if (n_timeout_yes == 0) begin failures++; $display("FAIL no Timeout Check yes"); end
    checks++; if (n_rotation != N_SLICE) begin failures++; $display("FAIL %0d rotations, expected %0d", n_rotation, N_SLICE); end
    checks++; if (n_border == 0)      begin failures++; $display("FAIL no border event"); end
    checks++; if (n_ties == 0)        begin failures++; $display("FAIL no tied distances"); end
    checks++; if (n_scored == 0 || n_true * 2 <= n_scored) begin failures++; $display("FAIL true motion found too rarely"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
