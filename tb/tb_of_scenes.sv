// tb_of_scenes: the core on three synthetic scenes modelled on the published
// test recordings, each at its slice duration with a 50 MHz clock:
//   edges   - outlines of boxes moving right,         d = 40 ms (2,000,000 cycles)
//   sparse  - scattered points moving down and right, d = 10 ms (  500,000 cycles)
//   dense   - a dense random texture moving right,    d =  3 ms (  150,000 cycles)
// The scene moves by one pixel per slice duration and events are spread
// evenly in time (2500, 400 and 800 events per slice), so the slices rotate on the core's own timer, not on
// command.  Every flow event is checked against the reference matcher on a
// model of the slices; the share of events that report the true motion is
// printed per scene and must exceed a third for the edge scene (horizontal
// edges are ambiguous for a rightward motion) and a half for the others.
// Each scene must also see at least four rotations.
module tb_of_scenes;
  import of_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = SENSOR_W, H = SENSOR_H, BD = DEF_BLOCK_DIM, S = DEF_SEARCH_R;
  localparam int REG_X = 60, REG_Y = 50, REG_W = 100, REG_H = 70;
  localparam int N_SLICES_RUN = 6;

  logic        clk = 0, rst_n = 0;
  logic [31:0] slice_duration = 32'd150000;
  logic        in_req_n = 1, in_ack_n, out_req_n, out_ack_n = 1;
  dvs_event_t  in_data = '0;
  of_event_t   out_data;
  of_state_t   state;
  logic [6:0]  min_hd;
  logic [1:0]  idx_t;

  always #10 clk = ~clk;

  of_top dut (
    .clk(clk), .rst_n(rst_n), .slice_duration(slice_duration),
    .in_req_n(in_req_n), .in_data(in_data), .in_ack_n(in_ack_n),
    .out_req_n(out_req_n), .out_data(out_data), .out_ack_n(out_ack_n),
    .state(state), .min_hd(min_hd), .idx_t(idx_t)
  );

  int checks = 0, failures = 0;
  int n_rot = 0, n_true = 0, n_scored = 0, n_out = 0;

  img_t mimg [3];
  int   m_t = 0, m_td = 1, m_t2d = 2;

  always @(idx_t) begin
    if (rst_n) begin
      int old_t2d;
      old_t2d = m_t2d;
      m_t2d = m_td; m_td = m_t; m_t = old_t2d;
      for (int y = 0; y < 256; y++) mimg[m_t][y] = '0;
      n_rot++;
    end
  end

  typedef struct { of_event_t ev; int true_dir; } exp_t;
  exp_t exp_q [$];

  task automatic send_event(input int x, input int y, input int true_dir);
    int hds [25];
    int best, nmin;
    while (!in_ack_n) @(posedge clk);
    #1;
    in_data  = '{pol: 1'b0, y: COORD_W'(y), x: COORD_W'(x)};
    in_req_n = 0;
    while (in_ack_n) @(posedge clk);
    #1;
    in_req_n = 1;
    ref_match(mimg[m_td], mimg[m_t2d], x, y, W, H, BD, S, hds, best, nmin);
    mimg[m_t][y][x] = 1'b1;
    exp_q.push_back('{ev: '{pol: 1'b0, y: COORD_W'(y), x: COORD_W'(x), dir: DIR_W'(best)},
                      true_dir: true_dir});
  endtask

  // monitor: acknowledge after one cycle, check in order
  initial begin
    forever begin
      @(posedge clk);
      if (!out_req_n) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL unexpected flow event");
        end else begin
          automatic exp_t e = exp_q.pop_front();
          if (out_data != e.ev) begin
            failures++;
            $display("FAIL flow event %p expected %p", out_data, e.ev);
          end
          if (e.true_dir >= 0) begin
            n_scored++;
            if (int'(out_data.dir) == e.true_dir) n_true++;
          end
        end
        n_out++;
        #1 out_ack_n = 0;
        while (!out_req_n) @(posedge clk);
        #1 out_ack_n = 1;
      end
    end
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scene pattern, in region coordinates
  bit pat [REG_H][REG_W];

  task automatic make_scene(input int kind);
    for (int y = 0; y < REG_H; y++) for (int x = 0; x < REG_W; x++) pat[y][x] = 0;
    case (kind)
      0: for (int b = 0; b < 6; b++) begin       // box outlines
           automatic int bx = $urandom_range(2, REG_W - 30), by = $urandom_range(2, REG_H - 25);
           automatic int bw = $urandom_range(10, 25),        bh = $urandom_range(8, 20);
           for (int x = bx; x <= bx + bw; x++) begin pat[by][x] = 1; pat[by + bh][x] = 1; end
           for (int y = by; y <= by + bh; y++) begin pat[y][bx] = 1; pat[y][bx + bw] = 1; end
         end
      1: for (int y = 0; y < REG_H; y++) for (int x = 0; x < REG_W; x++) pat[y][x] = ($urandom_range(0, 99) < 4);
      default: for (int y = 0; y < REG_H; y++) for (int x = 0; x < REG_W; x++) pat[y][x] = ($urandom_range(0, 99) < 35);
    endcase
  endtask

  task automatic run_scene(input string name, input int kind, input int d, input int vx, input int vy,
                          input int ev_per_slice);
    int px [$], py [$];
    int gap, rot0, true0, scored0, tdir, step, thr;
    longint t_start, now;
    make_scene(kind);
    for (int y = 0; y < REG_H; y++) for (int x = 0; x < REG_W; x++)
      if (pat[y][x]) begin px.push_back(x); py.push_back(y); end
    slice_duration = 32'(d);
    gap     = d / ev_per_slice - 4;      // the handshake itself takes a few cycles
    rot0    = n_rot; true0 = n_true; scored0 = n_scored;
    tdir    = (-vy + 1) * 3 + (-vx + 1);
    t_start = $time;
    for (int e = 0; e < N_SLICES_RUN * ev_per_slice; e++) begin
      automatic int i = $urandom_range(0, px.size() - 1);
      automatic int x, y;
      now  = ($time - t_start) / 20;                // cycles since the scene started
      step = int'(now / d);                         // one pixel per slice duration
      x = REG_X + px[i] + vx * step;
      y = REG_Y + py[i] + vy * step;
      // the true motion is only scored once the two past slices hold the scene
      send_event(x, y, (step >= 3 && px[i] >= 6 && px[i] < REG_W - 6 && py[i] >= 6 && py[i] < REG_H - 6) ? tdir : -1);
      repeat (gap) @(posedge clk);
    end
    while (exp_q.size() != 0 || state != S_IDLE) @(posedge clk);
    thr = (kind == 0) ? 3 : 2;
    $display("%s: d=%0d cycles, %0d rotations, true motion %0d of %0d", name, d, n_rot - rot0,
             n_true - true0, n_scored - scored0);
    checks++;
    if (n_rot - rot0 < 4) begin failures++; $display("FAIL %s: too few rotations", name); end
    checks++;
    if (n_scored - scored0 == 0 || (n_true - true0) * thr <= (n_scored - scored0)) begin
      failures++;
      $display("FAIL %s: true motion found too rarely", name);
    end
  endtask

  initial begin
    for (int i = 0; i < 3; i++) for (int y = 0; y < 256; y++) mimg[i][y] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_scene("dense texture", 2, 150000, 1, 0, 2500);
    run_scene("sparse points", 1, 500000, 1, 1, 400);
    run_scene("box edges",     0, 2000000, 1, 0, 800);
    $display("flow events %0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
