// of_calc: block-matching datapath of the optical-flow core.
//
// For an event at (x, y) it reads the reference block (BLOCK_DIM x BLOCK_DIM,
// centred on the event) from slice t-d and the search window
// (BLOCK_DIM+2*SEARCH_R square) from slice t-2d, computes the Hamming distance
// between the reference and each of the (2*SEARCH_R+1)^2 candidate blocks
// centred on the event and its neighbours, and selects the candidate with the
// smallest distance.  With the defaults that is one 9x9 reference, 9
// candidates and 9 hamming_distance circuits feeding one min_finder, as
// published.
//
// How it works.  Both slices are row-per-word single-port memories in
// separate RAMs, so they are read in parallel, one row per cycle, over
// WIN = BLOCK_DIM+2*SEARCH_R cycles (rows y-PAD .. y+PAD, PAD = R+SEARCH_R).
// The t-d rows y-R .. y+R are the same addresses, so one row counter drives
// both.  Each returned row is cut down to the columns of interest (pixels
// outside the sensor read as 0) and shifted into a window register.  The
// distances are computed from the window as it will be after the last row has
// arrived and registered in the SAD/HD cycle; the minimum is registered in the
// Get-Minimum cycle.  The published latency is (block dimension + 2) cycles;
// because the search window is two rows taller than a block, this datapath
// needs (BLOCK_DIM + 2*SEARCH_R) read cycles + 2, i.e. 13 cycles by default.
//
// Interface: `start` (one cycle, with ev_x/ev_y stable until done) begins the
// row reads; rd_last marks the last read cycle; hd_en and min_en, from the
// controller's SAD/HD and Get-Minimum states, load the distance and result
// registers.  dir is coded as in of_pkg::of_event_t.
module of_calc
  import of_pkg::*;
#(
  parameter int W         = SENSOR_W,
  parameter int H         = SENSOR_H,
  parameter int BLOCK_DIM = of_pkg::DEF_BLOCK_DIM,
  parameter int SEARCH_R  = of_pkg::DEF_SEARCH_R,
  parameter int N_CAND    = (2 * SEARCH_R + 1) * (2 * SEARCH_R + 1),
  parameter int HD_W      = $clog2(BLOCK_DIM * BLOCK_DIM + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [COORD_W-1:0]         ev_x,
  input  logic [COORD_W-1:0]         ev_y,
  // slice t-d and t-2d read ports
  output slice_req_t                 td_req,
  output slice_req_t                 t2d_req,
  input  logic [W-1:0]               td_dout,
  input  logic [W-1:0]               t2d_dout,
  // sequencing
  output logic                       rd_last,
  input  logic                       hd_en,
  input  logic                       min_en,
  // results
  output logic [N_CAND-1:0][HD_W-1:0] hd,
  output logic [DIR_W-1:0]           dir,
  output logic [HD_W-1:0]            min_hd
);

  localparam int R     = (BLOCK_DIM - 1) / 2;
  localparam int PAD   = R + SEARCH_R;
  localparam int WIN   = BLOCK_DIM + 2 * SEARCH_R;
  localparam int SIDE  = 2 * SEARCH_R + 1;
  localparam int K_W   = $clog2(WIN + 1);
  localparam int NPIX  = BLOCK_DIM * BLOCK_DIM;
  localparam int IDX_W = (N_CAND > 1) ? $clog2(N_CAND) : 1;

  // ---------------------------------------------------------------- row reads
  logic           reading;
  logic [K_W-1:0] k;
  int             row_addr;
  logic           row_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reading <= 1'b0;
      k       <= '0;
    end else if (start) begin
      reading <= 1'b1;
      k       <= '0;
    end else if (reading) begin
      if (32'(k) == WIN - 1) reading <= 1'b0;
      k <= k + 1'b1;
    end
  end

  assign rd_last  = reading && (32'(k) == WIN - 1);
  assign row_addr = int'(ev_y) - PAD + int'(k);
  assign row_ok   = (row_addr >= 0) && (row_addr < H);

  always_comb begin
    t2d_req     = SLICE_IDLE;
    t2d_req.en  = reading && row_ok;
    t2d_req.row = COORD_W'(row_addr);
    td_req      = t2d_req;
    td_req.en   = reading && row_ok && (32'(k) >= SEARCH_R) && (32'(k) < SEARCH_R + BLOCK_DIM);
  end

  // ------------------------------------------------------------ row capture
  // Read data returns one cycle after the address.
  logic           cap_valid, cap_ok;
  logic [K_W-1:0] cap_k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_valid <= 1'b0;
      cap_ok    <= 1'b0;
      cap_k     <= '0;
    end else begin
      cap_valid <= reading;
      cap_ok    <= reading && row_ok;
      cap_k     <= k;
    end
  end

  // Zero-padded rows; bit j of a padded row is sensor column j-PAD.
  logic [W+2*PAD-1:0]   t2d_pad, td_pad;
  logic [WIN-1:0]       t2d_cut;
  logic [BLOCK_DIM-1:0] td_cut;

  assign t2d_pad = {{PAD{1'b0}}, t2d_dout, {PAD{1'b0}}};
  assign td_pad  = {{PAD{1'b0}}, td_dout,  {PAD{1'b0}}};
  assign t2d_cut = cap_ok ? t2d_pad[32'(ev_x) +: WIN] : '0;                   // columns x-PAD .. x+PAD
  assign td_cut  = cap_ok ? td_pad[32'(ev_x) + SEARCH_R +: BLOCK_DIM] : '0; // columns x-R .. x+R

  // Window registers: win[i][j] = t-2d pixel (y-PAD+i, x-PAD+j),
  //                   blk[i][j] = t-d  pixel (y-R+i,   x-R+j).
  logic [WIN-1:0][WIN-1:0]             win, win_next;
  logic [BLOCK_DIM-1:0][BLOCK_DIM-1:0] blk, blk_next;
  logic                                blk_cap;

  assign blk_cap = cap_valid && (32'(cap_k) >= SEARCH_R) && (32'(cap_k) < SEARCH_R + BLOCK_DIM);

  always_comb begin
    win_next = win;
    blk_next = blk;
    if (cap_valid) begin
      for (int i = 0; i < WIN - 1; i++) win_next[i] = win[i+1];
      win_next[WIN-1] = t2d_cut;
    end
    if (blk_cap) begin
      for (int i = 0; i < BLOCK_DIM - 1; i++) blk_next[i] = blk[i+1];
      blk_next[BLOCK_DIM-1] = td_cut;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win <= '0;
      blk <= '0;
    end else begin
      win <= win_next;
      blk <= blk_next;
    end
  end

  // -------------------------------------------------- distances (SAD/HD stage)
  logic [NPIX-1:0]                    ref_bits;
  logic [N_CAND-1:0][NPIX-1:0]        cand_bits;
  logic [N_CAND-1:0][HD_W-1:0]        hd_comb;

  always_comb begin
    for (int r = 0; r < BLOCK_DIM; r++) begin
      for (int c = 0; c < BLOCK_DIM; c++) begin
        ref_bits[r*BLOCK_DIM + c] = blk_next[r][c];
        for (int dy = 0; dy < SIDE; dy++) begin
          for (int dx = 0; dx < SIDE; dx++) begin
            cand_bits[dy*SIDE + dx][r*BLOCK_DIM + c] = win_next[dy + r][dx + c];
          end
        end
      end
    end
  end

  for (genvar n = 0; n < N_CAND; n++) begin : g_hd
    hamming_distance #(.N(NPIX), .HD_W(HD_W)) u_hd (
      .a  (ref_bits),
      .b  (cand_bits[n]),
      .hd (hd_comb[n])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hd <= '0;
    else if (hd_en) hd <= hd_comb;
  end

  // ---------------------------------------------------- minimum (Get Minimum)
  logic [IDX_W-1:0]                min_idx;
  logic [HD_W-1:0]                 min_val;
  logic [N_CAND-1:0][IDX_W-1:0]    min_cnt;

  min_finder #(.N(N_CAND), .DW(HD_W), .IDX_W(IDX_W), .CNT_W(IDX_W)) u_min (
    .d       (hd),
    .idx     (min_idx),
    .min_val (min_val),
    .cnt     (min_cnt)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir    <= '0;
      min_hd <= '0;
    end else if (min_en) begin
      dir    <= DIR_W'(min_idx);
      min_hd <= min_val;
    end
  end

endmodule
