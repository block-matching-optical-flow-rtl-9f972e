// of_fsm: the controller of the optical-flow core, with its receive and send
// sides and the block-matching datapath (of_calc).
//
// The state sequence is the published state diagram:
//   IDLE --req=0--> READ -> DATA CHECK --yes--> EXTRACT EVENTS -> READ BLOCKS
//   -> SAD/HD -> GET MINIMUM -> SEND DATA --ack=0--> TIMEOUT CHECK --yes--> IDLE
//   DATA CHECK --no--> IDLE;  TIMEOUT CHECK --no--> RAM ROTATION.
// IDLE waits while req=1 and SEND DATA waits while ack=1, so both handshakes
// are active low, as the diagram's labels show.
//
// What each state does beyond the diagram's names is this implementation's
// reading of the text:
//   READ            latch the event word and pull the input acknowledge low.
//   DATA CHECK      the event's address lies inside the sensor array.
//   EXTRACT EVENTS  set the event's pixel in slice t; start the block reads.
//   READ BLOCKS     one row of t-d and t-2d per cycle (see of_calc).
//   SAD/HD, GET MINIMUM  one cycle each.
//   SEND DATA       flow event on out_data with out_req_n low until ack=0.
//   TIMEOUT CHECK   "yes" = the current slice is still shorter than d.
//   RAM ROTATION    clear every row of the oldest slice (which becomes the new,
//                   empty slice t), pulse rot_enable, then return to IDLE.  The
//                   diagram prints no edge out of this state; returning to
//                   IDLE is an assumption.
// The input acknowledge goes back high once the sender has raised its
// request again (four-phase handshake), and IDLE only accepts a request while
// the acknowledge is high, so one event is never taken twice.
//
// Interface: slice memories are addressed by role (t, t-d, t-2d); the top
// level maps roles onto the three physical memories.  Timing per accepted
// event (defaults): 4 cycles receive/check/write, 11 read cycles, 1 HD,
// 1 minimum, >= 1 send, 1 timeout check: 19 cycles plus the monitor's
// acknowledge delay.
module of_fsm
  import of_pkg::*;
#(
  parameter int W         = SENSOR_W,
  parameter int H         = SENSOR_H,
  parameter int BLOCK_DIM = of_pkg::DEF_BLOCK_DIM,
  parameter int SEARCH_R  = of_pkg::DEF_SEARCH_R,
  parameter int HD_W      = $clog2(BLOCK_DIM * BLOCK_DIM + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // event input from the sequencer (active-low four-phase handshake)
  input  logic            in_req_n,
  input  dvs_event_t      in_data,
  output logic            in_ack_n,
  // flow output to the monitor (active-low handshake)
  output logic            out_req_n,
  output of_event_t       out_data,
  input  logic            out_ack_n,
  // slice memories, by role
  output slice_req_t      t_req,
  output slice_req_t      td_req,
  output slice_req_t      t2d_req,
  input  logic [W-1:0]    td_dout,
  input  logic [W-1:0]    t2d_dout,
  // rotation control
  output logic            rot_enable,
  input  logic            slice_in_time,
  // observation
  output of_state_t       state,
  output logic [HD_W-1:0] min_hd
);

  localparam int N_CAND = (2 * SEARCH_R + 1) * (2 * SEARCH_R + 1);

  of_state_t          state_next;
  dvs_event_t         ev;
  logic [COORD_W-1:0] clr_row;
  logic               addr_ok;
  logic               calc_start, rd_last, hd_en, min_en;
  logic [DIR_W-1:0]   dir;
  slice_req_t         calc_td_req, calc_t2d_req;
  logic [N_CAND-1:0][HD_W-1:0] hd_all;

  assign addr_ok = (32'(ev.x) < W) && (32'(ev.y) < H);

  // ------------------------------------------------------------ next state
  always_comb begin
    state_next = state;
    unique case (state)
      S_IDLE:           if (!in_req_n && in_ack_n) state_next = S_READ;
      S_READ:           state_next = S_DATA_CHECK;
      S_DATA_CHECK:     state_next = addr_ok ? S_EXTRACT_EVENTS : S_IDLE;
      S_EXTRACT_EVENTS: state_next = S_READ_BLOCKS;
      S_READ_BLOCKS:    if (rd_last) state_next = S_SAD_HD;
      S_SAD_HD:         state_next = S_GET_MINIMUM;
      S_GET_MINIMUM:    state_next = S_SEND_DATA;
      S_SEND_DATA:      if (!out_ack_n) state_next = S_TIMEOUT_CHECK;
      S_TIMEOUT_CHECK:  state_next = slice_in_time ? S_IDLE : S_RAM_ROTATION;
      S_RAM_ROTATION:   if (32'(clr_row) == H - 1) state_next = S_IDLE;
      default:          state_next = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= state_next;
  end

  // ------------------------------------------------------ receive side
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev       <= '0;
      in_ack_n <= 1'b1;
    end else begin
      if (state == S_READ) begin
        ev       <= in_data;
        in_ack_n <= 1'b0;
      end else if (!in_ack_n && in_req_n) begin
        in_ack_n <= 1'b1;
      end
    end
  end

  // ------------------------------------------------------ rotation clearing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      clr_row <= '0;
    else if (state == S_RAM_ROTATION) clr_row <= clr_row + 1'b1;
    else                             clr_row <= '0;
  end

  assign rot_enable = (state == S_RAM_ROTATION) && (32'(clr_row) == H - 1);

  // ------------------------------------------------------ datapath control
  assign calc_start = (state == S_EXTRACT_EVENTS);
  assign hd_en      = (state == S_SAD_HD);
  assign min_en     = (state == S_GET_MINIMUM);

  of_calc #(
    .W(W), .H(H), .BLOCK_DIM(BLOCK_DIM), .SEARCH_R(SEARCH_R), .N_CAND(N_CAND), .HD_W(HD_W)
  ) u_calc (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (calc_start),
    .ev_x     (ev.x),
    .ev_y     (ev.y),
    .td_req   (calc_td_req),
    .t2d_req  (calc_t2d_req),
    .td_dout  (td_dout),
    .t2d_dout (t2d_dout),
    .rd_last  (rd_last),
    .hd_en    (hd_en),
    .min_en   (min_en),
    .hd       (hd_all),
    .dir      (dir),
    .min_hd   (min_hd)
  );

  // ------------------------------------------------------ memory requests
  always_comb begin
    t_req   = SLICE_IDLE;
    td_req  = calc_td_req;
    t2d_req = calc_t2d_req;
    if (state == S_EXTRACT_EVENTS) begin
      t_req = '{en: 1'b1, set: 1'b1, clr: 1'b0, row: ev.y, col: ev.x};
    end
    if (state == S_RAM_ROTATION) begin
      // the t-2d memory becomes the new slice t after this state
      t2d_req = '{en: 1'b1, set: 1'b0, clr: 1'b1, row: clr_row, col: '0};
    end
  end

  // ------------------------------------------------------ send side
  assign out_req_n = (state != S_SEND_DATA);
  assign out_data  = '{pol: ev.pol, y: ev.y, x: ev.x, dir: dir};

  // The request, once raised, is held with stable data until acknowledged.
  a_send_hold : assert property (@(posedge clk) disable iff (!rst_n)
    (!out_req_n && out_ack_n) |=> (!out_req_n && $stable(out_data)));
  // Memory reads of the datapath never overlap the rotation clearing.
  a_no_clear_during_read : assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RAM_ROTATION) |-> !calc_t2d_req.en);

endmodule
