// of_top: event-driven block-matching optical flow for a 240x180 DVS.
//
// The published system: a controller (of_fsm, with its receive side, the
// block-matching datapath and its send side), three slice memories and the
// rotation control logic, all on one clock.  Address events arrive from a
// sequencer on an active-low request/acknowledge bus; every accepted event
// is written into the collecting slice t and produces one flow event, coded
// as one of 9 directions, on a second handshake bus towards a monitor.  Every
// slice_duration cycles (checked after each sent flow event) the oldest slice
// is cleared and the three slices change roles.
//
// The role-to-memory mapping comes from rotation_control; each physical
// memory takes the request of the role it currently plays.  Port widths,
// the event word layouts (of_pkg) and the run-time slice_duration input are
// choices of this implementation.
module of_top
  import of_pkg::*;
#(
  parameter int W         = SENSOR_W,
  parameter int H         = SENSOR_H,
  parameter int BLOCK_DIM = of_pkg::DEF_BLOCK_DIM,
  parameter int SEARCH_R  = of_pkg::DEF_SEARCH_R,
  parameter int HD_W      = $clog2(BLOCK_DIM * BLOCK_DIM + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [TIME_W-1:0] slice_duration,   // d, in clock cycles
  // from the sequencer
  input  logic              in_req_n,
  input  dvs_event_t        in_data,
  output logic              in_ack_n,
  // to the monitor
  output logic              out_req_n,
  output of_event_t         out_data,
  input  logic              out_ack_n,
  // observation
  output of_state_t         state,
  output logic [HD_W-1:0]   min_hd,
  output logic [1:0]        idx_t
);

  slice_req_t   t_req, td_req, t2d_req;
  slice_req_t   ram_req  [N_SLICES];
  logic [W-1:0] ram_dout [N_SLICES];
  logic [W-1:0] td_dout, t2d_dout;
  logic [1:0]   idx_td, idx_t2d;
  logic         rot_enable, slice_in_time;
  logic [TIME_W-1:0] elapsed;

  of_fsm #(
    .W(W), .H(H), .BLOCK_DIM(BLOCK_DIM), .SEARCH_R(SEARCH_R), .HD_W(HD_W)
  ) u_fsm (
    .clk           (clk),
    .rst_n         (rst_n),
    .in_req_n      (in_req_n),
    .in_data       (in_data),
    .in_ack_n      (in_ack_n),
    .out_req_n     (out_req_n),
    .out_data      (out_data),
    .out_ack_n     (out_ack_n),
    .t_req         (t_req),
    .td_req        (td_req),
    .t2d_req       (t2d_req),
    .td_dout       (td_dout),
    .t2d_dout      (t2d_dout),
    .rot_enable    (rot_enable),
    .slice_in_time (slice_in_time),
    .state         (state),
    .min_hd        (min_hd)
  );

  rotation_control #(.CNT_W(TIME_W)) u_rot (
    .clk            (clk),
    .rst_n          (rst_n),
    .enable         (rot_enable),
    .slice_duration (slice_duration),
    .idx_t          (idx_t),
    .idx_td         (idx_td),
    .idx_t2d        (idx_t2d),
    .slice_in_time  (slice_in_time),
    .elapsed        (elapsed)
  );

  for (genvar p = 0; p < N_SLICES; p++) begin : g_slice
    always_comb begin
      if (32'(idx_t) == p)       ram_req[p] = t_req;
      else if (32'(idx_td) == p) ram_req[p] = td_req;
      else                       ram_req[p] = t2d_req;
    end

    slice_ram #(.W(W), .H(H)) u_ram (
      .clk  (clk),
      .req  (ram_req[p]),
      .dout (ram_dout[p])
    );
  end

  assign td_dout  = ram_dout[idx_td];
  assign t2d_dout = ram_dout[idx_t2d];

endmodule
