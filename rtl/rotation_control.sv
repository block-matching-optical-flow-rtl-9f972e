// rotation_control: slice timer and the t / t-d / t-2d role rotation.
//
// Three slice memories take turns: one collects new events (slice t) and the
// other two hold the past slices t-d and t-2d used for matching.  At intervals
// of the slice duration d the roles rotate: the oldest slice becomes the new
// collecting slice, t becomes t-d and t-d becomes t-2d.  The rotation is done
// when the controller asserts `enable` (the published architecture's Enable
// signal); this block only keeps the role pointers and times the slice.
//
// The slice time base is a cycle counter restarted at every rotation;
// slice_in_time is high while fewer than slice_duration cycles have passed.
// The counter, its width and the run-time duration input are this
// implementation's choices (the paper only says d can be chosen freely, e.g.
// 3, 10 or 40 ms).
//
// Interface: enable is a one-cycle pulse; the role outputs change on the
// following clock edge.  Reset gives t = 0, t-d = 1, t-2d = 2.
module rotation_control
  import of_pkg::*;
#(
  parameter int CNT_W = TIME_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enable,
  input  logic [CNT_W-1:0] slice_duration,
  output logic [1:0]       idx_t,
  output logic [1:0]       idx_td,
  output logic [1:0]       idx_t2d,
  output logic             slice_in_time,
  output logic [CNT_W-1:0] elapsed
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_t   <= 2'd0;
      idx_td  <= 2'd1;
      idx_t2d <= 2'd2;
      elapsed <= '0;
    end else if (enable) begin
      idx_t   <= idx_t2d;
      idx_td  <= idx_t;
      idx_t2d <= idx_td;
      elapsed <= '0;
    end else if (elapsed != '1) begin
      elapsed <= elapsed + 1'b1;
    end
  end

  assign slice_in_time = (elapsed < slice_duration);

  // The three roles always name three different memories.
  a_roles_distinct : assert property (@(posedge clk) disable iff (!rst_n)
    idx_t != idx_td && idx_td != idx_t2d && idx_t != idx_t2d && idx_t < 3 && idx_td < 3 && idx_t2d < 3);

endmodule
