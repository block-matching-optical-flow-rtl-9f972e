// slice_ram: one event slice, a W x H binary image in single-port block RAM.
//
// Each word holds one image row (W bits, bit c = column c), so a row of the
// slice is read in one access and a 9-row block in 9 accesses.  The published
// design keeps three such slices (t, t-d, t-2d) in FPGA block RAM of
// 240x180 pixels each and uses single-port RAM; the row-per-word
// organisation and the bit-set / row-clear write modes are this
// implementation's choices.  The contents start at zero (block RAM
// initial value), which is what an empty slice holds.
//
// Interface (one access per cycle, slice_req_t):
//   req.en & req.set  : pixel (row, col) <- 1           (event accumulation)
//   req.en & req.clr  : row <- all zeros                 (slice cleared on rotation)
//   req.en otherwise  : read row; dout valid the next cycle (1-cycle latency)
// dout holds its value when there is no read.
module slice_ram
  import of_pkg::*;
#(
  parameter int W = SENSOR_W,
  parameter int H = SENSOR_H
) (
  input  logic         clk,
  input  slice_req_t   req,
  output logic [W-1:0] dout
);

  logic [W-1:0] mem [H] = '{default: '0};

  always_ff @(posedge clk) begin
    if (req.en && 32'(req.row) < H) begin
      if (req.clr) begin
        mem[req.row] <= '0;
      end else if (req.set) begin
        if (32'(req.col) < W) mem[req.row][req.col] <= 1'b1;
      end else begin
        dout <= mem[req.row];
      end
    end
  end


  // A single port does one thing per cycle.
  a_one_write_mode : assert property (@(posedge clk) req.en |-> !(req.set && req.clr));

endmodule
