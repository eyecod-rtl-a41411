// eyecod_mac_array: the 128 MAC lanes and their split between two models.
//
// All lanes load and step together; each lane has its own input row (from
// the input Act buffer's crossbar) and its own weight (one byte of the
// weight buffer row). For the partial time-multiplexing mode the lanes are
// split at lane index `split`: lanes below it belong to task A (gaze
// estimation), lanes from it upward to task B (eye segmentation), and the
// accumulator clear of a round is given per task (clr_a, clr_b), so the two
// models can accumulate over different numbers of rounds side by side.
// split = N_LANES gives every lane to task A (gaze estimation alone).
// lanes_b reports how many lanes task B owns.
//
// Interface: load/clr_a/clr_b/rows, step/weights, split, acc[lane][mac].
// Timing: as eyecod_mac_lane.
// From the paper: 128 lanes, the sharing of the lanes between the two models
// when gaze estimation leaves lanes idle. This design's choice: a single
// contiguous split point.
module eyecod_mac_array
  import eyecod_pkg::*;
#(
  parameter int unsigned NL = N_LANES
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic                    clr_a,
  input  logic                    clr_b,
  input  logic [$clog2(NL+1)-1:0] split,
  input  row_t                    rows    [NL],
  input  logic                    step,
  input  logic [ACT_W-1:0]        weights [NL],
  output logic signed [ACC_W-1:0] acc     [NL][N_MACS],
  output logic [$clog2(NL+1)-1:0] lanes_b
);
  assign lanes_b = (int'(split) >= NL) ? '0 : ($clog2(NL+1))'(NL - split);

  for (genvar l = 0; l < NL; l++) begin : g_lane
    logic clr_l;
    assign clr_l = (l < split) ? clr_a : clr_b;
    eyecod_mac_lane u_lane (
      .clk    (clk),
      .rst_n  (rst_n),
      .load   (load),
      .clr    (clr_l),
      .row_in (rows[l]),
      .step   (step),
      .weight ($signed(weights[l])),
      .acc    (acc[l])
    );
  end
endmodule
