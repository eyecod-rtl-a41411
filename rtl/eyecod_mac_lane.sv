// eyecod_mac_lane: one MAC lane, eight MACs fed by one input Act FIFO.
//
// The FIFO holds one row of ROW_LEN input activations of a single channel.
// A compute round loads the row in one cycle (load), then for each of the
// K weights of one kernel row (one weight per cycle, step high) every MAC j
// multiplies FIFO entry j by that weight and the FIFO shifts left by one.
// After K steps MAC j holds sum_k w[k] * row[j+k]: eight outputs of a 1-D
// convolution, with each loaded activation used by up to K MACs (row-wise
// intra-channel reuse). Accumulators keep adding over further rounds until
// a load with clr restarts them.
//
// Interface: load/row_in, step/weight, clr (only sampled with load), acc[j].
// Timing: acc reflects a step one cycle later.
// From the paper: 8 MACs per lane, one FIFO holding one input row, weights
// of a row fetched one by one, and the shifting FIFO drawn in its lane
// figure. This design's choice: the 12-entry FIFO (8 + 5 - 1 for kernel rows
// up to 5 wide) with zeros shifted in at the right.
module eyecod_mac_lane
  import eyecod_pkg::*;
#(
  parameter int unsigned NM = N_MACS,
  parameter int unsigned RL = ROW_LEN
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic                    clr,
  input  logic [RL-1:0][ACT_W-1:0] row_in,
  input  logic                    step,
  input  logic signed [ACT_W-1:0] weight,
  output logic signed [ACC_W-1:0] acc [NM]
);
  logic [RL-1:0][ACT_W-1:0] fifo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     fifo <= '0;
    else if (load)  fifo <= row_in;
    else if (step)  fifo <= {ACT_W'(0), fifo[RL-1:1]};
  end

  for (genvar j = 0; j < NM; j++) begin : g_mac
    eyecod_mac u_mac (
      .clk    (clk),
      .rst_n  (rst_n),
      .clr    (load && clr),
      .en     (step),
      .act    ($signed(fifo[j])),
      .weight (weight),
      .acc    (acc[j])
    );
  end

  // A round loads first, then steps; the two never coincide.
  a_load_step: assert property (@(posedge clk) disable iff (!rst_n) !(load && step));
endmodule
