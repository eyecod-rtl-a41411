// eyecod_output_act_buffer: collects the lanes' results and writes them to
// the output Act GB in the background.
//
// On cap it copies all N_LANES x 8 accumulators, requantised to 8 bits
// (arithmetic right shift, optional ReLU, saturation), and then drains
// 16-lane groups gfirst .. gfirst+gcnt to the Act GB, one bank write of four
// pixels x 16 channels per cycle. Lane 16*g + c of group g holds channel c
// of its output tile, MAC j its pixel j. Group n of the store (n = g -
// gfirst) goes to
//     channel tile ct + n, row h          (rowstep = 0: concatenation of
//                                          output tiles along channels)
//     channel tile ct,     row h + n      (rowstep = 1: groups that worked on
//                                          successive rows, as in the
//                                          column-wise reuse of depth-wise layers)
// at pixels w .. w+7 in two writes, or, with downsample, only the even MAC
// outputs at pixels w .. w+3 in one write (stride-2 layers drop every other
// output). Pixels outside the output tensor are not written, so edge
// partitions need no special case.
//
// Interface: cap with the store fields, busy; gb_req to the Act GB.
// Timing: busy from the cycle after cap until the last write, which is
// (gcnt+1) * (downsample ? 1 : 2) cycles.
// From the paper: the output Act buffer between lanes and Act GB that hides
// output writes, concatenation along channels in multiples of 16 lanes and
// downsampling by dropping activations. This design's choices: the
// requantisation, the rowstep placement and downsampling on the write side.
module eyecod_output_act_buffer
  import eyecod_pkg::*;
#(
  parameter int unsigned NL = N_LANES,
  localparam int unsigned NG = NL / CH_TILE
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cap,
  input  logic signed [ACC_W-1:0] acc [NL][N_MACS],
  input  logic [4:0]              shift,
  input  logic                    relu,
  input  coord_t                  st_h,
  input  coord_t                  st_w,
  input  ctile_t                  st_ct,
  input  logic [2:0]              st_gfirst,
  input  logic [2:0]              st_gcnt,
  input  logic                    st_ds,
  input  logic                    st_rowstep,
  input  dims_t                   st_dims,
  output logic                    busy,
  output gb_req_t                 gb_req
);
  logic [ACT_W-1:0] obuf [NL][N_MACS];

  coord_t     h_q, w_q;
  ctile_t     ct_q;
  logic [2:0] gfirst_q, gcnt_q, n_q;
  logic       ds_q, rowstep_q, j_q;
  dims_t      dims_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      {h_q, w_q, ct_q, gfirst_q, gcnt_q, n_q, ds_q, rowstep_q, j_q} <= '0;
      dims_q <= '0;
      for (int l = 0; l < NL; l++)
        for (int j = 0; j < N_MACS; j++) obuf[l][j] <= '0;
    end else if (cap) begin
      for (int l = 0; l < NL; l++)
        for (int j = 0; j < N_MACS; j++) obuf[l][j] <= requant(acc[l][j], shift, relu);
      h_q <= st_h;  w_q <= st_w;  ct_q <= st_ct;
      gfirst_q <= st_gfirst;  gcnt_q <= st_gcnt;
      ds_q <= st_ds;  rowstep_q <= st_rowstep;  dims_q <= st_dims;
      n_q <= '0;  j_q <= 1'b0;
      busy <= 1'b1;
    end else if (busy) begin
      if (ds_q || j_q) begin
        j_q <= 1'b0;
        if (n_q == gcnt_q) busy <= 1'b0;
        else               n_q  <= n_q + 1'b1;
      end else begin
        j_q <= 1'b1;
      end
    end
  end

  always_comb begin
    int unsigned g;
    logic [1:0]  pos;
    logic [2:0]  src;
    gb_req      = '0;
    g           = int'(gfirst_q) + int'(n_q);
    gb_req.en   = busy;
    gb_req.we   = 1'b1;
    gb_req.h    = rowstep_q ? h_q + coord_t'(n_q) : h_q;
    gb_req.ct   = rowstep_q ? ct_q : ct_q + ctile_t'(n_q);
    gb_req.p0   = w_q + coord_t'(j_q ? N_BANKS : 0);
    gb_req.dims = dims_q;
    for (int b = 0; b < N_BANKS; b++) begin
      pos = 2'(b) - gb_req.p0[1:0];              // pixel offset served by bank b
      src = ds_q ? {pos, 1'b0} : {j_q, pos};
      for (int c = 0; c < CH_TILE; c++)
        gb_req.wdata[b][c*ACT_W +: ACT_W] = obuf[(g*CH_TILE + c) % NL][src];
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) cap |-> !busy);
  a_group_range: assert property (@(posedge clk) disable iff (!rst_n)
                                  cap |-> (int'(st_gfirst) + int'(st_gcnt) < NG));
endmodule
