// eyecod_input_act_buffer: the sequential-write-parallel-read input
// activation buffer.
//
// A load (ld_start) fetches M = 16 input activation rows, the rows of the
// 16 channels of one channel tile at image row h, pixels w .. w+ROW_LEN-1,
// from the input Act GB into the Tmp Buffer, four pixels per cycle
// (ceil(ROW_LEN/4) = 3 reads). When the last read returns, the Switch
// Control steers the assembled rows into In Act G0 or In Act G1,
// alternately (G0 first after reset), and the load is done. The lanes see
// both groups at once: a crossbar gives lane l the row named by its index
// entry sel[l] (bit 4: group, bits 3:0: row), so all 2*M rows reach the
// 128 lanes in parallel while the next load proceeds in the background.
// One loaded row can go to many lanes (input reuse across filters and the
// column-wise intra-channel reuse of depth-wise layers) and two sub-rows of
// one image row to two lanes (the deeper row-wise reuse).
//
// Upsampling is applied while reading: LD_UP_DUP maps output pixel x to
// source pixel floor(x/2) and output row y to floor(y/2); LD_UP_ZERO reads
// the same source but returns zero at odd x or odd y.
//
// Interface: ld_start with ld_h/ld_w/ld_ct/ld_mode/ld_dims, ld_busy; gb_req
// and gb_rdata to the Act GB; sel[] in, lane_rows[] out (combinational).
// Timing: ld_busy is high for 4 cycles after ld_start; the new group is
// visible on lane_rows from the cycle ld_busy falls.
// From the paper: Tmp Buffer, MUX with Switch Control, In Act G0/G1,
// crossbar to 128 lanes, M = 16, the alternating 0,1,0,1 switch sequence of
// its timing example. This design's choices: a row is the 16 channels of a
// channel tile, the 5-bit index per lane, and upsampling on the read side.
module eyecod_input_act_buffer
  import eyecod_pkg::*;
#(
  parameter int unsigned NL = N_LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_start,
  input  coord_t            ld_h,
  input  coord_t            ld_w,
  input  ctile_t            ld_ct,
  input  ld_mode_e          ld_mode,
  input  dims_t             ld_dims,
  output logic              ld_busy,
  output logic              sw_ctl,
  output gb_req_t           gb_req,
  input  gb_data_t          gb_rdata,
  input  logic [SEL_W-1:0]  sel       [NL],
  output row_t              lane_rows [NL]
);
  localparam int unsigned NCHUNK = (ROW_LEN + N_BANKS - 1) / N_BANKS;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_LAST} state_e;
  state_e state;

  coord_t   h_q, w_q;
  ctile_t   ct_q;
  ld_mode_e mode_q;
  dims_t    dims_q;
  logic [$clog2(NCHUNK+1)-1:0] rd_j;    // chunk being requested
  logic [$clog2(NCHUNK+1)-1:0] cap_j;   // chunk arriving
  logic     cap_v;

  row_t tmp   [M_ROWS];
  row_t grp0  [M_ROWS];
  row_t grp1  [M_ROWS];

  assign ld_busy = (state != S_IDLE);

  // Source pixel of output element x of the loaded row.
  function automatic coord_t src_pix(coord_t x, ld_mode_e m);
    return (m == LD_NORMAL) ? x : (x >>> 1);
  endfunction

  // ---- request side ----
  always_comb begin
    coord_t x0;
    gb_req       = '0;
    x0           = w_q + coord_t'(N_BANKS * rd_j);
    gb_req.en    = (state == S_READ);
    gb_req.we    = 1'b0;
    gb_req.h     = (mode_q == LD_NORMAL) ? h_q : (h_q >>> 1);
    gb_req.p0    = src_pix(x0, mode_q);
    gb_req.ct    = ct_q;
    gb_req.dims  = dims_q;
  end

  // ---- assemble one chunk of four elements from the bank outputs ----
  row_t tmp_next [M_ROWS];
  always_comb begin
    for (int r = 0; r < M_ROWS; r++) tmp_next[r] = tmp[r];
    for (int t = 0; t < N_BANKS; t++) begin
      int unsigned i;
      coord_t      x, s;
      logic        zero;
      i    = N_BANKS * int'(cap_j) + t;
      x    = w_q + coord_t'(i);
      s    = src_pix(x, mode_q);
      zero = (mode_q == LD_UP_ZERO) && (x[0] || h_q[0]);
      if (cap_v && i < ROW_LEN) begin
        for (int r = 0; r < M_ROWS; r++)
          tmp_next[r][i] = zero ? '0 : gb_rdata[s[1:0]][r*ACT_W +: ACT_W];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      rd_j   <= '0;
      cap_j  <= '0;
      cap_v  <= 1'b0;
      sw_ctl <= 1'b0;
      h_q    <= '0;
      w_q    <= '0;
      ct_q   <= '0;
      mode_q <= LD_NORMAL;
      dims_q <= '0;
      for (int r = 0; r < M_ROWS; r++) begin
        tmp[r]  <= '0;
        grp0[r] <= '0;
        grp1[r] <= '0;
      end
    end else begin
      cap_v <= (state == S_READ);
      cap_j <= rd_j;
      for (int r = 0; r < M_ROWS; r++) tmp[r] <= tmp_next[r];
      unique case (state)
        S_IDLE: if (ld_start) begin
          h_q    <= ld_h;
          w_q    <= ld_w;
          ct_q   <= ld_ct;
          mode_q <= ld_mode;
          dims_q <= ld_dims;
          rd_j   <= '0;
          state  <= S_READ;
        end
        S_READ: begin
          rd_j <= rd_j + 1'b1;
          if (int'(rd_j) == NCHUNK - 1) state <= S_LAST;
        end
        S_LAST: begin
          // last chunk arrives now: hand the rows to the group the switch names
          for (int r = 0; r < M_ROWS; r++) begin
            if (!sw_ctl) grp0[r] <= tmp_next[r];
            else         grp1[r] <= tmp_next[r];
          end
          sw_ctl <= ~sw_ctl;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- crossbar: any of the 2*M rows to any lane ----
  for (genvar l = 0; l < NL; l++) begin : g_xbar
    assign lane_rows[l] = sel[l][SEL_W-1] ? grp1[sel[l][SEL_W-2:0]]
                                          : grp0[sel[l][SEL_W-2:0]];
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
                                 ld_start |-> !ld_busy);
endmodule
