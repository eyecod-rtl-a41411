// eyecod_weight_buffer: Weight Buffer 0 and Weight Buffer 1, used as a
// ping-pong pair between the weight GB and the MAC lanes.
//
// One buffer is active: a read of row rd_row returns one weight per lane
// (N_LANES bytes) the next cycle. The other is filled in the background: a
// load copies ld_count 128-bit words from weight GB address ld_addr onward
// into rows 0, 1, ... of the idle buffer, word n going to row n/8, lanes
// 16*(n mod 8) .. 16*(n mod 8)+15. swap exchanges the two roles, so the
// weights of the next layer (or the next weight tile) are in place before
// they are needed and the lanes never wait for a weight load.
// Each buffer is 512 rows x 128 lanes x 8 b = 64 KB, built from 8 column
// SRAMs of 512 x 128 b.
//
// Interface: ld_start/ld_addr/ld_count, ld_busy; wgb_en/wgb_addr/wgb_rdata
// to the weight GB (read latency 1); rd_en/rd_row, rd_data; swap; active.
// Timing: ld_busy for ld_count + 1 cycles after ld_start.
// From the paper: two weight buffers of 64 KB in ping-pong between weight GB
// and MAC lanes. This design's choices: the word and row layout and that
// each lane receives its own weight.
module eyecod_weight_buffer
  import eyecod_pkg::*;
#(
  parameter int unsigned NL    = N_LANES,
  parameter int unsigned ROWS  = WBUF_ROWS,
  localparam int unsigned NCOL = NL * ACT_W / WGB_W,
  localparam int unsigned RAW  = $clog2(ROWS),
  localparam int unsigned CW   = (NCOL > 1) ? $clog2(NCOL) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ld_start,
  input  logic [WGB_AW-1:0] ld_addr,
  input  logic [12:0]       ld_count,
  output logic              ld_busy,
  output logic              wgb_en,
  output logic [WGB_AW-1:0] wgb_addr,
  input  logic [WGB_W-1:0]  wgb_rdata,
  input  logic              swap,
  output logic              active,
  input  logic              rd_en,
  input  logic [RAW-1:0]    rd_row,
  output logic [ACT_W-1:0]  rd_data [NL]
);
  logic [12:0]        rd_n, wr_n, cnt_q;
  logic               rd_go, wr_v;
  logic [WGB_AW-1:0]  base_q;

  // ---- weight GB -> idle buffer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_go <= 1'b0; wr_v <= 1'b0; rd_n <= '0; wr_n <= '0;
      cnt_q <= '0; base_q <= '0; active <= 1'b0;
    end else begin
      if (swap) active <= ~active;
      wr_v <= rd_go;
      wr_n <= rd_n;
      if (ld_start && ld_count != 0) begin
        rd_go  <= 1'b1;
        rd_n   <= '0;
        cnt_q  <= ld_count;
        base_q <= ld_addr;
      end else if (rd_go) begin
        if (rd_n == cnt_q - 1'b1) rd_go <= 1'b0;
        rd_n <= rd_n + 1'b1;
      end
    end
  end

  assign ld_busy  = rd_go || wr_v;
  assign wgb_en   = rd_go;
  assign wgb_addr = base_q + WGB_AW'(rd_n);

  logic [ACT_W*16-1:0] col_rd [2][NCOL];

  for (genvar bf = 0; bf < 2; bf++) begin : g_buf
    for (genvar c = 0; c < NCOL; c++) begin : g_col
      logic           wr_here, rd_here;
      logic [RAW-1:0] a;
      assign wr_here = wr_v && (active != bf[0]) && (wr_n[CW-1:0] == c[CW-1:0] || NCOL == 1);
      assign rd_here = rd_en && (active == bf[0]);
      assign a       = wr_here ? wr_n[RAW+CW-1:CW] : rd_row;
      eyecod_sram #(.DEPTH(ROWS), .WIDTH(WGB_W)) u_col (
        .clk   (clk),
        .en    (wr_here || rd_here),
        .we    (wr_here),
        .addr  (a),
        .wdata (wgb_rdata),
        .rdata (col_rd[bf][c])
      );
    end
  end

  // the buffer that was active when the read was issued answers
  logic act_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     act_q <= 1'b0;
    else if (rd_en) act_q <= active;
  end
  for (genvar l = 0; l < NL; l++) begin : g_out
    assign rd_data[l] = col_rd[act_q][l / 16][(l % 16)*ACT_W +: ACT_W];
  end

  a_swap_idle: assert property (@(posedge clk) disable iff (!rst_n) swap |-> !ld_busy);
  a_ld_idle:   assert property (@(posedge clk) disable iff (!rst_n) ld_start |-> !ld_busy);
endmodule
