// tb_eyecod_input_act_buffer: a real Act GB holds a 5 x 10 x 16 tensor.
// Loads at several rows and start pixels (with zero padding at the edges)
// and in the two upsampling modes fill In Act G0 and G1 alternately; every
// lane then reads a random one of the 2*16 rows through the crossbar. Also
// checks the 4-cycle load time and the switch sequence 0,1,0,1.
//
// M = 16 rows per group, the Tmp Buffer and the alternation of G0/G1 follow
// the published design; the 4-cycle load time, the 5-bit crossbar select
// and the upsampling modes checked here are this design's own choices.
module tb_eyecod_input_act_buffer;
  import eyecod_pkg::*;
  localparam int H = 5, W = 10;
  logic clk = 0, rst_n = 0;
  logic ld_start = 0, ld_busy, sw_ctl;
  coord_t ld_h = 0, ld_w = 0;
  ctile_t ld_ct = 0;
  ld_mode_e ld_mode = LD_NORMAL;
  dims_t ld_dims;
  gb_req_t gb_req, tb_req, req_mux;
  gb_data_t gb_rdata;
  logic [SEL_W-1:0] sel [N_LANES];
  row_t lane_rows [N_LANES];
  logic tb_own = 1;
  int checks = 0, failures = 0;
  logic [7:0] t [16][H][W];
  logic [7:0] exp_g [2][16][ROW_LEN];

  assign req_mux = tb_own ? tb_req : gb_req;
  eyecod_act_gb u_gb (.clk, .rst_n, .req (req_mux), .rdata (gb_rdata));
  eyecod_input_act_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] val(int c, int h, int w);
    if (h < 0 || h >= H || w < 0 || w >= W) return 0;
    return t[c][h][w];
  endfunction

  task automatic do_load(int h, int w, ld_mode_e m, int grp);
    int cyc;
    for (int c = 0; c < 16; c++)
      for (int i = 0; i < ROW_LEN; i++) begin
        int x;
        x = w + i;
        case (m)
          LD_NORMAL:  exp_g[grp][c][i] = val(c, h, x);
          LD_UP_DUP:  exp_g[grp][c][i] = val(c, h >>> 1, x >>> 1);
          default:    exp_g[grp][c][i] = ((x % 2 != 0) || (h % 2 != 0)) ? 8'h0 : val(c, h >>> 1, x >>> 1);
        endcase
      end
    checks++;
    if (sw_ctl != grp[0]) failures++;
    @(negedge clk);
    ld_start = 1; ld_h = coord_t'(h); ld_w = coord_t'(w); ld_mode = m;
    @(negedge clk);
    ld_start = 0;
    cyc = 0;
    while (ld_busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 4) begin failures++; $display("load took %0d cycles", cyc); end
  endtask

  task automatic check_xbar();
    for (int n = 0; n < 4; n++) begin
      for (int l = 0; l < N_LANES; l++) sel[l] = SEL_W'($urandom);
      #1;
      for (int l = 0; l < N_LANES; l++) begin
        row_t e;
        for (int i = 0; i < ROW_LEN; i++) e[i] = exp_g[sel[l][4]][sel[l][3:0]][i];
        checks++;
        if (lane_rows[l] !== e) begin
          failures++;
          if (failures < 5) $display("lane %0d sel %0d got %h exp %h", l, sel[l], lane_rows[l], e);
        end
      end
    end
  endtask

  initial begin
    int g;
    ld_dims.h = dim_t'(H); ld_dims.w = dim_t'(W);
    for (int l = 0; l < N_LANES; l++) sel[l] = '0;
    for (int c = 0; c < 16; c++)
      for (int h = 0; h < H; h++)
        for (int w = 0; w < W; w++) t[c][h][w] = 8'($urandom_range(1, 255));
    tb_req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // store the tensor: row h, pixels 0..3, 4..7, 8..11
    for (int h = 0; h < H; h++)
      for (int p0 = 0; p0 < W; p0 += 4) begin
        @(negedge clk);
        tb_req = '0; tb_req.en = 1; tb_req.we = 1; tb_req.dims = ld_dims;
        tb_req.h = coord_t'(h); tb_req.p0 = coord_t'(p0);
        for (int b = 0; b < 4; b++)
          for (int c = 0; c < 16; c++) tb_req.wdata[b][c*8 +: 8] = val(c, h, p0 + b);
      end
    @(negedge clk); tb_req = '0; tb_own = 0;
    g = 0;
    do_load(0, -1, LD_NORMAL, g); g ^= 1;
    do_load(1, -2, LD_NORMAL, g); g ^= 1;
    check_xbar();
    do_load(4, 3, LD_NORMAL, g); g ^= 1;
    check_xbar();
    do_load(-1, 0, LD_NORMAL, g); g ^= 1;   // whole row is padding
    check_xbar();
    do_load(3, -1, LD_UP_DUP, g); g ^= 1;
    check_xbar();
    do_load(2, 5, LD_UP_ZERO, g); g ^= 1;
    check_xbar();
    do_load(5, 4, LD_UP_DUP, g); g ^= 1;
    check_xbar();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
