// tb_eyecod_output_act_buffer: random accumulators are captured and drained
// to an output tensor of 4 rows x 10 pixels x 4 channel tiles. A model of
// the Act GB applies the write requests. Checks requantisation (shift,
// ReLU, saturation), concatenation along channel tiles, rowstep placement,
// the downsampling drop of odd outputs, clipping at the tensor edge, and
// the drain time of (groups) x (1 or 2) cycles.
//
// Writing the results in 16-channel tiles in the background follows the
// published design; requantisation, the drain timing and the downsampling
// and concatenation mechanisms checked here are this design's own choices.
module tb_eyecod_output_act_buffer;
  import eyecod_pkg::*;
  localparam int H = 4, W = 10, CT = 4;
  logic clk = 0, rst_n = 0, cap = 0;
  logic signed [ACC_W-1:0] acc [N_LANES][N_MACS];
  logic [4:0] shift = 0;
  logic relu = 0;
  coord_t st_h = 0, st_w = 0;
  ctile_t st_ct = 0;
  logic [2:0] st_gfirst = 0, st_gcnt = 0;
  logic st_ds = 0, st_rowstep = 0;
  dims_t st_dims;
  logic busy;
  gb_req_t gb_req;
  int checks = 0, failures = 0;
  logic [7:0] gb [CT][H][W][16];
  logic [7:0] exp_t [CT][H][W][16];

  eyecod_output_act_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Act GB model
  always @(posedge clk)
    if (gb_req.en && gb_req.we)
      for (int b = 0; b < 4; b++) begin
        int p, h;
        p = int'(gb_req.p0) + ((b - int'(gb_req.p0)) & 3);
        h = int'(gb_req.h);
        if (h >= 0 && h < H && p >= 0 && p < W && int'(gb_req.ct) < CT)
          for (int c = 0; c < 16; c++) gb[gb_req.ct[1:0]][h][p][c] = gb_req.wdata[b][c*8 +: 8];
      end

  function automatic logic [7:0] rq(longint a, int sh, logic rl);
    longint y;
    y = a >>> sh;
    if (rl && y < 0) y = 0;
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return 8'(y);
  endfunction

  task automatic store(int h, int w, int ct, int gf, int gc, logic ds, logic rs, int sh, logic rl);
    int cyc;
    for (int l = 0; l < N_LANES; l++)
      for (int j = 0; j < N_MACS; j++)
        acc[l][j] = ACC_W'($signed($urandom_range(0, 8000)) - 4000);
    acc[5][1] = 24'sd900000; acc[6][2] = -24'sd900000;   // saturation
    for (int n = 0; n <= gc; n++)
      for (int c = 0; c < 16; c++)
        for (int j = 0; j < (ds ? 4 : 8); j++) begin
          int hh, pp, tt, src;
          hh = rs ? h + n : h;
          tt = rs ? ct : ct + n;
          pp = w + j;
          src = ds ? 2 * j : j;
          if (hh >= 0 && hh < H && pp >= 0 && pp < W && tt < CT)
            exp_t[tt][hh][pp][c] = rq(longint'(acc[(gf + n) * 16 + c][src]), sh, rl);
        end
    @(negedge clk);
    cap = 1; st_h = coord_t'(h); st_w = coord_t'(w); st_ct = ctile_t'(ct);
    st_gfirst = 3'(gf); st_gcnt = 3'(gc); st_ds = ds; st_rowstep = rs; shift = 5'(sh); relu = rl;
    @(negedge clk);
    cap = 0;
    cyc = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != (gc + 1) * (ds ? 1 : 2)) begin failures++; $display("drain %0d cycles", cyc); end
  endtask

  task automatic compare();
    for (int tt = 0; tt < CT; tt++)
      for (int h = 0; h < H; h++)
        for (int p = 0; p < W; p++)
          for (int c = 0; c < 16; c++) begin
            checks++;
            if (gb[tt][h][p][c] !== exp_t[tt][h][p][c]) begin
              failures++;
              if (failures < 6) $display("ct%0d h%0d p%0d c%0d got %h exp %h", tt, h, p, c,
                                         gb[tt][h][p][c], exp_t[tt][h][p][c]);
            end
          end
  endtask

  initial begin
    st_dims.h = dim_t'(H); st_dims.w = dim_t'(W);
    for (int tt = 0; tt < CT; tt++)
      for (int h = 0; h < H; h++)
        for (int p = 0; p < W; p++)
          for (int c = 0; c < 16; c++) begin gb[tt][h][p][c] = 0; exp_t[tt][h][p][c] = 0; end
    for (int l = 0; l < N_LANES; l++) for (int j = 0; j < N_MACS; j++) acc[l][j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    store(0, 0, 0, 0, 3, 0, 0, 4, 0);  compare();   // 4 tiles concatenated
    store(1, 8, 0, 2, 1, 0, 0, 3, 1);  compare();   // right edge clipped, ReLU
    store(0, 2, 2, 4, 3, 0, 1, 5, 0);  compare();   // rowstep: groups on rows 0..3
    store(3, 4, 1, 7, 0, 1, 0, 2, 0);  compare();   // downsample
    store(-1, -3, 3, 1, 1, 0, 1, 0, 1); compare();  // partly outside
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
