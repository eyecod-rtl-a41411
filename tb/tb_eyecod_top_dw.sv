// tb_eyecod_top_dw: a depth-wise 3x3 layer (16 channels, 12 rows x 16
// pixels, zero padding 1) on the whole accelerator, mapped with both
// reuse schemes for depth-wise layers:
//   column-wise reuse: one loaded input row feeds three lanes per channel
//     that hold three different output rows (kernel rows 0, 1, 2), so a
//     block of 3 output rows takes 5 rounds instead of 9;
//   deeper row-wise reuse: the 16-pixel row is cut into two 8-pixel sub-rows
//     loaded into G0 (pixels -1..10) and G1 (pixels 7..18) and mapped to two
//     lane sets, so 96 of the 128 lanes work.
// Lane 16*s + c (s = 0..2) computes channel c, output row y0 + s, pixels
// 0..7; lane 48 + 16*s + c the same for pixels 8..15. The stores use the
// row-step mode: group s goes to row y0 + s. Outputs are compared with a
// reference; the round count (4 blocks x 5 rounds) and the frame's cycle
// count against the rounds' K + 1 cycles are checked.
//
// The layer sizes and the two reuse schemes follow the published design
// (kernel size 3, 8 MACs per lane, two sub-rows on two lanes); the lane
// assignment, the program and the sizes of this test are its own choices.
module tb_eyecod_top_dw;
  import eyecod_pkg::*;
  localparam int H = 12, W = 16, S = 5, NBLK = H / 3;
  logic clk = 0, rst_n = 0, frame_start = 0, frame_done, running, seg_frame;
  logic [31:0] frame_cnt;
  logic ext_en = 0, ext_we = 0;
  ext_sel_e ext_sel = EXT_ACT0;
  logic [15:0] ext_addr = 0;
  logic [127:0] ext_wdata = 0, ext_rdata;
  perf_t perf;
  int checks = 0, failures = 0;

  eyecod_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int X [16][H][W];
  int D [16][3][3];
  int Y [16][H][W];

  function automatic int rq(longint a, int sh, bit relu);
    longint y;
    y = a >>> sh;
    if (relu && y < 0) y = 0;
    if (y > 127) y = 127;
    if (y < -128) y = -128;
    return int'(y);
  endfunction
  function automatic int xv(int c, int h, int w);
    return (h < 0 || h >= H || w < 0 || w >= W) ? 0 : X[c][h][w];
  endfunction

  // ---------------- host port ----------------
  task automatic ext_write(ext_sel_e s, int a, logic [127:0] d);
    @(negedge clk);
    ext_en = 1; ext_we = 1; ext_sel = s; ext_addr = 16'(a); ext_wdata = d;
    @(negedge clk);
    ext_en = 0; ext_we = 0;
  endtask
  task automatic ext_read(ext_sel_e s, int a, output logic [127:0] d);
    @(negedge clk);
    ext_en = 1; ext_we = 0; ext_sel = s; ext_addr = 16'(a);
    @(negedge clk);
    ext_en = 0;
    d = ext_rdata;
  endtask

  // tensor word address of (ct, h, x) for a tensor of height th, width tw
  function automatic int taddr(int ct, int h, int x, int th, int tw);
    return (((ct * th + h) * ((tw + 3) / 4) + x / 4) << 2) | (x % 4);
  endfunction

  task automatic load_x();
    for (int c = 0; c < 16; c++)
      for (int h = 0; h < H; h++)
        for (int w = 0; w < W; w++) X[c][h][w] = $urandom_range(0, 60) - 30;
    for (int h = 0; h < H; h++)
      for (int w = 0; w < W; w++) begin
        logic [127:0] d;
        for (int c = 0; c < 16; c++) d[c*8 +: 8] = 8'(X[c][h][w]);
        ext_write(EXT_ACT0, taddr(0, h, w, H, W), d);
      end
  endtask

  // weight buffer image: rows x 128 lanes, written as 8 words per row
  logic [7:0] wimg [144][N_LANES];
  task automatic put_weights(int base, int nrows);
    for (int r = 0; r < nrows; r++)
      for (int k = 0; k < 8; k++) begin
        logic [127:0] d;
        for (int i = 0; i < 16; i++) d[i*8 +: 8] = wimg[r][k*16 + i];
        ext_write(EXT_WGB, base + r * 8 + k, d);
      end
  endtask

  task automatic put_index(int e, logic [SEL_W-1:0] s [N_LANES]);
    logic [IDX_CHUNKS*128-1:0] v;
    v = '0;
    for (int l = 0; l < N_LANES; l++) v[l*SEL_W +: SEL_W] = s[l];
    for (int k = 0; k < IDX_CHUNKS; k++) ext_write(EXT_INDEX, e * 8 + k, v[k*128 +: 128]);
  endtask

  // ---------------- program ----------------
  instr_t prog [$];
  function automatic instr_t mk(opcode_e op);
    instr_t i;
    i = '0; i.op = op;
    return i;
  endfunction
  task automatic cfg(cfg_reg_e r, int v);
    instr_t i;
    i = mk(OP_CFG); i[59:56] = r; i[31:0] = 32'(v);
    prog.push_back(i);
  endtask
  task automatic ldw(int a, int n);
    instr_t i;
    i = mk(OP_LDW); i[27:13] = 15'(a); i[12:0] = 13'(n);
    prog.push_back(i);
  endtask
  task automatic lda(int h, int w, int ct, ld_mode_e m);
    instr_t i;
    i = mk(OP_LDA); i.h = coord_t'(h); i.w = coord_t'(w); i.ct = ctile_t'(ct); i.mode = m;
    prog.push_back(i);
  endtask
  task automatic comp(int idx, int k, int row, bit clr);
    instr_t i;
    i = mk(OP_COMP); i.idx = 8'(idx); i.k = 3'(k); i.imm = 12'(row); i.clr_a = clr; i.clr_b = clr;
    prog.push_back(i);
  endtask
  task automatic store(int h, int w, int ct, int gf, bit ds);
    instr_t i;
    i = mk(OP_STORE); i.h = coord_t'(h); i.w = coord_t'(w); i.ct = ctile_t'(ct);
    i.gfirst = 3'(gf); i.gcnt = 3'd0; i.mode = {1'b0, ds};
    prog.push_back(i);
  endtask

  task automatic build_program();
    cfg(CFG_IN_DIMS, (H << 9) | W);
    cfg(CFG_OUT_DIMS, (H << 9) | W);
    cfg(CFG_REQUANT, S);
    cfg(CFG_GBSEL, 0);
    cfg(CFG_SPLIT, 128);
    ldw(0, 15 * 8);
    prog.push_back(mk(OP_WSWAP));
    for (int b = 0; b < NBLK; b++)
      for (int r = 0; r < 5; r++) begin
        // input row y0 - 1 + r: sub-row 0 -> G0, sub-row 1 -> G1
        lda(3 * b - 1 + r, -1, 0, LD_NORMAL);
        lda(3 * b - 1 + r, 7, 0, LD_NORMAL);
        comp(0, 3, 3 * r, r == 0);
        if (r == 4) begin
          store(3 * b, 0, 0, 0, 0);
          prog[$].gcnt = 3'd2; prog[$].mode = 2'b10;
          store(3 * b, 8, 0, 3, 0);
          prog[$].gcnt = 3'd2; prog[$].mode = 2'b10;
        end
      end
    prog.push_back(mk(OP_EOF));
  endtask

  initial begin
    logic [SEL_W-1:0] s [N_LANES];
    longint t0, cyc;
    for (int c = 0; c < 16; c++)
      for (int kr = 0; kr < 3; kr++)
        for (int kx = 0; kx < 3; kx++) D[c][kr][kx] = $urandom_range(0, 30) - 15;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weight row 3*r + kx: lane (set, s, c) uses kernel row r - s when it is 0..2
    for (int r = 0; r < 144; r++) for (int l = 0; l < N_LANES; l++) wimg[r][l] = 0;
    for (int r = 0; r < 5; r++)
      for (int kx = 0; kx < 3; kx++)
        for (int st = 0; st < 2; st++)
          for (int sr = 0; sr < 3; sr++)
            for (int c = 0; c < 16; c++)
              if (r - sr >= 0 && r - sr <= 2) wimg[3 * r + kx][48 * st + 16 * sr + c] = 8'(D[c][r - sr][kx]);
    put_weights(0, 15);
    // index entry 0: lane 48*st + 16*s + c reads row c of group st
    for (int l = 0; l < N_LANES; l++) s[l] = SEL_W'(((l >= 48) ? 16 : 0) + l % 16);
    put_index(0, s);
    build_program();
    foreach (prog[i]) ext_write(EXT_INSTR, i, {64'd0, prog[i]});
    load_x();
    for (int c = 0; c < 16; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint a;
          a = 0;
          for (int kr = 0; kr < 3; kr++)
            for (int kx = 0; kx < 3; kx++) a += D[c][kr][kx] * xv(c, y + kr - 1, x + kx - 1);
          Y[c][y][x] = rq(a, S, 0);
        end
    @(negedge clk); frame_start = 1;
    @(negedge clk); frame_start = 0;
    t0 = $time;
    wait (frame_done);
    cyc = ($time - t0) / 10;
    @(negedge clk);
    $display("depth-wise layer: %0d rounds, %0d cycles, %0d stalls", perf.rounds, cyc, perf.stalls);
    checks++; if (perf.rounds != 32'(NBLK * 5)) failures++;
    // each round is K + 1 = 4 cycles of lane work; the rest is the weight
    // load (121 cycles), loads the rounds wait for and the last write-back
    checks++; if (cyc < 121 + NBLK * 5 * 4 || cyc > 121 + NBLK * 5 * 16 + 40) failures++;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        logic [127:0] d;
        ext_read(EXT_ACT1, taddr(0, y, x, H, W), d);
        for (int c = 0; c < 16; c++) begin
          checks++;
          if (int'($signed(d[c*8 +: 8])) != Y[c][y][x]) begin
            failures++;
            if (failures < 10) $display("y%0d x%0d c%0d got %0d exp %0d", y, x, c, $signed(d[c*8 +: 8]), Y[c][y][x]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
