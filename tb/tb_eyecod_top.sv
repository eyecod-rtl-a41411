// tb_eyecod_top: end-to-end run of the accelerator at its default sizes.
//
// A host model loads a program, index entries, three weight sets and an
// input tensor X (3 rows x 8 pixels x 16 channels) through the external
// port, then runs two frames (frame 0 runs segmentation, frame 1 does not,
// with the default period of 50), loading a new X before each.
//   layer 1 (task A, all 128 lanes): 3x3 convolution, 16 -> 16 channels,
//           zero padding 1, ReLU, written to Act GB1 tile 0
//   shared  (segmentation frames only, lanes split at 16): task A lanes
//           0..15 a 3x3 depth-wise convolution of X -> GB1 tile 1, task B
//           lanes 16..31 a 1x1 convolution 16 -> 16 of X -> GB1 tile 2,
//           side by side in the same rounds
//   layer 3 (GB roles exchanged): 2x upsampling of layer 1's output by
//           duplication on read, 1x1 convolution, stride-2 drop on write,
//           -> GB0 tile 4 (6 rows x 4 pixels)
// All results are read back and compared with a reference computed here.
// Mechanisms counted (each must occur): stall, act load under a compute
// round, weight load under compute, lane split, segmentation frame, skipped
// segmentation, Act GB role exchange, padding reads, upsampled load,
// downsampled store, G0/G1 alternation.
//
// The sizes (128 lanes x 8 MACs, the memory sizes, M = 16, a period of 50
// frames) are the published configuration, used unchanged; the network, the
// program and the external-port protocol are this test's own choices.
module tb_eyecod_top;
  import eyecod_pkg::*;
  localparam int H = 3, W = 8, S1 = 6, S3 = 7;
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

  // ---------------- data ----------------
  int X  [16][H][W];
  int W1 [16][16][3][3];
  int D  [16][3][3];
  int P  [16][16];
  int Q  [16][16];
  int Y1 [16][H][W], Y2 [16][H][W], Y3 [16][H][W], Y4 [16][2*H][4];

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

  task automatic reference(bit seg);
    for (int o = 0; o < 16; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint s;
          s = 0;
          for (int c = 0; c < 16; c++)
            for (int kr = 0; kr < 3; kr++)
              for (int kx = 0; kx < 3; kx++) s += W1[o][c][kr][kx] * xv(c, y + kr - 1, x + kx - 1);
          Y1[o][y][x] = rq(s, S1, 1);
          if (seg) begin
            s = 0;
            for (int kr = 0; kr < 3; kr++)
              for (int kx = 0; kx < 3; kx++) s += D[o][kr][kx] * xv(o, y + kr - 1, x + kx - 1);
            Y2[o][y][x] = rq(s, S1, 1);
            s = 0;
            for (int c = 0; c < 16; c++) s += P[o][c] * X[c][y][x];
            Y3[o][y][x] = rq(s, S1, 1);
          end
        end
    for (int o = 0; o < 16; o++)
      for (int y = 0; y < 2 * H; y++)
        for (int x = 0; x < 4; x++) begin
          longint s;
          s = 0;
          for (int c = 0; c < 16; c++) s += Q[o][c] * Y1[c][y / 2][x];   // up(Y1)[y][2x]
          Y4[o][y][x] = rq(s, S3, 0);
        end
  endtask

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
        for (int w = 0; w < W; w++) X[c][h][w] = $urandom_range(0, 30) - 15;
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

  // Rounds over blocks of (act load, 16 compute rounds); the next block's
  // load is issued right after the first round of the current block.
  int lda_n;   // loads issued so far: group of a load = lda_n % 2
  task automatic conv_rows(int y, int nkr, int k, int idx_base, bit per_group_idx,
                           int wbase, ld_mode_e m, int hofs);
    // caller issues stores
    for (int kr = 0; kr < nkr; kr++) begin
      int g;
      if (kr == 0) begin lda(y + kr + hofs, (k == 3) ? -1 : 0, 0, m); lda_n++; end
      g = (lda_n - 1) % 2;
      for (int c = 0; c < 16; c++) begin
        comp(idx_base + g * 16 + c, k, wbase + (kr * 16 + c) * k, (kr == 0 && c == 0));
        if (c == 0 && kr + 1 < nkr) begin lda(y + kr + 1 + hofs, (k == 3) ? -1 : 0, 0, m); lda_n++; end
      end
    end
  endtask

  int bnseg_at, l3_at;
  task automatic build_program();
    lda_n = 0;
    cfg(CFG_IN_DIMS, (H << 9) | W);
    cfg(CFG_OUT_DIMS, (H << 9) | W);
    cfg(CFG_REQUANT, 32'h20 | S1);
    cfg(CFG_GBSEL, 0);
    cfg(CFG_SPLIT, 128);
    ldw(0, 144 * 8);
    prog.push_back(mk(OP_WSWAP));
    ldw(1152, 144 * 8);                  // next weights load under layer 1
    for (int y = 0; y < H; y++) begin
      conv_rows(y, 3, 3, 0, 1, 0, LD_NORMAL, -1);
      store(y, 0, 0, 0, 0);
    end
    bnseg_at = prog.size();
    prog.push_back(mk(OP_BNSEG));
    prog.push_back(mk(OP_WSWAP));
    cfg(CFG_SPLIT, 16);
    for (int y = 0; y < H; y++) begin
      conv_rows(y, 3, 3, 32, 1, 0, LD_NORMAL, -1);
      store(y, 0, 1, 0, 0);
      store(y, 0, 2, 1, 0);
    end
    cfg(CFG_SPLIT, 128);
    prog.push_back(mk(OP_JMP));
    prog[$].imm = 12'(prog.size() + 1);
    // The skipped section holds an odd number of act loads; the branch
    // target repeats one load so that G0/G1 alternate the same way on both
    // paths (a compiler has to keep this parity).
    l3_at = prog.size();
    prog[bnseg_at].imm = 12'(l3_at);
    lda(0, 0, 0, LD_NORMAL);
    prog.push_back(mk(OP_SYNC));
    ldw(2304, 16 * 8);
    prog.push_back(mk(OP_WSWAP));
    cfg(CFG_GBSEL, 1);
    cfg(CFG_OUT_DIMS, ((2 * H) << 9) | 4);
    cfg(CFG_REQUANT, S3);
    for (int y = 0; y < 2 * H; y++) begin
      conv_rows(y, 1, 1, 0, 1, 0, LD_UP_DUP, 0);
      store(y, 0, 4, 0, 1);
    end
    prog.push_back(mk(OP_EOF));
  endtask

  // ---------------- mechanism monitors ----------------
  int m_wload_under_comp = 0, m_pad = 0, m_up = 0, m_ds = 0, m_swaps_gb = 0, m_sw = 0;
  int m_store_wait = 0;
  logic gb_sel_q = 0, sw_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_wbuf.ld_busy && dut.lane_step) m_wload_under_comp++;
    if (dut.u_inbuf.gb_req.en && dut.u_inbuf.gb_req.p0 < 0) m_pad++;
    if (dut.ld_start && dut.ld_mode == LD_UP_DUP) m_up++;
    if (dut.st_cap && dut.st_ds) m_ds++;
    if (dut.gb_sel != gb_sel_q) m_swaps_gb++;
    if (dut.sw_ctl != sw_q) m_sw++;
    if (dut.u_ctrl.ir_v && dut.u_ctrl.ir.op == OP_STORE && dut.st_busy) m_store_wait++;
    gb_sel_q <= dut.gb_sel;
    sw_q <= dut.sw_ctl;
  end

  task automatic check_tensor(ext_sel_e s, int ct, int th, int tw, string name, bit which4);
    for (int h = 0; h < th; h++)
      for (int x = 0; x < tw; x++) begin
        logic [127:0] d;
        ext_read(s, taddr(ct, h, x, th, tw), d);
        for (int c = 0; c < 16; c++) begin
          int e;
          case (ct)
            0: e = Y1[c][h][x];
            1: e = Y2[c][h][x];
            2: e = Y3[c][h][x];
            default: e = Y4[c][h][x];
          endcase
          checks++;
          if (int'($signed(d[c*8 +: 8])) != e) begin
            failures++;
            if (failures < 10) $display("%s h%0d x%0d c%0d got %0d exp %0d", name, h, x, c, $signed(d[c*8 +: 8]), e);
          end
        end
      end
  endtask

  initial begin
    logic [SEL_W-1:0] s [N_LANES];
    automatic int seg_frames = 0, skip_frames = 0;
    automatic longint t0;
    for (int o = 0; o < 16; o++) begin
      for (int c = 0; c < 16; c++) begin
        for (int kr = 0; kr < 3; kr++)
          for (int kx = 0; kx < 3; kx++) W1[o][c][kr][kx] = $urandom_range(0, 14) - 7;
        P[o][c] = $urandom_range(0, 14) - 7;
        Q[o][c] = $urandom_range(0, 14) - 7;
      end
      for (int kr = 0; kr < 3; kr++)
        for (int kx = 0; kx < 3; kx++) D[o][kr][kx] = $urandom_range(0, 20) - 10;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights, set 0: row (kr*16+c)*3+kx, lane o
    for (int r = 0; r < 144; r++) for (int l = 0; l < N_LANES; l++) wimg[r][l] = 0;
    for (int kr = 0; kr < 3; kr++) for (int c = 0; c < 16; c++) for (int kx = 0; kx < 3; kx++)
      for (int o = 0; o < 16; o++) wimg[(kr*16 + c)*3 + kx][o] = 8'(W1[o][c][kr][kx]);
    put_weights(0, 144);
    // set 1: depth-wise on lanes 0..15 (only in round c == 0), point-wise on
    // lanes 16..31 (only at the centre tap)
    for (int r = 0; r < 144; r++) for (int l = 0; l < N_LANES; l++) wimg[r][l] = 0;
    for (int kr = 0; kr < 3; kr++) for (int kx = 0; kx < 3; kx++)
      for (int o = 0; o < 16; o++) wimg[(kr*16 + 0)*3 + kx][o] = 8'(D[o][kr][kx]);
    for (int c = 0; c < 16; c++) for (int o = 0; o < 16; o++) wimg[(1*16 + c)*3 + 1][16 + o] = 8'(P[o][c]);
    put_weights(1152, 144);
    // set 2: point-wise, row c
    for (int r = 0; r < 144; r++) for (int l = 0; l < N_LANES; l++) wimg[r][l] = 0;
    for (int c = 0; c < 16; c++) for (int o = 0; o < 16; o++) wimg[c][o] = 8'(Q[o][c]);
    put_weights(2304, 16);
    // index: entries 0..31 all lanes take row e; entries 32 + 16g + c:
    // lanes 0..15 row (g, lane), lanes 16..31 row (g, c)
    for (int e = 0; e < 32; e++) begin
      for (int l = 0; l < N_LANES; l++) s[l] = SEL_W'(e);
      put_index(e, s);
    end
    for (int g = 0; g < 2; g++)
      for (int c = 0; c < 16; c++) begin
        for (int l = 0; l < N_LANES; l++) s[l] = SEL_W'(g * 16 + ((l < 16) ? l : c));
        put_index(32 + g * 16 + c, s);
      end
    build_program();
    foreach (prog[i]) ext_write(EXT_INSTR, i, {64'd0, prog[i]});
    $display("program: %0d instructions", prog.size());

    for (int f = 0; f < 2; f++) begin
      int sr0;
      bit seg;
      load_x();
      seg = seg_frame;
      sr0 = perf.split_rounds;
      reference(seg);
      @(negedge clk); frame_start = 1;
      @(negedge clk); frame_start = 0;
      t0 = $time;
      wait (frame_done);
      $display("frame %0d (segmentation %0d): %0d cycles", f, seg, ($time - t0) / 10);
      @(negedge clk);
      if (seg) seg_frames++; else skip_frames++;
      checks++; if (seg != (f == 0)) failures++;                 // period 50
      checks++; if ((perf.split_rounds != sr0) != seg) failures++;
      checks++; if (frame_cnt != 32'(f + 1)) failures++;
      check_tensor(EXT_ACT1, 0, H, W, "Y1", 0);
      check_tensor(EXT_ACT1, 1, H, W, "Y2", 0);   // frame 1 keeps frame 0's values
      check_tensor(EXT_ACT1, 2, H, W, "Y3", 0);
      check_tensor(EXT_ACT0, 4, 2 * H, 4, "Y4", 0);
    end
    $display("stalls=%0d overlap=%0d split_rounds=%0d rounds=%0d wload_under_comp=%0d pad=%0d up=%0d ds=%0d gbswap=%0d g01=%0d store_wait=%0d",
             perf.stalls, perf.overlap, perf.split_rounds, perf.rounds, m_wload_under_comp,
             m_pad, m_up, m_ds, m_swaps_gb, m_sw, m_store_wait);
    checks++; if (perf.stalls == 0) failures++;
    checks++; if (perf.overlap == 0) failures++;
    checks++; if (perf.split_rounds == 0) failures++;
    checks++; if (m_wload_under_comp == 0) failures++;
    checks++; if (m_pad == 0) failures++;
    checks++; if (m_up == 0) failures++;
    checks++; if (m_ds == 0) failures++;
    checks++; if (m_swaps_gb == 0) failures++;
    checks++; if (m_sw < 2) failures++;
    checks++; if (m_store_wait == 0) failures++;
    checks++; if (seg_frames == 0 || skip_frames == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
