// tb_eyecod_controller: runs small programs against engine models (an act
// load busy for 4 cycles, a weight load busy for count + 1 cycles, a store
// busy for 2 cycles). Checks configuration registers, the compute-round
// sequence (one load cycle, then K steps reading weight rows imm..imm+K-1,
// index read at issue), that an act load overlaps a compute round, that a
// compute round stalls for a running act load, that a store waits for the
// round, the segmentation branch taken on frames 0 and PERIOD only, and
// frame_done / frame_cnt.
//
// Reading instructions from the instruction SRAM and segmentation once per
// period of frames follow the published design; the instruction set, the
// hazard rules and the short period of 3 used here are this design's own.
module tb_eyecod_controller;
  import eyecod_pkg::*;
  localparam int PERIOD = 3;
  logic clk = 0, rst_n = 0, frame_start = 0, frame_done, running, seg_frame;
  logic [31:0] frame_cnt;
  logic imem_en, idx_en;
  logic [PC_W-1:0] imem_addr;
  instr_t imem_rdata;
  logic [IDX_AW-1:0] idx_addr;
  logic wb_ld_start, wb_ld_busy, wb_swap, wb_rd_en;
  logic [WGB_AW-1:0] wb_ld_addr;
  logic [12:0] wb_ld_count;
  logic [WBUF_RAW-1:0] wb_rd_row;
  logic ld_start, ld_busy;
  coord_t ld_h, ld_w, st_h, st_w;
  ctile_t ld_ct, st_ct;
  ld_mode_e ld_mode;
  logic lane_load, lane_step, clr_a, clr_b;
  logic st_cap, st_busy, st_ds, st_rowstep;
  logic [2:0] st_gfirst, st_gcnt;
  dims_t in_dims, out_dims;
  logic [4:0] rq_shift;
  logic rq_relu, gb_sel;
  logic [7:0] split;
  logic [31:0] n_rounds, n_split_rounds, n_overlap, n_stall;
  int checks = 0, failures = 0;

  instr_t prog [INSTR_DEPTH];
  always_ff @(posedge clk) if (imem_en) imem_rdata <= prog[imem_addr];

  eyecod_controller #(.PERIOD(PERIOD)) dut (.*);
  always #5 clk = ~clk;

  // engine models
  int ld_cnt = 0, wb_cnt = 0, st_cnt = 0;
  assign ld_busy = ld_cnt > 0;
  assign wb_ld_busy = wb_cnt > 0;
  assign st_busy = st_cnt > 0;
  always_ff @(posedge clk) begin
    ld_cnt <= ld_start ? 4 : (ld_cnt > 0 ? ld_cnt - 1 : 0);
    wb_cnt <= wb_ld_start ? int'(wb_ld_count) + 1 : (wb_cnt > 0 ? wb_cnt - 1 : 0);
    st_cnt <= st_cap ? 2 : (st_cnt > 0 ? st_cnt - 1 : 0);
  end

  // event log
  int cyc = 0;
  int t_load [$], t_lda [$], t_store [$], t_step [$], rows [$], seg_hits = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (lane_load) t_load.push_back(cyc);
    if (lane_step) t_step.push_back(cyc);
    if (ld_start) t_lda.push_back(cyc);
    if (st_cap) begin
      t_store.push_back(cyc);
      checks++;
      if (st_busy || lane_step || lane_load) failures++;   // store after the round
    end
    if (wb_rd_en) rows.push_back(int'(wb_rd_row));
    if (lane_step && ld_start === 1'b0) ;
    if (ld_start && lane_load) ;
    if (lane_load) begin
      checks++;
      if (ld_busy) failures++;   // a round never starts while rows are loading
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t mk(opcode_e op);
    instr_t i;
    i = '0; i.op = op;
    return i;
  endfunction
  function automatic instr_t cfg(cfg_reg_e r, logic [31:0] v);
    instr_t i;
    i = mk(OP_CFG); i[59:56] = r; i[31:0] = v;
    return i;
  endfunction
  function automatic instr_t comp(int idx, int k, int row, logic ca, logic cb);
    instr_t i;
    i = mk(OP_COMP); i.idx = 8'(idx); i.k = 3'(k); i.imm = 12'(row); i.clr_a = ca; i.clr_b = cb;
    return i;
  endfunction

  initial begin
    int pc, seg_part;
    for (int n = 0; n < INSTR_DEPTH; n++) prog[n] = mk(OP_NOP);
    pc = 0;
    prog[pc++] = cfg(CFG_IN_DIMS, {14'd0, 9'd12, 9'd20});
    prog[pc++] = cfg(CFG_OUT_DIMS, {14'd0, 9'd6, 9'd10});
    prog[pc++] = cfg(CFG_REQUANT, 32'h25);
    prog[pc++] = cfg(CFG_GBSEL, 32'h1);
    prog[pc++] = cfg(CFG_SPLIT, 32'd128);
    begin instr_t i; i = mk(OP_LDW); i[27:13] = 15'd100; i[12:0] = 13'd6; prog[pc++] = i; end
    prog[pc++] = mk(OP_WSWAP);                 // waits for the weight load
    begin instr_t i; i = mk(OP_LDA); i.h = 10'sd2; i.w = -10'sd1; i.ct = 7'd3; prog[pc++] = i; end
    prog[pc++] = comp(7, 3, 40, 1, 1);         // stalls for the load
    begin instr_t i; i = mk(OP_LDA); i.h = 10'sd3; prog[pc++] = i; end   // overlaps the round
    prog[pc++] = comp(8, 5, 100, 0, 0);
    begin instr_t i; i = mk(OP_STORE); i.h = 10'sd1; i.gcnt = 3'd2; i.mode = 2'b01; prog[pc++] = i; end
    seg_part = pc + 2;
    begin instr_t i; i = mk(OP_BNSEG); i.imm = 12'(seg_part + 2); prog[pc++] = i; end
    prog[pc++] = mk(OP_NOP);
    prog[pc++] = cfg(CFG_SPLIT, 32'd64);       // segmentation part
    prog[pc++] = comp(9, 1, 7, 0, 1);
    prog[pc++] = mk(OP_EOF);

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2 * PERIOD + 1; f++) begin
      int t0, n0, ns;
      @(negedge clk); frame_start = 1;
      @(negedge clk); frame_start = 0;
      checks++; if (!running) failures++;
      t_load.delete(); t_step.delete(); t_lda.delete(); rows.delete(); t_store.delete();
      n0 = n_split_rounds;
      fork
        begin wait (frame_done); end
        begin repeat (500) @(posedge clk); end
      join_any
      disable fork;
      @(negedge clk);
      checks++; if (frame_cnt != 32'(f + 1)) failures++;
      checks++; if (in_dims.h != 12 || in_dims.w != 20 || out_dims.h != 6 || out_dims.w != 10) failures++;
      checks++; if (rq_shift != 5 || !rq_relu || !gb_sel) failures++;
      // rounds: comp(3) then comp(5) [then comp(1) on segmentation frames]
      ns = ((f % PERIOD) == 0) ? 3 : 2;
      checks++; if (t_load.size() != ns) begin failures++; $display("frame %0d: %0d rounds", f, t_load.size()); end
      checks++; if (t_step.size() != ((ns == 3) ? 9 : 8)) failures++;
      if (t_load.size() >= 2 && t_lda.size() == 2) begin
        // second act load is issued while the first round runs
        checks++; if (!(t_lda[1] >= t_load[0] && t_lda[1] <= t_load[0] + 3)) failures++;
        // second round waits until that load is done (4 cycles)
        checks++; if (t_load[1] < t_lda[1] + 5) failures++;
        // steps follow loads directly
        checks++; if (t_step[0] != t_load[0] + 1 || t_step[2] != t_load[0] + 3) failures++;
      end else begin
        checks++; failures++;
      end
      // weight rows read: 40,41,42 then 100..104 (then 7)
      begin
        int e [$];
        e = '{40, 41, 42, 100, 101, 102, 103, 104};
        if (ns == 3) e.push_back(7);
        checks++;
        if (rows != e) begin failures++; $display("rows %p", rows); end
      end
      checks++; if (t_store.size() != 1) failures++;
      checks++; if ((split == 64) != ((f % PERIOD) == 0)) failures++;
      checks++; if ((n_split_rounds - n0) != (((f % PERIOD) == 0) ? 1 : 0)) failures++;
      if ((f % PERIOD) == 0) seg_hits++;
      // the next frame starts with a full-lane split again
    end
    checks++; if (seg_hits != 3) failures++;
    checks++; if (n_stall == 0 || n_overlap == 0) failures++;
    checks++; if (n_rounds != 32'(2 * (2 * PERIOD + 1) + 3)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
