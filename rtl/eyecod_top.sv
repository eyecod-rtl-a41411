// eyecod_top: the EyeCoD accelerator.
//
// Structure: instruction SRAM -> controller; weight GB -> weight buffers
// 0/1 (ping-pong) -> one weight per lane; input Act GB -> input Act buffer
// (Tmp Buffer, In Act G0/G1, index-driven crossbar) -> 128 MAC lanes of
// 8 MACs -> output Act buffer -> output Act GB. Which of Act GB0/GB1 is the
// input and which the output is a configuration bit, so a model runs layer
// after layer with the two GBs exchanging roles; the index SRAM holds the
// crossbar selects of the compute rounds.
//
// Use: with frame_start low and the controller idle, a host loads the
// program, index entries, weights and the input (the sensor measurement or
// a reconstructed image) through the ext_* port, then pulses frame_start.
// The controller runs the program to OP_EOF and pulses frame_done; results
// are read back through ext_* (Act GB reads return the next cycle).
//
// From the paper: the blocks, their connections and sizes (128 lanes x 8
// MACs, Act GB 2 x 512 KB, weight buffers 2 x 64 KB, weight GB 512 KB,
// index SRAM 20 KB, instruction SRAM 4 KB). This design's choices: the
// external access port, the role-exchange of the Act GBs, and all encodings.
module eyecod_top
  import eyecod_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         frame_start,
  output logic         frame_done,
  output logic         running,
  output logic         seg_frame,
  output logic [31:0]  frame_cnt,
  input  logic         ext_en,
  input  logic         ext_we,
  input  ext_sel_e     ext_sel,
  input  logic [15:0]  ext_addr,
  input  logic [127:0] ext_wdata,
  output logic [127:0] ext_rdata,
  output perf_t        perf
);
  // ---------------- controller ----------------
  logic              imem_en, idx_en;
  logic [PC_W-1:0]   imem_addr;
  instr_t            imem_rdata;
  logic [IDX_AW-1:0] idx_addr;
  logic              wb_ld_start, wb_ld_busy, wb_swap, wb_rd_en, wb_active;
  logic [WGB_AW-1:0] wb_ld_addr;
  logic [12:0]       wb_ld_count;
  logic [WBUF_RAW-1:0] wb_rd_row;
  logic              ld_start, ld_busy, sw_ctl;
  coord_t            ld_h, ld_w, st_h, st_w;
  ctile_t            ld_ct, st_ct;
  ld_mode_e          ld_mode;
  logic              lane_load, lane_step, clr_a, clr_b;
  logic              st_cap, st_busy, st_ds, st_rowstep;
  logic [2:0]        st_gfirst, st_gcnt;
  dims_t             in_dims, out_dims;
  logic [4:0]        rq_shift;
  logic              rq_relu, gb_sel;
  logic [7:0]        split;

  eyecod_controller u_ctrl (
    .clk, .rst_n, .frame_start, .frame_done, .running, .seg_frame, .frame_cnt,
    .imem_en, .imem_addr, .imem_rdata, .idx_en, .idx_addr,
    .wb_ld_start, .wb_ld_addr, .wb_ld_count, .wb_ld_busy, .wb_swap, .wb_rd_en, .wb_rd_row,
    .ld_start, .ld_h, .ld_w, .ld_ct, .ld_mode, .ld_busy,
    .lane_load, .lane_step, .clr_a, .clr_b,
    .st_cap, .st_h, .st_w, .st_ct, .st_gfirst, .st_gcnt, .st_ds, .st_rowstep, .st_busy,
    .in_dims, .out_dims, .rq_shift, .rq_relu, .split, .gb_sel,
    .n_rounds(perf.rounds), .n_split_rounds(perf.split_rounds),
    .n_overlap(perf.overlap), .n_stall(perf.stalls)
  );

  // ---------------- instruction SRAM ----------------
  logic ext_instr, ext_index, ext_wgb, ext_act0, ext_act1;
  assign ext_instr = ext_en && ext_sel == EXT_INSTR;
  assign ext_index = ext_en && ext_sel == EXT_INDEX;
  assign ext_wgb   = ext_en && ext_sel == EXT_WGB;
  assign ext_act0  = ext_en && ext_sel == EXT_ACT0;
  assign ext_act1  = ext_en && ext_sel == EXT_ACT1;

  logic [INSTR_W-1:0] imem_q;
  eyecod_sram #(.DEPTH(INSTR_DEPTH), .WIDTH(INSTR_W)) u_imem (
    .clk,
    .en    (ext_instr || imem_en),
    .we    (ext_instr && ext_we),
    .addr  (ext_instr ? ext_addr[PC_W-1:0] : imem_addr),
    .wdata (ext_wdata[INSTR_W-1:0]),
    .rdata (imem_q)
  );
  assign imem_rdata = instr_t'(imem_q);

  // ---------------- index SRAM (5 columns of 128 b) ----------------
  logic [IDX_CHUNKS*WGB_W-1:0] idx_q;
  for (genvar c = 0; c < IDX_CHUNKS; c++) begin : g_idx
    logic wr;
    assign wr = ext_index && ext_we && ext_addr[2:0] == 3'(c);
    eyecod_sram #(.DEPTH(IDX_DEPTH), .WIDTH(WGB_W)) u_col (
      .clk,
      .en    (wr || idx_en),
      .we    (wr),
      .addr  (wr ? ext_addr[IDX_AW+2:3] : idx_addr),
      .wdata (ext_wdata),
      .rdata (idx_q[c*WGB_W +: WGB_W])
    );
  end
  logic [SEL_W-1:0] sel [N_LANES];
  for (genvar l = 0; l < N_LANES; l++) begin : g_sel
    assign sel[l] = idx_q[l*SEL_W +: SEL_W];
  end

  // ---------------- weight GB and weight buffers ----------------
  logic              wgb_en;
  logic [WGB_AW-1:0] wgb_addr;
  logic [WGB_W-1:0]  wgb_rdata;
  eyecod_sram #(.DEPTH(WGB_DEPTH), .WIDTH(WGB_W)) u_wgb (
    .clk,
    .en    (ext_wgb || wgb_en),
    .we    (ext_wgb && ext_we),
    .addr  (ext_wgb ? ext_addr[WGB_AW-1:0] : wgb_addr),
    .wdata (ext_wdata),
    .rdata (wgb_rdata)
  );

  logic [ACT_W-1:0] weights [N_LANES];
  eyecod_weight_buffer u_wbuf (
    .clk, .rst_n,
    .ld_start (wb_ld_start), .ld_addr (wb_ld_addr), .ld_count (wb_ld_count),
    .ld_busy  (wb_ld_busy),
    .wgb_en, .wgb_addr, .wgb_rdata,
    .swap     (wb_swap), .active (wb_active),
    .rd_en    (wb_rd_en), .rd_row (wb_rd_row), .rd_data (weights)
  );

  // ---------------- activation GBs ----------------
  gb_req_t  ld_req, st_req, ext_req, gb0_req, gb1_req;
  gb_data_t gb0_rdata, gb1_rdata, ld_rdata;

  always_comb begin
    ext_req          = '0;
    ext_req.en       = 1'b1;
    ext_req.we       = ext_we;
    ext_req.raw      = 1'b1;
    ext_req.raw_addr = ext_addr[GB_AW+1:2];
    ext_req.raw_bank = ext_addr[1:0];
    for (int b = 0; b < N_BANKS; b++) ext_req.wdata[b] = ext_wdata;
    gb0_req = ext_act0 ? ext_req : (gb_sel ? st_req : ld_req);
    gb1_req = ext_act1 ? ext_req : (gb_sel ? ld_req : st_req);
  end
  assign ld_rdata = gb_sel ? gb1_rdata : gb0_rdata;

  eyecod_act_gb u_gb0 (.clk, .rst_n, .req (gb0_req), .rdata (gb0_rdata));
  eyecod_act_gb u_gb1 (.clk, .rst_n, .req (gb1_req), .rdata (gb1_rdata));

  logic [1:0] ext_bank_q;
  logic       ext_gb1_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ext_bank_q <= '0;
      ext_gb1_q  <= 1'b0;
    end else if (ext_act0 || ext_act1) begin
      ext_bank_q <= ext_addr[1:0];
      ext_gb1_q  <= ext_act1;
    end
  end
  assign ext_rdata = ext_gb1_q ? gb1_rdata[ext_bank_q] : gb0_rdata[ext_bank_q];

  // ---------------- input Act buffer ----------------
  row_t lane_rows [N_LANES];
  eyecod_input_act_buffer u_inbuf (
    .clk, .rst_n,
    .ld_start, .ld_h, .ld_w, .ld_ct, .ld_mode, .ld_dims (in_dims),
    .ld_busy, .sw_ctl,
    .gb_req (ld_req), .gb_rdata (ld_rdata),
    .sel, .lane_rows
  );

  // ---------------- MAC lanes ----------------
  logic signed [ACC_W-1:0] acc [N_LANES][N_MACS];
  logic [$clog2(N_LANES+1)-1:0] lanes_b;
  eyecod_mac_array u_lanes (
    .clk, .rst_n,
    .load (lane_load), .clr_a, .clr_b,
    .split ($clog2(N_LANES+1)'(split)),
    .rows (lane_rows), .step (lane_step), .weights, .acc, .lanes_b
  );

  // ---------------- output Act buffer ----------------
  eyecod_output_act_buffer u_outbuf (
    .clk, .rst_n,
    .cap (st_cap), .acc, .shift (rq_shift), .relu (rq_relu),
    .st_h, .st_w, .st_ct, .st_gfirst, .st_gcnt, .st_ds, .st_rowstep,
    .st_dims (out_dims), .busy (st_busy), .gb_req (st_req)
  );

  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n) ext_en |-> !running);
endmodule
