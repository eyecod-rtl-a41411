// eyecod_controller: instruction sequencer of the accelerator.
//
// After frame_start the controller runs the program in the instruction
// SRAM from address 0 until OP_EOF. It issues at most one instruction per
// cycle and starts four engines that then run on their own:
//   weight load  (OP_LDW  -> weight buffer, background)
//   act load     (OP_LDA  -> input Act buffer, background)
//   compute      (OP_COMP -> MAC lanes, K+1 cycles: load rows, K steps)
//   store        (OP_STORE-> output Act buffer, background)
// An instruction waits (stalls) only for the engine it needs, and OP_COMP
// also for a running act load, so the sequential fetch of the next round's
// rows overlaps the current round (the parallelism of memory access and
// processing). A compute round reads index entry idx (the crossbar select
// of every lane) and weight rows imm .. imm+K-1 of the active weight buffer.
//
// Orchestration: register SPLIT divides the lanes between task A (gaze
// estimation, lanes below SPLIT) and task B (segmentation); OP_COMP clears
// each task's accumulators separately. A frame counter modulo SEG_PERIOD
// marks the frames that run segmentation; OP_BNSEG skips the segmentation
// part of the program on the other frames. Together these give the partial
// time-multiplexing mode: the program gives all lanes to gaze estimation
// in its generic and point-wise layers (SPLIT = 128) and hands the lanes it
// leaves idle in depth-wise layers to segmentation on segmentation frames.
//
// Interface: frame_start/frame_done, imem and index SRAM read ports, engine
// start/busy signals, configuration outputs, event counters.
// Timing: an instruction whose engine is free issues in the cycle it is
// presented; frame_done pulses one cycle after the last engine goes idle.
// From the paper: the controller reads instructions from the instruction
// SRAM, the segmentation period of 50 frames, the two-model lane sharing.
// This design's choices: the whole instruction set, the hazard rules and
// the counters.
module eyecod_controller
  import eyecod_pkg::*;
#(
  parameter int unsigned PERIOD = SEG_PERIOD
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              frame_start,
  output logic              frame_done,
  output logic              running,
  output logic              seg_frame,
  output logic [31:0]       frame_cnt,
  // instruction SRAM
  output logic              imem_en,
  output logic [PC_W-1:0]   imem_addr,
  input  instr_t            imem_rdata,
  // index SRAM
  output logic              idx_en,
  output logic [IDX_AW-1:0] idx_addr,
  // weight buffer
  output logic              wb_ld_start,
  output logic [WGB_AW-1:0] wb_ld_addr,
  output logic [12:0]       wb_ld_count,
  input  logic              wb_ld_busy,
  output logic              wb_swap,
  output logic              wb_rd_en,
  output logic [WBUF_RAW-1:0] wb_rd_row,
  // input Act buffer
  output logic              ld_start,
  output coord_t            ld_h,
  output coord_t            ld_w,
  output ctile_t            ld_ct,
  output ld_mode_e          ld_mode,
  input  logic              ld_busy,
  // MAC lanes
  output logic              lane_load,
  output logic              lane_step,
  output logic              clr_a,
  output logic              clr_b,
  // output Act buffer
  output logic              st_cap,
  output coord_t            st_h,
  output coord_t            st_w,
  output ctile_t            st_ct,
  output logic [2:0]        st_gfirst,
  output logic [2:0]        st_gcnt,
  output logic              st_ds,
  output logic              st_rowstep,
  input  logic              st_busy,
  // configuration registers
  output dims_t             in_dims,
  output dims_t             out_dims,
  output logic [4:0]        rq_shift,
  output logic              rq_relu,
  output logic [7:0]        split,
  output logic              gb_sel,
  // event counters
  output logic [31:0]       n_rounds,
  output logic [31:0]       n_split_rounds,
  output logic [31:0]       n_overlap,
  output logic [31:0]       n_stall
);
  typedef enum logic {C_IDLE, C_RUN} cstate_e;
  cstate_e state;

  logic [PC_W-1:0] pc;
  logic            ir_v;
  instr_t          ir;
  logic            issue, can_issue;
  logic [PC_W-1:0] npc;
  logic [$clog2(PERIOD)-1:0] phase;

  // compute engine
  logic       eng_busy, eng_loading;
  logic [2:0] eng_k, eng_cnt;
  logic [WBUF_RAW-1:0] eng_row;

  assign ir        = imem_rdata;
  assign seg_frame = (phase == 0);

  logic all_idle;
  assign all_idle = !eng_busy && !ld_busy && !wb_ld_busy && !st_busy;

  always_comb begin
    can_issue = 1'b0;
    npc       = pc + 1'b1;
    if (state == C_RUN && ir_v) begin
      unique case (ir.op)
        OP_LDW:   can_issue = !wb_ld_busy;
        OP_WSWAP: can_issue = !wb_ld_busy && !eng_busy;
        OP_LDA:   can_issue = !ld_busy;
        OP_COMP:  can_issue = !eng_busy && !ld_busy;
        OP_STORE: can_issue = !eng_busy && !st_busy;
        OP_SYNC:  can_issue = all_idle;
        OP_EOF:   can_issue = all_idle;
        OP_BNSEG: begin can_issue = 1'b1; if (!seg_frame) npc = ir.imm[PC_W-1:0]; end
        OP_JMP:   begin can_issue = 1'b1; npc = ir.imm[PC_W-1:0]; end
        default:  can_issue = 1'b1;
      endcase
    end
  end
  assign issue = can_issue;

  // fetch: present the next pc when issuing, else hold the current one
  assign imem_en   = 1'b1;
  assign imem_addr = issue ? npc : pc;

  // engine start strobes
  always_comb begin
    wb_ld_start = issue && ir.op == OP_LDW;
    wb_ld_addr  = ldw_addr(ir);
    wb_ld_count = ldw_count(ir);
    wb_swap     = issue && ir.op == OP_WSWAP;
    ld_start    = issue && ir.op == OP_LDA;
    ld_h        = ir.h;
    ld_w        = ir.w;
    ld_ct       = ir.ct;
    ld_mode     = ld_mode_e'(ir.mode);
    st_cap      = issue && ir.op == OP_STORE;
    st_h        = ir.h;
    st_w        = ir.w;
    st_ct       = ir.ct;
    st_gfirst   = ir.gfirst;
    st_gcnt     = ir.gcnt;
    st_ds       = ir.mode[0];
    st_rowstep  = ir.mode[1];
    idx_en      = issue && ir.op == OP_COMP;
    idx_addr    = ir.idx;
  end

  // compute engine: cycle 0 loads the lane FIFOs, cycles 1..K step
  logic comp_go;
  assign comp_go    = issue && ir.op == OP_COMP;
  assign lane_load  = eng_loading;
  assign lane_step  = eng_busy && !eng_loading;
  assign wb_rd_en   = eng_busy && (eng_loading || eng_cnt < eng_k - 1);
  assign wb_rd_row  = eng_row;

  logic clr_a_q, clr_b_q;
  assign clr_a = clr_a_q;
  assign clr_b = clr_b_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eng_busy <= 1'b0; eng_loading <= 1'b0; eng_k <= '0; eng_cnt <= '0;
      eng_row <= '0; clr_a_q <= 1'b0; clr_b_q <= 1'b0;
    end else if (comp_go) begin
      eng_busy    <= 1'b1;
      eng_loading <= 1'b1;
      eng_k       <= (ir.k == 0) ? 3'd1 : ir.k;
      eng_cnt     <= '0;
      eng_row     <= ir.imm[WBUF_RAW-1:0];
      clr_a_q     <= ir.clr_a;
      clr_b_q     <= ir.clr_b;
    end else if (eng_busy) begin
      if (eng_loading) begin
        eng_loading <= 1'b0;
        eng_row     <= eng_row + 1'b1;
      end else begin
        eng_row <= eng_row + 1'b1;
        eng_cnt <= eng_cnt + 1'b1;
        if (eng_cnt == eng_k - 1) eng_busy <= 1'b0;
      end
    end
  end

  // sequencing, configuration registers, frame counter, counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; pc <= '0; ir_v <= 1'b0; frame_done <= 1'b0;
      frame_cnt <= '0; phase <= '0;
      in_dims <= '0; out_dims <= '0; rq_shift <= '0; rq_relu <= 1'b0;
      split <= 8'(N_LANES); gb_sel <= 1'b0;
      n_rounds <= '0; n_split_rounds <= '0; n_overlap <= '0; n_stall <= '0;
    end else begin
      frame_done <= 1'b0;
      unique case (state)
        C_IDLE: begin
          ir_v <= 1'b0;
          if (frame_start) begin
            pc    <= '0;
            state <= C_RUN;
          end
        end
        C_RUN: begin
          ir_v <= 1'b1;
          if (ir_v && !issue) n_stall <= n_stall + 1;
          if (issue) begin
            pc <= npc;
            if (ir.op == OP_CFG) begin
              unique case (cfg_sel(ir))
                CFG_IN_DIMS:  in_dims  <= cfg_val(ir)[2*DIM_W-1:0];
                CFG_OUT_DIMS: out_dims <= cfg_val(ir)[2*DIM_W-1:0];
                CFG_REQUANT:  {rq_relu, rq_shift} <= cfg_val(ir)[5:0];
                CFG_SPLIT:    split  <= cfg_val(ir)[7:0];
                CFG_GBSEL:    gb_sel <= cfg_val(ir)[0];
                default: ;
              endcase
            end
            if (ir.op == OP_COMP) begin
              n_rounds <= n_rounds + 1;
              if (split < 8'(N_LANES)) n_split_rounds <= n_split_rounds + 1;
            end
            if (ir.op == OP_EOF) begin
              frame_done <= 1'b1;
              frame_cnt  <= frame_cnt + 1;
              phase      <= (phase == $clog2(PERIOD)'(PERIOD - 1)) ? '0 : phase + 1'b1;
              ir_v       <= 1'b0;
              state      <= C_IDLE;
            end
          end
        end
        default: state <= C_IDLE;
      endcase
      if (eng_busy && ld_busy) n_overlap <= n_overlap + 1;
    end
  end

  assign running = (state == C_RUN);

  a_no_start_while_running: assert property (@(posedge clk) disable iff (!rst_n)
                                             frame_start |-> state == C_IDLE);
  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
                              comp_go |-> ir.k <= 3'(KMAX));
endmodule
