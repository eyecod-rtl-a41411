// tb_eyecod_weight_buffer: a weight GB model (read latency 1) feeds loads
// into the idle buffer while the active one is read row by row. Checks the
// per-lane weights of every row after swaps, that reads of the active
// buffer are not disturbed by a load in progress, and the load time of
// count + 1 cycles.
//
// The ping-pong pair follows the published design; the row format, the load
// rate of one word per cycle and the 64-row size used to keep the run short
// are this design's own choices.
module tb_eyecod_weight_buffer;
  import eyecod_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, ld_start = 0, ld_busy, wgb_en, swap = 0, active, rd_en = 0;
  logic [WGB_AW-1:0] ld_addr = 0, wgb_addr;
  logic [12:0] ld_count = 0;
  logic [WGB_W-1:0] wgb_rdata;
  logic [5:0] rd_row = 0;
  logic [7:0] rd_data [N_LANES];
  int checks = 0, failures = 0;
  logic [WGB_W-1:0] wgb [4096];
  logic [WGB_AW-1:0] base [2];   // GB base of the weights held by buffer 0/1

  eyecod_weight_buffer #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) if (wgb_en) wgb_rdata <= wgb[wgb_addr[11:0]];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] expw(logic [WGB_AW-1:0] b, int row, int lane);
    logic [WGB_W-1:0] word;
    word = wgb[12'(b + WGB_AW'(row * 8 + lane / 16))];
    return word[(lane % 16) * 8 +: 8];
  endfunction

  task automatic read_rows(int n);
    for (int r = 0; r < n; r++) begin
      int rr;
      logic [WGB_AW-1:0] b;
      rr = $urandom_range(0, ROWS - 1);
      b = base[active];
      @(negedge clk); rd_en = 1; rd_row = 6'(rr);
      @(negedge clk); rd_en = 0;
      for (int l = 0; l < N_LANES; l++) begin
        checks++;
        if (rd_data[l] !== expw(b, rr, l)) begin
          failures++;
          if (failures < 5) $display("row %0d lane %0d got %h exp %h", rr, l, rd_data[l], expw(b, rr, l));
        end
      end
    end
  endtask

  task automatic start_load(logic [WGB_AW-1:0] a);
    @(negedge clk); ld_start = 1; ld_addr = a; ld_count = 13'(ROWS * 8);
    base[!active] = a;
    busy_cycles = 0;
    @(negedge clk); ld_start = 0;
  endtask

  int busy_cycles = 0;
  always @(posedge clk) if (ld_busy) busy_cycles++;

  task automatic wait_load();
    while (ld_busy) @(negedge clk);
    checks++;
    if (busy_cycles != ROWS * 8 + 1) begin failures++; $display("load %0d cycles", busy_cycles); end
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) wgb[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    start_load(0);    wait_load();
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    read_rows(20);
    start_load(1000);
    read_rows(30);     // reads of the active buffer during the load
    wait_load();
    read_rows(5);      // still the old weights
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    read_rows(20);
    start_load(2500); wait_load();
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    read_rows(20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
