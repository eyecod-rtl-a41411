// tb_eyecod_mac_array: 128 lanes, each with its own row and weights, split
// between task A and task B. Rounds clear one task's accumulators but not
// the other's; lanes_b reports task B's share.
//
// The 128-lane size and the sharing of lanes by the two models follow the
// published design; a single split boundary is this design's own choice.
module tb_eyecod_mac_array;
  import eyecod_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, clr_a = 0, clr_b = 0, step = 0;
  logic [7:0] split = 8'd128;
  row_t rows [N_LANES];
  logic [7:0] weights [N_LANES];
  logic signed [23:0] acc [N_LANES][N_MACS];
  logic [7:0] lanes_b;
  int checks = 0, failures = 0;
  longint ref_acc [N_LANES][N_MACS];

  eyecod_mac_array dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic round(input int k, input logic ca, input logic cb);
    logic [7:0] w [N_LANES][5];
    for (int l = 0; l < N_LANES; l++) begin
      for (int i = 0; i < ROW_LEN; i++) rows[l][i] = 8'($urandom);
      for (int i = 0; i < k; i++) w[l][i] = 8'($urandom);
    end
    for (int l = 0; l < N_LANES; l++) begin
      if ((l < split) ? ca : cb) for (int j = 0; j < N_MACS; j++) ref_acc[l][j] = 0;
      for (int j = 0; j < N_MACS; j++)
        for (int i = 0; i < k; i++)
          ref_acc[l][j] += longint'($signed(rows[l][j+i])) * longint'($signed(w[l][i]));
    end
    @(negedge clk); load = 1; clr_a = ca; clr_b = cb;
    @(negedge clk); load = 0; clr_a = 0; clr_b = 0;
    for (int i = 0; i < k; i++) begin
      step = 1;
      for (int l = 0; l < N_LANES; l++) weights[l] = w[l][i];
      @(negedge clk);
    end
    step = 0;
  endtask

  task automatic check_all();
    for (int l = 0; l < N_LANES; l++)
      for (int j = 0; j < N_MACS; j++) begin
        checks++;
        if (longint'(acc[l][j]) != ref_acc[l][j]) begin
          failures++;
          if (failures < 5) $display("lane %0d mac %0d acc=%0d ref=%0d", l, j, acc[l][j], ref_acc[l][j]);
        end
      end
  endtask

  initial begin
    for (int l = 0; l < N_LANES; l++) begin rows[l] = '0; weights[l] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // all lanes task A
    round(3, 1, 1); check_all();
    checks++; if (lanes_b != 0) failures++;
    // split: lanes 0..95 task A, 96..127 task B
    split = 96;
    #1; checks++; if (lanes_b != 32) failures++;
    round(3, 1, 0); check_all();   // A restarts, B accumulates
    round(5, 0, 1); check_all();   // B restarts, A accumulates
    round(1, 0, 0); check_all();
    split = 16;
    round(3, 1, 1); check_all();
    round(3, 0, 1); check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
