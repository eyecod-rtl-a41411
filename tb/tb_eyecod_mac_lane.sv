// tb_eyecod_mac_lane: one lane computes 8 outputs of a 1-D convolution of a
// loaded row with a kernel row of K weights given one per cycle, and keeps
// accumulating across rounds until a load with clear. Checks the values and
// that results are ready one cycle after the K-th step.
//
// Eight MACs per lane and one weight per cycle follow the published design;
// the 12-entry FIFO, the kernel lengths 1..5 and the cycle accounting are
// this design's own choices.
module tb_eyecod_mac_lane;
  import eyecod_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, clr = 0, step = 0;
  row_t row_in = '0;
  logic signed [7:0] weight = 0;
  logic signed [23:0] acc [8];
  int checks = 0, failures = 0;
  longint ref_acc [8];

  eyecod_mac_lane dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, cyc;
    logic signed [7:0] w [5];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 300; r++) begin
      logic do_clr;
      k = $urandom_range(1, 5);
      do_clr = (r % 4 == 0);
      for (int i = 0; i < ROW_LEN; i++) row_in[i] = 8'($urandom);
      for (int i = 0; i < k; i++) w[i] = 8'($urandom);
      if (do_clr) for (int j = 0; j < 8; j++) ref_acc[j] = 0;
      for (int j = 0; j < 8; j++)
        for (int i = 0; i < k; i++)
          ref_acc[j] += longint'($signed(row_in[j+i])) * longint'(w[i]);
      @(negedge clk); load = 1; clr = do_clr;
      @(negedge clk); load = 0; clr = 0;
      cyc = 0;
      for (int i = 0; i < k; i++) begin
        step = 1; weight = w[i];
        @(negedge clk); cyc++;
      end
      step = 0;
      // results are visible right after the last step's clock edge
      checks++;
      if (cyc != k) failures++;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (longint'(acc[j]) != ref_acc[j]) begin
          failures++;
          if (failures < 5) $display("r=%0d j=%0d acc=%0d ref=%0d", r, j, acc[j], ref_acc[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
