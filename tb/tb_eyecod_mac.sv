// tb_eyecod_mac: random multiply-accumulate sequences against a reference
// sum, including clear, clear-with-enable and hold.
//
// The 8-bit operands follow the published design; the 24-bit accumulator and
// the random stimulus are this design's own choices.
module tb_eyecod_mac;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [7:0] act = 0, weight = 0;
  logic signed [23:0] acc;
  int checks = 0, failures = 0;
  longint ref_acc;

  eyecod_mac dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_acc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      clr    = ($urandom_range(0, 15) == 0);
      en     = ($urandom_range(0, 3) != 0);
      act    = 8'($urandom);
      weight = 8'($urandom);
      if (n % 97 == 0) begin act = -128; weight = -128; en = 1; end
      @(posedge clk);
      if (clr) ref_acc = en ? longint'(act) * longint'(weight) : 0;
      else if (en) ref_acc = ref_acc + longint'(act) * longint'(weight);
      ref_acc = longint'($signed(ref_acc[23:0]));
      #1;
      checks++;
      if (longint'(acc) != ref_acc) begin
        failures++;
        if (failures < 5) $display("mismatch n=%0d acc=%0d ref=%0d", n, acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
