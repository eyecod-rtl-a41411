// tb_eyecod_sram: random writes and reads against a reference array; read
// data appears one cycle after the request and holds while idle.
//
// The memory sizes come from the published configuration; the one-cycle
// read latency and the hold behaviour checked here are this design's own.
module tb_eyecod_sram;
  localparam int DEPTH = 256, WIDTH = 64;
  logic clk = 0, en = 0, we = 0;
  logic [7:0] addr = 0;
  logic [WIDTH-1:0] wdata = 0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  logic valid [DEPTH];
  int checks = 0, failures = 0;

  eyecod_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WIDTH-1:0] last;
    for (int i = 0; i < DEPTH; i++) valid[i] = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(i); wdata = {$urandom, $urandom};
      model[i] = wdata; valid[i] = 1;
    end
    @(negedge clk); en = 1; we = 0; addr = 0;
    @(posedge clk); #1; last = rdata;
    checks++; if (rdata !== model[0]) failures++;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      we = en && ($urandom_range(0, 2) == 0);
      addr = 8'($urandom);
      wdata = {$urandom, $urandom};
      @(posedge clk); #1;
      if (en && we) model[addr] = wdata;
      if (en && !we) begin
        checks++;
        if (rdata !== model[addr]) failures++;
        last = rdata;
      end else if (!en) begin
        checks++;
        if (rdata !== last) failures++;   // output holds
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
