// eyecod_sram: single-port synchronous SRAM, the storage of every on-chip
// memory of the accelerator.
//
// One access per cycle: with en and we high wdata is written at addr; with
// en high and we low the word at addr appears on rdata the next cycle
// (rdata holds otherwise). It stands for a foundry SRAM macro and is written
// as an array so that it simulates and synthesises to a memory cell.
//
// Instances (sizes from the published configuration): Act GB banks
// 8192 x 128 b (4 banks = 512 KB per GB), weight GB 32768 x 128 b (512 KB),
// weight buffer columns 512 x 128 b (8 per 64 KB buffer), index SRAM
// columns 256 x 128 b (5 per 20 KB), instruction SRAM 512 x 64 b (4 KB).
// The word widths are this design's choice.
module eyecod_sram #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
