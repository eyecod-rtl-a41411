// eyecod_act_gb: one activation global buffer (Act GB0 or Act GB1).
//
// Storage arrangement: four banks in parallel; each bank address holds one
// tile of 16 channels of one pixel. A tensor of height H, width W and C
// channels is stored tile by tile, row by row, with four consecutive pixels
// of a row spread over the four banks at one address:
//     bank    = w mod 4
//     address = (ct * H + h) * ceil(W/4) + floor(w/4)
// so a 6 x 6 x 24 tensor takes 2 tiles x 6 rows x 2 = 24 addresses.
// A tensor-mode request names a row h, channel tile ct and a start pixel
// p0; bank b then serves the one pixel of p0..p0+3 that lies in it, so any
// four consecutive pixels are read or written in one cycle whatever p0 is.
// Pixels outside the tensor (h or w out of range) read as zero and are not
// written, which gives the zero padding of convolutions and lets partitions
// of a tensor be addressed by plain row and pixel offsets. Reshaping
// operations are then choices of (h, p0, ct): partition by offsets,
// concatenation by channel-tile offsets, downsampling and upsampling by
// pixel arithmetic in the buffers that issue the requests.
// Raw mode gives external access by bank and word address.
//
// Interface: req (gb_req_t), rdata (4 banks x 16 channels x 8 b).
// Timing: rdata valid the cycle after a read request.
// From the paper: four banks, 16 channels per address, the 6x6x24 example
// of 24 addresses, 512 KB. This design's choice: the row-major order of the
// addresses (the paper's figure prints addr0..addr3 but not the order of
// the rows behind them) and the zero reads outside the tensor.
module eyecod_act_gb
  import eyecod_pkg::*;
#(
  parameter int unsigned DEPTH = GB_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  gb_req_t  req,
  output gb_data_t rdata
);
  logic [N_BANKS-1:0]          b_en, b_we, b_ok, b_ok_q;
  logic [N_BANKS-1:0][AW-1:0]  b_addr;
  logic [N_BANKS-1:0][BANK_W-1:0] b_rd;

  always_comb begin
    logic [DIM_W-1:0] wq;
    wq = (req.dims.w + DIM_W'(3)) >> 2;
    for (int b = 0; b < N_BANKS; b++) begin
      coord_t p;
      logic [31:0] a;
      p = req.p0 + coord_t'((b - int'(req.p0[1:0])) & 3);
      a = (32'(req.ct) * 32'(req.dims.h) + 32'(req.h)) * 32'(wq) + 32'(p >>> 2);
      if (req.raw) begin
        b_ok[b]   = 1'b1;
        b_addr[b] = req.raw_addr[AW-1:0];
        b_we[b]   = req.we && (req.raw_bank == 2'(b));
      end else begin
        b_ok[b]   = (req.h >= 0) && (req.h < $signed({1'b0, req.dims.h})) &&
                    (p >= 0) && (p < $signed({1'b0, req.dims.w})) && (a < DEPTH);
        b_addr[b] = a[AW-1:0];
        b_we[b]   = req.we;
      end
      b_en[b] = req.en && b_ok[b];
    end
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    eyecod_sram #(.DEPTH(DEPTH), .WIDTH(BANK_W)) u_bank (
      .clk   (clk),
      .en    (b_en[b]),
      .we    (b_we[b]),
      .addr  (b_addr[b]),
      .wdata (req.wdata[b]),
      .rdata (b_rd[b])
    );
  end

  // A pixel outside the tensor reads as zero.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b_ok_q <= '0;
    else if (req.en && !req.we) b_ok_q <= b_ok;
  end
  for (genvar b = 0; b < N_BANKS; b++) begin : g_rd
    assign rdata[b] = b_ok_q[b] ? b_rd[b] : '0;
  end
endmodule
