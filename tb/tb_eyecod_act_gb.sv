// tb_eyecod_act_gb: stores a 6 x 6 x 24 tensor with tensor-mode writes at
// unaligned start pixels and checks (1) through raw reads that it sits at
// bank w mod 4, address (ct*H + h)*ceil(W/4) + w/4, using exactly 24
// addresses, (2) tensor-mode reads at every start pixel including ones
// outside the tensor (zeros), (3) that writes outside the tensor are dropped.
//
// The four banks, 16 channels per address and the 24-address count of the
// 6 x 6 x 24 example follow the published design; the address formula and
// the zero-padding behaviour checked here are this design's own choices.
module tb_eyecod_act_gb;
  import eyecod_pkg::*;
  localparam int H = 6, W = 6, C = 24, CT = 2;
  logic clk = 0, rst_n = 0;
  gb_req_t req;
  gb_data_t rdata;
  int checks = 0, failures = 0;
  logic [7:0] t [CT*16][H][W];   // t[channel][h][w]

  eyecod_act_gb dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] val(int c, int h, int w);
    if (h < 0 || h >= H || w < 0 || w >= W || c >= C) return 0;
    return t[c][h][w];
  endfunction

  initial begin
    req = '0;
    req.dims.h = dim_t'(H); req.dims.w = dim_t'(W);
    for (int c = 0; c < CT*16; c++)
      for (int h = 0; h < H; h++)
        for (int w = 0; w < W; w++) t[c][h][w] = (c < C) ? 8'($urandom) : 8'h0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // clear the first 32 addresses of every bank
    for (int a = 0; a < 32; a++)
      for (int b = 0; b < 4; b++) begin
        @(negedge clk);
        req = '0; req.en = 1; req.we = 1; req.raw = 1; req.raw_addr = 13'(a); req.raw_bank = 2'(b);
      end
    // tensor writes: start pixels -2, 2, 6 (overlapping the edges)
    for (int ct = 0; ct < CT; ct++)
      for (int h = -1; h <= H; h++)
        for (int p0 = -2; p0 < W; p0 += 4) begin
          @(negedge clk);
          req = '0; req.en = 1; req.we = 1; req.dims.h = dim_t'(H); req.dims.w = dim_t'(W);
          req.h = coord_t'(h); req.p0 = coord_t'(p0); req.ct = ctile_t'(ct);
          for (int b = 0; b < 4; b++) begin
            int p;
            p = p0 + ((b - p0) & 3);
            for (int c = 0; c < 16; c++)
              req.wdata[b][c*8 +: 8] = (h >= 0 && h < H && p >= 0 && p < W) ? t[ct*16+c][h][p] : 8'hA5;
          end
        end
    // (1) raw read-back: arrangement and footprint
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      req = '0; req.en = 1; req.raw = 1; req.raw_addr = 13'(a);
      @(posedge clk); #1;
      for (int b = 0; b < 4; b++) begin
        logic [127:0] exp;
        int ct, h, wq, w;
        exp = '0;
        if (a < CT * H * 2) begin
          ct = a / (H * 2); h = (a / 2) % H; wq = a % 2; w = wq * 4 + b;
          for (int c = 0; c < 16; c++) exp[c*8 +: 8] = val(ct*16 + c, h, w);
        end
        checks++;
        if (rdata[b] !== exp) begin
          failures++;
          if (failures < 5) $display("raw a=%0d b=%0d got %h exp %h", a, b, rdata[b], exp);
        end
      end
    end
    // (2) tensor reads at every start pixel
    for (int ct = 0; ct < CT; ct++)
      for (int h = -1; h <= H; h++)
        for (int p0 = -3; p0 <= W; p0++) begin
          @(negedge clk);
          req = '0; req.en = 1; req.dims.h = dim_t'(H); req.dims.w = dim_t'(W);
          req.h = coord_t'(h); req.p0 = coord_t'(p0); req.ct = ctile_t'(ct);
          @(posedge clk); #1;
          for (int b = 0; b < 4; b++) begin
            logic [127:0] exp;
            int p;
            p = p0 + ((b - p0) & 3);
            for (int c = 0; c < 16; c++) exp[c*8 +: 8] = val(ct*16 + c, h, p);
            checks++;
            if (rdata[b] !== exp) begin
              failures++;
              if (failures < 5) $display("rd ct=%0d h=%0d p0=%0d b=%0d got %h exp %h", ct, h, p0, b, rdata[b], exp);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
