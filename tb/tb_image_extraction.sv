`timescale 1ns/1ps
// tb_image_extraction: loads a random projector kernel and a random
// 150x100 image (16-bit pixels, row pitch not a multiple of 64 bytes) into
// the memory model with random read stalls, feeds ROIs of atoms inside and
// at the borders of the image, one wholly outside, and lets a data cache
// collect the decoded vectors. Whenever a window is offered to the
// convolution the cache is compared element by element with the kernel and
// the image patch computed here; the hand-off is stalled at random.
module tb_image_extraction;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int W = 150, H = 100, NA = 12;
  localparam logic [31:0] KERN = 32'h0000_0400, IMG = 32'h0000_2002;

  cfg_t cfg;
  logic start, busy, ar_valid, ar_ready, r_valid, r_ready, r_last, roi_valid, roi_ready;
  ar_req_t ar_req;
  logic [AXI_DW-1:0] r_data;
  roi_t roi;
  logic c_clr, c_wr_en, c_wr_sel, c_wr_inside, conv_valid, conv_ready;
  logic [4:0] c_wr_row;
  logic [KSIZE-1:0] c_wr_be;
  elem_t c_wr_data [KSIZE];
  logic [IDX_W-1:0] conv_idx;
  elem_t mat1 [KSIZE][KSIZE], mat2 [KSIZE][KSIZE];
  logic [KSIZE-1:0] in_img [KSIZE];
  logic [1:0] rresp, bresp;
  logic rid, awready, wready, bvalid;

  image_extraction dut (.clk, .rst_n, .start, .cfg, .busy, .ar_valid, .ar_ready, .ar_req,
    .r_valid, .r_ready, .r_data, .r_last, .roi_valid, .roi_ready, .roi,
    .c_clr, .c_wr_en, .c_wr_sel, .c_wr_row, .c_wr_be, .c_wr_data, .c_wr_inside,
    .conv_valid, .conv_ready, .conv_idx);

  data_cache cache (.clk, .rst_n, .clr(c_clr), .wr_en(c_wr_en), .wr_sel(c_wr_sel), .wr_row(c_wr_row),
    .wr_be(c_wr_be), .wr_data(c_wr_data), .wr_inside(c_wr_inside), .mat1, .mat2, .in_img);

  axi_mem_model #(.DEPTH(1024), .RD_LAT(4), .STALL_PCT(20)) mem (
    .clk, .rst_n, .araddr(ar_req.addr), .arlen(ar_req.len), .arid(1'b0), .arvalid(ar_valid), .arready(ar_ready),
    .rdata(r_data), .rid, .rlast(r_last), .rresp, .rvalid(r_valid), .rready(r_ready),
    .awaddr('0), .awvalid(1'b0), .awready, .wdata('0), .wstrb('0), .wvalid(1'b0), .wready,
    .bresp, .bvalid, .bready(1'b0));

  int kern [KSIZE][KSIZE];
  int img [H][W];
  int px [NA], py [NA];
  int done = 0, n_ar = 0;

  always @(posedge clk) if (rst_n && ar_valid && ar_ready) n_ar++;
  always @(posedge clk) if (rst_n) conv_ready <= ($urandom_range(3) == 0);

  always @(posedge clk) if (rst_n && conv_valid && conv_ready) begin
    automatic int bad = 0;
    for (int r = 0; r < KSIZE; r++)
      for (int c = 0; c < KSIZE; c++) begin
        automatic int X = px[done] - 15 + c, Y = py[done] - 15 + r;
        automatic bit ins = (X >= 0 && X < W && Y >= 0 && Y < H);
        if (mat1[r][c] != kern[r][c]) bad++;
        if (in_img[r][c] != ins) bad++;
        if (mat2[r][c] != (ins ? img[Y][X] : 0)) bad++;
      end
    checks++;
    if (bad != 0 || conv_idx != IDX_W'(done)) begin
      failures++; $display("FAIL window %0d (%0d,%0d): %0d wrong elements", done, px[done], py[done], bad);
    end
    done++;
  end

  initial begin
    start = 0; roi_valid = 0; roi = '0; conv_ready = 0;
    cfg = '0;
    cfg.kern_base = KERN; cfg.img_base = IMG; cfg.img_w = W; cfg.img_h = H; cfg.num_atoms = NA;
    foreach (kern[r, c]) begin
      kern[r][c] = int'($urandom);
      mem.mem[KERN / 64 + 2 * r + c / 16][32 * (c % 16) +: 32] = kern[r][c];
    end
    foreach (img[y, x]) begin
      automatic int a = IMG + 2 * (y * W + x);
      img[y][x] = $urandom_range(65535);
      mem.mem[a / 64][8 * (a % 64) +: 16] = img[y][x][15:0];
    end
    px = '{0, 3, 149, 75, 20, 140, 60, 10, 100, 33, 200, 149};
    py = '{0, 50, 99, 0, 20, 7, 85, 99, 40, 60, 10, 50};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int k = 0; k < NA; k++) begin
      automatic int x = px[k], y = py[k];
      repeat ($urandom_range(3)) @(negedge clk);
      roi.idx    = IDX_W'(k);
      roi.x0     = 17'(x - 15);
      roi.y0     = 17'(y - 15);
      roi.col_lo = 16'((x < 15) ? 0 : x - 15);
      roi.col_hi = 16'((x + 15 > W - 1) ? W - 1 : x + 15);
      roi.row_lo = 16'((y < 15) ? 0 : y - 15);
      roi.row_hi = 16'((y + 15 > H - 1) ? H - 1 : y + 15);
      roi.empty  = (x - 15 > W - 1) || (y - 15 > H - 1);
      roi_valid  = 1;
      do @(posedge clk); while (!roi_ready);
      @(negedge clk) roi_valid = 0;
    end
    while (busy) @(posedge clk);
    checks++;
    if (done != NA) begin failures++; $display("FAIL %0d windows handed over", done); end
    $display("read bursts: %0d", n_ar);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
