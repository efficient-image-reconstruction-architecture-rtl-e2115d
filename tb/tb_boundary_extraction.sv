`timescale 1ns/1ps
// tb_boundary_extraction: reads a grid of random atom positions (inside,
// near the borders and outside a 200x150 image, starting at an address that
// is not a multiple of 64 bytes) from the memory model with random read
// stalls, takes the ROIs with a randomly stalling consumer and compares every
// field with a clipping computed here. Also checks that busy drops at the end.
module tb_boundary_extraction;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NA = 37, W = 200, H = 150;
  localparam logic [31:0] GRID = 32'h0000_0108;

  logic start, busy, ar_valid, ar_ready, r_valid, r_ready, r_last, roi_valid, roi_ready;
  ar_req_t ar_req;
  logic [AXI_DW-1:0] r_data;
  roi_t roi;
  cfg_t cfg;
  logic [1:0] rresp, bresp;
  logic rid, awready, wready, bvalid;

  boundary_extraction dut (.clk, .rst_n, .start, .cfg, .busy, .ar_valid, .ar_ready, .ar_req,
                           .r_valid, .r_ready, .r_data, .r_last, .roi_valid, .roi_ready, .roi);

  axi_mem_model #(.DEPTH(64), .RD_LAT(3), .STALL_PCT(30)) mem (
    .clk, .rst_n, .araddr(ar_req.addr), .arlen(ar_req.len), .arid(1'b0), .arvalid(ar_valid), .arready(ar_ready),
    .rdata(r_data), .rid, .rlast(r_last), .rresp, .rvalid(r_valid), .rready(r_ready),
    .awaddr('0), .awvalid(1'b0), .awready, .wdata('0), .wstrb('0), .wvalid(1'b0), .wready,
    .bresp, .bvalid, .bready(1'b0));

  int px [NA], py [NA];
  int got = 0;

  always @(posedge clk) if (rst_n) roi_ready <= ($urandom_range(2) != 0);

  always @(posedge clk) if (rst_n && roi_valid && roi_ready) begin
    roi_t e;
    automatic int x = px[got], y = py[got];
    e.idx    = IDX_W'(got);
    e.x0     = 17'(x - 15);
    e.y0     = 17'(y - 15);
    e.col_lo = 16'((x - 15 < 0) ? 0 : x - 15);
    e.col_hi = 16'((x + 15 > W - 1) ? W - 1 : x + 15);
    e.row_lo = 16'((y - 15 < 0) ? 0 : y - 15);
    e.row_hi = 16'((y + 15 > H - 1) ? H - 1 : y + 15);
    e.empty  = (x - 15 > W - 1) || (y - 15 > H - 1);
    checks++;
    if (roi != e) begin
      failures++;
      $display("FAIL atom %0d (%0d,%0d): got %p expected %p", got, x, y, roi, e);
    end
    got++;
  end

  initial begin
    start = 0; roi_ready = 0;
    cfg = '0;
    cfg.grid_base = GRID; cfg.img_w = W; cfg.img_h = H; cfg.num_atoms = NA;
    for (int k = 0; k < NA; k++) begin
      automatic int a = GRID + 4 * k;
      case (k % 6)
        0: begin px[k] = $urandom_range(5);        py[k] = $urandom_range(H - 1); end
        1: begin px[k] = W - 1 - $urandom_range(5); py[k] = $urandom_range(5); end
        2: begin px[k] = $urandom_range(W - 1);    py[k] = H - 1 - $urandom_range(5); end
        3: begin px[k] = W + 10 + $urandom_range(30); py[k] = $urandom_range(H - 1); end
        default: begin px[k] = $urandom_range(W - 1); py[k] = $urandom_range(H - 1); end
      endcase
      mem.mem[a / 64][8 * (a % 64) +: 32] = {py[k][15:0], px[k][15:0]};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (busy) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (got != NA) begin failures++; $display("FAIL %0d ROIs, expected %0d", got, NA); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
