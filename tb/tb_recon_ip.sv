`timescale 1ns/1ps
// tb_recon_ip: end-to-end test of the reconstruction accelerator at its
// default configuration.
//
// For every atom-array size of the evaluation (10x10, 16x16, ... 40x40 atoms,
// and the 30x30 example array, on a 24-pixel pitch; the 10x10 array in a
// 256x256 image) it builds a
// synthetic fluorescence image (noise floor plus Gaussian spots on randomly
// occupied sites), a Gaussian projector with a small negative offset, and the
// position grid, all in the memory model. The first case adds atoms at the
// image corners and edges and one outside the image, so that clipped and
// empty windows occur. It programs the registers, starts the run, waits for
// the interrupt and compares every emission in memory with a model computed
// here from the same data. It also checks the run time against the published
// figures (115 us for 10x10 and 1.825 ms for 40x40 at 100 MHz), tests a run
// with no atoms, and counts how often each mechanism of the datapath occurred.
module tb_recon_ip;
  import recon_pkg::*;

  localparam int unsigned MEM_BEATS = 32768;
  localparam logic [31:0] GRID_A = 32'h0000_0000;
  localparam logic [31:0] KERN_A = 32'h0000_2000;
  localparam logic [31:0] OUT_A  = 32'h0000_4000;
  localparam logic [31:0] IMG_A  = 32'h0000_8000;
  localparam int PITCH = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;     // 100 MHz

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- DUT and memory ----------------
  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic [31:0] m_araddr, m_awaddr;
  logic [7:0]  m_arlen, m_awlen;
  logic [2:0]  m_arsize, m_awsize;
  logic [1:0]  m_arburst, m_awburst, m_rresp, m_bresp;
  logic        m_arid, m_arvalid, m_arready, m_rid, m_rlast, m_rvalid, m_rready;
  logic        m_awid, m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [511:0] m_rdata, m_wdata;
  logic [63:0]  m_wstrb;
  logic         irq;

  recon_ip dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axi_araddr(m_araddr), .m_axi_arlen(m_arlen), .m_axi_arsize(m_arsize), .m_axi_arburst(m_arburst),
    .m_axi_arid(m_arid), .m_axi_arvalid(m_arvalid), .m_axi_arready(m_arready),
    .m_axi_rdata(m_rdata), .m_axi_rid(m_rid), .m_axi_rlast(m_rlast), .m_axi_rresp(m_rresp),
    .m_axi_rvalid(m_rvalid), .m_axi_rready(m_rready),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize), .m_axi_awburst(m_awburst),
    .m_axi_awid(m_awid), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
    .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast), .m_axi_wvalid(m_wvalid),
    .m_axi_wready(m_wready), .m_axi_bresp(m_bresp), .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready),
    .irq);

  axi_mem_model #(.DEPTH(MEM_BEATS), .RD_LAT(8), .STALL_PCT(0)) mem (
    .clk, .rst_n,
    .araddr(m_araddr), .arlen(m_arlen), .arid(m_arid), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rid(m_rid), .rlast(m_rlast), .rresp(m_rresp), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wstrb(m_wstrb), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready));

  // ---------------- mechanism counters ----------------
  int n_clip = 0, n_empty = 0, n_row2 = 0, n_row1 = 0, n_contend = 0;
  int n_conv_wait = 0, n_agg_wait = 0, n_overlap = 0, n_kernel = 0, n_tree = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.roi_valid && dut.roi_ready) begin
      if (dut.roi.empty) n_empty++;
      else if (dut.roi.x0 < 0 || dut.roi.y0 < 0 ||
               $signed({1'b0, dut.roi.col_hi}) != dut.roi.x0 + 30 ||
               $signed({1'b0, dut.roi.row_hi}) != dut.roi.y0 + 30) n_clip++;
    end
    if (dut.s_ar_valid[1] && dut.s_ar_ready[1]) begin
      if (dut.u_extract.state == dut.u_extract.S_K_AR) n_kernel++;
      else if (dut.s_ar_req[1].len == 8'd1) n_row2++;
      else n_row1++;
    end
    if (dut.s_ar_valid == 2'b11) n_contend++;
    if (dut.conv_valid && !dut.conv_ready) n_conv_wait++;
    if (dut.cv_valid && !dut.cv_ready) n_agg_wait++;
    if (dut.u_extract.state == dut.u_extract.S_ROWS && !dut.cv_ready) n_overlap++;
    if (dut.u_conv.row_v[0]) n_tree++;
  end

  // Adder-tree latency: a window accepted by the convolution has its vector
  // sums 6 clocks later (1 multiply + 5 tree levels) and its totals 11 later.
  int lat_checked = 0;
  always @(posedge clk) if (rst_n && dut.conv_valid && dut.conv_ready && lat_checked < 3) begin
    automatic longint unsigned t0 = cyc;
    lat_checked++;
    fork begin
      repeat (6) @(posedge clk);
      checks++;
      if (!dut.u_conv.row_v[0]) begin failures++; $display("FAIL vector sums not 6 clocks after accept"); end
      repeat (5) @(posedge clk);
      checks++;
      if (!dut.u_conv.tp_v) begin failures++; $display("FAIL totals not 11 clocks after accept (t0=%0d)", t0); end
    end join_none
  end

  // ---------------- AXI4-Lite tasks ----------------
  task automatic reg_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wstrb = 4'hF; wvalid = 1;
    fork
      begin do @(posedge clk); while (!awready); @(negedge clk); awvalid = 0; end
      begin do @(posedge clk); while (!wready);  @(negedge clk); wvalid = 0; end
    join
    bready = 1;
    do @(posedge clk); while (!bvalid);
    @(negedge clk); bready = 0;
  endtask

  task automatic reg_read(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  // ---------------- data set-up ----------------
  int unsigned W, H;
  shortint unsigned img[];
  int kern [KSIZE][KSIZE];
  int ax[$], ay[$];

  function automatic void put_pix(int x, int y, shortint unsigned v);
    longint unsigned a = IMG_A + 2 * (longint'(y) * W + x);
    img[y * W + x] = v;
    mem.mem[a >> 6][8 * (a % 64) +: 16] = v;
  endfunction

  function automatic void build_kernel();
    for (int r = 0; r < KSIZE; r++)
      for (int c = 0; c < KSIZE; c++) begin
        real d2 = real'((r - 15) * (r - 15) + (c - 15) * (c - 15));
        kern[r][c] = int'(4096.0 * $exp(-d2 / 18.0)) - 20;
        mem.mem[(KERN_A >> 6) + 2 * r + c / 16][32 * (c % 16) +: 32] = kern[r][c];
      end
  endfunction

  function automatic void build_case(int n, bit extras);
    real amp [];
    W = (n == 10) ? 256 : PITCH * n + 16;
    H = W;
    img = new[W * H];
    ax.delete(); ay.delete();
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
      ax.push_back(20 + PITCH * j);
      ay.push_back(20 + PITCH * i);
    end
    if (extras) begin
      ax.push_back(0);     ay.push_back(0);
      ax.push_back(3);     ay.push_back(250);
      ax.push_back(W - 1); ay.push_back(128);
      ax.push_back(128);   ay.push_back(H - 2);
      ax.push_back(W + 40); ay.push_back(H + 40);   // wholly outside
    end
    amp = new[ax.size()];
    foreach (amp[k]) amp[k] = ($urandom_range(1) == 1) ? 3000.0 : 0.0;
    for (int y = 0; y < int'(H); y++)
      for (int x = 0; x < int'(W); x++) img[y * W + x] = shortint'($urandom_range(100));
    for (int k = 0; k < ax.size(); k++)
      if (amp[k] > 0.0)
        for (int y = ay[k] - 9; y <= ay[k] + 9; y++)
          for (int x = ax[k] - 9; x <= ax[k] + 9; x++)
            if (x >= 0 && x < int'(W) && y >= 0 && y < int'(H)) begin
              real v = real'(img[y * W + x]) +
                       amp[k] * $exp(-real'((x - ax[k]) * (x - ax[k]) + (y - ay[k]) * (y - ay[k])) / 8.0);
              img[y * W + x] = shortint'(int'(v > 65535.0 ? 65535.0 : v));
            end
    for (int y = 0; y < int'(H); y++)
      for (int x = 0; x < int'(W); x++) put_pix(x, y, img[y * W + x]);
    for (int k = 0; k < ax.size(); k++) begin
      longint unsigned a = GRID_A + 4 * k;
      mem.mem[a >> 6][8 * (a % 64) +: 32] = {ay[k][15:0], ax[k][15:0]};
    end
  endfunction

  function automatic int ref_emission(int x, int y);
    longint prod = 0, msum = 0, q;
    for (int r = 0; r < KSIZE; r++)
      for (int c = 0; c < KSIZE; c++) begin
        int X = x - 15 + c, Y = y - 15 + r;
        if (X >= 0 && X < int'(W) && Y >= 0 && Y < int'(H)) begin
          prod += longint'(img[Y * W + X]) * kern[r][c];
          msum += kern[r][c];
        end
      end
    if (msum == 0) return 0;
    q = (prod * 65536) / msum;
    if (q > 64'sh7FFF_FFFF) return 32'h7FFF_FFFF;
    if (q < -64'sh8000_0000) return 32'h8000_0000;
    return int'(q);
  endfunction

  task automatic run_case(int n, bit extras, int budget);
    logic [31:0] st, cycles;
    int na, bad = 0;
    longint unsigned t0;
    build_case(n, extras);
    na = ax.size();
    for (int k = 0; k < na; k++) begin
      longint unsigned a = OUT_A + 4 * k;
      mem.mem[a >> 6][8 * (a % 64) +: 32] = 32'hDEAD_BEEF;
    end
    reg_write(6'h08, na);
    reg_write(6'h0C, W);
    reg_write(6'h10, H);
    reg_write(6'h14, GRID_A);
    reg_write(6'h18, KERN_A);
    reg_write(6'h1C, IMG_A);
    reg_write(6'h20, OUT_A);
    reg_write(6'h00, 32'h1);
    t0 = cyc;
    while (!irq && cyc - t0 < 64'(400 * na + 2000)) @(posedge clk);
    checks++;
    if (!irq) begin failures++; $display("FAIL %0dx%0d: no completion", n, n); return; end
    reg_read(6'h04, st);
    reg_read(6'h24, cycles);
    checks++;
    if (st[1:0] != 2'b10) begin failures++; $display("FAIL status %b", st[1:0]); end
    for (int k = 0; k < na; k++) begin
      longint unsigned a = OUT_A + 4 * k;
      int got = int'(mem.mem[a >> 6][8 * (a % 64) +: 32]);
      int exp = ref_emission(ax[k], ay[k]);
      checks++;
      if (got != exp) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %0dx%0d atom %0d (%0d,%0d): got %0d expected %0d", n, n, k, ax[k], ay[k], got, exp);
      end
    end
    $display("case %0dx%0d atoms (%0d windows, image %0dx%0d): %0d cycles = %0.1f us at 100 MHz, %0.1f cycles/atom",
             n, n, na, W, H, cycles, real'(cycles) / 100.0, real'(cycles) / na);
    if (budget > 0) begin
      checks++;
      if (cycles > budget) begin failures++; $display("FAIL run time %0d cycles above %0d", cycles, budget); end
    end
  endtask

  // ---------------- main ----------------
  initial begin
    int sizes [7] = '{10, 16, 22, 28, 30, 34, 40};
    logic [31:0] st;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = '0; araddr = '0; wdata = '0; wstrb = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    build_kernel();
    foreach (sizes[i]) begin
      // published run times at 100 MHz: 115 us (10x10), 1.825 ms (40x40)
      int budget;
      budget = (sizes[i] == 10) ? 11500 : (sizes[i] == 40) ? 182500 : 0;
      run_case(sizes[i], i == 0, budget);
    end
    // a run with no atoms finishes at once
    reg_write(6'h08, 0);
    reg_write(6'h00, 32'h1);
    repeat (4) @(posedge clk);
    reg_read(6'h04, st);
    checks++;
    if (st[1:0] != 2'b10) begin failures++; $display("FAIL empty run status %b", st[1:0]); end

    $display("mechanisms: clipped=%0d empty=%0d row_bursts_1beat=%0d row_bursts_2beat=%0d kernel_loads=%0d",
             n_clip, n_empty, n_row1, n_row2, n_kernel);
    $display("            read_contention=%0d extraction_waits_conv=%0d conv_waits_norm=%0d overlap=%0d tree_results=%0d",
             n_contend, n_conv_wait, n_agg_wait, n_overlap, n_tree);
    checks++; if (n_clip == 0)      begin failures++; $display("FAIL no clipped window"); end
    checks++; if (n_empty == 0)     begin failures++; $display("FAIL no empty window"); end
    checks++; if (n_row1 == 0)      begin failures++; $display("FAIL no 1-beat row"); end
    checks++; if (n_row2 == 0)      begin failures++; $display("FAIL no 2-beat row"); end
    checks++; if (n_kernel != 7)    begin failures++; $display("FAIL kernel loads %0d", n_kernel); end
    checks++; if (n_contend == 0)   begin failures++; $display("FAIL no read contention"); end
    checks++; if (n_conv_wait == 0) begin failures++; $display("FAIL extraction never waited"); end
    checks++; if (n_agg_wait == 0)  begin failures++; $display("FAIL convolution never waited"); end
    checks++; if (n_overlap == 0)   begin failures++; $display("FAIL stages never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
