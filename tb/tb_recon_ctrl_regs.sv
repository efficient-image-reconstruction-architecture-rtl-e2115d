`timescale 1ns/1ps
// tb_recon_ctrl_regs: writes every configuration register (address and data
// channels in either order, some with partial byte strobes) and reads them
// back; checks the cfg outputs, the one-clock start pulse, that a start is
// ignored while busy, the busy/done status bits, the interrupt and the
// cycle counter of a run ended by run_done.
module tb_recon_ctrl_regs;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0]  awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  cfg_t        cfg;
  logic        start, busy, irq, run_done;

  recon_ctrl_regs dut (.clk, .rst_n,
    .s_awaddr(awaddr), .s_awvalid(awvalid), .s_awready(awready), .s_wdata(wdata), .s_wstrb(wstrb),
    .s_wvalid(wvalid), .s_wready(wready), .s_bresp(bresp), .s_bvalid(bvalid), .s_bready(bready),
    .s_araddr(araddr), .s_arvalid(arvalid), .s_arready(arready), .s_rdata(rdata), .s_rresp(rresp),
    .s_rvalid(rvalid), .s_rready(rready), .cfg, .start, .busy, .irq, .run_done);

  int n_start = 0, cyc = 0, busy_cycles = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && start) n_start++;
    if (rst_n && busy) busy_cycles++;
  end

  task automatic wr(input logic [5:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF, input int order = 0);
    @(negedge clk);
    if (order != 2) begin awaddr = a; awvalid = 1; end
    if (order != 1) begin wdata = d; wstrb = s; wvalid = 1; end
    if (order == 1) begin
      do @(posedge clk); while (!awready);
      @(negedge clk) awvalid = 0; wdata = d; wstrb = s; wvalid = 1;
    end
    if (order == 2) begin
      do @(posedge clk); while (!wready);
      @(negedge clk) wvalid = 0; awaddr = a; awvalid = 1;
    end
    fork
      begin if (awvalid) begin do @(posedge clk); while (!awready); @(negedge clk) awvalid = 0; end end
      begin if (wvalid)  begin do @(posedge clk); while (!wready);  @(negedge clk) wvalid = 0;  end end
    join
    bready = 1;
    do @(posedge clk); while (!bvalid);
    @(negedge clk) bready = 0;
  endtask

  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk) arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk) rready = 0;
  endtask

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] v [2:8];
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; run_done = 0;
    awaddr = '0; araddr = '0; wdata = '0; wstrb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 2; i <= 8; i++) begin
      v[i] = $urandom;
      wr(6'(4 * i), v[i], 4'hF, i % 3);
    end
    // partial write of byte 1 of IMG_BASE
    wr(6'h1C, 32'hAABBCCDD, 4'b0010);
    v[7][15:8] = 8'hCC;
    for (int i = 2; i <= 8; i++) begin rd(6'(4 * i), d); expect_eq($sformatf("reg %0d", i), d, v[i]); end
    expect_eq("num_atoms", 32'(cfg.num_atoms), {16'b0, v[2][15:0]});
    expect_eq("img_w", 32'(cfg.img_w), {16'b0, v[3][15:0]});
    expect_eq("img_h", 32'(cfg.img_h), {16'b0, v[4][15:0]});
    expect_eq("grid", cfg.grid_base, v[5]);
    expect_eq("kern", cfg.kern_base, v[6]);
    expect_eq("img",  cfg.img_base, v[7]);
    expect_eq("out",  cfg.out_base, v[8]);
    rd(6'h3C, d); expect_eq("unmapped", d, 0);
    rd(6'h04, d); expect_eq("status idle", d, 0);
    // run
    wr(6'h00, 1);
    expect_eq("one start", n_start, 1);
    rd(6'h04, d); expect_eq("status busy", d, 1);
    wr(6'h00, 1);                       // ignored while busy
    expect_eq("start ignored", n_start, 1);
    repeat (50) @(posedge clk);
    @(negedge clk) run_done = 1;
    @(negedge clk) run_done = 0;
    expect_eq("irq", irq, 1);
    rd(6'h04, d); expect_eq("status done", d, 2);
    rd(6'h24, d);
    checks++;
    if (d != busy_cycles) begin failures++; $display("FAIL cycle count %0d, busy for %0d", d, busy_cycles); end
    wr(6'h00, 1);
    expect_eq("second start", n_start, 2);
    rd(6'h04, d); expect_eq("done cleared", d, 1);
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
