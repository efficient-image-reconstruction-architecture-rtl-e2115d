`timescale 1ns/1ps
// tb_result_writer: sends emission values for atoms in random order to the
// writer, which stores them through the memory model. Checks every 32-bit
// word of the output area (written words and their untouched neighbours),
// that done pulses exactly once, after the last write response, and that a
// second run with a new start counts afresh.
module tb_result_writer;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NA = 40;
  localparam logic [31:0] OUT = 32'h0000_0084;

  cfg_t cfg;
  logic start, done, in_valid, in_ready, aw_valid, aw_ready, w_valid, w_ready, b_valid, b_ready;
  logic [IDX_W-1:0] in_idx;
  logic signed [31:0] in_emission;
  addr_t aw_addr;
  logic [AXI_DW-1:0] w_data, rdata;
  logic [AXI_BYTES-1:0] w_strb;
  logic [1:0] rresp, bresp;
  logic arready, rid, rlast, rvalid;

  result_writer dut (.clk, .rst_n, .start, .cfg, .done, .in_valid, .in_ready, .in_idx, .in_emission,
    .aw_valid, .aw_ready, .aw_addr, .w_valid, .w_ready, .w_data, .w_strb, .b_valid, .b_ready);

  axi_mem_model #(.DEPTH(64)) mem (
    .clk, .rst_n, .araddr('0), .arlen('0), .arid(1'b0), .arvalid(1'b0), .arready,
    .rdata, .rid, .rlast, .rresp, .rvalid, .rready(1'b0),
    .awaddr(aw_addr), .awvalid(aw_valid), .awready(aw_ready), .wdata(w_data), .wstrb(w_strb),
    .wvalid(w_valid), .wready(w_ready), .bresp, .bvalid(b_valid), .bready(b_ready));

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  int vals [NA];
  int order [NA];

  task automatic run(int seed);
    for (int k = 0; k < NA; k++) begin order[k] = k; vals[k] = int'($urandom); end
    order.shuffle();
    n_done = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int k = 0; k < NA; k++) begin
      repeat ($urandom_range(2)) @(negedge clk);
      in_idx = IDX_W'(order[k]);
      in_emission = vals[order[k]];
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 0;
      checks++;
      if (k < NA - 1 && n_done != 0) begin failures++; $display("FAIL done before the last write"); end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (n_done != 1) begin failures++; $display("FAIL done pulsed %0d times", n_done); end
    for (int k = -1; k <= NA; k++) begin
      automatic int a = OUT + 4 * k;
      automatic int got = int'(mem.mem[a / 64][8 * (a % 64) +: 32]);
      automatic int exp = (k < 0 || k == NA) ? 32'h5A5A_5A5A : vals[k];
      checks++;
      if (got != exp) begin failures++; $display("FAIL run %0d word %0d: %h expected %h", seed, k, got, exp); end
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_idx = '0; in_emission = '0;
    cfg = '0; cfg.out_base = OUT; cfg.num_atoms = NA;
    for (int i = 0; i < 64; i++) mem.mem[i] = {16{32'h5A5A_5A5A}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    run(1);
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
