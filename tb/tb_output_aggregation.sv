`timescale 1ns/1ps
// tb_output_aggregation: normalizes random product/matrix sums (both signs,
// small and large, zero divisor, values that saturate) and compares each
// Q16.16 result with a division done here; checks the per-atom latency
// (92 clocks from acceptance to result) and that the result is held until taken.
module tb_output_aggregation;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               in_valid, in_ready, out_valid, out_ready;
  logic [IDX_W-1:0]   in_idx, out_idx;
  acc_t               in_prod_sum, in_mat_sum;
  logic signed [31:0] out_emission;

  output_aggregation dut (.clk, .rst_n, .in_valid, .in_ready, .in_idx, .in_prod_sum, .in_mat_sum,
                          .out_valid, .out_ready, .out_idx, .out_emission);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic signed [31:0] ref_div(acc_t p, acc_t m);
    logic signed [127:0] n, d, q;
    if (m == 0) return 0;
    n = 128'(p) <<< FRAC_W;
    d = 128'(m);
    q = n / d;
    if (q > 128'sh7FFF_FFFF)  return 32'sh7FFF_FFFF;
    if (q < -128'sh8000_0000) return 32'sh8000_0000;
    return q[31:0];
  endfunction

  int n_sat = 0, n_zero = 0;
  initial begin
    int t0;
    in_valid = 0; out_ready = 0; in_idx = '0; in_prod_sum = '0; in_mat_sum = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      logic signed [31:0] e;
      @(negedge clk);
      case (k % 5)
        0: begin in_prod_sum = acc_t'($signed({$urandom, $urandom})); in_mat_sum = acc_t'($signed($urandom)); end
        1: begin in_prod_sum = acc_t'($signed($urandom)); in_mat_sum = acc_t'($signed({$urandom, $urandom})); end
        2: begin in_prod_sum = acc_t'($signed({$urandom, $urandom})) <<< 8; in_mat_sum = acc_t'($signed($urandom_range(1000))) - 500; end
        3: begin in_prod_sum = acc_t'($signed($urandom)); in_mat_sum = '0; end
        default: begin in_prod_sum = acc_t'($urandom_range(3_000_000)) * 50000; in_mat_sum = acc_t'($urandom_range(70000)) + 1; end
      endcase
      in_idx = IDX_W'(k * 7);
      e = ref_div(in_prod_sum, in_mat_sum);
      if (in_mat_sum == 0) n_zero++;
      if (e == 32'sh7FFF_FFFF || e == 32'sh8000_0000) n_sat++;
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      t0 = cyc;
      @(negedge clk) in_valid = 0;
      while (!out_valid) @(posedge clk);
      checks++;
      if (cyc - t0 != 92) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      repeat ($urandom_range(2)) @(posedge clk);
      checks++;
      if (!out_valid || out_emission != e || out_idx != IDX_W'(k * 7)) begin
        failures++;
        $display("FAIL %0d: %0d / %0d -> %0d expected %0d", k, in_prod_sum, in_mat_sum, out_emission, e);
      end
      @(negedge clk) out_ready = 1;
      @(posedge clk);
      @(negedge clk) out_ready = 0;
    end
    checks++;
    if (n_sat == 0 || n_zero == 0) begin failures++; $display("FAIL saturation/zero cases not reached"); end
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
