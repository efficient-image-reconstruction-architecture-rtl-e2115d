`timescale 1ns/1ps
// tb_vector_unit: random 31-element image, projector and mask vectors;
// checks the product sum and masked projector sum against values computed
// here, and the six-clock latency (one multiply stage, five tree levels).
module tb_vector_unit;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             in_valid, out_valid;
  elem_t            img [KSIZE], prj [KSIZE];
  logic [KSIZE-1:0] in_img;
  logic signed [PROD_W+4:0] prod_sum;
  logic signed [DATA_W+4:0] mat_sum;

  vector_unit dut (.clk, .rst_n, .in_valid, .img, .prj, .in_img, .out_valid, .prod_sum, .mat_sum);

  typedef struct { logic signed [PROD_W+4:0] p; logic signed [DATA_W+4:0] m; } exp_t;
  exp_t exp_q [int];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid) begin
        exp_t e;
        e = '{0, 0};
        for (int j = 0; j < KSIZE; j++) begin
          e.p += (PROD_W+5)'(longint'(img[j]) * longint'(prj[j]));
          if (in_img[j]) e.m += (DATA_W+5)'(prj[j]);
        end
        exp_q[cyc + 6] = e;
      end
      checks++;
      if (out_valid != exp_q.exists(cyc)) begin
        failures++; $display("FAIL cycle %0d valid %0d", cyc, out_valid);
      end else if (out_valid && (prod_sum != exp_q[cyc].p || mat_sum != exp_q[cyc].m)) begin
        failures++;
        $display("FAIL cycle %0d: %0d/%0d expected %0d/%0d", cyc, prod_sum, mat_sum, exp_q[cyc].p, exp_q[cyc].m);
      end
    end
  end

  initial begin
    in_valid = 0; in_img = '0;
    foreach (img[j]) begin img[j] = '0; prj[j] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(2) != 0);
      in_img   = {$urandom, $urandom};
      foreach (img[j]) begin
        img[j] = (t < 100) ? elem_t'($urandom_range(65535)) : elem_t'($urandom);
        prj[j] = elem_t'($urandom);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
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
