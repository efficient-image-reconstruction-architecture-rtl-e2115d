`timescale 1ns/1ps
// tb_adder_tree: streams random 31-operand sets (one per clock, with gaps)
// into the adder tree and checks every sum against a sum computed here,
// and that it appears exactly five clocks after its operands.
module tb_adder_tree;
  localparam int N = 31, IN_W = 64, OUT_W = IN_W + 5;   // the module defaults
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                    in_valid;
  logic signed [IN_W-1:0]  in_data [N];
  logic                    out_valid;
  logic signed [OUT_W-1:0] out_sum;

  adder_tree dut (.clk, .rst_n, .in_valid, .in_data, .out_valid, .out_sum);

  // expected result per clock, indexed by cycle
  logic signed [OUT_W-1:0] exp_sum [int];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (in_valid) begin
        logic signed [OUT_W-1:0] s;
        s = '0;
        for (int i = 0; i < N; i++) s += OUT_W'(in_data[i]);
        exp_sum[cyc + 5] = s;
      end
      checks++;
      if (out_valid != exp_sum.exists(cyc)) begin
        failures++; $display("FAIL cycle %0d: out_valid=%0d", cyc, out_valid);
      end else if (out_valid) begin
        if (out_sum != exp_sum[cyc]) begin
          failures++; $display("FAIL cycle %0d: sum %0d expected %0d", cyc, out_sum, exp_sum[cyc]);
        end
      end
    end
  end

  initial begin
    in_valid = 0;
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      foreach (in_data[i]) begin
        case ($urandom_range(3))
          0: in_data[i] = {1'b0, {(IN_W-1){1'b1}}};          // max positive
          1: in_data[i] = {1'b1, {(IN_W-1){1'b0}}};          // max negative
          default: in_data[i] = {$urandom, $urandom};
        endcase
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
