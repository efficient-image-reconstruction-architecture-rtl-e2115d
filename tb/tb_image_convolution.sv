`timescale 1ns/1ps
// tb_image_convolution: random 31x31 windows (pixels, signed projector,
// in-image mask) are offered with random gaps and a randomly stalling
// consumer. Checks both sums against values computed here, the eleven-clock
// latency from acceptance to result, that the result is held under
// back-pressure and that no window is accepted while one is in flight.
module tb_image_convolution;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             in_valid, in_ready, out_valid, out_ready;
  logic [IDX_W-1:0] in_idx, out_idx;
  elem_t            mat1 [KSIZE][KSIZE], mat2 [KSIZE][KSIZE];
  logic [KSIZE-1:0] in_img [KSIZE];
  acc_t             out_prod_sum, out_mat_sum;

  image_convolution dut (.clk, .rst_n, .in_valid, .in_ready, .in_idx, .mat1, .mat2, .in_img,
                         .out_valid, .out_ready, .out_idx, .out_prod_sum, .out_mat_sum);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  acc_t ep, em;
  int   t_acc, n_done = 0, n_stall = 0;

  task automatic new_window(int k);
    foreach (mat1[r, c]) begin
      mat1[r][c] = elem_t'($signed($urandom) >>> 8);
      mat2[r][c] = (k % 2) ? elem_t'($urandom) : elem_t'($urandom_range(65535));
    end
    foreach (in_img[r]) in_img[r] = {$urandom, $urandom};
    ep = '0; em = '0;
    foreach (mat1[r, c]) begin
      ep += ACC_W'(longint'(mat1[r][c]) * longint'(mat2[r][c]));
      if (in_img[r][c]) em += ACC_W'(mat1[r][c]);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_idx = '0;
    foreach (mat1[r, c]) begin mat1[r][c] = '0; mat2[r][c] = '0; end
    foreach (in_img[r]) in_img[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      @(negedge clk);
      new_window(k);
      in_idx   = IDX_W'(k);
      in_valid = 1;
      do @(posedge clk); while (!in_ready);
      t_acc = cyc;
      @(negedge clk);
      in_valid = 0;
      // scramble the inputs: the unit must have sampled them already
      foreach (mat1[r, c]) begin mat1[r][c] = elem_t'($urandom); mat2[r][c] = elem_t'($urandom); end
      // no second window while busy
      in_valid = 1;
      @(posedge clk);
      checks++;
      if (in_ready) begin failures++; $display("FAIL accepted while busy"); end
      @(negedge clk) in_valid = 0;
      // wait for result
      while (!out_valid) @(posedge clk);
      checks++;
      if (cyc - t_acc != 12) begin failures++; $display("FAIL latency %0d", cyc - t_acc - 1); end
      repeat ($urandom_range(3)) begin
        @(posedge clk);
        n_stall++;
        checks++;
        if (!out_valid) begin failures++; $display("FAIL result dropped under back-pressure"); end
      end
      checks++;
      if (out_prod_sum != ep || out_mat_sum != em || out_idx != IDX_W'(k)) begin
        failures++;
        $display("FAIL window %0d: %0d/%0d expected %0d/%0d", k, out_prod_sum, out_mat_sum, ep, em);
      end
      @(negedge clk) out_ready = 1;
      @(posedge clk);
      @(negedge clk) out_ready = 0;
      n_done++;
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL back-pressure never exercised"); end
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
