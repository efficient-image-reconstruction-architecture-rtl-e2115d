`timescale 1ns/1ps
// tb_data_cache: random row writes with byte-enables to both matrices and
// random clears; after every clock the whole cache is compared with a model
// kept here.
module tb_data_cache;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             clr, wr_en, wr_sel, wr_inside;
  logic [4:0]       wr_row;
  logic [KSIZE-1:0] wr_be;
  elem_t            wr_data [KSIZE];
  elem_t            mat1 [KSIZE][KSIZE], mat2 [KSIZE][KSIZE];
  logic [KSIZE-1:0] in_img [KSIZE];

  data_cache dut (.clk, .rst_n, .clr, .wr_en, .wr_sel, .wr_row, .wr_be, .wr_data, .wr_inside,
                  .mat1, .mat2, .in_img);

  elem_t m1 [KSIZE][KSIZE], m2 [KSIZE][KSIZE];
  bit    mk [KSIZE][KSIZE];

  initial begin
    clr = 0; wr_en = 0; wr_sel = 0; wr_inside = 0; wr_row = '0; wr_be = '0;
    foreach (wr_data[c]) wr_data[c] = '0;
    foreach (m1[r, c]) begin m1[r][c] = '0; m2[r][c] = '0; mk[r][c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      clr       = ($urandom_range(40) == 0);
      wr_en     = ($urandom_range(3) != 0);
      wr_sel    = $urandom_range(1);
      wr_inside = $urandom_range(1);
      wr_row    = 5'($urandom_range(KSIZE - 1));
      wr_be     = {$urandom, $urandom};
      foreach (wr_data[c]) wr_data[c] = elem_t'($urandom);
      // model
      if (clr) foreach (m2[r, c]) begin m2[r][c] = '0; mk[r][c] = 0; end
      else if (wr_en && wr_sel)
        for (int c = 0; c < KSIZE; c++) if (wr_be[c]) begin m2[wr_row][c] = wr_data[c]; mk[wr_row][c] = wr_inside; end
      if (wr_en && !wr_sel)
        for (int c = 0; c < KSIZE; c++) if (wr_be[c]) m1[wr_row][c] = wr_data[c];
      @(posedge clk); #1;
      checks++;
      begin
        bit bad;
        bad = 0;
        foreach (m1[r, c]) if (mat1[r][c] != m1[r][c] || mat2[r][c] != m2[r][c] || in_img[r][c] != mk[r][c]) bad = 1;
        if (bad) begin failures++; $display("FAIL mismatch at step %0d", t); end
      end
    end
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
