// vector_unit: one of the 31 vector processing units of the image convolution.
//
// It takes one 31-element vector of the atom's local image (mat2), the
// matching vector of the projector kernel (mat1) and a mask that marks the
// elements lying inside the camera image. All 31 products are formed in
// parallel and registered (one clock); two pipelined adder trees then reduce
// (five clocks):
//   prod_sum = sum_j img[j] * prj[j]            (product-sum path)
//   mat_sum  = sum_j (in_img[j] ? prj[j] : 0)   (matrix-sum path)
// Total latency is 6 clocks; one vector can enter every clock.
// The element-wise multiply, the split into a product-sum and a matrix-sum
// path and the adder-tree reduction follow the published architecture.
// Masking the projector outside the image is this design's choice, so that
// the normalization of a clipped window uses only the weights that were
// applied to real pixels.
module vector_unit
  import recon_pkg::*;
#(
  parameter int unsigned LEN = KSIZE
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  elem_t                 img    [LEN],
  input  elem_t                 prj    [LEN],
  input  logic [LEN-1:0]        in_img,
  output logic                  out_valid,
  output logic signed [PROD_W+$clog2(LEN)-1:0]   prod_sum,
  output logic signed [DATA_W+$clog2(LEN)-1:0]   mat_sum
);
  logic signed [PROD_W-1:0] prod_q [LEN];
  logic signed [DATA_W-1:0] prj_q  [LEN];
  logic                     v_q;

  always_ff @(posedge clk) begin
    for (int j = 0; j < LEN; j++) begin
      prod_q[j] <= PROD_W'(img[j]) * PROD_W'(prj[j]);
      prj_q[j]  <= in_img[j] ? prj[j] : '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= 1'b0;
    else        v_q <= in_valid;
  end

  logic pv, mv;
  adder_tree #(.N(LEN), .IN_W(PROD_W)) u_prod_tree (
    .clk, .rst_n, .in_valid(v_q), .in_data(prod_q), .out_valid(pv), .out_sum(prod_sum));
  adder_tree #(.N(LEN), .IN_W(DATA_W)) u_mat_tree (
    .clk, .rst_n, .in_valid(v_q), .in_data(prj_q), .out_valid(mv), .out_sum(mat_sum));

  assign out_valid = pv;

  // Both trees have the same depth, so their results leave together.
  always_ff @(posedge clk) if (rst_n) assert (pv == mv) else $error("adder trees out of step");

endmodule
