// image_convolution: product sum and matrix sum of one atom's 31x31 window.
//
// The 31x31 element-wise product of the local image (mat2) and the projector
// (mat1) is split row by row over 31 vector units working in parallel
// (six clocks each: one multiply stage, five adder-tree levels). Their 31
// partial sums are reduced by two more five-level adder trees, giving
//   prod_sum = sum_{r,c} mat2[r][c] * mat1[r][c]
//   mat_sum  = sum_{r,c} in_img[r][c] ? mat1[r][c] : 0
// eleven clocks after the window is accepted.
//
// Handshake: in_valid/in_ready accept a window; the whole window is sampled
// in that one clock, so the data cache may be refilled from the next clock on.
// The unit takes one window at a time and holds its result on out_* with
// out_valid until out_ready; in_ready is low from acceptance until the result
// has been taken. The 31 parallel vector units and the two paths follow the
// published architecture; the one-window-at-a-time handshake is this
// design's choice.
module image_convolution
  import recon_pkg::*;
#(
  parameter int unsigned K = KSIZE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [IDX_W-1:0]     in_idx,
  input  elem_t                mat1   [K][K],
  input  elem_t                mat2   [K][K],
  input  logic [K-1:0]         in_img [K],
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [IDX_W-1:0]     out_idx,
  output acc_t                 out_prod_sum,
  output acc_t                 out_mat_sum
);
  localparam int unsigned VP_W = PROD_W + $clog2(K);
  localparam int unsigned VM_W = DATA_W + $clog2(K);
  localparam int unsigned TP_W = VP_W + $clog2(K);
  localparam int unsigned TM_W = VM_W + $clog2(K);

  logic accept;
  logic busy;
  assign in_ready = !busy;
  assign accept   = in_valid && in_ready;

  logic signed [VP_W-1:0] row_prod [K];
  logic signed [VM_W-1:0] row_mat  [K];
  logic [K-1:0]           row_v;

  for (genvar r = 0; r < K; r++) begin : g_vpu
    vector_unit #(.LEN(K)) u_vpu (
      .clk, .rst_n,
      .in_valid (accept),
      .img      (mat2[r]),
      .prj      (mat1[r]),
      .in_img   (in_img[r]),
      .out_valid(row_v[r]),
      .prod_sum (row_prod[r]),
      .mat_sum  (row_mat[r]));
  end

  logic                   tp_v, tm_v;
  logic signed [TP_W-1:0] tot_prod;
  logic signed [TM_W-1:0] tot_mat;

  adder_tree #(.N(K), .IN_W(VP_W)) u_prod_tree (
    .clk, .rst_n, .in_valid(row_v[0]), .in_data(row_prod), .out_valid(tp_v), .out_sum(tot_prod));
  adder_tree #(.N(K), .IN_W(VM_W)) u_mat_tree (
    .clk, .rst_n, .in_valid(row_v[0]), .in_data(row_mat), .out_valid(tm_v), .out_sum(tot_mat));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_prod_sum <= '0;
      out_mat_sum  <= '0;
    end else begin
      if (accept) begin
        busy    <= 1'b1;
        out_idx <= in_idx;
      end
      if (tp_v) begin
        out_valid    <= 1'b1;
        out_prod_sum <= ACC_W'(tot_prod);
        out_mat_sum  <= ACC_W'(tot_mat);
      end
      if (out_valid && out_ready) begin
        out_valid <= 1'b0;
        busy      <= 1'b0;
      end
    end
  end

  // All vector units run in lock step, and both paths have equal depth.
  always_ff @(posedge clk) if (rst_n) begin
    assert (row_v == {K{row_v[0]}}) else $error("vector units out of step");
    assert (tp_v == tm_v)           else $error("sum paths out of step");
  end

endmodule
