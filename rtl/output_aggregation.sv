// output_aggregation: normalizes each atom's convolution result.
//
// For every atom it computes the emission value
//     emission = prod_sum / mat_sum
// i.e. the projector-weighted pixel sum divided by the sum of the projector
// weights that were applied, as a signed Q16.16 number (FRAC_W fraction bits),
// rounded toward zero and saturated to 32 bits. A window whose weight sum is
// zero (for instance one lying wholly outside the image) gives 0.
// The division is a sequential restoring divider on magnitudes, one quotient
// bit per clock: ACC_W + FRAC_W = 90 clocks per atom plus two for load and
// sign fix-up.
//
// Interface: in_valid/in_ready take {idx, prod_sum, mat_sum}; in_ready is high
// only when the divider is idle. The result is held on out_* with out_valid
// until out_ready.
// That this stage normalizes each convolution result follows the published
// design; the exact formula, number format, divider and the zero-weight rule
// are this design's choices.
module output_aggregation
  import recon_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IDX_W-1:0]    in_idx,
  input  acc_t                in_prod_sum,
  input  acc_t                in_mat_sum,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [IDX_W-1:0]    out_idx,
  output logic signed [31:0]  out_emission
);
  localparam int unsigned NW = ACC_W + FRAC_W;   // dividend / quotient width

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_FIX, S_OUT} state_t;
  state_t state;

  logic [NW-1:0]      num;     // dividend magnitude, shifted out MSB first
  logic [NW-1:0]      quo;
  logic [ACC_W:0]     rem;
  logic [ACC_W-1:0]   den;
  logic               neg;
  logic               dz;
  logic [$clog2(NW+1)-1:0] cnt;

  assign in_ready = (state == S_IDLE);
  assign out_valid = (state == S_OUT);

  logic [ACC_W-1:0] pmag, mmag;
  assign pmag = in_prod_sum[ACC_W-1] ? ACC_W'(-in_prod_sum) : ACC_W'(in_prod_sum);
  assign mmag = in_mat_sum[ACC_W-1]  ? ACC_W'(-in_mat_sum)  : ACC_W'(in_mat_sum);

  logic [ACC_W:0] rem_sh;
  assign rem_sh = {rem[ACC_W-1:0], num[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      num <= '0; quo <= '0; rem <= '0; den <= '0;
      neg <= 1'b0; dz <= 1'b0; cnt <= '0;
      out_idx <= '0; out_emission <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          num     <= {pmag, FRAC_W'(0)};
          den     <= mmag;
          neg     <= in_prod_sum[ACC_W-1] ^ in_mat_sum[ACC_W-1];
          dz      <= (in_mat_sum == '0);
          rem     <= '0;
          quo     <= '0;
          cnt     <= '0;
          out_idx <= in_idx;
          state   <= S_DIV;
        end
        S_DIV: begin
          num <= num << 1;
          if (rem_sh >= {1'b0, den}) begin
            rem <= rem_sh - {1'b0, den};
            quo <= {quo[NW-2:0], 1'b1};
          end else begin
            rem <= rem_sh;
            quo <= {quo[NW-2:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
          if (int'(cnt) == NW - 1) state <= S_FIX;
        end
        S_FIX: begin
          if (dz)                                       out_emission <= '0;
          else if (!neg && quo > NW'(32'h7FFF_FFFF))    out_emission <= 32'sh7FFF_FFFF;
          else if ( neg && quo > NW'(33'h0_8000_0000))  out_emission <= 32'sh8000_0000;
          else if (neg)                                 out_emission <= -$signed(quo[31:0]);
          else                                          out_emission <= $signed(quo[31:0]);
          state <= S_OUT;
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
