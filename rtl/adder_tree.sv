// adder_tree: pipelined logarithmic reduction of N signed operands.
//
// The operands are sign-extended to OUT_W bits, padded with zeros up to the
// next power of two and added pairwise, one level of two-input adders per
// clock. With N = 31 there are five levels (31 -> 16 -> 8 -> 4 -> 2 -> 1), so
// a sum leaves five clocks after its operands enter, as the published design
// states for its 31-element vector sums. One new set of operands can enter
// every clock.
//
// Interface: in_valid/in_data are sampled every clock; out_valid/out_sum
// appear LATENCY clocks later. There is no back-pressure: the caller must take
// each result in the cycle out_valid is high.
module adder_tree #(
  parameter int unsigned N     = 31,
  parameter int unsigned IN_W  = 64,
  parameter int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data [N],
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_sum
);
  localparam int unsigned LEVELS  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned P       = 1 << LEVELS;
  localparam int unsigned LATENCY = LEVELS;

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned M = P >> l;
    logic signed [OUT_W-1:0] s [M];
    if (l == 0) begin : g_in
      for (genvar i = 0; i < M; i++) begin : g_i
        if (i < N) begin : g_op
          assign s[i] = OUT_W'(in_data[i]);
        end else begin : g_pad
          assign s[i] = '0;
        end
      end
    end else begin : g_add
      for (genvar i = 0; i < M; i++) begin : g_i
        always_ff @(posedge clk) s[i] <= g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
  end

  assign out_sum = g_lvl[LEVELS].s[0];

  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], in_valid};
  end
  assign out_valid = vpipe[LATENCY-1];

endmodule
