// result_writer: stores the emission matrix in memory.
//
// Each emission value arriving on in_* is written as one single-beat AXI
// write of the 512-bit bus to byte address out_base + 4*idx, with only that
// 32-bit lane's four strobes set (out_base 4-byte aligned). The address and
// data are offered together; the next value is taken once the write response
// has come back. After cfg.num_atoms responses, done pulses for one clock.
//
// Interface: start (one clock) resets the response count for a new run;
// in_valid/in_ready is the emission stream; aw_*, w_*, b_* are the AXI write
// channels (burst length 1, INCR, full-width size, ID 0).
// Writing the reconstructed image back to memory follows the published block
// diagram; the layout and the one-write-at-a-time protocol are this design's
// choices.
module result_writer
  import recon_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  cfg_t                cfg,
  output logic                done,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IDX_W-1:0]    in_idx,
  input  logic signed [31:0]  in_emission,
  output logic                aw_valid,
  input  logic                aw_ready,
  output addr_t               aw_addr,
  output logic                w_valid,
  input  logic                w_ready,
  output logic [AXI_DW-1:0]   w_data,
  output logic [AXI_BYTES-1:0] w_strb,
  input  logic                b_valid,
  output logic                b_ready
);
  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_RESP} state_t;
  state_t state;

  addr_t            a;
  logic [31:0]      val;
  logic             aw_done, w_done;
  logic [IDX_W-1:0] resp_cnt;

  assign in_ready = (state == S_IDLE);
  assign aw_valid = (state == S_ADDR) && !aw_done;
  assign w_valid  = (state == S_ADDR) && !w_done;
  assign aw_addr  = {a[AXI_AW-1:6], 6'b0};
  assign w_data   = {WORD_PER_BEAT{val}};
  assign w_strb   = AXI_BYTES'(4'hF) << {a[5:2], 2'b00};
  assign b_ready  = (state == S_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      a <= '0; val <= '0; aw_done <= 1'b0; w_done <= 1'b0;
      resp_cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) resp_cnt <= '0;
      case (state)
        S_IDLE: if (in_valid) begin
          a       <= cfg.out_base + addr_t'({in_idx, 2'b00});
          val     <= in_emission;
          aw_done <= 1'b0;
          w_done  <= 1'b0;
          state   <= S_ADDR;
        end
        S_ADDR: begin
          if (aw_valid && aw_ready) aw_done <= 1'b1;
          if (w_valid && w_ready)   w_done  <= 1'b1;
          if ((aw_done || aw_ready) && (w_done || w_ready)) state <= S_RESP;
        end
        S_RESP: if (b_valid) begin
          state    <= S_IDLE;
          resp_cnt <= resp_cnt + 1'b1;
          if (resp_cnt + 1'b1 == cfg.num_atoms) done <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
