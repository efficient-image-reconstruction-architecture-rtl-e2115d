// recon_ctrl_regs: AXI4-Lite control and status registers of the accelerator.
//
// The processing system configures a run here and starts it. Registers
// (32-bit, byte offsets):
//   0x00 CTRL       W: bit 0 = 1 starts a run (ignored while busy); reads 0
//   0x04 STATUS     R: bit 0 busy, bit 1 done (set at the end of a run,
//                      cleared by the next start)
//   0x08 NUM_ATOMS  atoms in the position grid (low 16 bits)
//   0x0C IMG_W      image width in pixels  (low 16 bits)
//   0x10 IMG_H      image height in pixels (low 16 bits)
//   0x14 GRID_BASE  byte address of the atom position grid
//   0x18 KERN_BASE  byte address of the projector kernel (64-byte aligned)
//   0x1C IMG_BASE   byte address of the image
//   0x20 OUT_BASE   byte address of the emission output
//   0x24 CYCLES     R: clock cycles of the last (or current) run
// Unmapped offsets read 0. Writes honour the byte strobes. The write address
// and data channels are taken independently; the response follows when both
// have arrived. Responses are always OKAY.
// Outputs: cfg (the configuration), start (one-clock pulse), irq (= done).
// run_done (one-clock pulse from the datapath) ends the run.
// That the processing system defines control registers follows the published
// design; the register map is this design's own.
module recon_ctrl_regs
  import recon_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [5:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [5:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output cfg_t        cfg,
  output logic        start,
  output logic        busy,
  output logic        irq,
  input  logic        run_done
);
  typedef enum logic [3:0] {
    R_CTRL = 4'h0, R_STATUS = 4'h1, R_NUM = 4'h2, R_W = 4'h3, R_H = 4'h4,
    R_GRID = 4'h5, R_KERN = 4'h6, R_IMG = 4'h7, R_OUT = 4'h8, R_CYC = 4'h9
  } reg_t;

  logic [31:0] regs [2:8];   // R_NUM .. R_OUT
  logic        done;
  logic [31:0] cycles;
  logic        aw_held, w_held;
  logic [5:0]  awaddr_q;
  logic [31:0] wdata_q;
  logic [3:0]  wstrb_q;

  assign s_awready = !aw_held && !s_bvalid;
  assign s_wready  = !w_held  && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;
  assign irq       = done;

  assign cfg.num_atoms = regs[R_NUM][IDX_W-1:0];
  assign cfg.img_w     = regs[R_W][COORD_W-1:0];
  assign cfg.img_h     = regs[R_H][COORD_W-1:0];
  assign cfg.grid_base = regs[R_GRID];
  assign cfg.kern_base = regs[R_KERN];
  assign cfg.img_base  = regs[R_IMG];
  assign cfg.out_base  = regs[R_OUT];

  logic        do_write;
  logic [5:0]  wa;
  logic [31:0] wd;
  logic [3:0]  ws;
  always_comb begin
    wa = aw_held ? awaddr_q : s_awaddr;
    wd = w_held  ? wdata_q  : s_wdata;
    ws = w_held  ? wstrb_q  : s_wstrb;
    do_write = (aw_held || s_awvalid) && (w_held || s_wvalid) && !s_bvalid;
  end

  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] be);
    for (int b = 0; b < 4; b++) if (be[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 2; i <= 8; i++) regs[i] <= '0;
      aw_held <= 1'b0; w_held <= 1'b0;
      awaddr_q <= '0; wdata_q <= '0; wstrb_q <= '0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      start <= 1'b0; busy <= 1'b0; done <= 1'b0; cycles <= '0;
    end else begin
      start <= 1'b0;
      // write channel
      if (s_awvalid && s_awready && !do_write) begin aw_held <= 1'b1; awaddr_q <= s_awaddr; end
      if (s_wvalid && s_wready && !do_write)   begin w_held <= 1'b1; wdata_q <= s_wdata; wstrb_q <= s_wstrb; end
      if (do_write) begin
        aw_held  <= 1'b0;
        w_held   <= 1'b0;
        s_bvalid <= 1'b1;
        case (reg_t'(wa[5:2]))
          R_CTRL: if (ws[0] && wd[0] && !busy) begin
            start  <= 1'b1;
            busy   <= 1'b1;
            done   <= 1'b0;
            cycles <= '0;
          end
          R_NUM, R_W, R_H, R_GRID, R_KERN, R_IMG, R_OUT:
            regs[wa[5:2]] <= merge(regs[wa[5:2]], wd, ws);
          default: ;
        endcase
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      // read channel
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        case (reg_t'(s_araddr[5:2]))
          R_STATUS: s_rdata <= {30'b0, done, busy};
          R_NUM, R_W, R_H, R_GRID, R_KERN, R_IMG, R_OUT: s_rdata <= regs[s_araddr[5:2]];
          R_CYC:    s_rdata <= cycles;
          default:  s_rdata <= '0;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      // run bookkeeping
      if (busy) cycles <= cycles + 1'b1;
      if (busy && run_done) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

endmodule
