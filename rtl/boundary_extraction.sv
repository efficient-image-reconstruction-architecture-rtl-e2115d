// boundary_extraction: finds each atom's region of interest.
//
// After start it reads the atom position grid from memory, one 512-bit beat
// (16 atoms) per read burst, and for every atom in turn emits a roi_t: the
// image coordinate (x0, y0) = (x - 15, y - 15) of the top-left corner of the
// 31x31 window centred on the atom, and the rows and columns of that window
// that lie inside the img_w x img_h image (clipped at the borders). A window
// wholly outside the image is flagged empty.
//
// Interface: start (one clock, with cfg stable for the whole run) begins a
// run of cfg.num_atoms atoms; busy stays high until the last ROI is handed
// over. Read requests leave on ar_* (single-beat bursts, valid/ready), data
// returns on r_*. ROIs leave on roi_valid/roi_ready, one per clock at most.
// Positions are whole pixels, {y, x} packed into one 32-bit word per atom at
// cfg.grid_base (4-byte aligned).
// That this block turns atom positions into local regions of interest
// follows the published design; the grid format, the clipping rule and the
// one-beat-at-a-time fetch are this design's own choices.
module boundary_extraction
  import recon_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cfg_t              cfg,
  output logic              busy,
  // read master
  output logic              ar_valid,
  input  logic              ar_ready,
  output ar_req_t           ar_req,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [AXI_DW-1:0] r_data,
  input  logic              r_last,
  // regions of interest
  output logic              roi_valid,
  input  logic              roi_ready,
  output roi_t              roi
);
  typedef enum logic [1:0] {S_IDLE, S_AR, S_R, S_EMIT} state_t;
  state_t state;

  logic [IDX_W-1:0]  idx;        // next atom to read
  logic [AXI_DW-1:0] beat;
  addr_t             waddr;      // byte address of atom idx's grid word
  logic [3:0]        lane;

  assign waddr = cfg.grid_base + addr_t'({idx, 2'b00});
  assign lane  = waddr[5:2];

  assign busy     = (state != S_IDLE) || roi_valid;
  assign ar_valid = (state == S_AR);
  assign ar_req   = '{addr: {waddr[AXI_AW-1:6], 6'b0}, len: 8'd0};
  assign r_ready  = (state == S_R);

  // ROI of the atom in the current lane.
  logic [COORD_W-1:0]    ax, ay;
  logic signed [COORD_W+1:0] x0, y0, x1, y1, wmax, hmax;
  roi_t                  nxt;
  always_comb begin
    {ay, ax} = beat[32*lane +: 32];
    x0   = $signed({2'b00, ax}) - (COORD_W+2)'(KHALF);
    y0   = $signed({2'b00, ay}) - (COORD_W+2)'(KHALF);
    x1   = $signed({2'b00, ax}) + (COORD_W+2)'(KHALF);
    y1   = $signed({2'b00, ay}) + (COORD_W+2)'(KHALF);
    wmax = $signed({2'b00, cfg.img_w}) - 1;
    hmax = $signed({2'b00, cfg.img_h}) - 1;
    nxt.idx    = idx;
    nxt.x0     = (COORD_W+1)'(x0);
    nxt.y0     = (COORD_W+1)'(y0);
    nxt.col_lo = (x0 < 0)    ? '0 : COORD_W'(x0);
    nxt.col_hi = (x1 > wmax) ? COORD_W'(wmax) : COORD_W'(x1);
    nxt.row_lo = (y0 < 0)    ? '0 : COORD_W'(y0);
    nxt.row_hi = (y1 > hmax) ? COORD_W'(hmax) : COORD_W'(y1);
    nxt.empty  = (x0 > wmax) || (y0 > hmax);
  end

  logic take;   // move the current lane's ROI into the output register
  assign take = (state == S_EMIT) && (!roi_valid || roi_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      beat      <= '0;
      roi_valid <= 1'b0;
      roi       <= '0;
    end else begin
      if (roi_valid && roi_ready) roi_valid <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          idx   <= '0;
          state <= (cfg.num_atoms == 0) ? S_IDLE : S_AR;
        end
        S_AR: if (ar_ready) state <= S_R;
        S_R:  if (r_valid) begin
          beat  <= r_data;
          state <= S_EMIT;
        end
        S_EMIT: if (take) begin
          roi_valid <= 1'b1;
          roi       <= nxt;
          idx       <= idx + 1'b1;
          if (idx + 1'b1 == cfg.num_atoms) state <= S_IDLE;
          else if (lane == 4'd15)          state <= S_AR;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) if (rst_n && state == S_R && r_valid)
    assert (r_last) else $error("grid read must be a single beat");

endmodule
