// image_extraction: fetches the projector kernel and each atom's image window
// over the 512-bit read bus and decodes them into the data cache.
//
// At start the 31x31 kernel is read once, as one 62-beat burst (each kernel
// row is 31 signed 32-bit words padded to 32, i.e. two beats), and written
// into mat1 of the data cache. Then, for every region of interest from
// boundary extraction, mat2 is cleared and one read burst per image row
// inside the window is issued; each burst covers the 64-byte-aligned span
// holding the row's in-image pixels (one or two beats for a 31-pixel row of
// 16-bit pixels). Read requests run ahead of the returning data, so the bus
// can stream. Each returned beat is decoded: every window element whose pixel
// lies in the beat takes that 16-bit pixel, zero-extended to 32 bits, and is
// marked as inside the image. When the last row of a window has arrived the
// window is offered to the image convolution (conv_valid/conv_ready); after it
// is accepted the next ROI is taken.
//
// Interface: start (one clock, cfg stable for the run); busy until
// cfg.num_atoms windows have been handed to the convolution. ar_*/r_* form an
// AXI-like read master (INCR bursts, in-order data); roi_* is the input stream;
// the cache write port and conv_* connect to data_cache and image_convolution.
// Fetching pixels and kernel over the 512-bit bus and decoding to 32-bit
// precision follow the published design. The memory layouts, the kernel
// being read once per run, and the per-row bursts are this design's choices.
module image_extraction
  import recon_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  cfg_t                   cfg,
  output logic                   busy,
  // read master
  output logic                   ar_valid,
  input  logic                   ar_ready,
  output ar_req_t                ar_req,
  input  logic                   r_valid,
  output logic                   r_ready,
  input  logic [AXI_DW-1:0]      r_data,
  input  logic                   r_last,
  // regions of interest
  input  logic                   roi_valid,
  output logic                   roi_ready,
  input  roi_t                   roi,
  // data cache write port
  output logic                   c_clr,
  output logic                   c_wr_en,
  output logic                   c_wr_sel,
  output logic [4:0]             c_wr_row,
  output logic [KSIZE-1:0]       c_wr_be,
  output elem_t                  c_wr_data [KSIZE],
  output logic                   c_wr_inside,
  // hand-off to the convolution
  output logic                   conv_valid,
  input  logic                   conv_ready,
  output logic [IDX_W-1:0]       conv_idx
);
  localparam int unsigned KBEATS = 2 * KSIZE;   // kernel burst length

  typedef enum logic [2:0] {S_IDLE, S_K_AR, S_K_R, S_WAIT, S_ROWS, S_CONV} state_t;
  state_t state;

  roi_t               cur;
  logic [IDX_W-1:0]   done_cnt;
  logic [6:0]         kbeat;
  // request side
  logic [COORD_W-1:0] ar_row;
  addr_t              ar_base;     // byte address of pixel (ar_row, 0)
  logic               ar_more;
  // data side
  logic [COORD_W-1:0] r_row;
  addr_t              r_base;      // byte address of pixel (r_row, 0)
  logic [7:0]         rbeat;

  addr_t row_bytes;
  assign row_bytes = addr_t'({cfg.img_w, 1'b0});

  assign busy      = (state != S_IDLE);
  assign roi_ready = (state == S_WAIT) && (done_cnt != cfg.num_atoms);
  assign conv_valid = (state == S_CONV);
  assign conv_idx   = cur.idx;

  // ---------------- read requests ----------------
  addr_t a_first, a_last;
  assign a_first = ar_base + addr_t'({cur.col_lo, 1'b0});
  assign a_last  = ar_base + addr_t'({cur.col_hi, 1'b0});
  assign ar_more = (state == S_ROWS) && (ar_row <= cur.row_hi);

  always_comb begin
    ar_valid = 1'b0;
    ar_req   = '{addr: '0, len: '0};
    if (state == S_K_AR) begin
      ar_valid = 1'b1;
      ar_req   = '{addr: {cfg.kern_base[AXI_AW-1:6], 6'b0}, len: 8'(KBEATS - 1)};
    end else if (ar_more) begin
      ar_valid = 1'b1;
      ar_req   = '{addr: {a_first[AXI_AW-1:6], 6'b0},
                   len:  8'((a_last >> 6) - (a_first >> 6))};
    end
  end

  // ---------------- data decode ----------------
  assign r_ready = (state == S_K_R) || (state == S_ROWS);

  addr_t beat_line;    // 64-byte line number of the beat now on r_data
  assign beat_line = ((r_base + addr_t'({cur.col_lo, 1'b0})) >> 6) + addr_t'(rbeat);

  logic signed [COORD_W+1:0] col;
  addr_t                     pa;
  always_comb begin
    col         = '0;
    pa          = '0;
    c_clr       = 1'b0;
    c_wr_en     = 1'b0;
    c_wr_sel    = 1'b0;
    c_wr_row    = '0;
    c_wr_be     = '0;
    c_wr_inside = 1'b0;
    for (int c = 0; c < KSIZE; c++) c_wr_data[c] = '0;

    if (state == S_WAIT && roi_valid && roi_ready) c_clr = 1'b1;

    if (state == S_K_R && r_valid) begin
      // kernel beat: row kbeat/2, elements 0..15 or 16..30
      c_wr_en  = 1'b1;
      c_wr_sel = 1'b0;
      c_wr_row = kbeat[5:1];
      for (int c = 0; c < KSIZE; c++) begin
        c_wr_be[c]   = ((c >= 16) == kbeat[0]);
        c_wr_data[c] = r_data[32*(c % 16) +: 32];
      end
    end

    if (state == S_ROWS && r_valid) begin
      c_wr_en     = 1'b1;
      c_wr_sel    = 1'b1;
      c_wr_inside = 1'b1;
      c_wr_row    = 5'($signed({2'b00, r_row}) - cur.y0);
      for (int c = 0; c < KSIZE; c++) begin
        col = cur.x0 + (COORD_W+2)'(c);
        pa  = r_base + (addr_t'(col) << 1);
        c_wr_be[c]   = (col >= $signed({2'b00, cur.col_lo})) &&
                       (col <= $signed({2'b00, cur.col_hi})) &&
                       ((pa >> 6) == beat_line);
        c_wr_data[c] = elem_t'({16'b0, r_data[16*pa[5:1] +: 16]});
      end
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      done_cnt <= '0;
      kbeat    <= '0;
      ar_row   <= '0;
      ar_base  <= '0;
      r_row    <= '0;
      r_base   <= '0;
      rbeat    <= '0;
    end else begin
      case (state)
        S_IDLE: if (start && cfg.num_atoms != 0) begin
          done_cnt <= '0;
          kbeat    <= '0;
          state    <= S_K_AR;
        end
        S_K_AR: if (ar_ready) state <= S_K_R;
        S_K_R: if (r_valid) begin
          kbeat <= kbeat + 1'b1;
          if (r_last) state <= S_WAIT;
        end
        S_WAIT: begin
          if (done_cnt == cfg.num_atoms) state <= S_IDLE;
          else if (roi_valid) begin
            cur     <= roi;
            ar_row  <= roi.row_lo;
            r_row   <= roi.row_lo;
            ar_base <= cfg.img_base + addr_t'(roi.row_lo) * row_bytes;
            r_base  <= cfg.img_base + addr_t'(roi.row_lo) * row_bytes;
            rbeat   <= '0;
            state   <= roi.empty ? S_CONV : S_ROWS;
          end
        end
        S_ROWS: begin
          if (ar_more && ar_ready) begin
            ar_row  <= ar_row + 1'b1;
            ar_base <= ar_base + row_bytes;
          end
          if (r_valid) begin
            if (r_last) begin
              rbeat  <= '0;
              r_row  <= r_row + 1'b1;
              r_base <= r_base + row_bytes;
              if (r_row == cur.row_hi) state <= S_CONV;
            end else begin
              rbeat <= rbeat + 1'b1;
            end
          end
        end
        S_CONV: if (conv_ready) begin
          done_cnt <= done_cnt + 1'b1;
          state    <= S_WAIT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) if (rst_n) begin
    if (state == S_K_R && r_valid && r_last)
      assert (kbeat == 7'(KBEATS - 1)) else $error("kernel burst length mismatch");
  end

endmodule
