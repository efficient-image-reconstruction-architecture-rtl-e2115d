// recon_ip: atom-image reconstruction accelerator (top level).
//
// Given a fluorescence image of a tweezer array, a list of atom positions and
// a 31x31 projector kernel, all in memory, it computes for every atom the
// normalized brightness
//     e = sum(window .* P) / sum(P over the window's in-image part)
// where window is the 31x31 pixel patch centred on the atom, and writes the
// values back to memory as the emission matrix.
//
// Dataflow (every stage runs concurrently on a different atom):
//   recon_ctrl_regs -> start
//   boundary_extraction  reads the grid, emits one ROI per atom
//   image_extraction     reads kernel (once) and the ROI's rows, decodes them
//   data_cache           31 mat1 (projector) + 31 mat2 (image) vectors
//   image_convolution    31 vector units + adder trees -> product/matrix sums
//   output_aggregation   divider -> Q16.16 emission
//   result_writer        writes emissions, signals the end of the run
// Boundary and image extraction share the AXI read port through
// axi_read_arbiter; the result writer owns the write channels.
//
// Ports: s_axil_* is the AXI4-Lite control slave (register map in
// recon_ctrl_regs); m_axi_* is a 512-bit AXI4 master (ID width 1, INCR bursts,
// full-width beats); irq is high when a run has finished.
// Kernel size, bus width, element precision and the module structure follow
// the published design; formats, handshakes and the register map are this
// design's choices (see each module's header).
module recon_ip
  import recon_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // control slave
  input  logic [5:0]           s_axil_awaddr,
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [31:0]          s_axil_wdata,
  input  logic [3:0]           s_axil_wstrb,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  output logic [1:0]           s_axil_bresp,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  input  logic [5:0]           s_axil_araddr,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  output logic [31:0]          s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,
  // memory master: read
  output logic [AXI_AW-1:0]    m_axi_araddr,
  output logic [7:0]           m_axi_arlen,
  output logic [2:0]           m_axi_arsize,
  output logic [1:0]           m_axi_arburst,
  output logic                 m_axi_arid,
  output logic                 m_axi_arvalid,
  input  logic                 m_axi_arready,
  input  logic [AXI_DW-1:0]    m_axi_rdata,
  input  logic                 m_axi_rid,
  input  logic                 m_axi_rlast,
  input  logic [1:0]           m_axi_rresp,
  input  logic                 m_axi_rvalid,
  output logic                 m_axi_rready,
  // memory master: write
  output logic [AXI_AW-1:0]    m_axi_awaddr,
  output logic [7:0]           m_axi_awlen,
  output logic [2:0]           m_axi_awsize,
  output logic [1:0]           m_axi_awburst,
  output logic                 m_axi_awid,
  output logic                 m_axi_awvalid,
  input  logic                 m_axi_awready,
  output logic [AXI_DW-1:0]    m_axi_wdata,
  output logic [AXI_BYTES-1:0] m_axi_wstrb,
  output logic                 m_axi_wlast,
  output logic                 m_axi_wvalid,
  input  logic                 m_axi_wready,
  input  logic [1:0]           m_axi_bresp,
  input  logic                 m_axi_bvalid,
  output logic                 m_axi_bready,
  output logic                 irq
);
  cfg_t cfg;
  logic start, busy, run_done, wr_done;

  recon_ctrl_regs u_regs (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid), .s_wready(s_axil_wready),
    .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid), .s_bready(s_axil_bready),
    .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp), .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .cfg, .start, .busy, .irq, .run_done);

  // A run with no atoms ends at once.
  logic empty_run;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) empty_run <= 1'b0;
    else        empty_run <= start && (cfg.num_atoms == 0);
  end
  assign run_done = wr_done || empty_run;

  // ---------------- read port sharing ----------------
  logic [1:0] s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  ar_req_t    s_ar_req [2];
  ar_req_t    m_ar_req;

  axi_read_arbiter u_arb (
    .clk, .rst_n,
    .s_ar_valid, .s_ar_ready, .s_ar_req, .s_r_valid, .s_r_ready,
    .m_ar_valid(m_axi_arvalid), .m_ar_ready(m_axi_arready), .m_ar_req, .m_ar_id(m_axi_arid),
    .m_r_valid(m_axi_rvalid), .m_r_ready(m_axi_rready), .m_r_id(m_axi_rid));

  assign m_axi_araddr  = m_ar_req.addr;
  assign m_axi_arlen   = m_ar_req.len;
  assign m_axi_arsize  = 3'($clog2(AXI_BYTES));
  assign m_axi_arburst = 2'b01;   // INCR

  // ---------------- boundary extraction ----------------
  logic roi_valid, roi_ready, be_busy;
  roi_t roi;

  boundary_extraction u_bound (
    .clk, .rst_n, .start, .cfg, .busy(be_busy),
    .ar_valid(s_ar_valid[0]), .ar_ready(s_ar_ready[0]), .ar_req(s_ar_req[0]),
    .r_valid(s_r_valid[0]), .r_ready(s_r_ready[0]), .r_data(m_axi_rdata), .r_last(m_axi_rlast),
    .roi_valid, .roi_ready, .roi);

  // ---------------- image extraction + data cache ----------------
  logic              c_clr, c_wr_en, c_wr_sel, c_wr_inside;
  logic [4:0]        c_wr_row;
  logic [KSIZE-1:0]  c_wr_be;
  elem_t             c_wr_data [KSIZE];
  logic              conv_valid, conv_ready, ie_busy;
  logic [IDX_W-1:0]  conv_idx;

  image_extraction u_extract (
    .clk, .rst_n, .start, .cfg, .busy(ie_busy),
    .ar_valid(s_ar_valid[1]), .ar_ready(s_ar_ready[1]), .ar_req(s_ar_req[1]),
    .r_valid(s_r_valid[1]), .r_ready(s_r_ready[1]), .r_data(m_axi_rdata), .r_last(m_axi_rlast),
    .roi_valid, .roi_ready, .roi,
    .c_clr, .c_wr_en, .c_wr_sel, .c_wr_row, .c_wr_be, .c_wr_data, .c_wr_inside,
    .conv_valid, .conv_ready, .conv_idx);

  elem_t            mat1   [KSIZE][KSIZE];
  elem_t            mat2   [KSIZE][KSIZE];
  logic [KSIZE-1:0] in_img [KSIZE];

  data_cache u_cache (
    .clk, .rst_n, .clr(c_clr), .wr_en(c_wr_en), .wr_sel(c_wr_sel), .wr_row(c_wr_row),
    .wr_be(c_wr_be), .wr_data(c_wr_data), .wr_inside(c_wr_inside),
    .mat1, .mat2, .in_img);

  // ---------------- convolution ----------------
  logic             cv_valid, cv_ready;
  logic [IDX_W-1:0] cv_idx;
  acc_t             cv_prod, cv_mat;

  image_convolution u_conv (
    .clk, .rst_n, .in_valid(conv_valid), .in_ready(conv_ready), .in_idx(conv_idx),
    .mat1, .mat2, .in_img,
    .out_valid(cv_valid), .out_ready(cv_ready), .out_idx(cv_idx),
    .out_prod_sum(cv_prod), .out_mat_sum(cv_mat));

  // ---------------- normalization ----------------
  logic               em_valid, em_ready;
  logic [IDX_W-1:0]   em_idx;
  logic signed [31:0] em_val;

  output_aggregation u_agg (
    .clk, .rst_n, .in_valid(cv_valid), .in_ready(cv_ready), .in_idx(cv_idx),
    .in_prod_sum(cv_prod), .in_mat_sum(cv_mat),
    .out_valid(em_valid), .out_ready(em_ready), .out_idx(em_idx), .out_emission(em_val));

  // ---------------- write-back ----------------
  result_writer u_wr (
    .clk, .rst_n, .start, .cfg, .done(wr_done),
    .in_valid(em_valid), .in_ready(em_ready), .in_idx(em_idx), .in_emission(em_val),
    .aw_valid(m_axi_awvalid), .aw_ready(m_axi_awready), .aw_addr(m_axi_awaddr),
    .w_valid(m_axi_wvalid), .w_ready(m_axi_wready), .w_data(m_axi_wdata), .w_strb(m_axi_wstrb),
    .b_valid(m_axi_bvalid), .b_ready(m_axi_bready));

  assign m_axi_awlen   = 8'd0;
  assign m_axi_awsize  = 3'($clog2(AXI_BYTES));
  assign m_axi_awburst = 2'b01;
  assign m_axi_awid    = 1'b0;
  assign m_axi_wlast   = 1'b1;

  // Error responses from memory are not acted upon; flag them in simulation.
  always_ff @(posedge clk) if (rst_n) begin
    if (m_axi_rvalid && m_axi_rready) assert (m_axi_rresp == 2'b00) else $error("read error response");
    if (m_axi_bvalid && m_axi_bready) assert (m_axi_bresp == 2'b00) else $error("write error response");
    if (!busy) assert (!be_busy && !ie_busy) else $error("datapath active outside a run");
  end

endmodule
