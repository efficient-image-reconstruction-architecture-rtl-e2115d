// axi_read_arbiter: shares the accelerator's one AXI read port between its two
// read masters, boundary extraction (ID 0) and image extraction (ID 1).
//
// Read-address requests are granted round robin; a grant is held while the
// port's ARVALID waits for ARREADY, so the request on the port stays stable as
// AXI requires. The master's number goes out as ARID, and returning read data
// is steered back by RID. Each master keeps its own bursts in order; the
// memory is expected to return the bursts of one ID in order, as AXI requires.
//
// Interface: s_* are the two internal masters (index = ID); m_* is the shared
// port. Zero latency: grant and steering are combinational.
// The single M_AXI port follows the published block diagram; the round-robin
// arbitration is this design's choice.
module axi_read_arbiter
  import recon_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // two internal masters
  input  logic [1:0]        s_ar_valid,
  output logic [1:0]        s_ar_ready,
  input  ar_req_t           s_ar_req [2],
  output logic [1:0]        s_r_valid,
  input  logic [1:0]        s_r_ready,
  // shared port
  output logic              m_ar_valid,
  input  logic              m_ar_ready,
  output ar_req_t           m_ar_req,
  output logic              m_ar_id,
  input  logic              m_r_valid,
  output logic              m_r_ready,
  input  logic              m_r_id
);
  logic locked, lock_sel, last, sel;

  always_comb begin
    if (locked)                          sel = lock_sel;
    else if (s_ar_valid == 2'b11)        sel = ~last;     // alternate on contention
    else                                 sel = s_ar_valid[1];
  end

  assign m_ar_valid = s_ar_valid[sel];
  assign m_ar_req   = s_ar_req[sel];
  assign m_ar_id    = sel;
  assign s_ar_ready = m_ar_ready ? (2'b01 << sel) : 2'b00;

  assign s_r_valid  = m_r_valid ? (2'b01 << m_r_id) : 2'b00;
  assign m_r_ready  = s_r_ready[m_r_id];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; lock_sel <= 1'b0; last <= 1'b1;
    end else begin
      if (m_ar_valid && m_ar_ready) begin
        locked <= 1'b0;
        last   <= sel;
      end else if (m_ar_valid) begin
        locked   <= 1'b1;
        lock_sel <= sel;
      end
    end
  end

  // A granted request must not be withdrawn before it is accepted.
  always_ff @(posedge clk) if (rst_n && locked)
    assert (s_ar_valid[lock_sel]) else $error("read request withdrawn before ARREADY");

endmodule
