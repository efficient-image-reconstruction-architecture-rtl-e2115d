`timescale 1ns/1ps
// tb_axi_read_arbiter: two masters issue random read requests (random
// lengths, random gaps, each holding its request until accepted) through the
// arbiter to a port whose ARREADY and read-data timing are random. Checks
// that the request on the port stays stable while it waits, that ARID names
// the master whose request it is, that every master sees exactly its own
// beats in order, and that under contention both masters get served.
module tb_axi_read_arbiter;
  import recon_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] s_ar_valid, s_ar_ready, s_r_valid, s_r_ready;
  ar_req_t    s_ar_req [2];
  logic       m_ar_valid, m_ar_ready, m_ar_id, m_r_valid, m_r_ready, m_r_id;
  ar_req_t    m_ar_req;

  axi_read_arbiter dut (.clk, .rst_n, .s_ar_valid, .s_ar_ready, .s_ar_req, .s_r_valid, .s_r_ready,
    .m_ar_valid, .m_ar_ready, .m_ar_req, .m_ar_id, .m_r_valid, .m_r_ready, .m_r_id);

  // port side: queue of accepted requests, served later beat by beat
  typedef struct { bit id; int len; int tag; } req_t;
  req_t port_q[$];
  int   beat_tag [2][$];      // expected tags per master
  int   sent [2], got [2], n_contend;
  bit   prev_wait;
  ar_req_t prev_req;
  bit   prev_id;
  int   cur_beats = 0;
  req_t cur;

  always @(posedge clk) if (rst_n) begin
    // stability while waiting
    if (prev_wait) begin
      checks++;
      if (!m_ar_valid || m_ar_req != prev_req || m_ar_id != prev_id) begin
        failures++; $display("FAIL request changed while waiting");
      end
    end
    prev_wait = m_ar_valid && !m_ar_ready;
    prev_req  = m_ar_req;
    prev_id   = m_ar_id;
    if (s_ar_valid == 2'b11) n_contend++;
    if (m_ar_valid && m_ar_ready) begin
      checks++;
      if (!s_ar_valid[m_ar_id] || s_ar_req[m_ar_id] != m_ar_req || !s_ar_ready[m_ar_id] || s_ar_ready[!m_ar_id]) begin
        failures++; $display("FAIL grant does not match master %0d", m_ar_id);
      end
      port_q.push_back('{m_ar_id, int'(m_ar_req.len), int'(m_ar_req.addr)});
    end
    // read data: the beat seen by the addressed master
    if (m_r_valid && m_r_ready) begin
      checks++;
      if (s_r_valid != (2'b01 << m_r_id)) begin failures++; $display("FAIL beat steered wrongly"); end
      else begin
        automatic int e = beat_tag[m_r_id].pop_front();
        if (e != r_tag) begin failures++; $display("FAIL master %0d got tag %0d expected %0d", m_r_id, r_tag, e); end
        got[m_r_id]++;
      end
    end
  end

  // port response driver
  logic r_busy = 0;
  int   r_tag = 0;
  always @(posedge clk) begin
    if (!rst_n) begin m_r_valid <= 0; r_busy = 0; end
    else begin
      if (m_r_valid && m_r_ready) begin
        cur_beats++;
        if (cur_beats > cur.len) r_busy = 0;
      end
      if (!r_busy && port_q.size() > 0) begin cur = port_q.pop_front(); r_busy = 1; cur_beats = 0; end
      if (!m_r_valid || m_r_ready) begin
        m_r_valid <= r_busy && ($urandom_range(3) != 0);
        m_r_id    <= cur.id;
        r_tag     <= cur.tag;
      end
      m_ar_ready <= ($urandom_range(2) == 0);
    end
  end

  // masters
  for (genvar m = 0; m < 2; m++) begin : g_m
    initial begin
      s_ar_valid[m] = 0; s_ar_req[m] = '0; s_r_ready[m] = 1;
      wait (rst_n);
      for (int k = 0; k < 30; k++) begin
        automatic int len = $urandom_range(3);
        repeat ($urandom_range(2)) @(negedge clk);
        s_ar_valid[m] = 1;
        s_ar_req[m]   = '{addr: addr_t'(1000 * m + k), len: 8'(len)};
        repeat (len + 1) beat_tag[m].push_back(1000 * m + k);
        sent[m] += len + 1;
        do @(posedge clk); while (!s_ar_ready[m]);
        @(negedge clk) s_ar_valid[m] = 0;
      end
    end
  end

  initial begin
    m_ar_ready = 0; m_r_valid = 0; m_r_id = 0;
    sent = '{0, 0}; got = '{0, 0}; n_contend = 0; prev_wait = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (1500) @(posedge clk);
    checks++;
    if (got[0] != sent[0] || got[1] != sent[1] || sent[0] == 0) begin
      failures++; $display("FAIL beats %0d/%0d of %0d/%0d", got[0], got[1], sent[0], sent[1]);
    end
    checks++;
    if (n_contend == 0) begin failures++; $display("FAIL no contention"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
