`timescale 1ns/1ps
// axi_mem_model: behavioural model of the off-chip memory (DDR behind the
// processing system's memory ports) for the testbenches. Not synthesizable.
//
// A 512-bit-wide AXI4 slave over DEPTH beats of storage (mem[], reachable by
// hierarchical reference for preload and checking). Read requests are queued
// without limit and served in order: each burst starts RD_LAT clocks after it
// is at the head of the queue and then streams one beat per clock (INCR,
// full-width beats), with a random bubble on RVALID STALL_PCT percent of the
// time. Writes take AW and W (any order), apply the byte strobes and answer
// on B. Addresses wrap at the end of the array.
module axi_mem_model #(
  parameter int unsigned DEPTH     = 32768,
  parameter int unsigned RD_LAT    = 8,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [31:0]  araddr,
  input  logic [7:0]   arlen,
  input  logic         arid,
  input  logic         arvalid,
  output logic         arready,
  output logic [511:0] rdata,
  output logic         rid,
  output logic         rlast,
  output logic [1:0]   rresp,
  output logic         rvalid,
  input  logic         rready,
  input  logic [31:0]  awaddr,
  input  logic         awvalid,
  output logic         awready,
  input  logic [511:0] wdata,
  input  logic [63:0]  wstrb,
  input  logic         wvalid,
  output logic         wready,
  output logic [1:0]   bresp,
  output logic         bvalid,
  input  logic         bready
);
  logic [511:0] mem [DEPTH];

  typedef struct { int unsigned line; int unsigned len; bit id; longint unsigned due; } req_t;
  longint unsigned now = 0;
  always @(posedge clk) now <= now + 1;
  req_t q[$];

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  assign arready = 1'b1;
  assign rresp   = 2'b00;
  assign bresp   = 2'b00;

  // read side: queue requests, serve them one burst after another
  always @(posedge clk) if (rst_n && arvalid && arready) q.push_back('{araddr >> 6, arlen, arid, now + RD_LAT});

  req_t cur;
  bit   act = 1'b0;
  int   beat = 0;
  always @(posedge clk) begin
    if (!rst_n) begin
      rvalid <= 1'b0; rlast <= 1'b0; rid <= 1'b0; rdata <= '0;
      act = 1'b0;
    end else begin
      if (rvalid && rready) begin
        if (rlast) act = 1'b0;
        else       beat++;
      end
      if (!rvalid || rready) begin
        if (!act && q.size() > 0 && q[0].due <= now) begin
          cur  = q.pop_front();
          act  = 1'b1;
          beat = 0;
        end
        if (act && $urandom_range(99) >= STALL_PCT) begin
          rvalid <= 1'b1;
          rdata  <= mem[(cur.line + beat) % DEPTH];
          rid    <= cur.id;
          rlast  <= (beat == int'(cur.len));
        end else begin
          rvalid <= 1'b0;
          rlast  <= 1'b0;
        end
      end
    end
  end

  // write side
  bit          aw_have, w_have;
  logic [31:0] aw_a;
  logic [511:0] w_d;
  logic [63:0]  w_s;
  assign awready = !aw_have && !bvalid;
  assign wready  = !w_have && !bvalid;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_have <= 0; w_have <= 0; bvalid <= 0; aw_a <= '0; w_d <= '0; w_s <= '0;
    end else begin
      logic        ha, hw;
      logic [31:0] a;
      logic [511:0] d;
      logic [63:0]  s;
      ha = aw_have; hw = w_have; a = aw_a; d = w_d; s = w_s;
      if (awvalid && awready) begin ha = 1; a = awaddr; end
      if (wvalid && wready)   begin hw = 1; d = wdata; s = wstrb; end
      if (ha && hw) begin
        for (int i = 0; i < 64; i++) if (s[i]) mem[(a >> 6) % DEPTH][8*i +: 8] = d[8*i +: 8];
        ha = 0; hw = 0;
        bvalid <= 1;
      end
      aw_have <= ha; w_have <= hw; aw_a <= a; w_d <= d; w_s <= s;
      if (bvalid && bready) bvalid <= 0;
    end
  end

endmodule
