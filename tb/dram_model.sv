// dram_model -- behavioural model of a DRAM channel for the testbenches (not synthesizable).
//
// Stores 64 B lines in a sparse associative array. A line never written reads as a pattern
// derived from its address (init_line), so main memory starts with known, distinct contents;
// with PATTERN = 0 it reads as zero (the DRAM cache, whose metadata starts cleared).
// Requests are taken with a valid/ready handshake; ready is held low for a pseudo-random cycle
// now and then when STALL_PCT > 0. A read answers with one resp_valid pulse exactly LATENCY cycles
// after it was taken (LATENCY >= 1), in order. A metadata request (meta = 1) moves 32 B: the low
// 256 bits of the line at its 32 B-aligned address are written or returned. The model counts the
// bytes moved in each direction, which the testbenches use to check the controller's traffic.
module dram_model
  import banshee_pkg::*;
#(
  parameter int          LATENCY   = 4,
  parameter int          STALL_PCT = 0,
  parameter logic [63:0] SALT      = 64'h0,
  parameter bit          PATTERN   = 1'b1      // 0: unwritten lines read as zero
) (
  input  logic      clk,
  input  logic      req_valid,
  output logic      req_ready,
  input  dram_req_t req,
  output logic      resp_valid,
  output line_t     resp_data
);
  line_t mem [paddr_t];
  longint unsigned rd_bytes = 0, wr_bytes = 0, n_rd = 0, n_wr = 0;

  typedef struct { int unsigned due; line_t data; } pend_t;
  pend_t pq[$];
  int unsigned cyc = 0;

  function automatic line_t init_line(paddr_t a);
    line_t l = '0;
    if (!PATTERN) return l;
    for (int i = 0; i < 8; i++) l[i*64 +: 64] = {16'(i), a} ^ SALT;
    return l;
  endfunction

  function automatic line_t peek(paddr_t a);
    paddr_t k = {a[PA_W-1:6], 6'b0};
    return mem.exists(k) ? mem[k] : init_line(k);
  endfunction

  function automatic void poke(paddr_t a, line_t d);
    mem[{a[PA_W-1:6], 6'b0}] = d;
  endfunction

  initial begin
    req_ready  = 1'b1;
    resp_valid = 1'b0;
    resp_data  = '0;
  end

  always @(posedge clk) begin
    paddr_t k;
    line_t  l;
    cyc <= cyc + 1;
    resp_valid <= 1'b0;
    if (pq.size() > 0 && pq[0].due <= cyc) begin
      resp_valid <= 1'b1;
      resp_data  <= pq[0].data;
      void'(pq.pop_front());
    end
    if (req_valid && req_ready) begin
      k = {req.addr[PA_W-1:6], 6'b0};
      l = peek(k);
      if (req.write) begin
        if (req.meta) begin
          if (req.addr[5]) l[511:256] = req.wdata[255:0];
          else             l[255:0]   = req.wdata[255:0];
          wr_bytes += 32;
        end else begin
          l = req.wdata;
          wr_bytes += 64;
        end
        mem[k] = l;
        n_wr++;
      end else begin
        pend_t p;
        p.due  = cyc + LATENCY - 1;
        p.data = req.meta ? line_t'(req.addr[5] ? l[511:256] : l[255:0]) : l;
        pq.push_back(p);
        rd_bytes += req.meta ? 32 : 64;
        n_rd++;
      end
    end
    req_ready <= (STALL_PCT == 0) || (($urandom % 100) >= STALL_PCT);
  end

endmodule
