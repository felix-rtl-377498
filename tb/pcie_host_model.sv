// pcie_host_model: behavioural model of the PCIe core plus host memory, for
// testbenches only.
//
// Takes request beats from the DMA engine (felix_pkg::rq_hdr_t header, then
// payload for writes), stores written words in a sparse memory of 256-bit
// words indexed by byte address / 32, and answers each read request with a
// completion header (felix_pkg::rc_hdr_t) and the requested words. rq_ready
// is low on random cycles when STALL is set. Testbenches reach the memory
// through mem_rd/mem_wr. When bad_len_once is set, the next completion
// announces one word too many, to exercise the length check.
module pcie_host_model
  import felix_pkg::*;
#(
  parameter bit STALL = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] rq_data,
  input  logic              rq_valid,
  input  logic              rq_last,
  output logic              rq_ready,
  output logic [DATA_W-1:0] rc_data,
  output logic              rc_valid,
  output logic              rc_last,
  input  logic              rc_ready
);
  logic [DATA_W-1:0] mem [longint];
  logic [DATA_W-1:0] cq [$];     // completion beats
  logic              cl [$];
  bit                in_write = 0;
  longint            waddr;
  int                writes = 0, reads = 0, stalls = 0;
  bit                bad_len_once = 0;

  function automatic logic [DATA_W-1:0] mem_rd(input longint a);
    return mem.exists(a >> 5) ? mem[a >> 5] : '0;
  endfunction
  function automatic void mem_wr(input longint a, input logic [DATA_W-1:0] d);
    mem[a >> 5] = d;
  endfunction

  initial begin rq_ready = 1; rc_valid = 0; rc_last = 0; rc_data = '0; end

  always @(negedge rst_n) begin
    in_write = 0;
    cq.delete();
    cl.delete();
  end

  always @(posedge clk) if (rst_n) begin
    if (rq_valid && rq_ready) begin
      if (!in_write) begin
        rq_hdr_t h;
        h = rq_hdr_t'(rq_data);
        if (h.req_type == REQ_MEM_WRITE) begin
          in_write = 1;
          waddr = longint'(h.addr);
          writes++;
        end else begin
          rc_hdr_t c;
          int n;
          reads++;
          n = int'(h.nwords);
          c = '0;
          c.tag = h.tag;
          c.nwords = bad_len_once ? 20'(n + 1) : 20'(n);
          bad_len_once = 0;
          cq.push_back(DATA_W'(c)); cl.push_back(0);
          for (int k = 0; k < n; k++) begin
            cq.push_back(mem_rd(longint'(h.addr) + 32 * k));
            cl.push_back(k == n - 1);
          end
        end
      end else begin
        mem_wr(waddr, rq_data);
        waddr += 32;
        if (rq_last) in_write = 0;
      end
    end
    // completion stream
    if (rc_valid && rc_ready) begin
      void'(cq.pop_front()); void'(cl.pop_front());
    end
    rc_valid <= 0;
    if (cq.size() > 0 && !(rc_valid && rc_ready && cq.size() == 0)) begin
      rc_valid <= 1;
      rc_data  <= cq[0];
      rc_last  <= cl[0];
    end
    rq_ready <= STALL ? ($urandom_range(0, 4) != 0) : 1'b1;
    if (STALL && !rq_ready) stalls++;
  end
endmodule
