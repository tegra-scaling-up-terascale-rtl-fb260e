// mem_model: behavioural memory used by the testbenches in place of the
// local HBM vertex memory and of the remote memory pool behind the
// CXL/silicon-photonics link. Not synthesizable.
//
// Sparse 64-bit word storage indexed by byte address / 8 (the region bits
// [47:46] are ignored). It takes one request per cycle (req_ready is high
// except on randomly chosen cycles when STALL_PCT > 0), performs writes at
// once, and returns each read, with the tag it came with, exactly LATENCY
// cycles after the request was accepted, in order. The remote memory pool is
// modelled with LATENCY = 150 (150 ns of added disaggregation latency at an
// assumed 1 GHz clock); the local HBM with a shorter latency.
// Testbenches preload and inspect it through write_word / read_word.
module mem_model
  import tegra_pkg::*;
#(
  parameter int unsigned LATENCY   = 20,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  data_t mem [logic [42:0]];

  typedef struct {
    longint   due;
    mem_rsp_t r;
  } pend_t;
  pend_t  pend[$];
  longint cyc = 0;
  int unsigned reads = 0, writes = 0;

  function automatic void write_word(input addr_t a, input data_t d);
    mem[a[45:3]] = d;
  endfunction

  function automatic data_t read_word(input addr_t a);
    return mem.exists(a[45:3]) ? mem[a[45:3]] : '0;
  endfunction

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp       = '0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      pend.delete();
    end else begin
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[req.addr[45:3]] = req.wdata;
          writes++;
        end else begin
          pend_t p;
          p.due     = cyc + longint'(LATENCY) - 1;
          p.r.rdata = read_word(req.addr);
          p.r.tag   = req.tag;
          pend.push_back(p);
          reads++;
        end
      end
      if (pend.size() > 0 && pend[0].due <= cyc) begin
        rsp_valid <= 1'b1;
        rsp       <= pend[0].r;
        void'(pend.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
      req_ready <= (STALL_PCT == 0) || ($urandom_range(0, 99) >= STALL_PCT);
    end
  end
endmodule
