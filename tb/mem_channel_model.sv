// mem_channel_model: behavioural model of one DDR4 memory controller and its
// DIMM, for simulation only (not synthesizable).
//
// Storage is a sparse associative array of 512-bit words, zero where never
// written. A request is accepted when req_valid and req_ready; writes store
// at once, reads return their word LAT cycles later, in request order, with
// the request's src and htag. req_ready is drawn at random each cycle
// (STALL_PCT percent low) and never depends on req_valid. bd_write/bd_read
// give testbenches back-door access.
module mem_channel_model
  import cocoon_pkg::*;
#(
  parameter int LAT       = 6,
  parameter int STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output mem_rsp_t rsp
);
  logic [CH_DATA_W-1:0] store [longint];
  mem_rsp_t pend_q [$];
  longint   due_q  [$];
  longint   cyc;
  int       reads, writes;

  function automatic void bd_write(input longint a, input logic [CH_DATA_W-1:0] d);
    store[a] = d;
  endfunction
  function automatic logic [CH_DATA_W-1:0] bd_read(input longint a);
    return store.exists(a) ? store[a] : '0;
  endfunction

  initial begin
    cyc = 0; reads = 0; writes = 0;
    rsp_valid = 1'b0;
    rsp = '0;
    req_ready = 1'b0;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    rsp_valid <= 1'b0;
    if (!rst_n) begin
      pend_q.delete();
      due_q.delete();
      req_ready <= 1'b0;
    end else begin
      if (pend_q.size() > 0 && due_q[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp <= pend_q.pop_front();
        void'(due_q.pop_front());
      end
      if (req_valid && req_ready) begin
        if (req.we) begin
          store[longint'(req.addr)] = req.wdata;
          writes++;
        end else begin
          pend_q.push_back('{rdata: bd_read(longint'(req.addr)), src: req.src, htag: req.htag});
          due_q.push_back(cyc + LAT);
          reads++;
        end
      end
      req_ready <= ($urandom_range(99) >= STALL_PCT);
    end
  end
endmodule
