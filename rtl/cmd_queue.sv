// cmd_queue: first-come-first-served queue of host commands.
//
// Several training jobs on the host may send commands to the device; the
// paper states that they are queued and served first-come-first-served. This
// block is that queue: a synchronous FIFO of cmd_t records between the CXL.io
// side (push) and the command controller (pop). Its depth is this design's
// choice; the paper gives none.
//
// Interface: valid/ready on both sides. in_ready is low while the queue is
// full, so a full queue back-pressures the host. out_valid is high whenever
// the queue holds a command; the head is shown combinationally on out_cmd and
// leaves on the cycle out_valid & out_ready. A push into an empty queue is
// visible at the output one cycle later. count reports occupancy.
module cmd_queue
  import cocoon_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  cmd_t                       in_cmd,
  output logic                       out_valid,
  input  logic                       out_ready,
  output cmd_t                       out_cmd,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  cmd_t            mem [DEPTH];
  logic [PW-1:0]   wr_ptr, rd_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  logic push, pop;
  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt != '0);
  assign push      = in_valid & in_ready;
  assign pop       = out_valid & out_ready;
  assign out_cmd   = mem[rd_ptr];
  assign count     = cnt;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_cmd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      case ({push, pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: cnt <= cnt;
      endcase
    end
  end

  // A command must not be taken from an empty queue or pushed into a full one.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> cnt != '0);
  assert property (@(posedge clk) disable iff (!rst_n) push |-> int'(cnt) < DEPTH);
endmodule
