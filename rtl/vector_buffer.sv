// vector_buffer: on-device store for the mixing vector of one GEMV.
//
// The host sends the (b-1)-element mixing vector once per training step; the
// paper keeps it in a buffer on the device where it is reused for all m
// columns of the noise history, so its transfer cost is amortised. The host
// has already divided it by C[t,t] and rotated it to match the ring-buffer
// order of the history rows, so the buffer holds plain coefficients. DEPTH
// 255 covers the largest band size the paper evaluates (b = 256).
//
// Interface: two write ports. The element port (we, waddr, wdata) takes one
// coefficient per cycle, for vectors sent as commands. The beat port (bwe,
// bwbeat, bwdata) takes LANES consecutive coefficients at once, elements
// bwbeat*LANES .. bwbeat*LANES+LANES-1, for vectors the GEMV engine loads
// from CXL memory; elements past DEPTH are dropped. If both ports write the
// same element in one cycle the beat port wins (the controller never does
// this). The read port is asynchronous (distributed RAM): rdata follows
// raddr in the same cycle, which lets the GEMV engine fetch the coefficient
// of the row whose data arrive. Entries reset to zero. The two write ports
// are this design's choice; the paper only says the vector is buffered.
module vector_buffer
  import cocoon_pkg::*;
#(
  parameter int unsigned DEPTH = 255,
  parameter int unsigned LANES = 32,
  localparam int unsigned NBEAT = (DEPTH + LANES - 1) / LANES,
  localparam int unsigned BBW   = (NBEAT > 1) ? $clog2(NBEAT) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  data_t                     wdata,
  input  logic                      bwe,
  input  logic [BBW-1:0]            bwbeat,
  input  logic [LANES*DATA_W-1:0]   bwdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output data_t                     rdata
);
  data_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (bwe && (32'(bwbeat) == i / LANES))
          mem[i] <= bwdata[(i % LANES)*DATA_W +: DATA_W];
        else if (we && (32'(waddr) == i))
          mem[i] <= wdata;
      end
    end
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr] : '0;
endmodule
