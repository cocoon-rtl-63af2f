// mac_lane: one multiply-accumulate lane of the GEMV engine.
//
// Multiplies a mixing-vector coefficient by one noise-history element and
// adds the product to the lane's running sum. With 'first' set the sum
// restarts at the product, so no separate clear cycle is needed between
// output elements. The paper's engine is built from MAC and accumulation
// units; the Q16.16 operands and the 72-bit accumulator (64-bit product plus
// 8 guard bits for up to 256 terms) are this design's choices.
//
// Timing: acc_next is combinational from the inputs and the register;
// acc_q takes acc_next on a clock edge with en high.
module mac_lane
  import cocoon_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    first,
  input  data_t                   coef,
  input  data_t                   elem,
  output logic signed [ACC_W-1:0] acc_q,
  output logic signed [ACC_W-1:0] acc_next
);
  logic signed [PROD_W-1:0] prod;

  always_comb begin
    prod     = coef * elem;
    acc_next = (first ? '0 : acc_q) + ACC_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc_q <= '0;
    else if (en) acc_q <= acc_next;
  end
endmodule
