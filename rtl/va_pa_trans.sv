// va_pa_trans: per-matrix offset table used as virtual-to-physical address
// translation.
//
// Following the paper, the device does not keep page tables: each matrix it
// works on (the noise history, the GEMV result) is one contiguous chunk of
// CXL memory, so translation is "look up the matrix's stored offset and add
// the address inside the matrix". The host sets an offset with a command;
// the GEMV path then names matrices by id. The table size (NUM_MAT) and the
// valid bit that flags a matrix with no offset yet are this design's choices.
//
// Interface: one write port (cfg_we, cfg_id, cfg_base), two combinational
// lookup ports (a_*, b_*) so that a GEMV's source and destination are
// translated in the same cycle. A lookup returns base + offset and a miss
// flag when the entry was never written since reset.
module va_pa_trans
  import cocoon_pkg::*;
#(
  parameter int unsigned NUM_MAT = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cfg_we,
  input  logic [$clog2(NUM_MAT)-1:0]  cfg_id,
  input  logic [PA_W-1:0]             cfg_base,
  input  logic [$clog2(NUM_MAT)-1:0]  a_id,
  input  logic [PA_W-1:0]             a_off,
  output logic [PA_W-1:0]             a_pa,
  output logic                        a_miss,
  input  logic [$clog2(NUM_MAT)-1:0]  b_id,
  input  logic [PA_W-1:0]             b_off,
  output logic [PA_W-1:0]             b_pa,
  output logic                        b_miss
);
  logic [PA_W-1:0]    base_q [NUM_MAT];
  logic [NUM_MAT-1:0] vld_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q <= '0;
      for (int i = 0; i < NUM_MAT; i++) base_q[i] <= '0;
    end else if (cfg_we) begin
      base_q[cfg_id] <= cfg_base;
      vld_q[cfg_id]  <= 1'b1;
    end
  end

  always_comb begin
    a_pa   = base_q[a_id] + a_off;
    a_miss = ~vld_q[a_id];
    b_pa   = base_q[b_id] + b_off;
    b_miss = ~vld_q[b_id];
  end
endmodule
