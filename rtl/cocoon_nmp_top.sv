// cocoon_nmp_top: logic of the Cocoon-NMP device, a CXL memory card that
// computes the weighted sum of past noises for correlated-noise DP training.
//
// Correlated-noise mechanisms make each step's noise from the previous b-1
// noises: zhat_t = (z_t - sum_tau C[t,t-tau] zhat_{t-tau}) / C[t,t]. When
// the (b-1) x m noise history does not fit in host or GPU memory it is kept
// in CXL memory, and this device computes the weighted sum (a GEMV) next to
// that memory so that only the m-element result crosses the link. The host
// pre-scales the mixing vector and z_t by 1/C[t,t], stores the vector in
// CXL memory and has it loaded into the vector buffer (or sends it element
// by element as commands), subtracts the returned sum from z_t, and writes
// the new noise over the oldest history row (row t mod (b-1)), so the
// history is a ring buffer and the mixing vector is rotated to match.
//
// Blocks (after the paper's device diagram): the command queue and
// controller behind the CXL.io side, the offset table that translates
// matrix ids to physical addresses, the vector buffer, the GEMV engine of
// NUM_CH*16 MAC lanes, and the interconnect that shares the interleaved
// memory channels between CXL.mem and the engine. The CXL endpoint and the
// DDR4 memory controllers are not part of this RTL: their sides are the
// ports below (cmd/cpl = CXL.io, host_* = CXL.mem, ch_* = controllers).
//
// Timing: see the blocks. A GEMV of K rows and B beats streams one beat per
// cycle from NUM_CH channels when memory and the host allow.
module cocoon_nmp_top
  import cocoon_pkg::*;
#(
  parameter int unsigned NUM_CH     = 2,
  parameter int unsigned NUM_MAT    = 16,
  parameter int unsigned VEC_DEPTH  = 255,
  parameter int unsigned CMDQ_DEPTH = 16,
  parameter int unsigned ENG_DEPTH  = 16,
  parameter int unsigned HOST_MAX   = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // CXL.io: commands in, completions out
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  cmd_t                        cmd,
  output logic                        cpl_valid,
  output cpl_t                        cpl,
  // CXL.mem: host loads and stores
  input  logic                        host_req_valid,
  output logic                        host_req_ready,
  input  host_req_t                   host_req,
  output logic                        host_rsp_valid,
  output host_rsp_t                   host_rsp,
  // memory controllers, one per channel
  output logic     [NUM_CH-1:0]       ch_req_valid,
  input  logic     [NUM_CH-1:0]       ch_req_ready,
  output mem_req_t [NUM_CH-1:0]       ch_req,
  input  logic     [NUM_CH-1:0]       ch_rsp_valid,
  input  mem_rsp_t [NUM_CH-1:0]       ch_rsp,
  // status
  output logic [$clog2(CMDQ_DEPTH+1)-1:0] cmdq_count,
  output logic                        gemv_busy,
  output logic                        eng_blocked
);
  localparam int unsigned MW = $clog2(NUM_MAT);
  localparam int unsigned VW = $clog2(VEC_DEPTH);

  // queue -> controller
  logic q_valid, q_ready;
  cmd_t q_cmd;
  cmd_queue #(.DEPTH(CMDQ_DEPTH)) u_cmdq (
    .clk, .rst_n,
    .in_valid (cmd_valid), .in_ready(cmd_ready), .in_cmd(cmd),
    .out_valid(q_valid), .out_ready(q_ready), .out_cmd(q_cmd),
    .count    (cmdq_count)
  );

  logic                 cfg_we, src_miss, dst_miss;
  logic [MW-1:0]        cfg_id, src_id, dst_id;
  logic [PA_W-1:0]      cfg_base, src_pa, dst_pa;
  logic                 vec_we;
  logic [VW-1:0]        vec_waddr;
  data_t                vec_wdata, vdata;
  logic [ROWS_W-1:0]    vidx;
  logic                 eng_start, eng_load, eng_done, ctrl_busy;
  logic                 vb_we;
  logic [BEATS_W-1:0]   vb_wbeat;
  logic [CH_ADDR_W-1:0] eng_src, eng_dst;
  logic [ROWS_W-1:0]    eng_rows;
  logic [BEATS_W-1:0]   eng_beats, eng_stride;

  nmp_ctrl #(.NUM_CH(NUM_CH), .NUM_MAT(NUM_MAT), .VEC_DEPTH(VEC_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid(q_valid), .cmd_ready(q_ready), .cmd(q_cmd),
    .cfg_we, .cfg_id, .cfg_base,
    .src_id, .src_pa, .src_miss, .dst_id, .dst_pa, .dst_miss,
    .vec_we, .vec_waddr, .vec_wdata,
    .eng_start, .eng_load, .eng_src_beat(eng_src), .eng_dst_beat(eng_dst),
    .eng_rows, .eng_beats, .eng_stride, .eng_done,
    .cpl_valid, .cpl, .busy(ctrl_busy)
  );

  va_pa_trans #(.NUM_MAT(NUM_MAT)) u_trans (
    .clk, .rst_n,
    .cfg_we, .cfg_id, .cfg_base,
    .a_id(src_id), .a_off('0), .a_pa(src_pa), .a_miss(src_miss),
    .b_id(dst_id), .b_off('0), .b_pa(dst_pa), .b_miss(dst_miss)
  );

  // engine <-> interconnect; loaded vector beats go from the response data
  // straight into the vector buffer
  logic                        e_req_valid, e_req_ready, e_req_we;
  logic [CH_ADDR_W-1:0]        e_req_addr;
  logic [NUM_CH*CH_DATA_W-1:0] e_req_wdata, e_rsp_rdata;
  logic                        e_rsp_valid, e_rsp_ready;

  localparam int unsigned LANES = NUM_CH * CH_DATA_W / DATA_W;
  localparam int unsigned NVB   = (VEC_DEPTH + LANES - 1) / LANES;
  localparam int unsigned VBW   = (NVB > 1) ? $clog2(NVB) : 1;

  vector_buffer #(.DEPTH(VEC_DEPTH), .LANES(LANES)) u_vbuf (
    .clk, .rst_n,
    .we(vec_we), .waddr(vec_waddr), .wdata(vec_wdata),
    .bwe(vb_we), .bwbeat(VBW'(vb_wbeat)), .bwdata(e_rsp_rdata),
    .raddr(VW'(vidx)), .rdata(vdata)
  );


  gemv_engine #(.NUM_CH(NUM_CH), .MAX_OUT(ENG_DEPTH)) u_gemv (
    .clk, .rst_n,
    .start(eng_start), .load(eng_load), .src_beat(eng_src), .dst_beat(eng_dst),
    .rows(eng_rows), .beats(eng_beats), .stride(eng_stride),
    .busy(gemv_busy), .done(eng_done),
    .vidx, .vdata, .vb_we, .vb_wbeat,
    .req_valid(e_req_valid), .req_ready(e_req_ready), .req_we(e_req_we),
    .req_addr(e_req_addr), .req_wdata(e_req_wdata),
    .rsp_valid(e_rsp_valid), .rsp_ready(e_rsp_ready), .rsp_rdata(e_rsp_rdata)
  );

  nmp_interconnect #(.NUM_CH(NUM_CH), .ENG_DEPTH(ENG_DEPTH), .HOST_MAX(HOST_MAX)) u_ic (
    .clk, .rst_n,
    .host_req_valid, .host_req_ready, .host_req, .host_rsp_valid, .host_rsp,
    .eng_req_valid(e_req_valid), .eng_req_ready(e_req_ready), .eng_req_we(e_req_we),
    .eng_req_addr(e_req_addr), .eng_req_wdata(e_req_wdata),
    .eng_rsp_valid(e_rsp_valid), .eng_rsp_ready(e_rsp_ready), .eng_rsp_rdata(e_rsp_rdata),
    .eng_blocked,
    .ch_req_valid, .ch_req_ready, .ch_req, .ch_rsp_valid, .ch_rsp
  );

  // The controller waits for the engine, so the two agree on busy.
  assert property (@(posedge clk) disable iff (!rst_n) gemv_busy |-> ctrl_busy);
endmodule
