// nmp_ctrl: command controller of the Cocoon-NMP device.
//
// Takes commands from the FCFS command queue one at a time, in arrival
// order, and carries them out. This follows the per-step workflow of the
// paper: the host (1) sends the mixing vector, (2) starts a GEMV between
// the vector and the noise history, and (3) reads the result; the host also
// registers where each matrix lives. As in the paper, commands come over
// CXL.io and data over CXL.mem: the host normally stores the vector in CXL
// memory and has it loaded into the vector buffer by command. The command
// set and encoding are this design's own (see cocoon_pkg):
//   OP_SET_OFFSET  store the base physical address of matrix src_id
//   OP_WRITE_VEC   store one mixing-vector coefficient at index rows
//   OP_LOAD_VEC    load rows coefficients from matrix src_id, LANES per beat
//   OP_GEMV        dst_id row = vector x (rows x beats matrix src_id)
//   OP_NOP         nothing
// The matrix ids of a GEMV or a load are translated through the offset
// table in the cycle the command is taken; a matrix without an offset, or
// more rows than the vector buffer holds, completes the command with err set
// and starts nothing.
//
// Timing: a command is taken (cmd_ready) only when the controller is idle.
// Offset, vector-write and NOP commands take one cycle; a GEMV or a vector
// load holds the controller until the engine's done. Every command
// produces one cpl_valid pulse, one cycle after it finishes; completion has
// no back-pressure.
// Most outputs (offset, vector and engine arguments) are command fields
// passed on combinationally, qualified by the write enables and eng_start;
// the controller adds no register stage on that path.
module nmp_ctrl
  import cocoon_pkg::*;
#(
  parameter int unsigned NUM_CH    = 2,
  parameter int unsigned NUM_MAT   = 16,
  parameter int unsigned VEC_DEPTH = 255
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // command queue
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  cmd_t                         cmd,
  // offset table
  output logic                         cfg_we,
  output logic [$clog2(NUM_MAT)-1:0]   cfg_id,
  output logic [PA_W-1:0]              cfg_base,
  output logic [$clog2(NUM_MAT)-1:0]   src_id,
  input  logic [PA_W-1:0]              src_pa,
  input  logic                         src_miss,
  output logic [$clog2(NUM_MAT)-1:0]   dst_id,
  input  logic [PA_W-1:0]              dst_pa,
  input  logic                         dst_miss,
  // vector buffer
  output logic                         vec_we,
  output logic [$clog2(VEC_DEPTH)-1:0] vec_waddr,
  output data_t                        vec_wdata,
  // GEMV engine
  output logic                         eng_start,
  output logic                         eng_load,
  output logic [CH_ADDR_W-1:0]         eng_src_beat,
  output logic [CH_ADDR_W-1:0]         eng_dst_beat,
  output logic [ROWS_W-1:0]            eng_rows,
  output logic [BEATS_W-1:0]           eng_beats,
  output logic [BEATS_W-1:0]           eng_stride,
  input  logic                         eng_done,
  // completion to the host
  output logic                         cpl_valid,
  output cpl_t                         cpl,
  output logic                         busy
);
  localparam int unsigned SH    = 6 + $clog2(NUM_CH);
  localparam int unsigned LANES = NUM_CH * CH_DATA_W / DATA_W;

  typedef enum logic { S_IDLE, S_ENGINE } state_e;
  state_e           state;
  logic [TAG_W-1:0] eng_tag;
  opcode_e          eng_op;

  logic take, is_gemv, is_load, gemv_bad, load_bad;
  assign cmd_ready = (state == S_IDLE);
  assign take      = cmd_valid && cmd_ready;
  assign is_gemv   = (cmd.op == OP_GEMV);
  assign is_load   = (cmd.op == OP_LOAD_VEC);
  assign gemv_bad  = src_miss || dst_miss || (32'(cmd.rows) > VEC_DEPTH);
  assign load_bad  = src_miss || (32'(cmd.rows) > VEC_DEPTH);
  assign busy      = (state != S_IDLE);

  always_comb begin
    cfg_we       = take && (cmd.op == OP_SET_OFFSET);
    cfg_id       = cmd.src_id[$clog2(NUM_MAT)-1:0];
    cfg_base     = cmd.value;
    src_id       = cmd.src_id[$clog2(NUM_MAT)-1:0];
    dst_id       = cmd.dst_id[$clog2(NUM_MAT)-1:0];
    vec_we       = take && (cmd.op == OP_WRITE_VEC);
    vec_waddr    = cmd.rows[$clog2(VEC_DEPTH)-1:0];
    vec_wdata    = cmd.value[DATA_W-1:0];
    eng_start    = take && ((is_gemv && !gemv_bad) || (is_load && !load_bad));
    eng_load     = is_load;
    eng_src_beat = CH_ADDR_W'(src_pa >> SH);
    eng_dst_beat = CH_ADDR_W'(dst_pa >> SH);
    eng_rows     = cmd.rows;
    eng_beats    = is_load ? BEATS_W'((32'(cmd.rows) + LANES - 1) / LANES) : cmd.beats;
    eng_stride   = cmd.stride;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      eng_tag   <= '0;
      eng_op    <= OP_NOP;
      cpl_valid <= 1'b0;
      cpl       <= '0;
    end else begin
      cpl_valid <= 1'b0;
      case (state)
        S_IDLE: if (take) begin
          if (eng_start) begin
            state   <= S_ENGINE;
            eng_tag <= cmd.tag;
            eng_op  <= cmd.op;
          end else begin
            cpl_valid <= 1'b1;
            cpl       <= '{tag: cmd.tag, op: cmd.op,
                           err: (is_gemv && gemv_bad) || (is_load && load_bad)};
          end
        end
        S_ENGINE: if (eng_done) begin
          state     <= S_IDLE;
          cpl_valid <= 1'b1;
          cpl       <= '{tag: eng_tag, op: eng_op, err: 1'b0};
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
