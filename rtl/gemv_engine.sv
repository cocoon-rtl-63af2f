// gemv_engine: the near-memory GEMV unit of Cocoon-NMP.
//
// It computes r[j] = sum_{i<K} v[i] * H[i][j] for j = 0..m-1, where H is the
// K x m noise-history matrix (K = b-1 rows, one past noise per row, kept in
// CXL memory as a ring buffer) and v the mixing vector held in the vector
// buffer. The result row r is written back to CXL memory, where the host
// reads it. The paper names the parts (MAC and ACC units, memory-channel
// interleaving, a vector reused m times); the schedule below is this
// design's own.
//
// Schedule. Memory is read in beats: one beat is one 512-bit word from every
// channel at the same channel address, i.e. LANES = NUM_CH*16 consecutive
// elements of one row. For each output beat c the engine reads beat c of
// rows 0..K-1 (row i at src + i*stride + c). Every beat feeds the LANES MAC
// lanes with coefficient v[i]; after row K-1 the lane sums are scaled back
// to Q16.16 (arithmetic shift, saturation) and written as beat c of the
// destination. So the vector is reused once per output beat and each history
// element is read exactly once.
//
// Vector load. With load set at start, the engine instead reads beats
// consecutive beats from src and, as each one arrives on rsp_rdata, tells
// the vector buffer's beat port to take it (vb_we, vb_wbeat = 0, 1, ...;
// the buffer's data input is wired to rsp_rdata), with no MAC work and no
// write-back. This is how a mixing vector the host stored in CXL memory
// reaches the vector buffer; rows and stride are ignored.
//
// Rate: one beat (LANES elements, NUM_CH*64 bytes) per cycle while memory
// keeps up; a GEMV of K rows and B beats takes K*B read cycles plus B write
// cycles plus the memory latency. At 375 MHz and NUM_CH = 2 a read beat per
// cycle is 48 GB/s, the peak GEMV throughput the paper reports.
//
// Interface.
//  start/load/src_beat/dst_beat/rows/beats/stride: launch (ignored while
//    busy); load selects the vector load.
//    Addresses are beat addresses (physical byte address / (NUM_CH*64)).
//    rows (GEMV) or beats of zero finish at once.
//  req_*: one request stream of beats, valid/ready, reads and writes. The
//    result write of a finished beat takes priority over further reads.
//  rsp_*: read data in request order, valid/ready.
//  vidx/vdata: asynchronous read of the vector buffer.
//  vb_we/vb_wbeat: beat writes of rsp_rdata into the vector buffer (load).
//  busy while running, done for one cycle at the end.
// At most MAX_OUT reads are outstanding, so the response buffers in front
// of the engine cannot overflow.
module gemv_engine
  import cocoon_pkg::*;
#(
  parameter int unsigned NUM_CH  = 2,
  parameter int unsigned MAX_OUT = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          load,
  input  logic [CH_ADDR_W-1:0]          src_beat,
  input  logic [CH_ADDR_W-1:0]          dst_beat,
  input  logic [ROWS_W-1:0]             rows,
  input  logic [BEATS_W-1:0]            beats,
  input  logic [BEATS_W-1:0]            stride,
  output logic                          busy,
  output logic                          done,
  output logic [ROWS_W-1:0]             vidx,
  input  data_t                         vdata,
  output logic                          vb_we,
  output logic [BEATS_W-1:0]            vb_wbeat,
  output logic                          req_valid,
  input  logic                          req_ready,
  output logic                          req_we,
  output logic [CH_ADDR_W-1:0]          req_addr,
  output logic [NUM_CH*CH_DATA_W-1:0]   req_wdata,
  input  logic                          rsp_valid,
  output logic                          rsp_ready,
  input  logic [NUM_CH*CH_DATA_W-1:0]   rsp_rdata
);
  localparam int unsigned LANES = NUM_CH * CH_DATA_W / DATA_W;
  localparam int unsigned OW    = $clog2(MAX_OUT + 1);

  // Launch parameters.
  logic [CH_ADDR_W-1:0] src_q, dst_q;
  logic [ROWS_W-1:0]    rows_q;
  logic [BEATS_W-1:0]   beats_q, stride_q;
  logic                 load_q;

  // Read issue position.
  logic                 iss_done;
  logic [ROWS_W-1:0]    iss_r;
  logic [BEATS_W-1:0]   iss_c;
  logic [CH_ADDR_W-1:0] iss_addr;
  // Response (MAC) position.
  logic [ROWS_W-1:0]    rsp_r;
  // Result write-back.
  logic                 wr_pend;
  logic [BEATS_W-1:0]   wr_c;
  logic [NUM_CH*CH_DATA_W-1:0] wr_data;
  logic [OW-1:0]        out_q;

  logic rd_fire, wr_fire, rsp_fire, can_issue, last_row;

  assign can_issue = busy && !iss_done && (out_q < OW'(MAX_OUT)) && !wr_pend;
  assign req_valid = wr_pend || can_issue;
  assign req_we    = wr_pend;
  assign req_addr  = wr_pend ? dst_q + CH_ADDR_W'(wr_c) : iss_addr;
  assign req_wdata = wr_data;
  assign rd_fire   = can_issue && req_ready;
  assign wr_fire   = wr_pend && req_ready;
  assign rsp_ready = busy && !wr_pend;
  assign rsp_fire  = rsp_valid && rsp_ready;
  assign last_row  = (rsp_r == rows_q - 1'b1);
  assign vidx      = rsp_r;
  assign vb_we     = rsp_fire && load_q;
  assign vb_wbeat  = wr_c;

  // MAC lanes.
  logic signed [ACC_W-1:0] acc_q    [LANES];
  logic signed [ACC_W-1:0] acc_next [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mac_lane u_mac (
      .clk, .rst_n,
      .en      (rsp_fire && !load_q),
      .first   (rsp_r == '0),
      .coef    (vdata),
      .elem    (rsp_rdata[l*DATA_W +: DATA_W]),
      .acc_q   (acc_q[l]),
      .acc_next(acc_next[l])
    );
  end

  // Scale a lane sum from Q32.32 back to Q16.16 with saturation.
  function automatic data_t scale_sat(input logic signed [ACC_W-1:0] a);
    logic signed [ACC_W-1:0] s;
    s = a >>> FRAC_W;
    if (s > ACC_W'(signed'({1'b0, {(DATA_W-1){1'b1}}})))
      return {1'b0, {(DATA_W-1){1'b1}}};
    if (s < -ACC_W'(signed'({1'b0, {(DATA_W-1){1'b1}}})) - 1)
      return {1'b1, {(DATA_W-1){1'b0}}};
    return s[DATA_W-1:0];
  endfunction

  logic [NUM_CH*CH_DATA_W-1:0] result_beat;
  always_comb begin
    for (int l = 0; l < LANES; l++) result_beat[l*DATA_W +: DATA_W] = scale_sat(acc_next[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      src_q    <= '0;
      dst_q    <= '0;
      rows_q   <= '0;
      beats_q  <= '0;
      stride_q <= '0;
      load_q   <= 1'b0;
      iss_done <= 1'b1;
      iss_r    <= '0;
      iss_c    <= '0;
      iss_addr <= '0;
      rsp_r    <= '0;
      wr_pend  <= 1'b0;
      wr_c     <= '0;
      wr_data  <= '0;
      out_q    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        src_q    <= src_beat;
        dst_q    <= dst_beat;
        rows_q   <= load ? ROWS_W'(1) : rows;
        beats_q  <= beats;
        stride_q <= load ? '0 : stride;
        load_q   <= load;
        iss_r    <= '0;
        iss_c    <= '0;
        iss_addr <= src_beat;
        rsp_r    <= '0;
        wr_c     <= '0;
        if ((rows == '0 && !load) || beats == '0) begin
          done     <= 1'b1;
          iss_done <= 1'b1;
        end else begin
          busy     <= 1'b1;
          iss_done <= 1'b0;
        end
      end

      // Read issue: walk down the rows of one beat column, then move right.
      if (rd_fire) begin
        if (iss_r == rows_q - 1'b1) begin
          iss_r    <= '0;
          iss_c    <= iss_c + 1'b1;
          iss_addr <= src_q + CH_ADDR_W'(iss_c) + 1'b1;
          if (iss_c == beats_q - 1'b1) iss_done <= 1'b1;
        end else begin
          iss_r    <= iss_r + 1'b1;
          iss_addr <= iss_addr + CH_ADDR_W'(stride_q);
        end
      end

      out_q <= out_q + OW'(rd_fire) - OW'(rsp_fire);

      // Accumulate; the last row of a column produces a result beat. In a
      // vector load each response is one vector beat, counted in wr_c.
      if (rsp_fire && load_q) begin
        wr_c <= wr_c + 1'b1;
        if (wr_c == beats_q - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end else if (rsp_fire) begin
        if (last_row) begin
          rsp_r   <= '0;
          wr_pend <= 1'b1;
          wr_data <= result_beat;
        end else begin
          rsp_r <= rsp_r + 1'b1;
        end
      end

      if (wr_fire) begin
        wr_pend <= 1'b0;
        wr_c    <= wr_c + 1'b1;
        if (wr_c == beats_q - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // Responses never arrive that were not asked for.
  assert property (@(posedge clk) disable iff (!rst_n) rsp_fire |-> out_q != '0);
  assert property (@(posedge clk) disable iff (!rst_n) out_q <= OW'(MAX_OUT));
endmodule
