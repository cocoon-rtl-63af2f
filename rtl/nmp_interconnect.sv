// nmp_interconnect: connects the host's CXL.mem path and the GEMV engine to
// the memory channels of the Cocoon-NMP device.
//
// The device works as ordinary CXL memory and as a GEMV engine at the same
// time; both reach the DDR4 channels through this block. The paper says the
// engine gets its bandwidth from memory-channel interleaving; here the
// physical address space is interleaved across NUM_CH channels at 64-byte
// granularity:
//   channel      = pa[6 +: log2(NUM_CH)]
//   channel word = pa >> (6 + log2(NUM_CH))
// A host line goes to one channel. An engine beat (NUM_CH*64 bytes, beat
// address = pa / (NUM_CH*64)) goes to all channels at once at the same
// channel word, so the engine sees NUM_CH times the bandwidth of a channel.
// Channel j supplies bits [j*512 +: 512] of the beat.
//
// Arbitration (this design's choice; the paper gives none): a host request
// wins over the engine in any cycle in which it can be accepted, so CXL.mem
// latency does not suffer from a running GEMV. The engine is granted only
// when every channel is ready. eng_blocked flags a cycle in which the engine
// waited for the host.
//
// Responses: every read response is tagged with its source. Engine data go
// into one FIFO per channel and are handed out when all channels have
// returned their part of the beat. Host data go into one FIFO per channel
// and are returned with the host's tag, lowest channel first; the host sees
// its reads complete out of order across channels. At most HOST_MAX host
// reads are outstanding. The engine limits its own outstanding reads to the
// depth of the engine FIFOs (ENG_DEPTH). Writes get no response.
//
// Handshakes: the ch_req_valid of a channel depends on the ready inputs
// (grant in lockstep), so a channel's ready must not depend on its valid.
// Channel responses have no ready: they are always accepted.
module nmp_interconnect
  import cocoon_pkg::*;
#(
  parameter int unsigned NUM_CH    = 2,
  parameter int unsigned ENG_DEPTH = 16,
  parameter int unsigned HOST_MAX  = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Host CXL.mem side
  input  logic                        host_req_valid,
  output logic                        host_req_ready,
  input  host_req_t                   host_req,
  output logic                        host_rsp_valid,
  output host_rsp_t                   host_rsp,
  // GEMV engine side
  input  logic                        eng_req_valid,
  output logic                        eng_req_ready,
  input  logic                        eng_req_we,
  input  logic [CH_ADDR_W-1:0]        eng_req_addr,
  input  logic [NUM_CH*CH_DATA_W-1:0] eng_req_wdata,
  output logic                        eng_rsp_valid,
  input  logic                        eng_rsp_ready,
  output logic [NUM_CH*CH_DATA_W-1:0] eng_rsp_rdata,
  output logic                        eng_blocked,
  // Memory channels
  output logic     [NUM_CH-1:0]       ch_req_valid,
  input  logic     [NUM_CH-1:0]       ch_req_ready,
  output mem_req_t [NUM_CH-1:0]       ch_req,
  input  logic     [NUM_CH-1:0]       ch_rsp_valid,
  input  mem_rsp_t [NUM_CH-1:0]       ch_rsp
);
  localparam int unsigned CW = (NUM_CH > 1) ? $clog2(NUM_CH) : 1;
  localparam int unsigned SH = 6 + $clog2(NUM_CH);
  localparam int unsigned HW = $clog2(HOST_MAX + 1);

  logic [CW-1:0] hc;
  logic          host_ok, host_fire, eng_fire;
  logic [HW-1:0] host_out;

  assign hc             = (NUM_CH > 1) ? CW'(host_req.addr >> 6) : '0;
  assign host_ok        = host_req.we || (host_out < HW'(HOST_MAX));
  assign host_req_ready = ch_req_ready[hc] && host_ok;
  assign host_fire      = host_req_valid && host_req_ready;
  assign eng_req_ready  = (&ch_req_ready) && !host_fire;
  assign eng_fire       = eng_req_valid && eng_req_ready;
  assign eng_blocked    = eng_req_valid && (&ch_req_ready) && host_fire;

  always_comb begin
    for (int c = 0; c < NUM_CH; c++) begin
      if (host_fire) begin
        ch_req_valid[c]  = (hc == CW'(c));
        ch_req[c].we     = host_req.we;
        ch_req[c].addr   = CH_ADDR_W'(host_req.addr >> SH);
        ch_req[c].wdata  = host_req.wdata;
        ch_req[c].src    = SRC_HOST;
        ch_req[c].htag   = host_req.htag;
      end else begin
        ch_req_valid[c]  = eng_fire;
        ch_req[c].we     = eng_req_we;
        ch_req[c].addr   = eng_req_addr;
        ch_req[c].wdata  = eng_req_wdata[c*CH_DATA_W +: CH_DATA_W];
        ch_req[c].src    = SRC_ENGINE;
        ch_req[c].htag   = '0;
      end
    end
  end

  // Response buffers.
  logic [NUM_CH-1:0] e_valid, h_valid, h_pop, e_in_ready, h_in_ready;
  logic [CH_DATA_W-1:0] e_data [NUM_CH];
  host_rsp_t            h_data [NUM_CH];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    sync_fifo #(.T(logic [CH_DATA_W-1:0]), .DEPTH(ENG_DEPTH)) u_eng_fifo (
      .clk, .rst_n,
      .in_valid (ch_rsp_valid[c] && ch_rsp[c].src == SRC_ENGINE),
      .in_ready (e_in_ready[c]),
      .in_data  (ch_rsp[c].rdata),
      .out_valid(e_valid[c]),
      .out_ready(eng_rsp_valid && eng_rsp_ready),
      .out_data (e_data[c])
    );
    sync_fifo #(.T(host_rsp_t), .DEPTH(HOST_MAX)) u_host_fifo (
      .clk, .rst_n,
      .in_valid (ch_rsp_valid[c] && ch_rsp[c].src == SRC_HOST),
      .in_ready (h_in_ready[c]),
      .in_data  ('{rdata: ch_rsp[c].rdata, htag: ch_rsp[c].htag}),
      .out_valid(h_valid[c]),
      .out_ready(h_pop[c]),
      .out_data (h_data[c])
    );
    assign eng_rsp_rdata[c*CH_DATA_W +: CH_DATA_W] = e_data[c];

    // The credit limits above keep every buffer from overflowing.
    assert property (@(posedge clk) disable iff (!rst_n)
      ch_rsp_valid[c] |-> (ch_rsp[c].src == SRC_ENGINE ? e_in_ready[c] : h_in_ready[c]));
  end

  assign eng_rsp_valid = &e_valid;

  // Host responses: lowest channel first.
  always_comb begin
    h_pop          = '0;
    host_rsp_valid = 1'b0;
    host_rsp       = h_data[0];
    for (int c = NUM_CH - 1; c >= 0; c--) begin
      if (h_valid[c]) begin
        h_pop          = NUM_CH'(1) << c;
        host_rsp_valid = 1'b1;
        host_rsp       = h_data[c];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_out <= '0;
    else host_out <= host_out + HW'(host_fire && !host_req.we) - HW'(host_rsp_valid);
  end
endmodule
