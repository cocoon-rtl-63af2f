// tb_gemv_engine: self-checking test of the GEMV engine against a wide-beat
// memory model and a reference GEMV computed here with integer arithmetic.
// Covers random shapes (rows 1..40, beats 1..6, row stride >= beats),
// saturation of large sums, zero-size launches, memory stalls and the
// outstanding-read limit, and vector loads from memory into the vector
// buffer (followed by a GEMV that uses the loaded vector), and checks the cycle count of an unstalled run
// (one read beat per cycle: rows*beats + beats + latency + small overhead).
module tb_gemv_engine;
  import cocoon_pkg::*;
  localparam int NUM_CH  = 2;
  localparam int LANES   = NUM_CH * CH_DATA_W / DATA_W;
  localparam int BW      = NUM_CH * CH_DATA_W;
  localparam int MAX_OUT = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, load, busy, done, vb_we;
  logic [BEATS_W-1:0] vb_wbeat;
  logic [CH_ADDR_W-1:0] src_beat, dst_beat;
  logic [ROWS_W-1:0] rows, vidx;
  logic [BEATS_W-1:0] beats, stride;
  data_t vdata;
  logic req_valid, req_ready, req_we, rsp_valid, rsp_ready;
  logic [CH_ADDR_W-1:0] req_addr;
  logic [BW-1:0] req_wdata, rsp_rdata;

  gemv_engine #(.NUM_CH(NUM_CH), .MAX_OUT(MAX_OUT)) dut (.*);

  // mixing vector seen by the engine
  data_t vec [256];
  assign vdata = vec[vidx[7:0]];
  int vb_writes = 0, mem_writes = 0;
  always @(posedge clk) if (rst_n && vb_we) begin
    vb_writes++;
    for (int l = 0; l < LANES; l++)
      if (vb_wbeat * LANES + l < 256) vec[vb_wbeat * LANES + l] = rsp_rdata[l*DATA_W +: DATA_W];
  end
  bit keep_vec = 0;

  // wide-beat memory model
  logic [BW-1:0] bmem [longint];
  logic [BW-1:0] pq [$];
  longint dq [$];
  longint cyc = 0;
  int lat = 6, stall_pct = 0, max_out_seen = 0;

  always @(posedge clk) begin
    cyc++;
    if (rsp_valid && rsp_ready) begin void'(pq.pop_front()); void'(dq.pop_front()); end
    if (req_valid && req_ready) begin
      if (req_we) begin bmem[longint'(req_addr)] = req_wdata; mem_writes++; end
      else begin
        pq.push_back(bmem.exists(longint'(req_addr)) ? bmem[longint'(req_addr)] : '0);
        dq.push_back(cyc + lat);
      end
    end
    if (rst_n && dut.out_q > max_out_seen) max_out_seen = dut.out_q;
    req_ready <= ($urandom_range(99) >= stall_pct);
    rsp_valid <= (pq.size() > 0) && (dq[0] <= cyc + 1);
    rsp_rdata <= (pq.size() > 0) ? pq[0] : '0;
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic data_t ref_scale(input logic signed [127:0] s);
    logic signed [127:0] q;
    q = s >>> FRAC_W;
    if (q > 128'sh7fffffff) return 32'h7fffffff;
    if (q < -128'sh80000000) return 32'h80000000;
    return q[31:0];
  endfunction

  function automatic data_t elem(input logic [BW-1:0] b, input int l);
    return b[l*DATA_W +: DATA_W];
  endfunction

  // Run one GEMV and check its result; returns the cycles start->done.
  task automatic run_gemv(input int k, input int nb, input int st, input longint src,
                          input longint dst, input int big, output int cycles);
    longint t0;
    if (!keep_vec) for (int i = 0; i < k; i++) vec[i] = big ? 32'sh7fff0000 : data_t'($urandom_range(65535)) - 32768;
    for (int i = 0; i < k; i++)
      for (int c = 0; c < nb; c++) begin
        logic [BW-1:0] b;
        for (int l = 0; l < LANES; l++)
          b[l*DATA_W +: DATA_W] = big ? 32'sh7fff0000 : data_t'($urandom_range(1 << 20)) - (1 << 19);
        bmem[src + i * st + c] = b;
      end
    @(posedge clk); #1;
    start = 1; load = 0; src_beat = CH_ADDR_W'(src); dst_beat = CH_ADDR_W'(dst);
    rows = ROWS_W'(k); beats = nb; stride = st;
    t0 = cyc;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
    cycles = int'(cyc - t0);
    for (int c = 0; c < nb; c++)
      for (int l = 0; l < LANES; l++) begin
        logic signed [127:0] s = 0;
        for (int i = 0; i < k; i++) s += 128'(signed'(vec[i])) * 128'(signed'(elem(bmem[src + i * st + c], l)));
        
        check(bmem.exists(dst + c) && elem(bmem[dst + c], l) == ref_scale(s),
              $sformatf("result k=%0d nb=%0d c=%0d l=%0d", k, nb, c, l));
      end
  endtask

  initial begin
    int cyc_n;
    start = 0; load = 0; src_beat = 0; dst_beat = 0; rows = 0; beats = 0; stride = 0;
    req_ready = 0; rsp_valid = 0; rsp_rdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // 1. Rate: no stalls, latency 6.
    stall_pct = 0; lat = 6;
    run_gemv(31, 4, 4, 1000, 9000, 0, cyc_n);
    check(cyc_n >= 31 * 4 + 4 && cyc_n <= 31 * 4 + 4 + lat + 8,
          $sformatf("unstalled GEMV took %0d cycles, expected about %0d", cyc_n, 31 * 4 + 4 + lat));
    $display("rate: 31 rows x 4 beats in %0d cycles", cyc_n);
    // 2. Random shapes with stalls and a long latency (hits the read limit).
    stall_pct = 30; lat = 40;
    for (int it = 0; it < 12; it++) begin
      int k, nb, st;
      k = $urandom_range(1, 40); nb = $urandom_range(1, 6); st = nb + $urandom_range(0, 3);
      run_gemv(k, nb, st, 20000 + it * 1000, 90000 + it * 10, 0, cyc_n);
    end
    // long latency without stalls: the read limit must throttle issue
    stall_pct = 0; lat = 40;
    run_gemv(20, 4, 5, 40000, 95000, 0, cyc_n);
    check(max_out_seen == MAX_OUT, $sformatf("outstanding-read limit reached (max %0d)", max_out_seen));
    // 3. Saturation.
    stall_pct = 0; lat = 3;
    run_gemv(3, 1, 1, 50000, 60000, 1, cyc_n);
    // 4. Vector loads: K elements in ceil(K/32) beats, then a GEMV with them.
    for (int it = 0; it < 6; it++) begin
      int k, nb, w0, m0;
      longint vsrc;
      logic [BW-1:0] vb [8];
      k = (it == 0) ? 255 : $urandom_range(1, 255);
      nb = (k + LANES - 1) / LANES;
      vsrc = 80000 + it * 16;
      stall_pct = (it % 2) ? 30 : 0; lat = $urandom_range(3, 30);
      for (int c = 0; c < nb; c++) begin
        for (int l = 0; l < LANES; l++) vb[c][l*DATA_W +: DATA_W] = data_t'($urandom_range(65535)) - 32768;
        bmem[vsrc + c] = vb[c];
      end
      w0 = vb_writes; m0 = mem_writes;
      @(posedge clk); #1;
      start = 1; load = 1; src_beat = CH_ADDR_W'(vsrc); rows = ROWS_W'(k); beats = nb;
      stride = 7;  // ignored by a load
      @(posedge clk); #1;
      start = 0; load = 0;
      while (!done) begin @(posedge clk); #1; end
      check(vb_writes - w0 == nb, $sformatf("load of %0d elements wrote %0d beats", k, vb_writes - w0));
      check(mem_writes == m0, "load writes no memory");
      for (int i = 0; i < k; i++)
        check(vec[i] == elem(vb[i / LANES], i % LANES), $sformatf("loaded element %0d", i));
      keep_vec = 1;
      stall_pct = 0; lat = 6;
      run_gemv(k, 2, 2, 100000 + it * 1000, 99000 + it * 10, 0, cyc_n);
      keep_vec = 0;
    end
    // 5. Zero rows: done at once, nothing written.
    @(posedge clk); #1;
    start = 1; rows = 0; beats = 3; dst_beat = 70000;
    @(posedge clk); #1; start = 0;
    check(done && !busy, "zero-row GEMV completes at once");
    check(!bmem.exists(70000), "zero-row GEMV writes nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
