// tb_cocoon_nmp_bands: the correlated-noise step loop at every band size
// b = 16, 32, 56, 64, 112 and 128 used by the evaluated training runs
// (b = 256 runs in tb_cocoon_nmp_full), on one device with its default
// parameters.
//
// Each band gets a fresh, never-written history region, re-registered as
// matrix 0, so the device starts from an all-zero history exactly as a new
// training job does. The band then runs K+2 steps, K = b-1, so its ring buffer
// wraps. Each step's mixing vector is written into CXL memory as 64-byte
// lines and fetched into the vector buffer with OP_LOAD_VEC, so data move
// over CXL.mem and only commands over CXL.io. Rows are packed densely (stride equal to the row length, 3 beats,
// m = 96), unlike the end-to-end test, which pads rows. Every result element
// is compared with the recurrence
//   zhat_t = z_t - sum_{tau=1..min(t,K)} c_t[tau] * zhat_{t-tau}
// computed here in the same Q16.16 arithmetic. Memory has a fixed latency and
// no stalls, so each GEMV must also take no more than one cycle per history
// beat plus one per result beat and the memory latency. Row lengths of the
// real models (10^8 to 10^9 elements) are not simulated; longer rows only
// repeat the same column loop.
module tb_cocoon_nmp_bands;
  import cocoon_pkg::*;
  localparam int NUM_CH = 2, LANES = 32, NBEATS = 3, M = LANES * NBEATS, STRIDE = NBEATS;
  localparam int MEM_LAT = 10, NBANDS = 6;
  localparam int BANDS [NBANDS] = '{16, 32, 56, 64, 112, 128};
  localparam logic [PA_W-1:0] RES_BASE = 40'h80_0000_0000;
  localparam logic [PA_W-1:0] VEC_BASE = 40'h90_0000_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, cpl_valid, host_req_valid, host_req_ready, host_rsp_valid;
  cmd_t cmd;
  cpl_t cpl;
  host_req_t host_req;
  host_rsp_t host_rsp;
  logic [NUM_CH-1:0] ch_req_valid, ch_req_ready, ch_rsp_valid;
  mem_req_t [NUM_CH-1:0] ch_req;
  mem_rsp_t [NUM_CH-1:0] ch_rsp;
  logic [$clog2(16+1)-1:0] cmdq_count;
  logic gemv_busy, eng_blocked;

  cocoon_nmp_top dut (.*);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_mem
    mem_channel_model #(.LAT(MEM_LAT), .STALL_PCT(0)) u_m (
      .clk, .rst_n, .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]),
      .req(ch_req[c]), .rsp_valid(ch_rsp_valid[c]), .rsp(ch_rsp[c]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0;
  cpl_t cpl_q [$];
  logic [CH_DATA_W-1:0] rsp_data [8];
  bit rsp_got [8];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cpl_valid) cpl_q.push_back(cpl);
    if (host_rsp_valid) begin rsp_data[host_rsp.htag[2:0]] = host_rsp.rdata; rsp_got[host_rsp.htag[2:0]] = 1; end
  end

  // host side: drive after a falling edge, handshake on the next rising edge
  task automatic send_cmd(input cmd_t c);
    @(negedge clk); #1;
    cmd_valid = 1; cmd = c;
    #1;
    while (!cmd_ready) begin @(negedge clk); #2; end
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  task automatic host_send(input host_req_t r);
    @(negedge clk); #1;
    host_req_valid = 1; host_req = r;
    #1;
    while (!host_req_ready) begin @(negedge clk); #2; end
    @(posedge clk); #1 host_req_valid = 0;
  endtask

  task automatic wait_cpl(output cpl_t c);
    while (cpl_q.size() == 0) @(posedge clk);
    c = cpl_q.pop_front();
  endtask

  function automatic cmd_t mk(input opcode_e op, input int tag, input int src, input int dst,
                              input int rows, input longint value);
    cmd_t c;
    c = '0;
    c.op = op; c.tag = TAG_W'(tag); c.src_id = MAT_ID_W'(src); c.dst_id = MAT_ID_W'(dst);
    c.rows = ROWS_W'(rows); c.beats = NBEATS; c.stride = STRIDE; c.value = PA_W'(value);
    return c;
  endfunction

  function automatic data_t ref_scale(input logic signed [127:0] s);
    logic signed [127:0] q;
    q = s >>> FRAC_W;
    if (q > 128'sh7fffffff) return 32'h7fffffff;
    if (q < -128'sh80000000) return 32'h80000000;
    return q[31:0];
  endfunction

  initial begin
    cpl_t c;
    int n_wrap = 0, n_steps = 0, n_loads = 0;
    cmd_valid = 0; cmd = '0; host_req_valid = 0; host_req = '0;
    foreach (rsp_got[i]) rsp_got[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);

    send_cmd(mk(OP_SET_OFFSET, 1, 1, 0, 0, longint'(RES_BASE)));
    wait_cpl(c);
    check(c.op == OP_SET_OFFSET && !c.err, "result offset");
    send_cmd(mk(OP_SET_OFFSET, 1, 2, 0, 0, longint'(VEC_BASE)));
    wait_cpl(c);
    check(c.op == OP_SET_OFFSET && !c.err, "vector offset");

    for (int b = 0; b < NBANDS; b++) begin
      int K;
      logic [PA_W-1:0] hist;
      data_t zh [][];
      data_t coef [];
      K = BANDS[b] - 1;
      hist = PA_W'(longint'(b + 1) << 32);
      zh = new[K + 2];
      coef = new[K + 1];
      send_cmd(mk(OP_SET_OFFSET, 2, 0, 0, 0, longint'(hist)));
      wait_cpl(c);
      check(c.op == OP_SET_OFFSET && !c.err, "history offset");

      for (int t = 0; t < K + 2; t++) begin
        longint t0, t1;
        data_t r [M];
        // 1. mixing vector, pre-scaled and rotated to ring order, stored in
        //    CXL memory and loaded into the vector buffer
        for (int tau = 1; tau <= K; tau++)
          coef[tau] = data_t'($urandom_range(0, 2 * (65536 / K))) - (65536 / K);
        for (int l = 0; l < (K + 15) / 16; l++) begin
          logic [CH_DATA_W-1:0] d;
          d = '0;
          for (int w = 0; w < 16; w++) begin
            int i, tau;
            i = l * 16 + w;
            tau = (t - i) % K;
            if (tau <= 0) tau += K;
            if (i < K) d[w*32 +: 32] = coef[tau];
          end
          host_send('{we: 1'b1, addr: VEC_BASE + PA_W'(l * 64), wdata: d, htag: '0});
        end
        send_cmd(mk(OP_LOAD_VEC, 3, 2, 0, K, 0));
        wait_cpl(c);
        check(c.op == OP_LOAD_VEC && !c.err && c.tag == 3, "vector load completion");
        n_loads++;
        // 2. GEMV
        send_cmd(mk(OP_GEMV, 4, 0, 1, K, 0));
        while (!gemv_busy) @(posedge clk);
        t0 = cyc;
        wait_cpl(c);
        t1 = cyc;
        check(c.op == OP_GEMV && !c.err && c.tag == 4, "GEMV completion");
        check(t1 - t0 <= longint'(K * NBEATS + NBEATS + MEM_LAT + 8),
              $sformatf("b=%0d: GEMV took %0d cycles", K + 1, t1 - t0));
        // 3. read the result over CXL.mem
        for (int l = 0; l < 2 * NBEATS; l++) begin
          rsp_got[l] = 0;
          host_send('{we: 1'b0, addr: RES_BASE + PA_W'(l * 64), wdata: '0, htag: HTAG_W'(l)});
        end
        for (int l = 0; l < 2 * NBEATS; l++) begin
          while (!rsp_got[l]) @(posedge clk);
          for (int w = 0; w < 16; w++) r[l * 16 + w] = rsp_data[l][w*32 +: 32];
        end
        // 4. zhat_t = z_t - result, checked against the reference sum
        zh[t] = new[M];
        for (int e = 0; e < M; e++) begin
          logic signed [127:0] s;
          s = 0;
          for (int tau = 1; tau <= K && tau <= t; tau++)
            s += 128'(signed'(coef[tau])) * 128'(signed'(zh[t - tau][e]));
          check(r[e] == ref_scale(s), $sformatf("b=%0d step %0d element %0d", K + 1, t, e));
          zh[t][e] = (data_t'($urandom_range(0, 1 << 18)) - (1 << 17)) - r[e];
        end
        // 5. store zhat_t over ring row t mod K
        for (int l = 0; l < 2 * NBEATS; l++) begin
          logic [CH_DATA_W-1:0] d;
          for (int w = 0; w < 16; w++) d[w*32 +: 32] = zh[t][l * 16 + w];
          host_send('{we: 1'b1, addr: hist + PA_W'(((t % K) * STRIDE + l / 2) * 128 + (l % 2) * 64),
                      wdata: d, htag: '0});
        end
        if (t >= K) n_wrap++;
        n_steps++;
      end
      $display("band b=%0d: %0d steps, ring wrapped", K + 1, K + 2);
    end

    check(n_wrap == 2 * NBANDS, "every band's ring buffer wrapped");
    check(n_loads == n_steps, "every step loaded its vector from CXL memory");
    $display("bands=%0d steps=%0d ring_wraps=%0d vector_loads=%0d", NBANDS, n_steps, n_wrap, n_loads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
