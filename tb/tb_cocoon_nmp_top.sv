// tb_cocoon_nmp_top: end-to-end test of the Cocoon-NMP device logic.
//
// The testbench plays the host CPU of the correlated-noise workflow and two
// behavioural memory channels. For each training step t it
//   1. sends the mixing vector (already divided by C[t,t] and rotated to the
//      ring-buffer order: history row i holds the noise of the step s < t
//      with s = i mod K); on even steps it is written into CXL memory and
//      loaded with OP_LOAD_VEC, on odd steps sent as OP_WRITE_VEC commands,
//   2. starts a GEMV of the K x m history with that vector,
//   3. reads the m-element result over CXL.mem,
//   4. forms zhat_t = z_t - result (z_t also pre-scaled), and
//   5. writes zhat_t over history row t mod K.
// Every result is compared with a reference of the recurrence
//   zhat_t = z_t - sum_{tau=1..min(t,K)} c_t[tau] * zhat_{t-tau}
// computed here from the testbench's own list of past noises, in the same
// Q16.16 arithmetic (exact products, arithmetic shift, saturation).
//
// Mechanisms that must each happen at least once, and are counted:
// ring-buffer wrap (t >= K), a vector loaded from CXL memory, the engine held off by host CXL.mem traffic
// during a GEMV, a full command queue, a GEMV refused for an untranslated
// matrix, two jobs whose queued commands complete first-come-first-served,
// and (when MEM_LAT exceeds the engine's read limit) the outstanding-read
// limit. With no memory stalls the GEMV cycle count is checked against one
// beat per cycle. The top is instantiated with its default parameters.
module tb_cocoon_nmp_top #(
  parameter int K_ROWS    = 7,    // b-1
  parameter int NBEATS    = 3,    // row length in beats (m = 32*NBEATS)
  parameter int STEPS     = 20,
  parameter int MEM_LAT   = 24,
  parameter int STALL_PCT = 10,
  parameter int WATCHDOG  = 400000
);
  import cocoon_pkg::*;
  localparam int NUM_CH = 2, LANES = 32, M = LANES * NBEATS, STRIDE = NBEATS + 1;
  localparam int CMDQ_DEPTH = 16, ENG_DEPTH = 16;
  localparam logic [PA_W-1:0] HIST_BASE = 40'h10_0000_0000;
  localparam logic [PA_W-1:0] RES_BASE  = 40'h20_0000_0000;
  localparam logic [PA_W-1:0] RES2_BASE = 40'h20_8000_0000;
  localparam logic [PA_W-1:0] BG_BASE   = 40'h30_0000_0000;
  localparam logic [PA_W-1:0] VEC_BASE  = 40'h40_0000_0000;

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
  logic [$clog2(CMDQ_DEPTH+1)-1:0] cmdq_count;
  logic gemv_busy, eng_blocked;

  cocoon_nmp_top dut (.*);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_mem
    mem_channel_model #(.LAT(MEM_LAT), .STALL_PCT(STALL_PCT)) u_m (
      .clk, .rst_n, .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]),
      .req(ch_req[c]), .rsp_valid(ch_rsp_valid[c]), .rsp(ch_rsp[c]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---- mechanism counters ----
  int n_load = 0, n_wrap = 0, n_blocked = 0, n_qfull = 0, n_miss = 0, n_fcfs = 0, n_outlimit = 0;
  longint cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (eng_blocked) n_blocked++;
    if (cmd_valid && !cmd_ready) n_qfull++;
    if (dut.u_gemv.out_q == ENG_DEPTH) n_outlimit++;
  end

  // ---- completions and host responses ----
  cpl_t cpl_q [$];
  logic [CH_DATA_W-1:0] rsp_data [16];
  bit rsp_got [16];
  always @(posedge clk) if (rst_n) begin
    if (cpl_valid) cpl_q.push_back(cpl);
    if (host_rsp_valid) begin rsp_data[host_rsp.htag] = host_rsp.rdata; rsp_got[host_rsp.htag] = 1; end
  end

  // ---- host side: drive after a falling edge, handshake on the next rising edge ----
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

  task automatic host_write(input logic [PA_W-1:0] pa, input logic [CH_DATA_W-1:0] d);
    host_send('{we: 1'b1, addr: pa, wdata: d, htag: '0});
  endtask

  task automatic host_read(input logic [PA_W-1:0] pa, input int tag, output logic [CH_DATA_W-1:0] d);
    rsp_got[tag] = 0;
    host_send('{we: 1'b0, addr: pa, wdata: '0, htag: HTAG_W'(tag)});
    while (!rsp_got[tag]) @(posedge clk);
    d = rsp_data[tag];
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

  // ---- reference arithmetic ----
  function automatic data_t ref_scale(input logic signed [127:0] s);
    logic signed [127:0] q;
    q = s >>> FRAC_W;
    if (q > 128'sh7fffffff) return 32'h7fffffff;
    if (q < -128'sh80000000) return 32'h80000000;
    return q[31:0];
  endfunction

  // history element e of ring row i: line address and word
  function automatic logic [PA_W-1:0] line_pa(input logic [PA_W-1:0] base, input int row, input int e,
                                               input int stride);
    return base + PA_W'((row * stride + e / LANES) * 128 + ((e % LANES) / 16) * 64);
  endfunction

  data_t zh [][];      // zh[t][e]: noise of step t
  data_t coef [];      // coef[tau], tau = 1..K
  data_t dev_r [];

  // read a result row of M elements
  task automatic read_row(input logic [PA_W-1:0] base, output data_t r []);
    r = new[M];
    for (int l = 0; l < NBEATS * 2; l++) begin
      logic [CH_DATA_W-1:0] d;
      host_read(base + PA_W'(l * 64), l % 8, d);
      for (int w = 0; w < 16; w++) r[l * 16 + w] = d[w*32 +: 32];
    end
  endtask

  task automatic send_vector(input int t, input int tag);
    for (int i = 0; i < K_ROWS; i++) begin
      int tau;
      tau = (t - i) % K_ROWS;
      if (tau <= 0) tau += K_ROWS;
      send_cmd(mk(OP_WRITE_VEC, tag, 0, 0, i, longint'(coef[tau])));
    end
  endtask

  // the same vector as 64-byte lines in CXL memory, then one load command
  task automatic load_vector(input int t, input int tag);
    for (int l = 0; l < (K_ROWS + 15) / 16; l++) begin
      logic [CH_DATA_W-1:0] d;
      d = '0;
      for (int w = 0; w < 16; w++) begin
        int i, tau;
        i = l * 16 + w;
        tau = (t - i) % K_ROWS;
        if (tau <= 0) tau += K_ROWS;
        if (i < K_ROWS) d[w*32 +: 32] = coef[tau];
      end
      host_write(VEC_BASE + PA_W'(l * 64), d);
    end
    send_cmd(mk(OP_LOAD_VEC, tag, 3, 0, K_ROWS, 0));
  endtask

  function automatic data_t ref_elem(input int t, input int e);
    logic signed [127:0] s = 0;
    for (int tau = 1; tau <= K_ROWS && tau <= t; tau++)
      s += 128'(signed'(coef[tau])) * 128'(signed'(zh[t - tau][e]));
    return ref_scale(s);
  endfunction

  bit bg_run;
  int bg_reads = 0;
  logic [CH_DATA_W-1:0] bg_ref [16];

  // background CXL.mem traffic while a GEMV runs (tags 8..15)
  task automatic background();
    int k = 0;
    while (bg_run) begin
      logic [CH_DATA_W-1:0] d;
      int j;
      j = $urandom_range(15);
      host_read(BG_BASE + PA_W'(j * 64), 8 + (k % 8), d);
      check(d == bg_ref[j], "CXL.mem read during GEMV");
      bg_reads++;
      k++;
    end
  endtask

  initial begin
    cpl_t c;
    int cpl_tag = 0;
    cmd_valid = 0; cmd = '0; host_req_valid = 0; host_req = '0;
    foreach (rsp_got[i]) rsp_got[i] = 0;
    zh = new[STEPS];
    coef = new[K_ROWS + 1];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);

    // background region for memory-mode traffic
    for (int j = 0; j < 16; j++) begin
      for (int w = 0; w < 16; w++) bg_ref[j][w*32 +: 32] = $urandom;
      host_write(BG_BASE + PA_W'(j * 64), bg_ref[j]);
    end

    // untranslated matrix: GEMV must be refused
    send_cmd(mk(OP_GEMV, 1, 5, 6, K_ROWS, 0));
    wait_cpl(c);
    check(c.op == OP_GEMV && c.err && c.tag == 1, "GEMV on unknown matrix refused");
    if (c.err) n_miss++;

    // register the matrices
    send_cmd(mk(OP_SET_OFFSET, 2, 0, 0, 0, longint'(HIST_BASE)));
    send_cmd(mk(OP_SET_OFFSET, 3, 1, 0, 0, longint'(RES_BASE)));
    send_cmd(mk(OP_SET_OFFSET, 4, 2, 0, 0, longint'(RES2_BASE)));
    send_cmd(mk(OP_SET_OFFSET, 5, 3, 0, 0, longint'(VEC_BASE)));
    for (int i = 0; i < 4; i++) begin
      wait_cpl(c);
      check(c.op == OP_SET_OFFSET && !c.err && c.tag == TAG_W'(2 + i), "offset completion");
    end

    for (int t = 0; t < STEPS; t++) begin
      longint t0, t1;
      bit busy_step;
      busy_step = (t % 2 == 1);
      for (int tau = 1; tau <= K_ROWS; tau++)
        coef[tau] = data_t'($urandom_range(0, 2 * (32768 / K_ROWS))) - (32768 / K_ROWS);
      if (t % 2 == 0) begin
        load_vector(t, 0);
        wait_cpl(c);
        check(c.op == OP_LOAD_VEC && !c.err && c.tag == 0, "vector load completion");
        n_load++;
      end else send_vector(t, 0);
      // step 2: GEMV
      send_cmd(mk(OP_GEMV, 7, 0, 1, K_ROWS, 0));
      while (!gemv_busy) @(posedge clk);
      t0 = cyc;
      if (busy_step) begin
        bg_run = 1;
        fork background(); join_none
      end
      if (t == 2) begin
        // fill the command queue behind the running GEMV
        for (int q = 0; q < CMDQ_DEPTH + 3; q++) send_cmd(mk(OP_NOP, 8, 0, 0, 0, 0));
      end
      // vector writes complete first, then the GEMV (and any NOPs)
      if (t % 2 == 1) for (int i = 0; i < K_ROWS; i++) wait_cpl(c);
      wait_cpl(c);
      t1 = cyc;
      check(c.op == OP_GEMV && !c.err && c.tag == 7, "GEMV completion");
      if (t == 2) for (int q = 0; q < CMDQ_DEPTH + 3; q++) begin
        wait_cpl(c);
        check(c.op == OP_NOP && c.tag == 8, "NOP completion after GEMV");
      end
      bg_run = 0;
      while (host_req_valid || (busy_step && bg_reads == 0)) @(posedge clk);
      repeat (MEM_LAT + 4) @(posedge clk);
      if (STALL_PCT == 0 && MEM_LAT < ENG_DEPTH && !busy_step && t != 2)
        check(t1 - t0 <= longint'(K_ROWS * NBEATS + NBEATS + MEM_LAT + 8),
              $sformatf("GEMV of %0d x %0d beats took %0d cycles", K_ROWS, NBEATS, t1 - t0));
      // step 3: read the result and compare with the reference
      read_row(RES_BASE, dev_r);
      for (int e = 0; e < M; e++)
        check(dev_r[e] == ref_elem(t, e), $sformatf("step %0d element %0d", t, e));
      // steps 4-5: new noise into ring row t mod K
      zh[t] = new[M];
      for (int e = 0; e < M; e++) zh[t][e] = (data_t'($urandom_range(0, 1 << 18)) - (1 << 17)) - dev_r[e];
      for (int l = 0; l < NBEATS * 2; l++) begin
        logic [CH_DATA_W-1:0] d;
        for (int w = 0; w < 16; w++) d[w*32 +: 32] = zh[t][l * 16 + w];
        host_write(HIST_BASE + PA_W'(((t % K_ROWS) * STRIDE + l / 2) * 128 + (l % 2) * 64), d);
      end
      if (t >= K_ROWS) n_wrap++;
    end

    // two jobs queued back to back; served first come, first served
    begin
      data_t coef_a [], coef_b [], ra [], rb [];
      int t;
      t = STEPS;
      zh = new[STEPS + 1](zh);
      zh[STEPS] = new[M];
      coef_a = new[K_ROWS + 1];
      coef_b = new[K_ROWS + 1];
      for (int tau = 1; tau <= K_ROWS; tau++) begin
        coef_a[tau] = data_t'($urandom_range(0, 2 * (32768 / K_ROWS))) - (32768 / K_ROWS);
        coef_b[tau] = data_t'($urandom_range(0, 2 * (32768 / K_ROWS))) - (32768 / K_ROWS);
      end
      coef = coef_a;
      send_vector(t, 10);
      send_cmd(mk(OP_GEMV, 11, 0, 1, K_ROWS, 0));
      coef = coef_b;
      send_vector(t, 12);
      send_cmd(mk(OP_GEMV, 13, 0, 2, K_ROWS, 0));
      for (int i = 0; i < 2 * K_ROWS + 2; i++) begin
        wait_cpl(c);
        if (i == K_ROWS)         check(c.tag == 11 && c.op == OP_GEMV, "job A GEMV in order");
        else if (i == 2 * K_ROWS + 1) check(c.tag == 13 && c.op == OP_GEMV, "job B GEMV in order");
        else check(c.op == OP_WRITE_VEC && c.tag == (i < K_ROWS ? 10 : 12), "vector writes in order");
      end
      read_row(RES_BASE, ra);
      read_row(RES2_BASE, rb);
      coef = coef_a;
      for (int e = 0; e < M; e++) check(ra[e] == ref_elem(t, e), "job A result");
      coef = coef_b;
      for (int e = 0; e < M; e++) check(rb[e] == ref_elem(t, e), "job B result");
      n_fcfs++;
    end

    $display("mechanisms: vector_load=%0d ring_wrap=%0d engine_held_by_host=%0d queue_full=%0d translation_miss=%0d fcfs_jobs=%0d read_limit=%0d",
             n_load, n_wrap, n_blocked, n_qfull, n_miss, n_fcfs, n_outlimit);
    check(n_load > 0, "vector loaded from CXL memory");
    check(n_wrap > 0, "ring-buffer wrap happened");
    check(n_blocked > 0, "engine held off by CXL.mem traffic");
    check(n_qfull > 0, "command queue full");
    check(n_miss > 0, "translation miss");
    check(n_fcfs > 0, "FCFS jobs");
    if (MEM_LAT > ENG_DEPTH) check(n_outlimit > 0, "outstanding-read limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
