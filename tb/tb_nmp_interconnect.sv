// tb_nmp_interconnect: self-checking test of the memory interconnect with two
// behavioural channels (latency 5, 20% random stalls).
//  1. host writes 64 lines; back-door check that line pa sits in channel
//     pa[6] at word pa>>7 (64-byte interleave).
//  2. the engine reads the 32 beats of that region while the host reads the
//     same lines with random tags; every host response must carry the data
//     of its tag, every engine beat must be {channel 1 line, channel 0 line};
//     the engine must have been held off by the host at least once.
//  3. the engine writes 16 beats, the host reads them back as lines.
module tb_nmp_interconnect;
  import cocoon_pkg::*;
  localparam int NUM_CH = 2, ENG_DEPTH = 16, HOST_MAX = 8;
  localparam int BW = NUM_CH * CH_DATA_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_req_valid, host_req_ready, host_rsp_valid;
  host_req_t host_req;
  host_rsp_t host_rsp;
  logic eng_req_valid, eng_req_ready, eng_req_we, eng_rsp_valid, eng_rsp_ready, eng_blocked;
  logic [CH_ADDR_W-1:0] eng_req_addr;
  logic [BW-1:0] eng_req_wdata, eng_rsp_rdata;
  logic [NUM_CH-1:0] ch_req_valid, ch_req_ready, ch_rsp_valid;
  mem_req_t [NUM_CH-1:0] ch_req;
  mem_rsp_t [NUM_CH-1:0] ch_rsp;

  nmp_interconnect #(.NUM_CH(NUM_CH), .ENG_DEPTH(ENG_DEPTH), .HOST_MAX(HOST_MAX)) dut (.*);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_mem
    mem_channel_model #(.LAT(5), .STALL_PCT(20)) u_m (
      .clk, .rst_n, .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]),
      .req(ch_req[c]), .rsp_valid(ch_rsp_valid[c]), .rsp(ch_rsp[c]));
  end

  int checks = 0, failures = 0, blocked = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [CH_DATA_W-1:0] ref_line [longint];   // by byte address
  logic [CH_DATA_W-1:0] exp_tag [16];
  bit tag_busy [16];
  int host_pending = 0, eng_pending = 0, eng_got = 0;
  longint eng_exp [$];

  function automatic logic [BW-1:0] ref_beat(input longint b);
    return {ref_line[b * 128 + 64], ref_line[b * 128]};
  endfunction

  // response monitors
  always @(posedge clk) if (rst_n) begin
    if (eng_blocked) blocked++;
    if (host_rsp_valid) begin
      check(tag_busy[host_rsp.htag], "host response for an outstanding tag");
      check(host_rsp.rdata == exp_tag[host_rsp.htag], $sformatf("host read data tag %0d got %h exp %h t=%0t", host_rsp.htag, host_rsp.rdata[31:0], exp_tag[host_rsp.htag][31:0], $time));
      tag_busy[host_rsp.htag] = 0;
      host_pending--;
    end
    if (eng_rsp_valid && eng_rsp_ready) begin
      check(eng_rsp_rdata == ref_beat(eng_exp.pop_front()), "engine beat data");
      eng_pending--;
      eng_got++;
    end
  end

  function automatic int free_tag();
    for (int t = 0; t < 16; t++) if (!tag_busy[t]) return t;
    return -1;
  endfunction

  // Inputs are driven just after a falling edge; a handshake completes on
  // the next rising edge when ready is seen high before it.
  task automatic host_send(input host_req_t r);
    @(negedge clk); #1;
    host_req_valid = 1; host_req = r;
    #1;
    while (!host_req_ready) begin @(negedge clk); #2; end
    @(posedge clk); #1 host_req_valid = 0;
  endtask

  task automatic host_write(input longint pa, input logic [CH_DATA_W-1:0] d);
    host_send('{we: 1'b1, addr: PA_W'(pa), wdata: d, htag: '0});
  endtask

  initial begin
    host_req_valid = 0; host_req = '0; eng_req_valid = 0; eng_req_we = 0;
    eng_req_addr = '0; eng_req_wdata = '0; eng_rsp_ready = 0;
    foreach (tag_busy[i]) tag_busy[i] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // 1. host writes
    for (int i = 0; i < 64; i++) begin
      logic [CH_DATA_W-1:0] d;
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
      ref_line[i * 64] = d;
      host_write(i * 64, d);
    end
    repeat (3) @(posedge clk);
    for (int i = 0; i < 64; i++)
      check((i % 2 == 0 ? g_mem[0].u_m.bd_read(i / 2) : g_mem[1].u_m.bd_read(i / 2)) == ref_line[i * 64],
            "line placed in channel pa[6], word pa>>7");
    // 2. concurrent engine reads and host reads
    fork
      begin : eng_side
        int b = 0;
        while (b < 32) begin
          bit fire;
          @(negedge clk); #1;
          eng_rsp_ready = ($urandom_range(3) != 0);
          if (eng_pending < ENG_DEPTH) begin
            eng_req_valid = 1; eng_req_we = 0; eng_req_addr = CH_ADDR_W'(b);
          end else eng_req_valid = 0;
          #1 fire = eng_req_valid && eng_req_ready;
          @(posedge clk);
          if (fire) begin eng_exp.push_back(b); eng_pending++; b++; end
        end
        @(negedge clk); #1 eng_req_valid = 0;
        while (eng_got < 32) begin eng_rsp_ready = 1; @(posedge clk); end
      end
      begin : host_side
        for (int n = 0; n < 80; n++) begin
          int t;
          longint pa;
          t = free_tag();
          while (t < 0 || host_pending >= HOST_MAX) begin @(posedge clk); #1; t = free_tag(); end
          pa = $urandom_range(63) * 64;
          exp_tag[t] = ref_line[pa]; tag_busy[t] = 1; host_pending++;
          host_send('{we: 1'b0, addr: PA_W'(pa), wdata: '0, htag: HTAG_W'(t)});
          if ($urandom_range(1)) @(posedge clk);
        end
      end
    join
    while (host_pending > 0) @(posedge clk);
    check(eng_got == 32, "all engine beats returned");
    check(blocked > 0, "engine held off by host at least once");
    // 3. engine writes, host reads back
    for (int b = 40; b < 56; b++) begin
      logic [BW-1:0] d;
      for (int w = 0; w < 32; w++) d[w*32 +: 32] = $urandom;
      ref_line[b * 128] = d[511:0]; ref_line[b * 128 + 64] = d[1023:512];
      @(negedge clk); #1;
      eng_req_valid = 1; eng_req_we = 1; eng_req_addr = CH_ADDR_W'(b); eng_req_wdata = d;
      #1;
      while (!eng_req_ready) begin @(negedge clk); #2; end
      @(posedge clk); #1 eng_req_valid = 0;
    end
    for (int i = 80; i < 112; i++) begin
      exp_tag[3] = ref_line[i * 64]; tag_busy[3] = 1; host_pending++;
      host_send('{we: 1'b0, addr: PA_W'(i * 64), wdata: '0, htag: 4'd3});
      while (host_pending > 0) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
