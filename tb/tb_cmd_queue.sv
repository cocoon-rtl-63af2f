// tb_cmd_queue: self-checking test of the FCFS command queue. Random pushes
// and pops against a reference queue; checks order, contents, occupancy and
// that the queue refuses a push when full and holds DEPTH entries.
module tb_cmd_queue;
  import cocoon_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  cmd_t in_cmd, out_cmd;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  cmd_t ref_q [$];
  int full_seen = 0;

  cmd_queue #(.DEPTH(DEPTH)) dut (.*);

  function automatic cmd_t rnd_cmd();
    cmd_t c;
    c = '0;
    c.op = opcode_e'($urandom_range(3));
    c.tag = TAG_W'($urandom);
    c.rows = ROWS_W'($urandom);
    c.beats = $urandom;
    c.value = {8'($urandom), $urandom};
    return c;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // Fill to the top: DEPTH pushes accepted, then in_ready must drop.
    for (int i = 0; i < DEPTH; i++) begin
      in_cmd = rnd_cmd(); in_valid = 1;
      #1; check(in_ready, $sformatf("ready while filling %0d count=%0d", i, count));
      ref_q.push_back(in_cmd);
      @(posedge clk); #1;
    end
    in_valid = 0;
    #1; check(!in_ready && count == DEPTH, "full after DEPTH pushes");
    if (!in_ready) full_seen++;
    // Random traffic.
    for (int cyc = 0; cyc < 4000; cyc++) begin
      cmd_t nc;
      nc = rnd_cmd();
      in_valid = ($urandom_range(99) < 55);
      in_cmd = nc;
      out_ready = ($urandom_range(99) < 50);
      #1;
      check(count == ref_q.size(), "count matches");
      check(in_ready == (ref_q.size() < DEPTH), "in_ready matches");
      check(out_valid == (ref_q.size() > 0), "out_valid matches");
      if (out_valid && ref_q.size() > 0) check(out_cmd == ref_q[0], "head matches reference (FCFS)");
      if (!in_ready) full_seen++;
      begin
        bit do_pop, do_push;
        do_pop = out_valid && out_ready;
        do_push = in_valid && in_ready;
        @(posedge clk);
        if (do_pop) void'(ref_q.pop_front());
        if (do_push) ref_q.push_back(nc);
      end
      #1;
    end
    check(full_seen > 1, "queue full observed");
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
