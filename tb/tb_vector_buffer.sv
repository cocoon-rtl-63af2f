// tb_vector_buffer: self-checking test of the mixing-vector buffer. Writes
// a full 255-entry vector one element at a time, reads it back in ring
// order, overwrites part of it, then loads whole 32-element beats through
// the beat port (the last beat partly beyond the buffer) mixed with single
// element writes, and checks reset values and out-of-range reads.
module tb_vector_buffer;
  import cocoon_pkg::*;
  localparam int DEPTH = 255;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we, bwe;
  logic [2:0] bwbeat;
  logic [32*DATA_W-1:0] bwdata;
  logic [7:0] waddr, raddr;
  data_t wdata, rdata;
  data_t ref_v [DEPTH];
  int checks = 0, failures = 0;

  vector_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0; bwe = 0; bwbeat = 0; bwdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < DEPTH; i += 17) begin raddr = 8'(i); #1 check(rdata == 0, "reset to zero"); end
    for (int i = 0; i < DEPTH; i++) begin
      ref_v[i] = data_t'($urandom);
      we = 1; waddr = 8'(i); wdata = ref_v[i];
      @(posedge clk); #1;
    end
    we = 0;
    for (int k = 0; k < 3 * DEPTH; k++) begin
      raddr = 8'((k * 7) % DEPTH);
      #1 check(rdata == ref_v[raddr], "read back");
    end
    for (int k = 0; k < 100; k++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      ref_v[a] = data_t'($urandom);
      we = 1; waddr = 8'(a); wdata = ref_v[a];
      raddr = 8'($urandom_range(DEPTH - 1));
      #1 check(rdata == ref_v[raddr] || raddr == 8'(a), "read during write");
      @(posedge clk); #1;
      check(rdata == ref_v[raddr], "read after write");
    end
    we = 0;
    // beat port: every beat in random order, then element writes elsewhere
    for (int k = 0; k < 24; k++) begin
      int bb, a;
      bb = (k < 8) ? (k * 5) % 8 : $urandom_range(7);
      for (int l = 0; l < 32; l++) bwdata[l*DATA_W +: DATA_W] = data_t'($urandom);
      bwe = 1; bwbeat = 3'(bb);
      a = $urandom_range(DEPTH - 1);
      we = (a / 32 != bb); waddr = 8'(a); wdata = data_t'($urandom);
      @(posedge clk); #1;
      for (int l = 0; l < 32; l++) if (bb * 32 + l < DEPTH) ref_v[bb * 32 + l] = bwdata[l*DATA_W +: DATA_W];
      if (we) ref_v[a] = wdata;
      bwe = 0; we = 0;
      for (int i = 0; i < DEPTH; i += 3) begin
        raddr = 8'((i + k) % DEPTH);
        #1 check(rdata == ref_v[raddr], $sformatf("beat write %0d read %0d", bb, raddr));
      end
    end
    raddr = 8'd255;
    #1 check(rdata == 0, "out of range reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
