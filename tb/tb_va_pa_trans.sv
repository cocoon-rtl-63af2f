// tb_va_pa_trans: self-checking test of the matrix offset table. Writes
// random bases and checks both lookup ports (base + offset) and the miss
// flag of entries never written.
module tb_va_pa_trans;
  import cocoon_pkg::*;
  localparam int NUM_MAT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [3:0] cfg_id, a_id, b_id;
  logic [PA_W-1:0] cfg_base, a_off, b_off, a_pa, b_pa;
  logic a_miss, b_miss;
  logic [PA_W-1:0] ref_base [NUM_MAT];
  bit ref_vld [NUM_MAT];
  int checks = 0, failures = 0;

  va_pa_trans #(.NUM_MAT(NUM_MAT)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    cfg_we = 0; cfg_id = 0; cfg_base = 0; a_id = 0; b_id = 0; a_off = 0; b_off = 0;
    foreach (ref_vld[i]) begin ref_vld[i] = 0; ref_base[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      // lookups
      a_id = 4'($urandom); b_id = 4'($urandom);
      a_off = PA_W'($urandom); b_off = PA_W'({$urandom_range(255), $urandom});
      #1;
      check(a_miss == !ref_vld[a_id], "a miss flag");
      check(b_miss == !ref_vld[b_id], "b miss flag");
      if (ref_vld[a_id]) check(a_pa == ref_base[a_id] + a_off, "a translation");
      if (ref_vld[b_id]) check(b_pa == ref_base[b_id] + b_off, "b translation");
      // sometimes reconfigure an entry (only ids 0..11 so some stay unset)
      cfg_we = ($urandom_range(3) == 0);
      cfg_id = 4'($urandom_range(11));
      cfg_base = PA_W'({$urandom_range(255), $urandom});
      @(posedge clk);
      if (cfg_we) begin ref_base[cfg_id] = cfg_base; ref_vld[cfg_id] = 1; end
      #1 cfg_we = 0;
    end
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
