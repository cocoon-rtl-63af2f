// tb_nmp_ctrl: self-checking test of the command controller. The offset
// table and the GEMV engine are modelled here: lookups come from a table in
// the testbench, and the engine answers done a random number of cycles after
// start. Checks the side effects of each opcode, the translated beat
// addresses handed to the engine, one completion per command in arrival
// order with the right tag and error flag, vector loads (engine started in
// load mode with ceil(rows/32) beats, refused for an unknown matrix or too
// many rows), and that no command is taken while the engine runs.
module tb_nmp_ctrl;
  import cocoon_pkg::*;
  localparam int NUM_CH = 2, NUM_MAT = 16, VEC_DEPTH = 255;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready;
  cmd_t cmd;
  logic cfg_we, src_miss, dst_miss, vec_we, eng_start, eng_load, eng_done, cpl_valid, busy;
  logic [3:0] cfg_id, src_id, dst_id;
  logic [PA_W-1:0] cfg_base, src_pa, dst_pa;
  logic [7:0] vec_waddr;
  data_t vec_wdata;
  logic [CH_ADDR_W-1:0] eng_src_beat, eng_dst_beat;
  logic [ROWS_W-1:0] eng_rows;
  logic [BEATS_W-1:0] eng_beats, eng_stride;
  cpl_t cpl;

  nmp_ctrl #(.NUM_CH(NUM_CH), .NUM_MAT(NUM_MAT), .VEC_DEPTH(VEC_DEPTH)) dut (.*);

  // offset table model
  logic [PA_W-1:0] tbase [16];
  bit tvld [16];
  always_comb begin
    src_pa = tbase[src_id]; src_miss = !tvld[src_id];
    dst_pa = tbase[dst_id]; dst_miss = !tvld[dst_id];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  cpl_t exp_cpl [$];
  int eng_timer = -1, taken_while_busy = 0, gemv_started = 0, errs = 0;
  int loads_started = 0, load_errs = 0;
  cmd_t cur;

  // engine model and monitors
  always @(posedge clk) begin
    eng_done <= 1'b0;
    if (eng_timer > 0) eng_timer--;
    else if (eng_timer == 0) begin eng_done <= 1'b1; eng_timer = -1; end
    if (cmd_valid && cmd_ready && busy) taken_while_busy++;
    if (cmd_valid && cmd_ready) begin
      cur = cmd;
      case (cmd.op)
        OP_SET_OFFSET: begin
          check(cfg_we && cfg_id == cmd.src_id && cfg_base == cmd.value, "offset write");
          tbase[cmd.src_id] <= cmd.value; tvld[cmd.src_id] <= 1;
          exp_cpl.push_back('{tag: cmd.tag, op: OP_SET_OFFSET, err: 0});
        end
        OP_WRITE_VEC: begin
          check(vec_we && vec_waddr == cmd.rows[7:0] && vec_wdata == cmd.value[31:0], "vector write");
          exp_cpl.push_back('{tag: cmd.tag, op: OP_WRITE_VEC, err: 0});
        end
        OP_GEMV: begin
          bit bad;
          bad = !tvld[cmd.src_id] || !tvld[cmd.dst_id] || cmd.rows > VEC_DEPTH;
          check(eng_start == !bad, "engine start only for a valid GEMV");
          if (!bad) begin
            check(!eng_load, "GEMV is not a load");
            check(eng_src_beat == CH_ADDR_W'(tbase[cmd.src_id] >> 7) &&
                  eng_dst_beat == CH_ADDR_W'(tbase[cmd.dst_id] >> 7) &&
                  eng_rows == cmd.rows && eng_beats == cmd.beats && eng_stride == cmd.stride,
                  "GEMV arguments translated");
            eng_timer = $urandom_range(0, 12);
            gemv_started++;
          end else errs++;
          exp_cpl.push_back('{tag: cmd.tag, op: OP_GEMV, err: bad});
        end
        OP_LOAD_VEC: begin
          bit bad;
          bad = !tvld[cmd.src_id] || cmd.rows > VEC_DEPTH;
          check(eng_start == !bad, "engine start only for a valid vector load");
          if (!bad) begin
            check(eng_load && eng_src_beat == CH_ADDR_W'(tbase[cmd.src_id] >> 7) &&
                  eng_beats == BEATS_W'((cmd.rows + 31) / 32),
                  $sformatf("vector load of %0d elements: %0d beats", cmd.rows, eng_beats));
            eng_timer = $urandom_range(0, 6);
            loads_started++;
          end else load_errs++;
          exp_cpl.push_back('{tag: cmd.tag, op: OP_LOAD_VEC, err: bad});
        end
        default: exp_cpl.push_back('{tag: cmd.tag, op: OP_NOP, err: 0});
      endcase
    end else begin
      check(!cfg_we && !vec_we && !eng_start, "no side effect without a command");
    end
    if (rst_n && cpl_valid) begin
      check(exp_cpl.size() > 0 && cpl == exp_cpl[0],
            $sformatf("completion in order: got %b exp %b", cpl, exp_cpl.size() > 0 ? exp_cpl[0] : cpl_t'(0)));
      if (exp_cpl.size() > 0) void'(exp_cpl.pop_front());
    end
  end

  initial begin
    int sent = 0;
    cmd_valid = 0; cmd = '0; eng_done = 0;
    foreach (tvld[i]) begin tvld[i] = 0; tbase[i] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    while (sent < 600) begin
      cmd_t c;
      @(negedge clk); #1;
      c = '0;
      c.op = opcode_e'($urandom_range(4));
      c.tag = TAG_W'(sent);
      c.src_id = 4'($urandom_range(9));
      c.dst_id = 4'($urandom_range(9));
      c.rows = ROWS_W'($urandom_range(0, 260));
      c.beats = $urandom_range(1, 100);
      c.stride = $urandom_range(1, 100);
      c.value = {8'($urandom), $urandom} & ~40'h7f;
      cmd = c;
      cmd_valid = ($urandom_range(99) < 70);
      #1;
      if (cmd_valid && cmd_ready) sent++;
    end
    @(negedge clk); cmd_valid = 0;
    repeat (30) @(posedge clk);
    check(exp_cpl.size() == 0, "every command completed");
    check(taken_while_busy == 0, "no command taken during a GEMV");
    check(gemv_started > 10 && errs > 0, "GEMVs ran and bad GEMVs were refused");
    check(loads_started > 10 && load_errs > 0, "loads ran and bad loads were refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
