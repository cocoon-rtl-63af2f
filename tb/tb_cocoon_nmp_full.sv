// tb_cocoon_nmp_full: the end-to-end test at the largest band size the
// device supports, b = 256 (255 history rows, a full vector buffer), the band
// the largest evaluated configurations use. The top keeps all its default
// parameters. 258 steps so that the ring buffer wraps; rows of 64 elements
// (2 beats) keep the run short, since row length only repeats the same
// column loop. Memory has no stalls and latency 8, so the cycle count of
// each undisturbed GEMV is checked against one beat per cycle.
module tb_cocoon_nmp_full;
  tb_cocoon_nmp_top #(
    .K_ROWS(255), .NBEATS(2), .STEPS(258), .MEM_LAT(8), .STALL_PCT(0), .WATCHDOG(3000000)
  ) u_run ();
endmodule
