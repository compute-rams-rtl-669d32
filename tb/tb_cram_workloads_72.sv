// tb_cram_workloads_72: the same workloads on a wider 512 x 72 array, the
// widest block RAM shape of some FPGA families. The architecture only
// estimates this shape; here it is simulated. The RTL takes COLS = 72 as it
// is, and the programs are unchanged, so every workload takes the same number
// of cycles as on 40 columns while producing 72/40 = 1.8 times as many
// results. All checks come from cram_workload_bench; this top
// holds a 600000-cycle watchdog and prints the result line.
module tb_cram_workloads_72;
  cram_workload_bench #(.COLS(72)) u_bench ();

  initial begin
    fork
      wait (u_bench.finished);
      begin
        repeat (600000) @(posedge u_bench.clk);
        u_bench.failures++;
        $display("FAIL watchdog");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", u_bench.checks, u_bench.failures);
    $finish;
  end
endmodule
