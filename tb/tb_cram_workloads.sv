// tb_cram_workloads: runs every evaluated workload (int4/int8 add and
// multiply, int4 dot product, bfloat16 multiply and add) on the block at its
// standard 512 x 40 shape, the whole array filled with operands. The checks,
// cycle counts and rates are those of cram_workload_bench; this top
// fixes the column count, holds a 600000-cycle watchdog and prints the
// result line once the bench has finished.
module tb_cram_workloads;
  cram_workload_bench #(.COLS(40)) u_bench ();

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
