// tb_cram_main_array: self-checking test of the bit-line computing array.
//
// Keeps its own bit-level copy of the cells and checks: storage writes and
// registered reads in all three geometries (512x40, 1024x20, 2048x10) with
// the one-cycle read latency, the sensed BL = A AND B and BLB = NOR of two
// randomly chosen rows, and masked compute write-back into a third row.
module tb_cram_main_array;
  import cram_pkg::*;
  localparam int ROWS = 512, COLS = 40;

  logic            clk = 0;
  geom_e           geometry;
  logic [10:0]     st_addr;
  logic [COLS-1:0] st_wdata, st_rdata;
  logic            st_we, st_re;
  logic [8:0]      cp_row_a, cp_row_b, cp_row_w;
  logic [COLS-1:0] cp_bl, cp_blb, cp_wdata, cp_wmask;
  logic            cp_we;

  int checks = 0, failures = 0;
  logic [COLS-1:0] ref_mem [ROWS];

  cram_main_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(logic [COLS-1:0] got, logic [COLS-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endfunction

  // width and position of a word in a geometry
  function automatic int gw(geom_e g);
    return (g == GEOM_1024X20) ? 20 : (g == GEOM_2048X10) ? 10 : 40;
  endfunction
  function automatic int gk(geom_e g);
    return (g == GEOM_1024X20) ? 2 : (g == GEOM_2048X10) ? 4 : 1;
  endfunction

  task automatic st_write(int a, logic [COLS-1:0] d);
    int k = gk(geometry), w = gw(geometry);
    @(negedge clk);
    st_addr = 11'(a); st_wdata = d; st_we = 1; st_re = 0;
    @(posedge clk);
    #1 st_we = 0;
    for (int b = 0; b < w; b++) ref_mem[a / k][(a % k) * w + b] = d[b];
  endtask

  task automatic st_read_check(int a);
    int k = gk(geometry), w = gw(geometry);
    logic [COLS-1:0] exp = '0;
    for (int b = 0; b < w; b++) exp[b] = ref_mem[a / k][(a % k) * w + b];
    @(negedge clk);
    st_addr = 11'(a); st_re = 1; st_we = 0;
    @(posedge clk);
    #1 st_re = 0;
    check(st_rdata, exp, $sformatf("storage read g=%0d a=%0d", geometry, a));
  endtask

  initial begin
    geometry = GEOM_512X40; st_addr = 0; st_wdata = 0; st_we = 0; st_re = 0;
    cp_row_a = 0; cp_row_b = 0; cp_row_w = 0; cp_wdata = 0; cp_wmask = 0; cp_we = 0;
    // fill the whole array in 512x40
    for (int r = 0; r < ROWS; r++) st_write(r, {$urandom, $urandom} );
    for (int i = 0; i < 64; i++) st_read_check($urandom_range(0, ROWS-1));
    // narrow geometries: write then read back, and cross-check wide view
    geometry = GEOM_1024X20;
    for (int i = 0; i < 40; i++) st_write($urandom_range(0, 1023), COLS'({$urandom, $urandom}));
    for (int i = 0; i < 40; i++) st_read_check($urandom_range(0, 1023));
    geometry = GEOM_2048X10;
    for (int i = 0; i < 40; i++) st_write($urandom_range(0, 2047), COLS'({$urandom, $urandom}));
    for (int i = 0; i < 40; i++) st_read_check($urandom_range(0, 2047));
    geometry = GEOM_512X40;
    for (int i = 0; i < 40; i++) st_read_check($urandom_range(0, ROWS-1));
    // compute port: two-row sensing and masked write-back
    for (int i = 0; i < 200; i++) begin
      logic [COLS-1:0] a, b;
      @(negedge clk);
      cp_row_a = 9'($urandom_range(0, ROWS-1));
      cp_row_b = 9'($urandom_range(0, ROWS-1));
      cp_row_w = 9'($urandom_range(0, ROWS-1));
      cp_wdata = COLS'({$urandom, $urandom});
      cp_wmask = COLS'({$urandom, $urandom});
      cp_we    = 1;
      #1;
      a = ref_mem[cp_row_a]; b = ref_mem[cp_row_b];
      check(cp_bl,  a & b,   "BL");
      check(cp_blb, ~a & ~b, "BLB");
      @(posedge clk);
      for (int c = 0; c < COLS; c++)
        if (cp_wmask[c]) ref_mem[cp_row_w][c] = cp_wdata[c];
      #1 cp_we = 0;
    end
    for (int i = 0; i < 100; i++) st_read_check($urandom_range(0, ROWS-1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
