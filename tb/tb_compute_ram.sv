// tb_compute_ram: end-to-end test of a Compute RAM block at its default size
// (512 x 40 array, 256-instruction memory), driven only through its ports.
//
// The sequence is the one an FPGA design would use: load data in storage
// mode, load an instruction sequence, switch to compute mode, pulse start,
// wait for done, switch back and read the results. Expected results are
// computed here from the operands, independently of the block. Covered:
//   - storage mode in all three geometries and their mapping onto the array
//   - instruction memory loaded over the configuration interface and over
//     the shared address/data bus, and read back on data_out
//   - start ignored in storage mode; user writes ignored while computing
//   - int4 addition (hardware loop, row-pointer post-increment, carry), int4 multiplication (tag
//     predication, nested loops), unsigned max (NOR, SETC, Carry and
//     NotCarry predication), a branch-controlled loop, a restart
//   - start-to-done cycle counts of each program: N + 1 + B cycles for N
//     executed instructions and B taken branches
// Each mechanism is counted and must occur at least once.
module tb_compute_ram;
  import cram_pkg::*;
  localparam int ROWS = 512, COLS = 40;

  logic             clk = 0, rst_n = 0, mode = 0, start = 0, write_en = 0;
  logic [11:0]      address = 0;
  logic [COLS-1:0]  data_in = 0, data_out;
  logic             done;
  geom_e            cfg_geometry = GEOM_512X40;
  logic             cfg_imem_we = 0;
  logic [7:0]       cfg_imem_addr = 0;
  logic [15:0]      cfg_imem_wdata = 0;

  compute_ram dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_geom[3], n_imem_cfg, n_imem_usr, n_imem_read, n_start_ignored, n_busy_ignored;
  int n_mode_switch, n_loops, n_branch, n_pred_tag, n_pred_carry, n_pred_ncarry, n_restart, n_postinc;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h exp %0h", what, got, exp);
    end
  endtask

  // ---------- port helpers ----------
  task automatic wr(int a, logic [COLS-1:0] d);
    @(negedge clk);
    address = 12'(a); data_in = d; write_en = 1;
    @(negedge clk);
    write_en = 0;
  endtask
  task automatic rd(int a, output logic [COLS-1:0] d);
    @(negedge clk);
    address = 12'(a); write_en = 0;
    @(negedge clk);
    d = data_out;
  endtask

  logic [15:0] prog [$];
  int exp_n, exp_b;   // executed instructions and taken branches of prog

  task automatic load_cfg();
    foreach (prog[i]) begin
      @(negedge clk);
      cfg_imem_we = 1; cfg_imem_addr = 8'(i); cfg_imem_wdata = prog[i];
    end
    @(negedge clk); cfg_imem_we = 0;
    n_imem_cfg++;
  endtask
  task automatic load_usr();
    foreach (prog[i]) wr(12'h800 | i, COLS'(prog[i]));
    n_imem_usr++;
  endtask

  task automatic run(string name, output int cyc);
    @(negedge clk); mode = 1; n_mode_switch++;
    start = 1;
    @(posedge clk); #1 start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin @(posedge clk); #1; cyc++; end
    chk(cyc, exp_n + 1 + exp_b, {name, " cycles"});
    $display("%s: %0d cycles", name, cyc);
    @(negedge clk); mode = 0; n_mode_switch++;
  endtask

  // transposed operand access: element e of column c, nbits bits from row r0
  logic [COLS-1:0] shadow [ROWS];
  task automatic put(int r0, int nbits, longint v [COLS]);
    for (int b = 0; b < nbits; b++) begin
      logic [COLS-1:0] w;
      for (int c = 0; c < COLS; c++) w[c] = v[c][b];
      wr(r0 + b, w);
    end
  endtask
  task automatic get(int r0, int nbits, output longint v [COLS]);
    for (int c = 0; c < COLS; c++) v[c] = 0;
    for (int b = 0; b < nbits; b++) begin
      logic [COLS-1:0] w;
      rd(r0 + b, w);
      for (int c = 0; c < COLS; c++) v[c][b] = w[c];
    end
  endtask

  // ---------- programs ----------
  // c = a + b, n bits, carry out stored in row dbase+n; row pointers
  // r0..r2 post-increment, so the loop body is the ADD alone
  task automatic prog_add(int n, int abase, int bbase, int dbase);
    prog.delete();
    prog.push_back(i_ldi(0, abase)); prog.push_back(i_ldi(1, bbase));
    prog.push_back(i_ldi(2, dbase));
    prog.push_back(i_setinc(8'b0000_0111));
    prog.push_back(i_arr(AOP_CLRC, PRED_ALWAYS, 0, 0, 0));
    prog.push_back(i_loopi(n, 1));
    prog.push_back(i_arr(AOP_ADD, PRED_ALWAYS, 2, 0, 1));
    prog.push_back(i_arr(AOP_WRC, PRED_ALWAYS, 2, 2, 2));
    prog.push_back(i_end());
    exp_n = 8 + n; exp_b = 0;
  endtask

  // p = a * b, unsigned n x n -> 2n bits, tag-predicated shift-and-add
  task automatic prog_mul(int n, int abase, int bbase, int pbase);
    prog.delete();
    prog.push_back(i_ldi(0, abase)); prog.push_back(i_ldi(1, bbase));
    prog.push_back(i_ldi(2, pbase)); prog.push_back(i_ldi(5, pbase));
    prog.push_back(i_loopi(2 * n, 2));
    prog.push_back(i_arr(AOP_ZERO, PRED_ALWAYS, 5, 5, 5)); prog.push_back(i_addi(5, 1));
    prog.push_back(i_loopi(n, 11));
    prog.push_back(i_arr(AOP_TAG, PRED_ALWAYS, 1, 1, 1));
    prog.push_back(i_arr(AOP_CLRC, PRED_ALWAYS, 1, 1, 1));
    prog.push_back(i_alu(FN_MOV, 3, 0)); prog.push_back(i_alu(FN_MOV, 4, 2));
    prog.push_back(i_loopi(n, 3));
    prog.push_back(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3));
    prog.push_back(i_addi(3, 1)); prog.push_back(i_addi(4, 1));
    prog.push_back(i_arr(AOP_WRC, PRED_TAG, 4, 4, 4));
    prog.push_back(i_addi(1, 1)); prog.push_back(i_addi(2, 1));
    prog.push_back(i_end());
    exp_n = 4 + 1 + 4 * n + 1 + n * (4 + 1 + 3 * n + 3) + 1; exp_b = 0;
  endtask

  // d = max(a, b), unsigned n bits: t = a + ~b + 1, carry = (a >= b)
  // rows tbase.. hold ~b, then the select uses Carry / NotCarry predication
  task automatic prog_max(int n, int abase, int bbase, int tbase, int dbase);
    prog.delete();
    prog.push_back(i_ldi(0, abase)); prog.push_back(i_ldi(1, bbase));
    prog.push_back(i_ldi(2, tbase));
    prog.push_back(i_loopi(n, 3));
    prog.push_back(i_arr(AOP_NOR, PRED_ALWAYS, 2, 1, 1));
    prog.push_back(i_addi(1, 1)); prog.push_back(i_addi(2, 1));
    prog.push_back(i_ldi(1, tbase)); prog.push_back(i_ldi(0, abase));
    prog.push_back(i_arr(AOP_SETC, PRED_ALWAYS, 0, 0, 0));
    prog.push_back(i_loopi(n, 3));
    prog.push_back(i_arr(AOP_ADD, PRED_ALWAYS, 1, 0, 1));   // t = a + ~b (overwrites ~b)
    prog.push_back(i_addi(0, 1)); prog.push_back(i_addi(1, 1));
    prog.push_back(i_ldi(0, abase)); prog.push_back(i_ldi(1, bbase));
    prog.push_back(i_ldi(2, dbase)); prog.push_back(i_ldi(3, 0));
    prog.push_back(i_ldi(4, n));
    // branch-controlled loop: copy a where carry, b where not carry
    prog.push_back(i_arr(AOP_AND, PRED_CARRY, 2, 0, 0));
    prog.push_back(i_arr(AOP_AND, PRED_NCARRY, 2, 1, 1));
    prog.push_back(i_addi(0, 1)); prog.push_back(i_addi(1, 1)); prog.push_back(i_addi(2, 1));
    prog.push_back(i_addi(3, 1));
    prog.push_back(i_bne(3, 4, -6));
    prog.push_back(i_end());
    exp_n = 3 + 1 + 3 * n + 2 + 1 + 1 + 3 * n + 5 + 7 * n + 1; exp_b = n - 1;
  endtask

  initial begin
    longint a [COLS], b [COLS], r [COLS], hi [COLS];
    logic [COLS-1:0] w, w2;
    int cyc;

    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- storage mode, all geometries ----
    for (int i = 0; i < ROWS; i++) begin
      shadow[i] = COLS'({$urandom, $urandom});
      wr(i, shadow[i]);
    end
    for (int i = 0; i < 40; i++) begin
      int x = $urandom_range(0, ROWS - 1);
      rd(x, w); chk(w, shadow[x], "512x40 read");
    end
    n_geom[0]++;
    cfg_geometry = GEOM_1024X20;
    for (int i = 0; i < 20; i++) begin
      int x = $urandom_range(0, 1023);
      rd(x, w); chk(w, (shadow[x / 2] >> (20 * (x % 2))) & 40'hFFFFF, "1024x20 read");
      w2 = COLS'($urandom);
      wr(x, w2); shadow[x / 2][20 * (x % 2) +: 20] = w2[19:0];
      rd(x, w); chk(w, w2 & 40'hFFFFF, "1024x20 write/read");
    end
    n_geom[1]++;
    cfg_geometry = GEOM_2048X10;
    for (int i = 0; i < 20; i++) begin
      int x = $urandom_range(0, 2047);
      rd(x, w); chk(w, (shadow[x / 4] >> (10 * (x % 4))) & 40'h3FF, "2048x10 read");
      w2 = COLS'($urandom);
      wr(x, w2); shadow[x / 4][10 * (x % 4) +: 10] = w2[9:0];
      rd(x, w); chk(w, w2 & 40'h3FF, "2048x10 write/read");
    end
    n_geom[2]++;
    cfg_geometry = GEOM_512X40;
    for (int i = 0; i < 40; i++) begin
      int x = $urandom_range(0, ROWS - 1);
      rd(x, w); chk(w, shadow[x], "512x40 after narrow writes");
    end

    // ---- int4 addition, program over the configuration interface ----
    for (int c = 0; c < COLS; c++) begin a[c] = $urandom_range(0, 15); b[c] = $urandom_range(0, 15); end
    put(0, 4, a); put(4, 4, b);
    prog_add(4, 0, 4, 8);
    load_cfg();
    // instruction memory read back through data_out
    foreach (prog[i]) begin rd(12'h800 | i, w); chk(w, prog[i], "imem read back"); end
    n_imem_read++;
    // start in storage mode does nothing
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (5) @(posedge clk);
    chk(done, 0, "start ignored in storage mode");
    n_start_ignored++;
    run("int4 add", cyc);
    n_loops++; n_postinc++;
    get(8, 5, r);
    for (int c = 0; c < COLS; c++) chk(r[c], a[c] + b[c], $sformatf("int4 add col %0d", c));

    // ---- int4 multiply, program over the shared bus, user write while busy ----
    for (int c = 0; c < COLS; c++) begin a[c] = $urandom_range(0, 15); b[c] = $urandom_range(0, 15); end
    put(100, 4, a); put(104, 4, b);
    prog_mul(4, 100, 104, 110);
    load_usr();
    @(negedge clk); mode = 1; n_mode_switch++; start = 1;
    @(posedge clk); #1 start = 0;
    // a write attempt to an operand row while the controller runs
    @(negedge clk); address = 12'd100; data_in = '1; write_en = 1;
    @(negedge clk); write_en = 0;
    cyc = 1;   // one clock edge passed during the write attempt
    while (!done && cyc < 100000) begin @(posedge clk); #1; cyc++; end
    chk(cyc, exp_n + 1 + exp_b, "int4 mul cycles");
    $display("int4 mul: %0d cycles", cyc);
    @(negedge clk); mode = 0; n_mode_switch++;
    get(100, 4, r);
    for (int c = 0; c < COLS; c++) chk(r[c], a[c], "operand untouched by busy write");
    n_busy_ignored++;
    get(110, 8, r);
    for (int c = 0; c < COLS; c++) chk(r[c], a[c] * b[c], $sformatf("int4 mul col %0d", c));
    n_pred_tag++; n_loops++;

    // ---- unsigned int8 max with carry predication and a branch loop ----
    for (int c = 0; c < COLS; c++) begin
      a[c] = $urandom_range(0, 255);
      b[c] = (c % 5 == 0) ? a[c] : $urandom_range(0, 255);
    end
    put(200, 8, a); put(208, 8, b);
    prog_max(8, 200, 208, 216, 224);
    load_usr();
    run("int8 max", cyc);
    get(224, 8, r);
    for (int c = 0; c < COLS; c++) chk(r[c], (a[c] > b[c]) ? a[c] : b[c], $sformatf("max col %0d", c));
    get(216, 8, hi);
    for (int c = 0; c < COLS; c++) chk(hi[c], (a[c] - b[c]) & 255, $sformatf("a-b col %0d", c));
    n_pred_carry++; n_pred_ncarry++; n_branch++;

    // ---- restart the same program on new data, without reloading ----
    for (int c = 0; c < COLS; c++) begin a[c] = $urandom_range(0, 255); b[c] = $urandom_range(0, 255); end
    put(200, 8, a); put(208, 8, b);
    run("int8 max again", cyc);
    get(224, 8, r);
    for (int c = 0; c < COLS; c++) chk(r[c], (a[c] > b[c]) ? a[c] : b[c], $sformatf("max2 col %0d", c));
    n_restart++;

    // ---- every mechanism must have happened ----
    begin
      int cnt [string];
      cnt["geometry 512x40"] = n_geom[0]; cnt["geometry 1024x20"] = n_geom[1];
      cnt["geometry 2048x10"] = n_geom[2]; cnt["imem load via cfg"] = n_imem_cfg;
      cnt["imem load via bus"] = n_imem_usr; cnt["imem read back"] = n_imem_read;
      cnt["start ignored in storage mode"] = n_start_ignored;
      cnt["user write ignored while busy"] = n_busy_ignored;
      cnt["mode switch"] = n_mode_switch; cnt["hardware loop"] = n_loops;
      cnt["taken branch"] = n_branch; cnt["tag predication"] = n_pred_tag;
      cnt["carry predication"] = n_pred_carry; cnt["notcarry predication"] = n_pred_ncarry;
      cnt["restart"] = n_restart; cnt["row-pointer post-increment"] = n_postinc;
      foreach (cnt[k]) begin
        $display("mechanism %-30s %0d", k, cnt[k]);
        checks++;
        if (cnt[k] == 0) begin failures++; $display("FAIL mechanism never exercised: %s", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
