// cram_workload_bench: the evaluated operations run on one full-height Compute
// RAM of 512 rows and COLS columns (512 x 40 by default, 512 x 72 for the
// wider array), with the whole array filled as in the evaluation: as many
// operand/result tuples per column as fit in the 512 rows.
//
//   int4 add   : 42 tuples per column (4+4+4 rows)
//   int8 add   : 21 tuples per column (8+8+8 rows)
//   int4 mul   : 32 tuples per column (4+4+8 rows)
//   int8 mul   : 16 tuples per column (8+8+16 rows)
//   int4 dot   : 58 products per column summed into a 32-bit accumulator
//   bf16 mul   : 10 tuples per column (16+16+16 rows, 28 work rows),
//                normal numbers, mantissa truncated
//   bf16 add   : 10 tuples per column (16+16+16 rows, 31 work rows),
//                signed, normal numbers, truncated alignment
//
// The programs do not depend on the column count: a wider array runs the
// same instruction sequences in the same number of cycles on more columns.
// It is instantiated by the two testbench tops tb_cram_workloads (40 columns)
// and tb_cram_workloads_72 (72 columns), which hold the watchdog, wait for
// `finished` and print the totals of `checks` and `failures`.
//
// Operands are unsigned and stored transposed (bit i of an element in row
// base+i of its column); operands of one kind sit in one contiguous region
// so the row pointers simply run on with post-increment. Each result is
// checked against arithmetic done here. The start-to-done cycle count of
// every program is checked against the count of instructions it executes,
// and for the additions the steady-state rate (n + 1 cycles per COLS
// additions of n bits) is checked: at the block's 609.1 MHz compute-mode
// clock and 40 columns that is 4.87 GOPS for int4 and 2.71 GOPS for int8.
module cram_workload_bench #(parameter int COLS = 40);
  import cram_pkg::*;
  localparam int ROWS = 512;

  logic             clk = 0, rst_n = 0, mode = 0, start = 0, write_en = 0;
  logic [11:0]      address = 0;
  logic [COLS-1:0]  data_in = 0, data_out;
  logic             done;
  geom_e            cfg_geometry = GEOM_512X40;
  logic             cfg_imem_we = 0;
  logic [7:0]       cfg_imem_addr = 0;
  logic [15:0]      cfg_imem_wdata = 0;

  compute_ram #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [COLS-1:0] img [ROWS];     // array image written before / read after a run
  logic [15:0] prog [$];

  bit finished = 0;                // all workloads run; the top reports

  task automatic chk(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // element value <-> transposed image
  task automatic set_elem(int base, int n, int c, longint v);
    for (int b = 0; b < n; b++) img[base + b][c] = v[b];
  endtask
  function automatic longint get_elem(int base, int n, int c);
    longint v = 0;
    for (int b = 0; b < n; b++) v[b] = img[base + b][c];
    return v;
  endfunction

  task automatic write_image();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); address = 12'(r); data_in = img[r]; write_en = 1;
    end
    @(negedge clk); write_en = 0;
  endtask
  task automatic read_image();
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); address = 12'(r); write_en = 0;
      @(negedge clk); img[r] = data_out;
    end
  endtask
  task automatic load_prog();
    checks++;
    if (prog.size() > 256) begin failures++; $display("FAIL program too long"); end
    foreach (prog[i]) begin
      @(negedge clk); cfg_imem_we = 1; cfg_imem_addr = 8'(i); cfg_imem_wdata = prog[i];
    end
    @(negedge clk); cfg_imem_we = 0;
  endtask
  task automatic run(string name, int exp_cycles);
    int cyc = 0;
    load_prog();
    write_image();
    @(negedge clk); mode = 1; start = 1;
    @(posedge clk); #1 start = 0;
    while (!done && cyc < 500000) begin @(posedge clk); #1; cyc++; end
    @(negedge clk); mode = 0;
    chk(cyc, exp_cycles, {name, " cycles"});
    $display("%-9s program %0d instructions, %0d cycles", name, prog.size(), cyc);
    read_image();
  endtask

  // ---------- addition: tuples t of A, B, S regions, n bits each ----------
  task automatic add_workload(int n);
    int T = ROWS / (3 * n);
    int A = 0, B = T * n, S = 2 * T * n;
    longint av [COLS][64], bv [COLS][64];
    string name = $sformatf("int%0d add", n);
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < T; t++) begin
        av[c][t] = $urandom_range(0, (1 << n) - 1);
        bv[c][t] = $urandom_range(0, (1 << n) - 1);
        set_elem(A + t * n, n, c, av[c][t]);
        set_elem(B + t * n, n, c, bv[c][t]);
        set_elem(S + t * n, n, c, 0);
      end
    prog.delete();
    prog.push_back(i_ldi(0, A)); prog.push_back(i_ldi(1, B)); prog.push_back(i_ldi(2, S));
    prog.push_back(i_setinc(8'b0000_0111));
    prog.push_back(i_arr(AOP_CLRC, PRED_ALWAYS, 0, 0, 0));
    prog.push_back(i_loopi(T, n + 1));
    for (int b = 0; b < n; b++) prog.push_back(i_arr(AOP_ADD, PRED_ALWAYS, 2, 0, 1));
    prog.push_back(i_arr(AOP_CLRC, PRED_ALWAYS, 0, 0, 0));
    prog.push_back(i_end());
    // 6 set-up instructions, T * (n + 1), END, plus one cycle
    run(name, 6 + T * (n + 1) + 1 + 1);
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < T; t++)
        chk(get_elem(S + t * n, n, c), (av[c][t] + bv[c][t]) & ((1 << n) - 1),
            $sformatf("%s col %0d tuple %0d", name, c, t));
    $display("%-9s %0d operations, %0d cycles per %0d operations, %.2f GOPS at 609.1 MHz",
             name, T * COLS, n + 1, COLS, COLS * 0.6091 / (n + 1));
  endtask

  // multiply body for one tuple: P (at reg r2, 2n rows, already zero) +=
  // A (at reg r0) * B (at reg r1, post-incremented); r2 advances by n
  task automatic push_mul_body(int n);
    prog.push_back(i_loopi(n, 8));
    prog.push_back(i_arr(AOP_TAG, PRED_ALWAYS, 1, 1, 1));
    prog.push_back(i_arr(AOP_CLRC, PRED_ALWAYS, 1, 1, 1));
    prog.push_back(i_alu(FN_MOV, 3, 0)); prog.push_back(i_alu(FN_MOV, 4, 2));
    prog.push_back(i_loopi(n, 1));
    prog.push_back(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3));
    prog.push_back(i_arr(AOP_WRC, PRED_TAG, 4, 4, 4));
    prog.push_back(i_addi(2, 1));
  endtask
  localparam int MUL_BODY_CYC_PER_BIT = 7;   // TAG CLRC MOV MOV LOOPI WRC ADDI, + n ADD

  task automatic mul_workload(int n);
    int T = ROWS / (4 * n);
    int A = 0, B = T * n, P = 2 * T * n;
    longint av [COLS][64], bv [COLS][64];
    string name = $sformatf("int%0d mul", n);
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < T; t++) begin
        av[c][t] = $urandom_range(0, (1 << n) - 1);
        bv[c][t] = $urandom_range(0, (1 << n) - 1);
        set_elem(A + t * n, n, c, av[c][t]);
        set_elem(B + t * n, n, c, bv[c][t]);
        set_elem(P + 2 * t * n, 2 * n, c, $urandom_range(0, 255));  // stale data
      end
    prog.delete();
    prog.push_back(i_ldi(0, A)); prog.push_back(i_ldi(1, B)); prog.push_back(i_ldi(2, P));
    prog.push_back(i_ldi(5, P)); prog.push_back(i_ldi(6, 2 * T * n));
    prog.push_back(i_setinc(8'b0011_1010));              // r1, r3, r4, r5
    prog.push_back(i_loop(6, 1));                         // clear all products
    prog.push_back(i_arr(AOP_ZERO, PRED_ALWAYS, 5, 5, 5));
    prog.push_back(i_loopi(T, 11));
    push_mul_body(n);
    prog.push_back(i_addi(0, n));
    prog.push_back(i_addi(2, n));
    prog.push_back(i_end());
    run(name, 7 + 2 * T * n + 1 + T * (1 + n * (MUL_BODY_CYC_PER_BIT + n) + 2) + 1 + 1);
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < T; t++)
        chk(get_elem(P + 2 * t * n, 2 * n, c), av[c][t] * bv[c][t],
            $sformatf("%s col %0d tuple %0d", name, c, t));
    $display("%-9s %0d operations", name, T * COLS);
  endtask

  // int4 dot product: acc (32 rows) += sum_k A_k * B_k, K pairs per column
  task automatic dot_workload();
    localparam int ACC = 0, PT = 32, Z = 40, PAIRS = 41;
    int K = (ROWS - PAIRS) / 8;
    longint av [COLS][64], bv [COLS][64], sum;
    for (int c = 0; c < COLS; c++) begin
      for (int r = 0; r < PAIRS; r++) img[r][c] = $urandom_range(0, 1);   // stale
      for (int k = 0; k < K; k++) begin
        av[c][k] = $urandom_range(0, 15);
        bv[c][k] = $urandom_range(0, 15);
        set_elem(PAIRS + 8 * k, 4, c, av[c][k]);
        set_elem(PAIRS + 8 * k + 4, 4, c, bv[c][k]);
      end
    end
    prog.delete();
    prog.push_back(i_ldi(5, 0)); prog.push_back(i_ldi(6, PAIRS)); prog.push_back(i_ldi(7, Z));
    prog.push_back(i_setinc(8'b0011_1010));              // r1, r3, r4, r5
    prog.push_back(i_loopi(Z + 1, 1));                    // clear acc, product, zero row
    prog.push_back(i_arr(AOP_ZERO, PRED_ALWAYS, 5, 5, 5));
    prog.push_back(i_loopi(K, 24));
    prog.push_back(i_alu(FN_MOV, 1, 6)); prog.push_back(i_addi(1, 4));
    prog.push_back(i_alu(FN_MOV, 0, 6));
    prog.push_back(i_ldi(5, PT)); prog.push_back(i_loopi(8, 1));
    prog.push_back(i_arr(AOP_ZERO, PRED_ALWAYS, 5, 5, 5));
    prog.push_back(i_ldi(2, PT));
    push_mul_body(4);
    prog.push_back(i_ldi(3, ACC)); prog.push_back(i_ldi(4, PT));
    prog.push_back(i_arr(AOP_CLRC, PRED_ALWAYS, 0, 0, 0));
    prog.push_back(i_loopi(8, 1));
    prog.push_back(i_arr(AOP_ADD, PRED_ALWAYS, 3, 3, 4));
    prog.push_back(i_loopi(24, 1));
    prog.push_back(i_arr(AOP_ADD, PRED_ALWAYS, 3, 3, 7));   // carry ripple with the zero row
    prog.push_back(i_addi(6, 8));
    prog.push_back(i_end());
    run("int4 dot", 5 + (Z + 1) + 1 + K * (3 + 2 + 8 + 1 + 1 + 4 * (MUL_BODY_CYC_PER_BIT + 4)
                                          + 3 + 1 + 8 + 1 + 24 + 1) + 1 + 1);
    for (int c = 0; c < COLS; c++) begin
      sum = 0;
      for (int k = 0; k < K; k++) sum += av[c][k] * bv[c][k];
      chk(get_elem(ACC, 32, c), sum, $sformatf("int4 dot col %0d", c));
    end
    $display("int4 dot  %0d products per column, %0d columns", K, COLS);
  endtask


  // ---------- bfloat16 multiplication ----------
  // Normal operands only, no rounding (the product mantissa is truncated),
  // exponent assumed to stay in range. Per tuple:
  //   P = {1,mA} * {1,mB}   (16-bit, Tag-predicated shift-and-add)
  //   C = P[15]             (ADD of P[15] with itself loads the carry)
  //   mR = C ? P[14:8] : P[13:7]   (Carry / NotCarry predicated copies)
  //   eR = eA + eB + C - 127       (carry-in C, then add 385 = -127 mod 512)
  //   sR = sA ^ sB
  int em_cycles;
  task automatic emit(logic [15:0] ins, int times);
    prog.push_back(ins);
    em_cycles += times;
  endtask

  task automatic bf16_mul_workload();
    localparam int T = 10, A = 0, B = 160, R = 320, P = 480, E8 = 505, ZR = 506, ONE = 507;
    longint av [COLS][T], bv [COLS][T], ev;
    int loop_at;
    for (int c = 0; c < COLS; c++) begin
      img[ZR][c] = 1'($urandom); img[ONE][c] = 1'($urandom);   // stale
      for (int t = 0; t < T; t++) begin
        // sign, exponent in [64, 190], mantissa
        av[c][t] = {1'($urandom), 8'($urandom_range(64, 190)), 7'($urandom)};
        bv[c][t] = {1'($urandom), 8'($urandom_range(64, 190)), 7'($urandom)};
        set_elem(A + 16 * t, 16, c, av[c][t]);
        set_elem(B + 16 * t, 16, c, bv[c][t]);
      end
    end
    prog.delete();
    em_cycles = 0;
    emit(i_ldi(0, ZR), 1); emit(i_arr(AOP_ZERO, PRED_ALWAYS, 0, 0, 0), 1);
    emit(i_ldi(0, ONE), 1); emit(i_arr(AOP_ONE, PRED_ALWAYS, 0, 0, 0), 1);
    emit(i_ldi(5, A), 1); emit(i_ldi(6, B), 1); emit(i_ldi(7, R), 1);
    emit(i_ldi(0, T), 1);
    loop_at = prog.size();
    emit(i_loop(0, 0), 1);                                 // length patched below
    // -- clear P
    emit(i_ldi(2, P), T); emit(i_setinc(8'b0000_0100), T);
    emit(i_loopi(16, 1), T); emit(i_arr(AOP_ZERO, PRED_ALWAYS, 2, 2, 2), 16 * T);
    // -- mantissa product, multiplier bits 0..6 from B, bit 7 is the hidden 1
    emit(i_ldi(0, ONE), T); emit(i_ldi(2, P), T); emit(i_alu(FN_MOV, 1, 6), T);
    emit(i_setinc(8'b0001_1010), T);                       // r1, r3, r4
    emit(i_loopi(7, 9), T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 1, 1, 1), 7 * T);
    emit(i_arr(AOP_CLRC, PRED_ALWAYS, 1, 1, 1), 7 * T);
    emit(i_alu(FN_MOV, 3, 5), 7 * T); emit(i_alu(FN_MOV, 4, 2), 7 * T);
    emit(i_loopi(7, 1), 7 * T);
    emit(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3), 49 * T);
    emit(i_arr(AOP_ADD, PRED_TAG, 4, 4, 0), 7 * T);        // hidden bit of A
    emit(i_arr(AOP_WRC, PRED_TAG, 4, 4, 4), 7 * T);
    emit(i_addi(2, 1), 7 * T);
    emit(i_arr(AOP_CLRC, PRED_ALWAYS, 1, 1, 1), T);        // hidden bit of B: always
    emit(i_alu(FN_MOV, 3, 5), T); emit(i_alu(FN_MOV, 4, 2), T);
    emit(i_loopi(7, 1), T);
    emit(i_arr(AOP_ADD, PRED_ALWAYS, 4, 4, 3), 7 * T);
    emit(i_arr(AOP_ADD, PRED_ALWAYS, 4, 4, 0), T);
    emit(i_arr(AOP_WRC, PRED_ALWAYS, 4, 4, 4), T);
    // -- normalise: C = P[15], then select the mantissa
    emit(i_ldi(2, P + 15), T); emit(i_arr(AOP_CLRC, PRED_ALWAYS, 2, 2, 2), T);
    emit(i_setinc(8'b0001_1000), T);                       // r3, r4
    emit(i_arr(AOP_ADD, PRED_ALWAYS, 2, 2, 2), T);
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_ldi(3, P + 8), T);
    emit(i_loopi(7, 1), T); emit(i_arr(AOP_AND, PRED_CARRY, 4, 3, 3), 7 * T);
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_ldi(3, P + 7), T);
    emit(i_loopi(7, 1), T); emit(i_arr(AOP_AND, PRED_NCARRY, 4, 3, 3), 7 * T);
    // -- exponent: eA + eB + C into R[7..14], bit 8 into E8
    emit(i_alu(FN_MOV, 3, 5), T); emit(i_addi(3, 7), T);
    emit(i_alu(FN_MOV, 1, 6), T); emit(i_addi(1, 7), T);
    emit(i_setinc(8'b0001_1010), T);                       // r1, r3, r4
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_ADD, PRED_ALWAYS, 4, 3, 1), 8 * T);
    emit(i_ldi(2, E8), T); emit(i_arr(AOP_WRC, PRED_ALWAYS, 2, 2, 2), T);
    // -- minus the bias: add 0b1_1000_0001, low 8 bits kept
    emit(i_ldi(3, ZR), T); emit(i_alu(FN_MOV, 4, 7), T); emit(i_addi(4, 7), T);
    emit(i_setinc(8'b0001_0000), T);                       // r4
    emit(i_arr(AOP_CLRC, PRED_ALWAYS, 4, 4, 4), T);
    emit(i_arr(AOP_ADD, PRED_ALWAYS, 4, 4, 0), T);
    emit(i_loopi(6, 1), T); emit(i_arr(AOP_ADD, PRED_ALWAYS, 4, 4, 3), 6 * T);
    emit(i_arr(AOP_ADD, PRED_ALWAYS, 4, 4, 0), T);
    // -- sign
    emit(i_alu(FN_MOV, 3, 5), T); emit(i_addi(3, 15), T);
    emit(i_alu(FN_MOV, 1, 6), T); emit(i_addi(1, 15), T);
    emit(i_arr(AOP_XOR, PRED_ALWAYS, 4, 3, 1), T);
    // -- next tuple
    emit(i_addi(5, 16), T); emit(i_addi(6, 16), T); emit(i_addi(7, 16), T);
    prog[loop_at] = i_loop(0, prog.size() - loop_at - 1);
    emit(i_end(), 1);
    run("bf16 mul", em_cycles + 1);
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < T; t++) begin
        longint pr, ex;
        pr = (128 + av[c][t][6:0]) * (128 + bv[c][t][6:0]);
        ex = av[c][t][14:7] + bv[c][t][14:7] - 127;
        if (pr[15]) ev = {av[c][t][15] ^ bv[c][t][15], 8'(ex + 1), pr[14:8]};
        else        ev = {av[c][t][15] ^ bv[c][t][15], 8'(ex), pr[13:7]};
        chk(get_elem(R + 16 * t, 16, c), ev, $sformatf("bf16 mul col %0d tuple %0d", c, t));
      end
    $display("bf16 mul  %0d operations, %0d instructions", T * COLS, prog.size());
  endtask

  // ---------- bfloat16 addition ----------
  // Normal operands, truncation (no guard bits), result assumed normal and
  // non-zero. Per tuple, all steps predicated per column:
  //   D = eA - eB (C = eA >= eB, kept in D8 as "ge")
  //   EX = ge ? eA : eB, MX = ge ? 1.mA : 1.mB, MY = the other, sign = ge ? sA : sB
  //   |d|: where !ge, D = ~D + 1
  //   MY >>= |d| (Tag-predicated shifts by 1, 2, 4; cleared when |d| >= 8)
  //   signs differ (SD): MY = ~MY and carry-in 1, so MX + MY is MX - MY
  //   MX8 = carry out; where SD and no carry the difference is negated and
  //   the sign flipped; where not SD and MX8 set, MX >>= 1 and EX += 1
  //   where MX[7:4] == 0: MX <<= 4 and EX -= 4; then 3 times: where
  //   MX7 == 0, MX <<= 1 and EX -= 1
  task automatic bf16_add_workload();
    localparam int T = 10, A = 0, B = 160, R = 320, D = 480, D8 = 488, MX = 489, MY = 498,
                   SD = 506, NG = 507, TMP = 508, ZR = 509, ONE = 510;
    longint av [COLS][T], bv [COLS][T];
    int loop_at, norm_at;
    for (int c = 0; c < COLS; c++) begin
      img[ZR][c] = 1'($urandom); img[ONE][c] = 1'($urandom);   // stale
      for (int t = 0; t < T; t++) begin
        int ea, eb;
        do begin
          ea = $urandom_range(30, 220);
          eb = ($urandom_range(0, 3) == 0) ? $urandom_range(30, 220) : ea + $urandom_range(0, 20) - 10;
          av[c][t] = {1'($urandom), 8'(ea), 7'($urandom)};
          bv[c][t] = {1'($urandom), 8'(eb), 7'($urandom)};
        end while (av[c][t][15] != bv[c][t][15] && av[c][t][14:0] == bv[c][t][14:0]);
        set_elem(A + 16 * t, 16, c, av[c][t]);
        set_elem(B + 16 * t, 16, c, bv[c][t]);
      end
    end
    prog.delete();
    em_cycles = 0;
    emit(i_ldi(0, ZR), 1); emit(i_arr(AOP_ZERO, PRED_ALWAYS, 0, 0, 0), 1);
    emit(i_ldi(0, ONE), 1); emit(i_arr(AOP_ONE, PRED_ALWAYS, 0, 0, 0), 1);
    emit(i_ldi(5, A), 1); emit(i_ldi(6, B), 1); emit(i_ldi(7, R), 1);
    emit(i_ldi(0, T), 1);
    loop_at = prog.size();
    emit(i_loop(0, 0), 1);                                 // length patched below
    // -- D = eA + ~eB + 1, D8 = carry = (eA >= eB)
    emit(i_alu(FN_MOV, 1, 6), T); emit(i_addi(1, 7), T); emit(i_ldi(2, D), T);
    emit(i_setinc(8'b0000_0110), T);                       // r1, r2
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_NOR, PRED_ALWAYS, 2, 1, 1), 8 * T);
    emit(i_alu(FN_MOV, 3, 5), T); emit(i_addi(3, 7), T); emit(i_ldi(2, D), T);
    emit(i_setinc(8'b0000_1100), T);                       // r2, r3
    emit(i_arr(AOP_SETC, PRED_ALWAYS, 2, 2, 2), T);
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_ADD, PRED_ALWAYS, 2, 3, 2), 8 * T);
    emit(i_arr(AOP_WRC, PRED_ALWAYS, 2, 2, 2), T);
    // -- select the larger operand while C = ge
    emit(i_setinc(8'b0001_1000), T);                       // r3, r4
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_addi(4, 7), T); emit(i_alu(FN_MOV, 3, 5), T); emit(i_addi(3, 7), T);
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_AND, PRED_CARRY, 4, 3, 3), 8 * T);
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_addi(4, 7), T); emit(i_alu(FN_MOV, 3, 6), T); emit(i_addi(3, 7), T);
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_AND, PRED_NCARRY, 4, 3, 3), 8 * T);
    emit(i_ldi(4, MX), T); emit(i_alu(FN_MOV, 3, 5), T);
    emit(i_loopi(7, 1), T); emit(i_arr(AOP_AND, PRED_CARRY, 4, 3, 3), 7 * T);
    emit(i_ldi(4, MX), T); emit(i_alu(FN_MOV, 3, 6), T);
    emit(i_loopi(7, 1), T); emit(i_arr(AOP_AND, PRED_NCARRY, 4, 3, 3), 7 * T);
    emit(i_ldi(4, MY), T); emit(i_alu(FN_MOV, 3, 6), T);
    emit(i_loopi(7, 1), T); emit(i_arr(AOP_AND, PRED_CARRY, 4, 3, 3), 7 * T);
    emit(i_ldi(4, MY), T); emit(i_alu(FN_MOV, 3, 5), T);
    emit(i_loopi(7, 1), T); emit(i_arr(AOP_AND, PRED_NCARRY, 4, 3, 3), 7 * T);
    emit(i_setinc(8'b0000_0000), T);
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_addi(4, 15), T);
    emit(i_alu(FN_MOV, 3, 5), T); emit(i_addi(3, 15), T);
    emit(i_arr(AOP_AND, PRED_CARRY, 4, 3, 3), T);
    emit(i_alu(FN_MOV, 3, 6), T); emit(i_addi(3, 15), T);
    emit(i_arr(AOP_AND, PRED_NCARRY, 4, 3, 3), T);
    emit(i_ldi(4, MX + 7), T); emit(i_arr(AOP_ONE, PRED_ALWAYS, 4, 4, 4), T);
    emit(i_ldi(4, MX + 8), T); emit(i_arr(AOP_ZERO, PRED_ALWAYS, 4, 4, 4), T);
    emit(i_ldi(4, MY + 7), T); emit(i_arr(AOP_ONE, PRED_ALWAYS, 4, 4, 4), T);
    // -- |d|: T = !ge, D = ~D + 1 there
    emit(i_ldi(2, D8), T); emit(i_ldi(3, TMP), T);
    emit(i_arr(AOP_NOR, PRED_ALWAYS, 3, 2, 2), T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 3, 3, 3), T);
    emit(i_ldi(2, D), T); emit(i_setinc(8'b0000_0100), T); // r2
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_NOR, PRED_TAG, 2, 2, 2), 8 * T);
    emit(i_ldi(2, D), T); emit(i_ldi(3, ZR), T);
    emit(i_arr(AOP_SETC, PRED_ALWAYS, 2, 2, 2), T);
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_ADD, PRED_TAG, 2, 2, 3), 8 * T);
    // -- align: MY >>= |d|
    for (int b = 0; b < 3; b++) begin
      emit(i_setinc(8'b0000_0000), T);
      emit(i_ldi(2, D + b), T); emit(i_arr(AOP_TAG, PRED_ALWAYS, 2, 2, 2), T);
      emit(i_ldi(4, MY), T); emit(i_ldi(3, MY + (1 << b)), T);
      emit(i_setinc(8'b0001_1000), T);                     // r3, r4
      emit(i_loopi(8 - (1 << b), 1), T); emit(i_arr(AOP_AND, PRED_TAG, 4, 3, 3), (8 - (1 << b)) * T);
      emit(i_loopi(1 << b, 1), T); emit(i_arr(AOP_ZERO, PRED_TAG, 4, 4, 4), (1 << b) * T);
    end
    emit(i_setinc(8'b0000_0000), T);
    emit(i_ldi(3, TMP), T); emit(i_ldi(2, D + 3), T);
    emit(i_arr(AOP_AND, PRED_ALWAYS, 3, 2, 2), T);
    emit(i_ldi(2, D + 4), T); emit(i_setinc(8'b0000_0100), T);   // r2
    emit(i_loopi(4, 1), T); emit(i_arr(AOP_OR, PRED_ALWAYS, 3, 3, 2), 4 * T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 3, 3, 3), T);
    emit(i_ldi(4, MY), T); emit(i_setinc(8'b0001_0000), T);      // r4
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_ZERO, PRED_TAG, 4, 4, 4), 8 * T);
    // -- SD = sA ^ sB; where SD, MY = ~MY and carry-in 1
    emit(i_setinc(8'b0000_0000), T);
    emit(i_alu(FN_MOV, 3, 5), T); emit(i_addi(3, 15), T);
    emit(i_alu(FN_MOV, 1, 6), T); emit(i_addi(1, 15), T);
    emit(i_ldi(2, SD), T); emit(i_arr(AOP_XOR, PRED_ALWAYS, 2, 3, 1), T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 2, 2, 2), T);
    emit(i_ldi(4, MY), T); emit(i_setinc(8'b0001_0000), T);      // r4
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_NOR, PRED_TAG, 4, 4, 4), 8 * T);
    emit(i_setinc(8'b0000_0000), T);
    emit(i_ldi(3, ZR), T);
    emit(i_arr(AOP_CLRC, PRED_ALWAYS, 3, 3, 3), T);
    emit(i_arr(AOP_ADD, PRED_ALWAYS, 3, 2, 2), T);               // C = SD
    emit(i_ldi(4, MX), T); emit(i_ldi(1, MY), T);
    emit(i_setinc(8'b0001_0010), T);                             // r1, r4
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_ADD, PRED_ALWAYS, 4, 4, 1), 8 * T);
    emit(i_arr(AOP_WRC, PRED_ALWAYS, 4, 4, 4), T);               // MX8
    // -- NG = SD & ~MX8: negate the difference, flip the sign; clear MX8 where SD
    emit(i_setinc(8'b0000_0000), T);
    emit(i_ldi(4, MX + 8), T); emit(i_ldi(3, TMP), T);
    emit(i_arr(AOP_NOR, PRED_ALWAYS, 3, 4, 4), T);
    emit(i_ldi(1, NG), T); emit(i_arr(AOP_AND, PRED_ALWAYS, 1, 3, 2), T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 2, 2, 2), T);
    emit(i_arr(AOP_ZERO, PRED_TAG, 4, 4, 4), T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 1, 1, 1), T);
    emit(i_ldi(4, MX), T); emit(i_setinc(8'b0001_0000), T);      // r4
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_NOR, PRED_TAG, 4, 4, 4), 8 * T);
    emit(i_arr(AOP_SETC, PRED_ALWAYS, 4, 4, 4), T);
    emit(i_ldi(4, MX), T); emit(i_ldi(3, ZR), T);
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3), 8 * T);
    emit(i_setinc(8'b0000_0000), T);
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_addi(4, 15), T);
    emit(i_arr(AOP_XOR, PRED_ALWAYS, 4, 4, 1), T);
    // -- carry out of a same-sign add: MX >>= 1, EX += 1
    emit(i_ldi(4, MX + 8), T); emit(i_arr(AOP_TAG, PRED_ALWAYS, 4, 4, 4), T);
    emit(i_ldi(4, MX), T); emit(i_ldi(3, MX + 1), T);
    emit(i_setinc(8'b0001_1000), T);                             // r3, r4
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_AND, PRED_TAG, 4, 3, 3), 8 * T);
    emit(i_arr(AOP_SETC, PRED_ALWAYS, 4, 4, 4), T);
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_addi(4, 7), T); emit(i_ldi(3, ZR), T);
    emit(i_setinc(8'b0001_0000), T);                             // r4
    emit(i_loopi(8, 1), T); emit(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3), 8 * T);
    // -- leading zeros: where MX[7:4] == 0, EX -= 4 and MX <<= 4; then 3
    //    times: where MX7 == 0, EX -= 1 and MX <<= 1
    emit(i_setinc(8'b0000_0000), T);
    emit(i_ldi(3, TMP), T); emit(i_ldi(2, MX + 4), T);
    emit(i_arr(AOP_AND, PRED_ALWAYS, 3, 2, 2), T);
    emit(i_ldi(2, MX + 5), T); emit(i_setinc(8'b0000_0100), T);      // r2
    emit(i_loopi(3, 1), T); emit(i_arr(AOP_OR, PRED_ALWAYS, 3, 3, 2), 3 * T);
    emit(i_arr(AOP_NOR, PRED_ALWAYS, 3, 3, 3), T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 3, 3, 3), T);
    emit(i_arr(AOP_CLRC, PRED_ALWAYS, 3, 3, 3), T);                  // EX + 0b1111_1100
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_addi(4, 7), T);
    emit(i_setinc(8'b0001_0000), T);                                // r4
    emit(i_ldi(3, ZR), T);
    emit(i_loopi(2, 1), T); emit(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3), 2 * T);
    emit(i_ldi(3, ONE), T);
    emit(i_loopi(6, 1), T); emit(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3), 6 * T);
    emit(i_setinc(8'b0000_0000), T);
    emit(i_ldi(4, MX + 7), T); emit(i_ldi(3, MX + 3), T);
    emit(i_loopi(4, 3), T);
    emit(i_arr(AOP_AND, PRED_TAG, 4, 3, 3), 4 * T); emit(i_addi(3, -1), 4 * T); emit(i_addi(4, -1), 4 * T);
    emit(i_ldi(4, MX), T); emit(i_setinc(8'b0001_0000), T);         // r4
    emit(i_loopi(4, 1), T); emit(i_arr(AOP_ZERO, PRED_TAG, 4, 4, 4), 4 * T);
    norm_at = prog.size();
    emit(i_loopi(3, 0), T);                                // length patched below
    emit(i_setinc(8'b0000_0000), 3 * T);
    emit(i_ldi(4, MX + 7), 3 * T); emit(i_ldi(3, TMP), 3 * T);
    emit(i_arr(AOP_NOR, PRED_ALWAYS, 3, 4, 4), 3 * T);
    emit(i_arr(AOP_TAG, PRED_ALWAYS, 3, 3, 3), 3 * T);
    emit(i_arr(AOP_CLRC, PRED_ALWAYS, 3, 3, 3), 3 * T);
    emit(i_alu(FN_MOV, 4, 7), 3 * T); emit(i_addi(4, 7), 3 * T); emit(i_ldi(3, ONE), 3 * T);
    emit(i_setinc(8'b0001_0000), 3 * T);                         // r4
    emit(i_loopi(8, 1), 3 * T); emit(i_arr(AOP_ADD, PRED_TAG, 4, 4, 3), 24 * T);
    emit(i_setinc(8'b0000_0000), 3 * T);
    emit(i_ldi(4, MX + 7), 3 * T); emit(i_ldi(3, MX + 6), 3 * T);
    emit(i_loopi(7, 3), 3 * T);
    emit(i_arr(AOP_AND, PRED_TAG, 4, 3, 3), 21 * T); emit(i_addi(3, -1), 21 * T); emit(i_addi(4, -1), 21 * T);
    emit(i_arr(AOP_ZERO, PRED_TAG, 4, 4, 4), 3 * T);
    prog[norm_at] = i_loopi(3, prog.size() - norm_at - 1);
    // -- mantissa out
    emit(i_alu(FN_MOV, 4, 7), T); emit(i_ldi(3, MX), T);
    emit(i_setinc(8'b0001_1000), T);                             // r3, r4
    emit(i_loopi(7, 1), T); emit(i_arr(AOP_AND, PRED_ALWAYS, 4, 3, 3), 7 * T);
    // -- next tuple
    emit(i_addi(5, 16), T); emit(i_addi(6, 16), T); emit(i_addi(7, 16), T);
    prog[loop_at] = i_loop(0, prog.size() - loop_at - 1);
    emit(i_end(), 1);
    run("bf16 add", em_cycles + 1);
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < T; t++) begin
        logic [15:0] a, b;
        int ex, mx, my, d, s;
        logic sg, ge;
        a = 16'(av[c][t]); b = 16'(bv[c][t]);
        ge = a[14:7] >= b[14:7];
        ex = ge ? a[14:7] : b[14:7];
        mx = ge ? {1'b1, a[6:0]} : {1'b1, b[6:0]};
        my = ge ? {1'b1, b[6:0]} : {1'b1, a[6:0]};
        sg = ge ? a[15] : b[15];
        d  = ge ? a[14:7] - b[14:7] : b[14:7] - a[14:7];
        my = (d >= 8) ? 0 : my >> d;
        if (a[15] == b[15]) begin
          s = mx + my;
          if (s >= 256) begin s = s >> 1; ex++; end
        end else begin
          s = mx - my;
          if (s < 0) begin s = -s; sg = ~sg; end
          while (s < 128) begin s = s << 1; ex--; end
        end
        chk(get_elem(R + 16 * t, 16, c), {sg, 8'(ex), 7'(s)}, $sformatf("bf16 add col %0d tuple %0d", c, t));
      end
    $display("bf16 add  %0d operations, %0d instructions", T * COLS, prog.size());
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    add_workload(4);
    add_workload(8);
    mul_workload(4);
    mul_workload(8);
    dot_workload();
    bf16_mul_workload();
    bf16_add_workload();
    finished = 1;
  end
endmodule
