// tb_cram_controller: self-checking test of the Compute RAM sequencer.
//
// The controller fetches from a behavioural instruction ROM with one cycle
// of read latency, like the real instruction memory. For every program the
// testbench runs its own sequential interpreter of the instruction set
// (no pipeline) and checks that the controller issues exactly the same
// stream of array instructions (operation, predicate and the three row
// addresses) and raises done after N + 1 + B cycles (N executed
// instructions, B taken branches / skipped loops), i.e. that loops cost no
// cycles and a taken branch costs one. Programs cover every controller
// operation, nested hardware loops, register-count loops, zero-count loops,
// forward and backward branches and a restart with a second start pulse.
module tb_cram_controller;
  import cram_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0;
  logic        busy, done, fetch_en;
  logic [7:0]  fetch_addr;
  logic [15:0] fetch_data;
  array_cmd_t  arr_cmd;

  logic [15:0] rom [256];
  int checks = 0, failures = 0;

  cram_controller dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (fetch_en) fetch_data <= rom[fetch_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------- reference interpreter ----------
  logic [47:0] exp_q[$];   // {op, pred, row_w[12:0]... } packed below
  int exp_cycles;

  function automatic logic [47:0] pack(logic [3:0] op, logic [1:0] p,
                                       logic [15:0] w, logic [15:0] a, logic [15:0] b);
    return {op, p, w[13:0], a[13:0], b[13:0]};
  endfunction

  task automatic interpret();
    logic [15:0] r [8];
    logic [7:0] incm = 0;
    int pc = 0, n = 0, bubbles = 0;
    int lf[$], ll[$], lc[$];
    for (int i = 0; i < 8; i++) r[i] = 0;
    exp_q.delete();
    forever begin
      logic [15:0] in = rom[pc];
      int npc = pc + 1;
      bit redir = 0;
      n++;
      if (in[15]) begin
        bit wr_row, sense;
        bit [7:0] used;
        exp_q.push_back(pack(in[14:11], in[10:9], r[in[8:6]], r[in[5:3]], r[in[2:0]]));
        wr_row = !(in[14:11] inside {7, 8, 9, 14, 15});
        sense  = in[14:11] inside {[0:6], 9};
        used = 0;
        if (wr_row) used[in[8:6]] = 1;
        if (sense) begin used[in[5:3]] = 1; used[in[2:0]] = 1; end
        for (int i = 0; i < 8; i++) if (used[i] && incm[i]) r[i] = r[i] + 1;
      end else begin
        int rd = in[11:9], rs = in[8:6];
        case (in[14:12])
          0: if (in[11]) break; else if (in[10]) incm = in[7:0];
          1: r[rd] = 16'(in[8:0]);
          2: r[rd] = r[rd] + 16'(signed'(in[8:0]));
          3: case (in[2:0])
               0: r[rd] = r[rd] + r[rs];
               1: r[rd] = r[rd] - r[rs];
               2: r[rd] = r[rd] & r[rs];
               3: r[rd] = r[rd] | r[rs];
               4: r[rd] = r[rd] ^ r[rs];
               5: r[rd] = r[rs];
               default: ;
             endcase
          4, 5: begin
            int len = (in[14:12] == 4) ? int'(in[7:0]) : int'(in[5:0]);
            int cnt = (in[14:12] == 4) ? int'(r[rd]) : int'(in[11:6]);
            if (cnt == 0) begin npc = pc + len + 1; redir = 1; end
            else begin lf.push_back(pc + 1); ll.push_back(pc + len); lc.push_back(cnt); end
          end
          6: if (r[rd] != r[rs]) begin npc = pc + int'(signed'(in[5:0])); redir = 1; end
          7: if (r[rd] <  r[rs]) begin npc = pc + int'(signed'(in[5:0])); redir = 1; end
          default: ;
        endcase
      end
      if (redir) bubbles++;
      else if (ll.size() > 0 && pc == ll[$]) begin
        if (lc[$] > 1) begin lc[$] = lc[$] - 1; npc = lf[$]; end
        else begin void'(lf.pop_back()); void'(ll.pop_back()); void'(lc.pop_back()); end
      end
      pc = npc & 255;
    end
    exp_cycles = n + 1 + bubbles;
  endtask

  // ---------- run one program on the DUT ----------
  task automatic run(string name);
    int cyc = 0, got = 0, idx = 0;
    interpret();
    @(negedge clk); start = 1;
    @(posedge clk); #1 start = 0;
    while (!done && cyc < 50000) begin
      if (arr_cmd.valid) begin
        logic [47:0] g = pack(arr_cmd.op, arr_cmd.pred, arr_cmd.row_w, arr_cmd.row_a, arr_cmd.row_b);
        checks++;
        if (idx >= exp_q.size() || g !== exp_q[idx]) begin
          failures++;
          if (failures < 10) $display("FAIL %s: array instr %0d got %h exp %h", name, idx,
                                      g, idx < exp_q.size() ? exp_q[idx] : 48'hx);
        end
        idx++;
      end
      @(posedge clk); #1;
      cyc++;
    end
    checks++;
    if (idx != exp_q.size()) begin
      failures++; $display("FAIL %s: %0d array instrs, expected %0d", name, idx, exp_q.size());
    end
    checks++;
    if (cyc != exp_cycles) begin
      failures++; $display("FAIL %s: done after %0d cycles, expected %0d", name, cyc, exp_cycles);
    end
    checks++;
    if (busy) begin failures++; $display("FAIL %s: busy with done", name); end
    $display("%s: %0d array instrs, %0d cycles", name, idx, cyc);
    repeat (3) @(posedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL %s: done not held", name); end
  endtask

  task automatic clear_rom();
    for (int i = 0; i < 256; i++) rom[i] = i_end();
  endtask

  initial begin
    int p;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1: register arithmetic and logic, visible through array row fields
    clear_rom(); p = 0;
    rom[p++] = i_ldi(1, 300);  rom[p++] = i_ldi(2, 45);
    rom[p++] = i_arr(AOP_ADD, PRED_ALWAYS, 1, 2, 1);
    rom[p++] = i_alu(FN_ADD, 1, 2);  rom[p++] = i_arr(AOP_AND, PRED_TAG, 1, 1, 2);
    rom[p++] = i_alu(FN_SUB, 2, 1);  rom[p++] = i_arr(AOP_OR, PRED_CARRY, 2, 1, 2);
    rom[p++] = i_alu(FN_AND, 1, 2);  rom[p++] = i_arr(AOP_XOR, PRED_NCARRY, 1, 2, 0);
    rom[p++] = i_alu(FN_OR, 3, 2);   rom[p++] = i_alu(FN_XOR, 3, 1);
    rom[p++] = i_alu(FN_MOV, 4, 3);  rom[p++] = i_addi(4, -7);
    rom[p++] = i_arr(AOP_WRC, PRED_ALWAYS, 4, 3, 1);
    rom[p++] = i_nop();
    rom[p++] = i_arr(AOP_ONE, PRED_TAG, 0, 4, 4);
    rom[p++] = i_end();
    run("alu");

    // 2: nested immediate loops, inner body of one instruction
    clear_rom(); p = 0;
    rom[p++] = i_ldi(0, 0); rom[p++] = i_ldi(1, 100);
    rom[p++] = i_loopi(3, 4);
    rom[p++] =   i_loopi(5, 1);
    rom[p++] =     i_arr(AOP_ADD, PRED_ALWAYS, 1, 0, 1);
    rom[p++] =   i_addi(0, 1);
    rom[p++] =   i_addi(1, 2);
    rom[p++] = i_arr(AOP_WRC, PRED_ALWAYS, 1, 1, 1);
    rom[p++] = i_end();
    run("nested loops");

    // 3: register-count loop, zero-count loop, forward branch, backward branch
    clear_rom(); p = 0;
    rom[p++] = i_ldi(5, 4);  rom[p++] = i_ldi(6, 0); rom[p++] = i_ldi(7, 0);
    rom[p++] = i_loop(5, 3);
    rom[p++] =   i_arr(AOP_ZERO, PRED_ALWAYS, 6, 6, 6);
    rom[p++] =   i_addi(6, 1);
    rom[p++] =   i_arr(AOP_TAG, PRED_ALWAYS, 6, 6, 6);
    rom[p++] = i_loop(7, 2);                                 // count 0: skipped
    rom[p++] =   i_arr(AOP_ONE, PRED_ALWAYS, 6, 6, 6);
    rom[p++] =   i_addi(6, 100);
    rom[p++] = i_ldi(2, 0); rom[p++] = i_ldi(3, 6);
    rom[p++] = i_arr(AOP_NOR, PRED_ALWAYS, 2, 2, 3);         // backward-branch target
    rom[p++] = i_addi(2, 1);
    rom[p++] = i_blt(2, 3, -2);
    rom[p++] = i_bne(2, 3, 3);                               // not taken
    rom[p++] = i_bne(2, 7, 2);                               // taken, skips one
    rom[p++] = i_arr(AOP_ONE, PRED_ALWAYS, 7, 7, 7);
    rom[p++] = i_arr(AOP_SETC, PRED_ALWAYS, 2, 3, 5);
    rom[p++] = i_end();
    run("branches");
    // restart the same program
    run("restart");

    // 4: loop with body ending right before END, three nesting levels
    clear_rom(); p = 0;
    rom[p++] = i_ldi(4, 2);
    rom[p++] = i_loop(4, 6);
    rom[p++] =   i_loopi(2, 4);
    rom[p++] =     i_loopi(3, 1);
    rom[p++] =       i_arr(AOP_XNOR, PRED_ALWAYS, 1, 1, 2);
    rom[p++] =     i_addi(1, 1);
    rom[p++] =     i_addi(2, 3);
    rom[p++] =   i_addi(3, 5);
    rom[p++] = i_end();
    run("three levels");

    // 5: row-pointer post-increment
    clear_rom(); p = 0;
    rom[p++] = i_ldi(0, 10); rom[p++] = i_ldi(1, 20); rom[p++] = i_ldi(2, 30);
    rom[p++] = i_ldi(3, 40);
    rom[p++] = i_arr(AOP_ADD, PRED_ALWAYS, 2, 0, 1);         // no mask yet
    rom[p++] = i_setinc(8'b0000_0111);
    rom[p++] = i_loopi(5, 1);
    rom[p++] =   i_arr(AOP_ADD, PRED_ALWAYS, 2, 0, 1);
    rom[p++] = i_arr(AOP_WRC, PRED_ALWAYS, 2, 3, 3);         // only r2 moves
    rom[p++] = i_arr(AOP_TAG, PRED_ALWAYS, 3, 0, 0);         // r0 once, r3 unused
    rom[p++] = i_arr(AOP_CLRC, PRED_ALWAYS, 0, 1, 2);        // no rows used
    rom[p++] = i_arr(AOP_AND, PRED_TAG, 3, 1, 3);            // r1 only
    rom[p++] = i_arr(AOP_XOR, PRED_ALWAYS, 0, 1, 2);
    rom[p++] = i_setinc(8'b0000_1000);
    rom[p++] = i_arr(AOP_ONE, PRED_ALWAYS, 3, 0, 0);
    rom[p++] = i_arr(AOP_ONE, PRED_ALWAYS, 3, 0, 0);
    rom[p++] = i_end();
    run("post-increment");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
