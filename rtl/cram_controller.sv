// cram_controller: the sequencer of a Compute RAM.
//
// A small two-stage pipelined processor. Stage 1 (fetch) presents the
// program counter to the instruction memory, whose registered output is the
// instruction of stage 2. Stage 2 decodes and executes it in one cycle:
//
//  * controller instructions use the execution unit, which has one adder
//    (ADD, SUB, ADDI), one comparator (BNE, BLT) and one logical unit (AND,
//    OR, XOR, MOV), on a register file of NREGS x REG_W flip-flops;
//  * array instructions are issued on arr_cmd: the operation, the
//    predicate and three row addresses read from registers. The main array
//    and the logic peripherals complete them in the same cycle, so the
//    pipeline issues one array operation per clock. Registers selected
//    with SETINC are row pointers: each one an array instruction uses as a
//    row address is incremented by one afterwards, like the post-modify
//    address registers of DSP processors. A bit-serial loop over n bits
//    therefore needs only its array instruction in the body and runs at one
//    bit per clock.
//
// Loops cost no cycles. LOOP/LOOPI push {first, last, count} on a small
// loop stack (LOOP_DEPTH entries); whenever the fetch address equals the
// last instruction of the innermost body and its count is above one, the
// next fetch address is the body's first instruction instead. A loop with a
// zero count skips its body. A taken branch is resolved in stage 2 and
// squashes the one instruction fetched behind it (one bubble).
//
// Control: a rising edge of start (the top gates it with mode) starts
// execution at address 0 and clears done, the registers and the loop
// stack; the END instruction stops the
// fetch and raises done, which stays high until the next start. From the
// sampling edge of start to the first cycle with done high takes
// N + 1 + B cycles for N executed instructions (END included) and B taken
// branches or skipped loops.
//
// What follows the architecture: 8 registers in flip-flops, one adder, one
// comparator, one logical unit, a pipeline, zero-overhead hardware loops,
// branches, the END instruction and start/done. The two-stage split, the
// instruction encoding (cram_pkg), the row-pointer post-increment, the
// loop-stack depth, the register width and reset behaviour are this
// design's choices. The post-increment units are incrementers beside the
// single adder; they exist so that the bit-serial rates of the block (one
// operand bit per clock) are reached. Programs must not place a
// branch as the last instruction of a loop body, and nested loop bodies
// must not end on the same instruction. LOOP_DEPTH must be at least 2; a
// LOOP or LOOPI beyond that depth is a program error, flagged by an
// assertion in simulation.
module cram_controller
  import cram_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned LOOP_DEPTH = 4,
  localparam int unsigned AW  = $clog2(IMEM_DEPTH),
  localparam int unsigned SPW = $clog2(LOOP_DEPTH + 1),
  localparam int unsigned LSW = $clog2(LOOP_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // instruction fetch
  output logic          fetch_en,
  output logic [AW-1:0] fetch_addr,
  input  logic [15:0]   fetch_data,
  // array instruction issue
  output array_cmd_t    arr_cmd
);

  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DONE } state_e;

  typedef struct packed {
    logic [AW-1:0]    first;
    logic [AW-1:0]    last;
    logic [REG_W-1:0] count;
  } loop_t;

  state_e              state;
  logic                start_q;
  logic [AW-1:0]       pc;        // fetch address
  logic [AW-1:0]       ex_pc;     // address of the instruction in stage 2
  logic                ex_valid;
  logic [REG_W-1:0]    rf [NREGS];
  loop_t               stk [LOOP_DEPTH];
  logic [SPW-1:0]      sp;
  logic [NREGS-1:0]    inc_mask;  // row-pointer post-increment set

  logic running, go;
  assign running  = (state == S_RUN);
  assign go       = start && !start_q;
  assign busy     = running;
  assign done     = (state == S_DONE);
  assign fetch_en = running;
  assign fetch_addr = pc;

  // ---------------- decode ----------------
  logic [15:0] ins;
  logic        is_arr;
  cop_e        cop;
  logic [2:0]  f_rd, f_rs;
  logic [REG_W-1:0] v_rd, v_rs;

  assign ins    = fetch_data;
  assign is_arr = ins[15];
  assign cop    = cop_e'(ins[14:12]);
  assign f_rd   = ins[11:9];
  assign f_rs   = ins[8:6];
  assign v_rd   = rf[f_rd];
  assign v_rs   = rf[f_rs];

  logic exec;
  assign exec = running && ex_valid;

  // ---------------- execution unit ----------------
  logic [REG_W-1:0] add_a, add_b, add_y, log_y, wb_val;
  logic             add_sub, wb_en;
  logic             cmp_ne, cmp_lt;
  alu_fn_e          fn;

  assign fn = alu_fn_e'(ins[2:0]);

  // the one adder
  always_comb begin
    add_a   = v_rd;
    add_sub = 1'b0;
    add_b   = v_rs;
    if (cop == COP_ADDI) add_b = {{(REG_W-9){ins[8]}}, ins[8:0]};
    else if (fn == FN_SUB) add_sub = 1'b1;
  end
  assign add_y = add_a + (add_sub ? ~add_b : add_b) + REG_W'(add_sub);

  // the one logical unit
  always_comb begin
    unique case (fn)
      FN_AND:  log_y = v_rd & v_rs;
      FN_OR:   log_y = v_rd | v_rs;
      FN_XOR:  log_y = v_rd ^ v_rs;
      default: log_y = v_rs;          // MOV
    endcase
  end

  // the one comparator (rs is in the rd field, rt in the rs field)
  assign cmp_ne = (v_rd != v_rs);
  assign cmp_lt = (v_rd <  v_rs);

  // register write-back
  always_comb begin
    wb_en  = 1'b0;
    wb_val = add_y;
    if (exec && !is_arr) begin
      unique case (cop)
        COP_LDI:  begin wb_en = 1'b1; wb_val = REG_W'(ins[8:0]); end
        COP_ADDI: wb_en = 1'b1;
        COP_ALU:  begin
          wb_en  = (fn <= FN_MOV);
          wb_val = (fn == FN_ADD || fn == FN_SUB) ? add_y : log_y;
        end
        default: ;
      endcase
    end
  end

  // row-pointer post-increment after an array instruction (address unit)
  logic [NREGS-1:0] inc_now;
  always_comb begin
    inc_now = '0;
    if (exec && is_arr) begin
      for (int i = 0; i < int'(NREGS); i++) begin
        if (aop_writes(aop_e'(ins[14:11])) && ins[8:6] == 3'(i)) inc_now[i] = 1'b1;
        if (aop_senses(aop_e'(ins[14:11])) && (ins[5:3] == 3'(i) || ins[2:0] == 3'(i)))
          inc_now[i] = 1'b1;
      end
      inc_now = inc_now & inc_mask;
    end
  end

  // ---------------- program flow ----------------
  logic          is_end, is_loop, redirect, push;
  logic [AW-1:0] target, lp_len;
  logic [REG_W-1:0] lp_cnt;
  loop_t         new_e, top_e;
  logic          top_valid, hit, again;
  logic [SPW-1:0] sp_m1;
  assign sp_m1 = sp - SPW'(1);

  always_comb begin
    is_end   = exec && !is_arr && cop == COP_MISC && ins[11];
    is_loop  = exec && !is_arr && (cop == COP_LOOP || cop == COP_LOOPI);
    lp_len   = (cop == COP_LOOP) ? AW'(ins[7:0]) : AW'(ins[5:0]);
    lp_cnt   = (cop == COP_LOOP) ? v_rd : REG_W'(ins[11:6]);
    redirect = 1'b0;
    target   = ex_pc + AW'({{(AW-6){ins[5]}}, ins[5:0]});
    if (exec && !is_arr) begin
      unique case (cop)
        COP_BNE: redirect = cmp_ne;
        COP_BLT: redirect = cmp_lt;
        default: ;
      endcase
    end
    if (is_loop && lp_cnt == '0) begin
      redirect = 1'b1;
      target   = ex_pc + lp_len + AW'(1);
    end
    push        = is_loop && lp_cnt != '0;
    new_e.first = ex_pc + AW'(1);
    new_e.last  = ex_pc + lp_len;
    new_e.count = lp_cnt;
    top_valid   = push || (sp != '0);
    top_e       = push ? new_e : stk[sp_m1[LSW-1:0]];
    hit         = running && !redirect && !is_end && top_valid && (pc == top_e.last);
    again       = hit && (top_e.count > REG_W'(1));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      start_q  <= 1'b0;
      pc       <= '0;
      ex_pc    <= '0;
      ex_valid <= 1'b0;
      sp       <= '0;
      inc_mask <= '0;
      for (int i = 0; i < int'(NREGS); i++) rf[i] <= '0;
      for (int i = 0; i < int'(LOOP_DEPTH); i++) stk[i] <= '0;
    end else begin
      start_q <= start;
      if (wb_en) rf[f_rd] <= wb_val;
      for (int i = 0; i < int'(NREGS); i++)
        if (inc_now[i]) rf[i] <= rf[i] + REG_W'(1);
      if (exec && !is_arr && cop == COP_MISC && ins[10]) inc_mask <= ins[NREGS-1:0];
      unique case (state)
        S_IDLE, S_DONE: begin
          ex_valid <= 1'b0;
          if (go) begin
            state <= S_RUN;
            pc    <= '0;
            sp    <= '0;
            inc_mask <= '0;
            for (int i = 0; i < int'(NREGS); i++) rf[i] <= '0;
          end
        end
        default: begin  // S_RUN
          if (is_end) begin
            state    <= S_DONE;
            ex_valid <= 1'b0;
          end else if (redirect) begin
            pc       <= target;
            ex_valid <= 1'b0;
          end else begin
            ex_pc    <= pc;
            ex_valid <= 1'b1;
            pc       <= again ? top_e.first : pc + AW'(1);
            // loop stack bookkeeping
            if (push && !(hit && !again)) begin
              stk[sp[LSW-1:0]] <= again ? '{first: new_e.first, last: new_e.last,
                                   count: new_e.count - REG_W'(1)} : new_e;
              sp      <= sp + SPW'(1);
            end else if (!push && hit) begin
              if (again) stk[sp_m1[LSW-1:0]].count <= top_e.count - REG_W'(1);
              else       sp <= sp - SPW'(1);
            end
          end
        end
      endcase
    end
  end

  // ---------------- array instruction issue ----------------
  always_comb begin
    arr_cmd.valid = exec && is_arr;
    arr_cmd.op    = aop_e'(ins[14:11]);
    arr_cmd.pred  = pred_e'(ins[10:9]);
    arr_cmd.row_w = rf[ins[8:6]];
    arr_cmd.row_a = rf[ins[5:3]];
    arr_cmd.row_b = rf[ins[2:0]];
  end

  // a LOOP must not overflow the loop stack
  always_ff @(posedge clk) begin
    if (rst_n && running && push && !(hit && !again))
      assert (sp < SPW'(LOOP_DEPTH)) else $error("cram_controller: loop stack overflow");
  end

endmodule
