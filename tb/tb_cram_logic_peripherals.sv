// tb_cram_logic_peripherals: self-checking test of the per-column logic.
//
// Drives random A and B row values as the sense amplifiers would present
// them (BL = A AND B, BLB = NOT A AND NOT B), with every operation and every
// predicate, and compares write data, write mask, write enable and the carry
// and tag latches with a per-column reference model computed from A and B
// directly. It also runs a 4-bit bit-serial addition over all 40 columns
// and checks the sums.
module tb_cram_logic_peripherals;
  import cram_pkg::*;
  localparam int COLS = 40;

  logic            clk = 0, rst_n = 0, en = 0;
  aop_e            op;
  pred_e           pred;
  logic [COLS-1:0] bl, blb, wdata, wmask, carry, tag;
  logic            we;

  logic [COLS-1:0] rc, rt;   // reference latches
  int checks = 0, failures = 0;

  cram_logic_peripherals #(.COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [COLS-1:0] got, logic [COLS-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s op=%s pred=%s: got %h exp %h", what, op.name(), pred.name(), got, exp);
    end
  endtask

  // apply one operation to rows a, b and check everything
  task automatic step(aop_e o, pred_e p, logic [COLS-1:0] a, logic [COLS-1:0] b);
    logic [COLS-1:0] ew, cond, nc, nt;
    logic ewe;
    @(negedge clk);
    op = o; pred = p; en = 1; bl = a & b; blb = ~a & ~b;
    #1;
    case (p)
      PRED_CARRY:  cond = rc;
      PRED_NCARRY: cond = ~rc;
      PRED_TAG:    cond = rt;
      default:     cond = '1;
    endcase
    ew = '0; ewe = 1; nc = rc; nt = rt;
    for (int c = 0; c < COLS; c++) begin
      case (o)
        AOP_AND:   ew[c] = a[c] & b[c];
        AOP_NOR:   ew[c] = ~(a[c] | b[c]);
        AOP_OR:    ew[c] = a[c] | b[c];
        AOP_NAND:  ew[c] = ~(a[c] & b[c]);
        AOP_XOR:   ew[c] = a[c] ^ b[c];
        AOP_XNOR:  ew[c] = ~(a[c] ^ b[c]);
        AOP_ADD:   begin
          {nc[c], ew[c]} = 2'(a[c]) + 2'(b[c]) + 2'(rc[c]);
        end
        AOP_CLRC:  begin ewe = 0; nc[c] = 0; end
        AOP_SETC:  begin ewe = 0; nc[c] = 1; end
        AOP_TAG:   begin ewe = 0; nt[c] = a[c] & b[c]; end
        AOP_WRC:   ew[c] = rc[c];
        AOP_WRTAG: ew[c] = rt[c];
        AOP_ZERO:  ew[c] = 0;
        AOP_ONE:   ew[c] = 1;
        AOP_TAGC:  begin ewe = 0; nt[c] = rc[c]; end
        default:   ewe = 0;
      endcase
      if (!cond[c]) begin nc[c] = rc[c]; nt[c] = rt[c]; end
    end
    checks++;
    if (we !== ewe) begin failures++; $display("FAIL we op=%s", o.name()); end
    if (ewe) chk(wdata, ew, "wdata");
    chk(wmask, cond, "wmask");
    @(posedge clk); #1;
    rc = nc; rt = nt;
    chk(carry, rc, "carry");
    chk(tag, rt, "tag");
    en = 0;
  endtask

  initial begin
    logic [3:0] av [COLS], bv [COLS], sum [COLS];
    logic [COLS-1:0] s [5];
    op = AOP_AND; pred = PRED_ALWAYS; bl = 0; blb = '1;
    repeat (2) @(posedge clk);
    rst_n = 1; rc = 0; rt = 0;
    @(posedge clk);
    // exhaustive over operations and predicates, random data
    for (int rep = 0; rep < 30; rep++)
      for (int o = 0; o < 16; o++)
        for (int p = 0; p < 4; p++)
          step(aop_e'(o), pred_e'(p), COLS'({$urandom, $urandom}), COLS'({$urandom, $urandom}));
    // en low: nothing changes
    @(negedge clk); op = AOP_SETC; pred = PRED_ALWAYS; en = 0; #1;
    checks++; if (we !== 0 || wmask !== 0) begin failures++; $display("FAIL idle outputs"); end
    @(posedge clk); #1; chk(carry, rc, "carry idle");
    // bit-serial 4-bit addition in all columns
    for (int c = 0; c < COLS; c++) begin av[c] = 4'($urandom); bv[c] = 4'($urandom); end
    step(AOP_CLRC, PRED_ALWAYS, '0, '0);
    for (int i = 0; i < 4; i++) begin
      logic [COLS-1:0] ar, br;
      for (int c = 0; c < COLS; c++) begin ar[c] = av[c][i]; br[c] = bv[c][i]; end
      @(negedge clk); op = AOP_ADD; pred = PRED_ALWAYS; en = 1; bl = ar & br; blb = ~ar & ~br;
      #1 s[i] = wdata;
      @(posedge clk); #1;
    end
    s[4] = carry;
    en = 0;
    for (int c = 0; c < COLS; c++) begin
      logic [4:0] got;
      got = {s[4][c], s[3][c], s[2][c], s[1][c], s[0][c]};
      checks++;
      if (got !== 5'(av[c]) + 5'(bv[c])) begin
        failures++; $display("FAIL add col %0d: %0d + %0d = %0d", c, av[c], bv[c], got);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
