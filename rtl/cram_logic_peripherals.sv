// cram_logic_peripherals: the per-bit-line logic below the sense amplifiers
// of a Compute RAM, COLS copies of the same column slice.
//
// Each column receives the two sensed bit-line values of the rows the
// controller activated, BL = A AND B and BLB = NOT A AND NOT B. From these
// the slice derives OR = NOT BLB, NAND = NOT BL, XOR = NOT(BL OR BLB) and
// XNOR = BL OR BLB. A carry latch C turns the slice into a bit-serial full
// adder (sum = XOR xor C, carry = BL or (XOR and C)), one operand bit per
// cycle, so an n-bit addition of two transposed operands takes n cycles over
// all columns at once. A tag latch T holds a per-column condition (for
// example a multiplier bit or a sign).
//
// Predication: a 4-to-1 mux picks the condition that enables the write
// driver and the latch updates of each column: always, C, NOT C or T. The
// mux and its Carry/NotCarry/Tag inputs follow the architecture; the
// "always" input, the operation list (cram_pkg::aop_e) and the rule that the
// latches update only in enabled columns are this design's choices.
//
// Timing: wdata, wmask and we are combinational from the inputs (the array
// writes them at the same clock edge); C and T update at that edge when en
// is high. Reset clears C and T.
module cram_logic_peripherals
  import cram_pkg::*;
#(
  parameter int unsigned COLS = 40
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  input  aop_e            op,
  input  pred_e           pred,
  input  logic [COLS-1:0] bl,
  input  logic [COLS-1:0] blb,
  output logic [COLS-1:0] wdata,
  output logic [COLS-1:0] wmask,
  output logic            we,
  output logic [COLS-1:0] carry,
  output logic [COLS-1:0] tag
);

  logic [COLS-1:0] x_or, cond, c_next, t_next;

  assign x_or = ~(bl | blb);

  // 4-to-1 predication mux
  always_comb begin
    unique case (pred)
      PRED_CARRY:  cond = carry;
      PRED_NCARRY: cond = ~carry;
      PRED_TAG:    cond = tag;
      default:     cond = '1;
    endcase
  end

  always_comb begin
    wdata  = '0;
    we     = 1'b0;
    c_next = carry;
    t_next = tag;
    unique case (op)
      AOP_AND:   begin wdata = bl;              we = 1'b1; end
      AOP_NOR:   begin wdata = blb;             we = 1'b1; end
      AOP_OR:    begin wdata = ~blb;            we = 1'b1; end
      AOP_NAND:  begin wdata = ~bl;             we = 1'b1; end
      AOP_XOR:   begin wdata = x_or;            we = 1'b1; end
      AOP_XNOR:  begin wdata = ~x_or;           we = 1'b1; end
      AOP_ADD:   begin
        wdata  = x_or ^ carry;
        we     = 1'b1;
        c_next = bl | (x_or & carry);
      end
      AOP_CLRC:  c_next = '0;
      AOP_SETC:  c_next = '1;
      AOP_TAG:   t_next = bl;
      AOP_WRC:   begin wdata = carry;           we = 1'b1; end
      AOP_WRTAG: begin wdata = tag;             we = 1'b1; end
      AOP_ZERO:  begin wdata = '0;              we = 1'b1; end
      AOP_ONE:   begin wdata = '1;              we = 1'b1; end
      AOP_TAGC:  t_next = carry;
      default:   ;
    endcase
    we    = we & en;
    wmask = cond & {COLS{en}};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      carry <= '0;
      tag   <= '0;
    end else if (en) begin
      carry <= (c_next & cond) | (carry & ~cond);
      tag   <= (t_next & cond) | (tag & ~cond);
    end
  end

endmodule
