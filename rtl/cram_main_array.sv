// cram_main_array: the bit-line computing SRAM array of a Compute RAM.
//
// The array holds ROWS x COLS bits (512 x 40 = 20 Kbit by default) and has
// two faces:
//
//  * Storage port (st_*): a BRAM-style port. The input crossbar, output
//    crossbar and configurable column decoder let the same cells be seen as
//    512x40, 1024x20 or 2048x10 words (geometry). In a narrow geometry a
//    word address w selects physical row w/k and column group w%k, where k
//    is 2 or 4; write data and read data use the low COLS/k bits. A read is
//    registered: st_rdata is valid the cycle after st_re.
//
//  * Compute port (cp_*): the two row decoders of the dual-ported array
//    activate rows cp_row_a and cp_row_b together. The sense amplifiers then
//    see the wired bit-lines, BL = A AND B and BLB = NOT A AND NOT B, for
//    every column at once (cp_bl, cp_blb, combinational). In the same cycle
//    the write drivers store cp_wdata into row cp_row_w at the clock edge,
//    only in the columns whose cp_wmask bit is set.
//
// The read-then-write-in-one-cycle behaviour and the BL/BLB functions follow
// the logic-in-memory SRAM the block is built on; the electrical side of it
// (lowered word-line voltage, sensing margins) is not modelled. The column
// mapping of the narrow geometries is this design's choice. A storage write
// and a compute write in the same cycle are not allowed (the top-level
// arbitration prevents it); if both happen the compute write wins.
module cram_main_array
  import cram_pkg::*;
#(
  parameter int unsigned ROWS = 512,
  parameter int unsigned COLS = 40,
  localparam int unsigned RAW = $clog2(ROWS),
  localparam int unsigned SAW = $clog2(ROWS) + 2
) (
  input  logic            clk,
  input  geom_e           geometry,
  // storage port
  input  logic [SAW-1:0]  st_addr,
  input  logic [COLS-1:0] st_wdata,
  input  logic            st_we,
  input  logic            st_re,
  output logic [COLS-1:0] st_rdata,
  // compute port
  input  logic [RAW-1:0]  cp_row_a,
  input  logic [RAW-1:0]  cp_row_b,
  output logic [COLS-1:0] cp_bl,
  output logic [COLS-1:0] cp_blb,
  input  logic            cp_we,
  input  logic [RAW-1:0]  cp_row_w,
  input  logic [COLS-1:0] cp_wdata,
  input  logic [COLS-1:0] cp_wmask
);

  logic [COLS-1:0] mem [ROWS];

  // ---- configurable column decoder / crossbars ----
  logic [RAW-1:0]  st_row;
  logic [1:0]      st_grp;
  int unsigned     grp_w;        // word width of the current geometry
  logic [COLS-1:0] grp_mask;     // word-width mask at column 0

  always_comb begin
    unique case (geometry)
      GEOM_1024X20: begin
        st_row = RAW'(st_addr >> 1);
        st_grp = {1'b0, st_addr[0]};
        grp_w  = COLS / 2;
      end
      GEOM_2048X10: begin
        st_row = RAW'(st_addr >> 2);
        st_grp = st_addr[1:0];
        grp_w  = COLS / 4;
      end
      default: begin
        st_row = RAW'(st_addr);
        st_grp = 2'd0;
        grp_w  = COLS;
      end
    endcase
    grp_mask = '0;
    for (int c = 0; c < COLS; c++) grp_mask[c] = (c < grp_w);
  end

  // input crossbar: place the narrow word on its column group
  logic [COLS-1:0] st_wword, st_wcols;
  assign st_wword = (st_wdata & grp_mask) << (st_grp * grp_w);
  assign st_wcols = grp_mask << (st_grp * grp_w);

  // ---- bit-line sensing of two simultaneously activated rows ----
  logic [COLS-1:0] row_a, row_b;
  assign row_a  = mem[cp_row_a];
  assign row_b  = mem[cp_row_b];
  assign cp_bl  = row_a & row_b;
  assign cp_blb = ~row_a & ~row_b;

  // ---- write drivers ----
  logic            w_en;
  logic [RAW-1:0]  w_row;
  logic [COLS-1:0] w_data, w_mask;

  always_comb begin
    if (cp_we) begin
      w_en = 1'b1;  w_row = cp_row_w;  w_data = cp_wdata;  w_mask = cp_wmask;
    end else begin
      w_en = st_we; w_row = st_row;    w_data = st_wword;  w_mask = st_wcols;
    end
  end

  always_ff @(posedge clk) begin
    if (w_en) begin
      for (int c = 0; c < COLS; c++)
        if (w_mask[c]) mem[w_row][c] <= w_data[c];
    end
  end

  // ---- storage read with output crossbar ----
  logic [COLS-1:0] rd_row_q;
  logic [1:0]      rd_grp_q;
  int unsigned     rd_w_q;
  logic [COLS-1:0] rd_mask_q;

  always_ff @(posedge clk) begin
    if (st_re) begin
      rd_row_q  <= mem[st_row];
      rd_grp_q  <= st_grp;
      rd_w_q    <= grp_w;
      rd_mask_q <= grp_mask;
    end
  end

  assign st_rdata = (rd_row_q >> (rd_grp_q * rd_w_q)) & rd_mask_q;

endmodule
