// compute_ram: one Compute RAM block, a BRAM replacement that can also
// compute inside its own array.
//
// Storage mode (mode = 0) behaves like a 20 Kbit FPGA block RAM with a
// 512x40, 1024x20 or 2048x10 geometry (cfg_geometry). Compute mode
// (mode = 1) runs the instruction sequence in the instruction memory when
// start rises: the controller issues one array instruction per clock, the
// main array activates two rows at once and senses AND/NOR on every
// bit-line, the logic peripherals of all 40 columns turn that into a logic
// or bit-serial arithmetic result, and the result is written back into a row
// of the same array in the same cycle. done rises after the END instruction.
// Data is kept transposed: the bits of one operand sit in consecutive rows
// of one column, so every column works on its own operands in parallel.
//
// Ports (the first seven are those of the block's I/O table):
//   mode, start, address, data_in, write_en -> data_out, done
//   cfg_geometry, cfg_imem_*: bits and writes from the FPGA configuration
//   logic, which is outside this block.
// address bit ADDR_W-1 selects the instruction memory (low 8 bits address
// one 16-bit instruction, data_in[15:0] / data_out[15:0]); otherwise the
// address is a word address of the main array in the current geometry. A
// read (write_en = 0) returns data on data_out the next cycle; a write
// takes effect at the clock edge. While the controller runs, the user port
// is ignored; after done the results can be read in either mode.
//
// The two muxes are those of the block diagram: one hands the array's
// address/data/write controls to the controller in compute mode, the other
// picks the instruction memory or the array's output crossbar for data_out.
// Their select rules, the address map and the start edge detection are this
// design's choices.
module compute_ram
  import cram_pkg::*;
#(
  parameter int unsigned ROWS       = 512,
  parameter int unsigned COLS       = 40,
  parameter int unsigned IMEM_DEPTH = 256,
  localparam int unsigned RAW    = $clog2(ROWS),
  localparam int unsigned SAW    = $clog2(ROWS) + 2,
  localparam int unsigned IAW    = $clog2(IMEM_DEPTH),
  localparam int unsigned ADDR_W = SAW + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mode,
  input  logic              start,
  input  logic [ADDR_W-1:0] address,
  input  logic [COLS-1:0]   data_in,
  input  logic              write_en,
  output logic [COLS-1:0]   data_out,
  output logic              done,
  // configuration interface
  input  geom_e             cfg_geometry,
  input  logic              cfg_imem_we,
  input  logic [IAW-1:0]    cfg_imem_addr,
  input  logic [15:0]       cfg_imem_wdata
);

  logic            busy;
  logic            imem_sel, imem_sel_q;
  logic            fetch_en;
  logic [IAW-1:0]  fetch_addr;
  logic [15:0]     fetch_data, imem_rdata;
  array_cmd_t      cmd;
  logic [COLS-1:0] bl, blb, pwdata, pwmask, arr_rdata;
  logic            pwe;
  logic [COLS-1:0] carry, tag;

  assign imem_sel = address[ADDR_W-1];

  cram_imem #(.DEPTH(IMEM_DEPTH), .WIDTH(16)) u_imem (
    .clk        (clk),
    .fetch_en   (fetch_en),
    .fetch_addr (fetch_addr),
    .fetch_data (fetch_data),
    .cfg_we     (cfg_imem_we),
    .cfg_addr   (cfg_imem_addr),
    .cfg_wdata  (cfg_imem_wdata),
    .usr_en     (imem_sel && !busy),
    .usr_we     (write_en),
    .usr_addr   (address[IAW-1:0]),
    .usr_wdata  (data_in[15:0]),
    .usr_rdata  (imem_rdata)
  );

  cram_controller #(.IMEM_DEPTH(IMEM_DEPTH)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start && mode),
    .busy       (busy),
    .done       (done),
    .fetch_en   (fetch_en),
    .fetch_addr (fetch_addr),
    .fetch_data (fetch_data),
    .arr_cmd    (cmd)
  );

  cram_main_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk      (clk),
    .geometry (cfg_geometry),
    .st_addr  (address[SAW-1:0]),
    .st_wdata (data_in),
    .st_we    (!imem_sel && write_en && !busy),
    .st_re    (!imem_sel && !write_en && !busy),
    .st_rdata (arr_rdata),
    .cp_row_a (cmd.row_a[RAW-1:0]),
    .cp_row_b (cmd.row_b[RAW-1:0]),
    .cp_bl    (bl),
    .cp_blb   (blb),
    .cp_we    (pwe),
    .cp_row_w (cmd.row_w[RAW-1:0]),
    .cp_wdata (pwdata),
    .cp_wmask (pwmask)
  );

  cram_logic_peripherals #(.COLS(COLS)) u_periph (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (cmd.valid),
    .op    (cmd.op),
    .pred  (cmd.pred),
    .bl    (bl),
    .blb   (blb),
    .wdata (pwdata),
    .wmask (pwmask),
    .we    (pwe),
    .carry (carry),
    .tag   (tag)
  );

  // output mux: instruction memory or the array's output crossbar
  always_ff @(posedge clk) begin
    if (!rst_n) imem_sel_q <= 1'b0;
    else        imem_sel_q <= imem_sel;
  end
  assign data_out = imem_sel_q ? COLS'(imem_rdata) : arr_rdata;

endmodule
