// cram_imem: instruction memory of a Compute RAM, DEPTH x WIDTH (256 x 16 =
// 4 Kbit by default).
//
// It holds the instruction sequence the controller runs. It can be filled
// in two ways: through the FPGA configuration interface (cfg_*), or at run
// time through the block's own address/data_in/write_en bus (usr_*), which
// it shares with the main array. It can also be read back on the user port,
// so in storage mode it serves as a small extra RAM.
//
// Ports: one write port shared by configuration and user writes (a
// configuration write wins if both arrive in the same cycle), a synchronous
// fetch read port for the controller (fetch_data valid the cycle after
// fetch_en) and a synchronous user read port (usr_rdata valid the cycle
// after usr_en with usr_we low). The two-read/one-write organisation and the
// write priority are this design's choices; the sizes are the block's.
module cram_imem #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  // controller fetch
  input  logic             fetch_en,
  input  logic [AW-1:0]    fetch_addr,
  output logic [WIDTH-1:0] fetch_data,
  // configuration interface
  input  logic             cfg_we,
  input  logic [AW-1:0]    cfg_addr,
  input  logic [WIDTH-1:0] cfg_wdata,
  // user port (shared address / data bus)
  input  logic             usr_en,
  input  logic             usr_we,
  input  logic [AW-1:0]    usr_addr,
  input  logic [WIDTH-1:0] usr_wdata,
  output logic [WIDTH-1:0] usr_rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (cfg_we)
      mem[cfg_addr] <= cfg_wdata;
    else if (usr_en && usr_we)
      mem[usr_addr] <= usr_wdata;
  end

  always_ff @(posedge clk) begin
    if (fetch_en) fetch_data <= mem[fetch_addr];
  end

  always_ff @(posedge clk) begin
    if (usr_en && !usr_we) usr_rdata <= mem[usr_addr];
  end

endmodule
