// tb_cram_imem: self-checking test of the instruction memory.
//
// Fills the memory through the configuration interface, then overwrites
// part of it through the user port, and checks both read ports against a
// reference copy, including the one-cycle read latency, simultaneous fetch
// and user reads of different words, and the priority of a configuration
// write over a user write in the same cycle.
module tb_cram_imem;
  localparam int DEPTH = 256;

  logic        clk = 0;
  logic        fetch_en = 0, cfg_we = 0, usr_en = 0, usr_we = 0;
  logic [7:0]  fetch_addr = 0, cfg_addr = 0, usr_addr = 0;
  logic [15:0] fetch_data, cfg_wdata = 0, usr_wdata = 0, usr_rdata;
  logic [15:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  cram_imem dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      cfg_we = 1; cfg_addr = 8'(i); cfg_wdata = 16'($urandom); ref_mem[i] = cfg_wdata;
      @(negedge clk);
    end
    cfg_we = 0;
    for (int i = 0; i < 64; i++) begin
      usr_en = 1; usr_we = 1; usr_addr = 8'($urandom); usr_wdata = 16'($urandom);
      ref_mem[usr_addr] = usr_wdata;
      @(negedge clk);
    end
    // configuration write wins over a user write to the same word
    cfg_we = 1; cfg_addr = 8'd17; cfg_wdata = 16'hC0DE;
    usr_en = 1; usr_we = 1; usr_addr = 8'd17; usr_wdata = 16'hBAD0;
    ref_mem[17] = 16'hC0DE;
    @(negedge clk);
    cfg_we = 0; usr_we = 0; usr_en = 0;
    // read both ports at once, random addresses
    for (int i = 0; i < 300; i++) begin
      logic [7:0] fa, ua;
      fa = 8'($urandom); ua = 8'($urandom);
      fetch_en = 1; fetch_addr = fa; usr_en = 1; usr_we = 0; usr_addr = ua;
      @(negedge clk);
      chk(fetch_data, ref_mem[fa], "fetch");
      chk(usr_rdata, ref_mem[ua], "user read");
    end
    // disabled ports hold their output
    begin
      logic [15:0] hold;
      hold = fetch_data;
      fetch_en = 0; fetch_addr = fetch_addr + 1;
      @(negedge clk);
      chk(fetch_data, hold, "fetch hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
