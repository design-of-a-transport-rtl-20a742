// tb_lsu_fu: self-checking test of the load/store unit on a data-memory port.
//
// Stores a pattern with one store per cycle, then loads it back with one load per cycle and
// checks that each word appears on `result` exactly three cycles after its load was
// triggered. Also checks that a stalled store does not reach the memory.
module tb_lsu_fu;
  import tta_pkg::*;

  localparam int AW = 10;
  logic clk = 0, rst_n = 0, stall = 0;
  logic op_we = 0;
  word_t op_data = '0;
  logic trig_we = 0;
  word_t trig_data = '0;
  logic [3:0] trig_opc = '0;
  word_t result;
  logic mem_en, mem_we;
  logic [AW-1:0] mem_addr;
  word_t mem_wdata, mem_rdata;
  int checks = 0, failures = 0;

  lsu_fu #(.ADDR_W(AW), .LOAD_LAT(3)) dut (.*);

  // the memory behind the port: one registered read port
  word_t mem [1 << AW];
  always_ff @(posedge clk) begin
    if (mem_en && mem_we)  mem[mem_addr] <= mem_wdata;
    if (mem_en && !mem_we) mem_rdata <= mem[mem_addr];
  end

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int pat(input int a); return a * 977 - 31000; endfunction

  int issued [$];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      op_we = 1; op_data = pat(a); trig_we = 1; trig_data = a; trig_opc = 4'(LSU_STW);
    end
    @(negedge clk);
    op_we = 0; trig_we = 0;
    check(mem[63] == pat(63), "single-cycle store");
    // pipelined loads, address a at cycle a: result at cycle a+3
    for (int c = 0; c < 64 + 3; c++) begin
      @(negedge clk);
      if (c >= 3) check(result == pat(c - 3), $sformatf("load %0d got %0d", c - 3, result));
      if (c < 64) begin trig_we = 1; trig_data = c; trig_opc = 4'(LSU_LDW); end
      else trig_we = 0;
    end
    // result must not be visible after two cycles
    @(negedge clk);
    trig_we = 1; trig_data = 5; trig_opc = 4'(LSU_LDW);
    @(negedge clk);
    trig_we = 0;
    @(negedge clk);
    check(result == pat(63), "load not early");
    @(negedge clk);
    check(result == pat(5), "load after three cycles");
    // stalled store
    stall = 1; op_we = 1; op_data = 1234; trig_we = 1; trig_data = 7; trig_opc = 4'(LSU_STW);
    @(negedge clk);
    stall = 0; op_we = 0; trig_we = 0;
    @(negedge clk);
    check(mem[7] == pat(7), "stalled store blocked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
