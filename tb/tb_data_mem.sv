// tb_data_mem: self-checking test of the multi-port data memory.
//
// Random writes and reads on three ports against an associative-array model, with
// one-cycle read latency, hold of read data when idle, read-before-write within a cycle, and
// the priority of the higher port when two ports write one address.
module tb_data_mem;
  import tta_pkg::*;

  localparam int DEPTH = 4096, P = 3, AW = 12;
  logic clk = 0;
  logic [P-1:0] en = '0, we = '0;
  logic [AW-1:0] addr [P];
  word_t wdata [P], rdata [P];
  int checks = 0, failures = 0;

  data_mem #(.DEPTH(DEPTH), .NUM_PORTS(P)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int model [int];
  int expect_rd [P];
  bit pending [P];
  initial begin
    for (int p = 0; p < P; p++) begin addr[p] = '0; wdata[p] = '0; pending[p] = 0; end
    // initialise a small region
    for (int a = 0; a < 64; a++) begin
      @(negedge clk);
      en = 3'b001; we = 3'b001; addr[0] = AW'(a); wdata[0] = a * 3;
      model[a] = a * 3;
    end
    for (int t = 0; t < 3000; t++) begin
      int nm [int];
      @(negedge clk);
      for (int p = 0; p < P; p++)
        if (pending[p]) check(rdata[p] == expect_rd[p], $sformatf("port %0d read", p));
      nm = model;
      for (int p = 0; p < P; p++) begin
        automatic int a = int'($urandom_range(0, 63));
        en[p] = ($urandom_range(0, 3) != 0);
        we[p] = $urandom_range(0, 1);
        addr[p] = AW'(a); wdata[p] = int'($urandom);
        pending[p] = en[p] && !we[p];
        if (pending[p]) expect_rd[p] = model[a];
        if (en[p] && we[p]) nm[a] = wdata[p];   // later port wins
      end
      model = nm;
    end
    @(negedge clk);
    for (int p = 0; p < P; p++) if (pending[p]) check(rdata[p] == expect_rd[p], "last read");
    en = '0;
    // rdata holds when idle
    for (int p = 0; p < P; p++) expect_rd[p] = rdata[p];
    repeat (3) @(negedge clk);
    for (int p = 0; p < P; p++) check(rdata[p] == expect_rd[p], "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
