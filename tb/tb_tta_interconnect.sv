// tb_tta_interconnect: self-checking test of the buses and sockets.
//
// Six single-port sources, one register-file source of 8 registers, five destinations and
// one register-file destination of 8 registers, on 6 buses. Random instructions (each
// destination written by at most one bus, one register per file read) are compared with a
// direct model: guards (enable, invert, register), immediates sign-extended, register
// indices passed through, opcodes routed with the data.
module tb_tta_interconnect;
  import tta_pkg::*;
  localparam int NB = 6, NS = 7, ND = 6;
  logic clk = 0, rst_n = 0;
  move_t moves [NB];
  logic [1:0] guards;
  logic [PORT_ID_W-1:0] src_base [NS], dst_base [ND];
  logic [IDX_W:0] src_span [NS], dst_span [ND];
  word_t src_data [NS], dst_data [ND], bus_data [NB];
  logic [IDX_W-1:0] src_idx [NS], dst_idx [ND];
  logic [ND-1:0] dst_we;
  logic [OPC_W-1:0] dst_opc [ND];
  int checks = 0, failures = 0;

  tta_interconnect #(.NUM_BUSES(NB), .NUM_SRC(NS), .NUM_DST(ND)) dut (.*);

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

  // register-file source: data depends on the index it is asked for
  word_t rf_val [8];
  always_comb begin
    for (int i = 0; i < 6; i++) src_data[i] = 1000 * (i + 1) + 7;
    src_data[6] = rf_val[src_idx[6]];
  end

  initial begin
    for (int i = 0; i < 6; i++) begin src_base[i] = PORT_ID_W'(16 + i); src_span[i] = 1; end
    src_base[6] = 256; src_span[6] = 8;
    for (int i = 0; i < 5; i++) begin dst_base[i] = PORT_ID_W'(40 + i); dst_span[i] = 1; end
    dst_base[5] = 320; dst_span[5] = 8;
    for (int r = 0; r < 8; r++) rf_val[r] = -50 * r;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int perm [ND];
      int rf_reg;
      bit exp_we [ND];
      word_t exp_d [ND];
      int exp_o [ND], exp_i [ND];
      guards = 2'($urandom);
      rf_reg = $urandom_range(0, 7);
      for (int d = 0; d < ND; d++) begin perm[d] = d; exp_we[d] = 0; end
      perm.shuffle();
      for (int b = 0; b < NB; b++) begin
        word_t v;
        bit go;
        int di;
        moves[b] = '0;
        moves[b].guard_en  = $urandom_range(0, 1);
        moves[b].guard_inv = $urandom_range(0, 1);
        moves[b].guard_idx = $urandom_range(0, 1);
        moves[b].opc       = 4'($urandom);
        moves[b].src_imm   = $urandom_range(0, 2) == 0;
        if (moves[b].src_imm) begin
          moves[b].src = SRC_W'($urandom);
          v = word_t'(signed'(moves[b].src));
        end else if ($urandom_range(0, 3) == 0) begin
          moves[b].src = SRC_W'(256 + rf_reg);
          v = rf_val[rf_reg];
        end else begin
          automatic int s = $urandom_range(0, 5);
          moves[b].src = SRC_W'(16 + s);
          v = 1000 * (s + 1) + 7;
        end
        di = perm[b];
        if ($urandom_range(0, 5) == 0) begin moves[b].dst = '0; continue; end
        if (di == 5) begin
          exp_i[di] = $urandom_range(0, 7);
          moves[b].dst = PORT_ID_W'(320 + exp_i[di]);
        end else begin
          exp_i[di] = 0;
          moves[b].dst = PORT_ID_W'(40 + di);
        end
        go = !moves[b].guard_en || (guards[moves[b].guard_idx] ^ moves[b].guard_inv);
        if (go) begin exp_we[di] = 1; exp_d[di] = v; exp_o[di] = moves[b].opc; end
      end
      #1;
      for (int d = 0; d < ND; d++) begin
        check(dst_we[d] == exp_we[d], $sformatf("we %0d", d));
        if (exp_we[d]) begin
          check(dst_data[d] == exp_d[d], $sformatf("data %0d", d));
          check(dst_opc[d] == OPC_W'(exp_o[d]), $sformatf("opc %0d", d));
          check(dst_idx[d] == IDX_W'(exp_i[d]), $sformatf("idx %0d", d));
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
