// tb_turbo_iteration: complete turbo decoder iterations run as a program.
//
// The testbench assembles a turbo decoder for the processor at its default parameters:
//   input: read the systematic LLRs Ls and the two parity streams Lp1, Lp2 from three input
//     STREAM units into data memory, clear the a priori vector, and build the QPP interleaver
//     table pi(k) = (f1*k + f2*k*k) mod K with the recursion pi(k+1) = pi(k) + g(k),
//     g(k+1) = g(k) + 2*f2, both mod K (compare and guarded subtract).
//   per iteration: component decoder 1 in natural order, then component decoder 2 in
//     interleaved order. Each is a forward pass (gather La, Ls, Lp with the LSUs, one METRIC
//     step, normalise, store seven metric vectors) and a backward pass (MAX7 over the branch
//     sums for both bit values, LLR, extrinsic Le = LLR - La - Ls, backward METRIC step).
//     Decoder 1 writes Le in natural order, read by decoder 2 through pi; decoder 2 writes its
//     Le and its LLR de-interleaved (at address pi(k)).
//   output: after each iteration, the de-interleaved LLRs of decoder 2 go to the output
//     STREAM in natural order.
// The outputs are compared with a reference turbo decoder built on the same fixed-point
// operations. Runs: K=40 (f1=3, f2=10) with two iterations in each of the four modes, and
// K=6144 (f1=263, f2=480) with two iterations in max-log-MAP mode.
module tb_turbo_iteration;
  import tta_pkg::*;
  import tb_ref_pkg::*;

  localparam int NB   = 30;
  localparam int IMEM = 1024;
  localparam int VL   = 8192;       // vector stride in data memory
  localparam int NEG  = -512;       // initial "minus infinity" of the forward metrics
  localparam int NEGB = -524288;    // filler for unused MAX7 inputs (smallest immediate)

  logic clk = 0, rst_n = 0;
  logic imem_we = 0;
  logic [9:0] imem_addr = '0;
  logic [NB*MOVE_W-1:0] imem_wdata = '0;
  logic [7:0] sin_push = '0, sin_full;
  word_t sin_data [8];
  logic [0:0] sout_pop = '0, sout_empty;
  word_t sout_data [1];
  logic [9:0] pc;
  logic lock;

  tta_turbo_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ assembler
  move_t prog [IMEM][NB];
  int    nslot [IMEM];
  int    cur;
  int    none [$];

  function automatic int R(int f, int r); return SRC_RF + RF_SPAN * f + r; endfunction
  function automatic int W(int f, int r); return DST_RF + RF_SPAN * f + r; endfunction
  function automatic move_t mv(int src, int dst, int opc = 0);
    move_t m = '0;
    m.src = SRC_W'(src); m.dst = PORT_ID_W'(dst); m.opc = OPC_W'(opc);
    return m;
  endfunction
  function automatic move_t mi(int imm, int dst, int opc = 0);
    move_t m = mv(imm, dst, opc);
    m.src_imm = 1'b1;
    return m;
  endfunction
  function automatic void clear_prog();
    for (int i = 0; i < IMEM; i++) begin
      nslot[i] = 0;
      for (int b = 0; b < NB; b++) prog[i][b] = '0;
    end
    cur = 0;
  endfunction
  function automatic void at(int n, move_t m);
    if (n >= IMEM || nslot[n] >= NB) $fatal(1, "instruction %0d full", n);
    prog[n][nslot[n]] = m;
    nslot[n]++;
  endfunction
  // one ALU operation in the current instruction; its result moves to `dsts` in the next
  function automatic void alu(int op, move_t a, move_t b, int dsts [$], int opc0 = 0);
    a.dst = PORT_ID_W'(DST_ALU + 0); a.opc = '0;
    b.dst = PORT_ID_W'(DST_ALU + 1); b.opc = OPC_W'(op);
    at(cur, a);
    at(cur, b);
    foreach (dsts[i]) at(cur + 1, mv(SRC_ALU, dsts[i], (i == 0) ? opc0 : 0));
    cur++;
  endfunction
  function automatic move_t S(int src); return mv(src, 0); endfunction   // source operand
  function automatic move_t I(int imm); return mi(imm, 0); endfunction   // immediate operand

  // program rules: one write per destination port / register file, one read per register file
  function automatic void check_prog(int n);
    for (int i = 0; i < n; i++) begin
      int wr [int];
      int rd [int];
      for (int b = 0; b < nslot[i]; b++) begin
        int d = prog[i][b].dst;
        int key = (d >= DST_RF) ? 10000 + (d - DST_RF) / RF_SPAN : d;
        if (wr.exists(key)) $fatal(1, "instruction %0d: two writes to %0d", i, d);
        wr[key] = 1;
        if (!prog[i][b].src_imm && prog[i][b].src >= SRC_RF) begin
          int f = (int'(prog[i][b].src) - SRC_RF) / RF_SPAN;
          if (rd.exists(f) && rd[f] != int'(prog[i][b].src))
            $fatal(1, "instruction %0d: two reads of register file %0d", i, f);
          rd[f] = prog[i][b].src;
        end
      end
    end
  endfunction

  // vectors in data memory, stride VL: 0-6 forward metrics, 7 Ls, 8 Lp1, 9 Lp2,
  // 10 a priori of decoder 1, 11 extrinsic of decoder 1 / output LLRs, 12 pi, 13-15 gathered
  // La, Ls, Lp of the current decoder
  localparam int V_LS = 7, V_LP1 = 8, V_LP2 = 9, V_LA = 10, V_LE = 11, V_PI = 12, V_G = 13;

  function automatic void alu_g(int op, move_t a, move_t b, int dst);   // result move guarded by bool 1
    move_t m = mv(SRC_ALU, dst);
    m.guard_en = 1'b1; m.guard_idx = 1'b1;
    alu(op, a, b, none);
    at(cur, m);
  endfunction
  function automatic void jump_if_bool0(int target);
    move_t j = mi(target, DST_GCU, GCU_JUMP);
    j.guard_en = 1'b1;
    at(cur + 1, j);
    cur += 2;
  endfunction

  // one component decoder; d = 1 natural order, d = 2 interleaved order
  function automatic void decoder(int K, int mode, int d);
    int L = lat_ref(mode);
    int loop_f, loop_b;
    int la_src, la_base, ls_src, lp_base;
    // ---- forward pass
    at(cur, mi(0, DST_METRIC + 0));
    for (int i = 1; i < 8; i++) at(cur, mi(NEG, DST_METRIC + i));
    at(cur, mi(K, W(0, 0)));
    at(cur, mi(0, W(1, 0)));
    at(cur, mi(NEG, DST_LSU + 0));
    at(cur, mi(NEG, DST_LSU + 2));
    at(cur, mi(NEG, DST_LSU + 4));
    cur++;
    for (int i = 1; i <= 7; i++) begin
      at(cur, mi((i - 1) * VL, DST_LSU + 2 * ((i - 1) % 3) + 1, LSU_STW));
      if ((i - 1) % 3 == 2 || i == 7) cur++;
    end
    loop_f = cur;
    if (d == 2) begin
      alu(ALU_ADD, S(R(1, 0)), I(V_PI * VL), {DST_LSU + 1}, LSU_LDW);
      at(cur + 3, mv(SRC_LSU + 0, W(2, 26)));
      cur += 4;
      la_src = R(2, 26); la_base = V_LE * VL; ls_src = R(2, 26); lp_base = V_LP2 * VL;
    end else begin
      la_src = R(1, 0);  la_base = V_LA * VL; ls_src = R(1, 0);  lp_base = V_LP1 * VL;
    end
    alu(ALU_ADD, S(la_src), I(la_base), {DST_LSU + 1}, LSU_LDW);
    alu(ALU_ADD, S(ls_src), I(V_LS * VL), {DST_LSU + 3}, LSU_LDW);
    alu(ALU_ADD, S(R(1, 0)), I(lp_base), {DST_LSU + 5}, LSU_LDW);
    cur += 3;
    at(cur, mv(SRC_LSU + 0, DST_METRIC + 8));
    at(cur, mv(SRC_LSU + 1, DST_METRIC + 9));
    at(cur, mv(SRC_LSU + 2, DST_METRIC + 10, mode));
    for (int s = 0; s < 3; s++) begin      // gathered La, Ls, Lp for the backward pass
      at(cur + 1, mv(SRC_LSU + s, DST_LSU + 4));
      alu(ALU_ADD, S(R(1, 0)), I((V_G + s) * VL), {DST_LSU + 5}, LSU_STW);
    end
    for (int c = 3; c < L; c++) cur++;
    for (int i = 1; i < 8; i++) begin
      alu(ALU_SUB, S(SRC_METRIC + i), S(SRC_METRIC + 0), {DST_METRIC + i, DST_LSU + 0});
      alu(ALU_ADD, S(R(1, 0)), I((i - 1) * VL + 1), {DST_LSU + 1}, LSU_STW);
    end
    alu(ALU_ADD, S(R(1, 0)), I(1), {W(1, 0)});
    alu(ALU_SUB, S(R(0, 0)), I(1), {W(0, 0)});
    alu(ALU_GT, S(SRC_ALU), I(0), {DST_BOOL + 0});
    jump_if_bool0(loop_f);
    // ---- backward pass from equal metrics
    for (int i = 0; i < 8; i++) at(cur, mi(0, DST_METRIC + i));
    at(cur, mi(K, W(0, 0)));
    at(cur, mi(K - 1, W(1, 0)));
    cur++;
    for (int s = 1; s < 8; s++) begin
      at(cur, mi(0, W(2, s)));
      cur++;
    end
    loop_b = cur;
    begin
      int ldst [11] = '{W(3, 0), W(0, 1), W(1, 1), W(0, 9), W(0, 10), W(0, 11), W(0, 12),
                        W(0, 13), W(0, 14), W(0, 15), W(2, 26)};
      int nld = (d == 2) ? 11 : 10;
      for (int v = 0; v < nld; v++) begin
        int base = (v < 3) ? (V_G + v) * VL : (v < 10) ? (v - 3) * VL : V_PI * VL;
        int u = v % 3;
        at(cur + 4, mv(SRC_LSU + u, ldst[v]));
        alu(ALU_ADD, S(R(1, 0)), I(base), {DST_LSU + 2 * u + 1}, LSU_LDW);
      end
    end
    cur += 3;
    alu(ALU_ADD, S(R(3, 0)), S(R(0, 1)), {W(2, 20)});
    alu(ALU_ADD, S(SRC_ALU), S(R(1, 1)), {W(3, 4)});
    cur++;
    alu(ALU_SUB, S(R(2, 20)), S(R(1, 1)), {W(3, 5)});
    at(cur, mv(R(3, 0), DST_METRIC + 8));
    at(cur, mv(R(0, 1), DST_METRIC + 9));
    at(cur, mv(R(1, 1), DST_METRIC + 10, mode));
    cur++;
    for (int u = 1; u >= 0; u--) begin
      int c2;
      for (int s = 0; s < 8; s++) begin
        int sn = nxt_state(s, u);
        int p  = par_bit(s, u);
        move_t av = (s == 0) ? I(0) : S(R(0, 8 + s));
        move_t bv = (sn == 0) ? I(0) : S(R(2, sn));
        int    gr = (u == p) ? 4 : 5;
        int    op = u ? ALU_ADD : ALU_SUB;
        alu(ALU_ADD, av, bv, none);
        if (s < 6)       alu(op, S(SRC_ALU), S(R(3, gr)), {DST_MAX7 + s});
        else if (s == 6) alu(op, S(SRC_ALU), S(R(3, gr)), {DST_MAX7 + 6}, mode);
        else             alu(op, S(SRC_ALU), S(R(3, gr)), {W(2, 21)});
      end
      c2 = cur + 1;
      if (c2 < cur - 2 + L) c2 = cur - 2 + L;
      for (int i = 0; i < 5; i++) at(c2, mi(NEGB, DST_MAX7 + i));
      at(c2, mv(SRC_MAX7, DST_MAX7 + 5));
      at(c2, mv(R(2, 21), DST_MAX7 + 6, mode));
      at(c2 + L, mv(SRC_MAX7, u ? W(3, 21) : W(1, 21)));
      cur = c2 + L + 1;
    end
    // LLR, extrinsic = LLR - La - Ls
    alu(ALU_SUB, S(R(3, 21)), S(R(1, 21)), {W(2, 22)});
    alu(ALU_SUB, S(SRC_ALU), S(R(3, 0)), none);
    alu(ALU_SUB, S(SRC_ALU), S(R(0, 1)), {DST_LSU + 0});
    if (d == 1) begin
      alu(ALU_ADD, S(R(1, 0)), I(V_LE * VL), {DST_LSU + 1}, LSU_STW);
    end else begin
      alu(ALU_ADD, S(R(2, 26)), I(V_LA * VL), {DST_LSU + 1}, LSU_STW);
      at(cur + 1, mv(R(2, 22), DST_LSU + 2));
      alu(ALU_ADD, S(R(2, 26)), I(V_LE * VL), {DST_LSU + 3}, LSU_STW);
    end
    for (int s = 1; s < 8; s++) begin
      int o = (s % 2 == 0) ? s / 2 : s / 2 + 4;
      int q = (s < 4) ? 2 * s : 2 * (s - 4) + 1;
      alu(ALU_SUB, S(SRC_METRIC + o), S(SRC_METRIC + 0), {W(2, s), DST_METRIC + q});
    end
    alu(ALU_SUB, S(R(1, 0)), I(1), {W(1, 0)});
    alu(ALU_SUB, S(R(0, 0)), I(1), {W(0, 0)});
    alu(ALU_GT, S(SRC_ALU), I(0), {DST_BOOL + 0});
    jump_if_bool0(loop_b);
  endfunction

  int end_at;

  function automatic void build(int K, int mode, int f1, int f2, int nit);
    int loop_i, loop_it, loop_o;
    clear_prog();
    // ---- input and interleaver table
    at(cur, mi(K, W(0, 0)));
    at(cur, mi(0, W(1, 0)));
    at(cur, mi(0, W(2, 25)));                   // pi(k)
    at(cur, mi((f1 + f2) % K, W(3, 25)));       // g(k)
    at(cur, mi(0, DST_LSU + 4));                // zero a priori for the first decoder
    cur++;
    at(cur, mi(nit, W(3, 30)));
    cur++;
    loop_i = cur;
    for (int s = 0; s < 3; s++) at(cur, mi(0, DST_SIN + s, STREAM_RW));
    cur++;
    at(cur + 1, mv(SRC_SIN_DATA + 0, DST_LSU + 0));
    alu(ALU_ADD, S(R(1, 0)), I(V_LS * VL), {DST_LSU + 1}, LSU_STW);
    at(cur + 1, mv(SRC_SIN_DATA + 1, DST_LSU + 2));
    alu(ALU_ADD, S(R(1, 0)), I(V_LP1 * VL), {DST_LSU + 3}, LSU_STW);
    at(cur + 1, mv(SRC_SIN_DATA + 2, DST_LSU + 0));
    alu(ALU_ADD, S(R(1, 0)), I(V_LP2 * VL), {DST_LSU + 1}, LSU_STW);
    alu(ALU_ADD, S(R(1, 0)), I(V_LA * VL), {DST_LSU + 5}, LSU_STW);
    at(cur + 1, mv(R(2, 25), DST_LSU + 2));
    alu(ALU_ADD, S(R(1, 0)), I(V_PI * VL), {DST_LSU + 3}, LSU_STW);
    alu(ALU_ADD, S(R(2, 25)), S(R(3, 25)), {W(2, 25)});
    alu(ALU_GT, S(SRC_ALU), I(K - 1), {DST_BOOL + 1});
    alu_g(ALU_SUB, S(R(2, 25)), I(K), W(2, 25));
    alu(ALU_ADD, S(R(3, 25)), I((2 * f2) % K), {W(3, 25)});
    alu(ALU_GT, S(SRC_ALU), I(K - 1), {DST_BOOL + 1});
    alu_g(ALU_SUB, S(R(3, 25)), I(K), W(3, 25));
    alu(ALU_ADD, S(R(1, 0)), I(1), {W(1, 0)});
    alu(ALU_SUB, S(R(0, 0)), I(1), {W(0, 0)});
    alu(ALU_GT, S(SRC_ALU), I(0), {DST_BOOL + 0});
    jump_if_bool0(loop_i);
    // ---- iterations
    loop_it = cur;
    decoder(K, mode, 1);
    decoder(K, mode, 2);
    at(cur, mi(K, W(0, 0)));
    at(cur, mi(0, W(1, 0)));
    cur++;
    loop_o = cur;
    alu(ALU_ADD, S(R(1, 0)), I(V_LE * VL), {DST_LSU + 1}, LSU_LDW);
    at(cur + 3, mv(SRC_LSU + 0, DST_SOUT + 0, STREAM_RW));
    alu(ALU_ADD, S(R(1, 0)), I(1), {W(1, 0)});
    alu(ALU_SUB, S(R(0, 0)), I(1), {W(0, 0)});
    alu(ALU_GT, S(SRC_ALU), I(0), {DST_BOOL + 0});
    jump_if_bool0(loop_o);
    alu(ALU_SUB, S(R(3, 30)), I(1), {W(3, 30)});
    alu(ALU_GT, S(SRC_ALU), I(0), {DST_BOOL + 0});
    jump_if_bool0(loop_it);
    end_at = cur;
    at(cur, mi(end_at, DST_GCU, GCU_JUMP));
    cur++;
    check_prog(cur);
  endfunction

  // ------------------------------------------------------------------ reference decoder
  function automatic void siso(int K, int mode, int la [], int ls [], int lp [], ref int llr []);
    metrics_t A [$];
    metrics_t a, b, nb;
    a[0] = 0;
    for (int i = 1; i < 8; i++) a[i] = NEG;
    A.push_back(a);
    for (int k = 0; k < K; k++) begin
      a = fwd_ref(a, la[k], ls[k], lp[k], mode);
      for (int i = 7; i >= 0; i--) a[i] = a[i] - a[0];
      A.push_back(a);
    end
    for (int i = 0; i < 8; i++) b[i] = 0;
    llr = new[K];
    for (int k = K - 1; k >= 0; k--) begin
      int lu [2];
      for (int u = 0; u < 2; u++) begin
        int x [7], y [7];
        int sum [8];
        for (int s = 0; s < 8; s++)
          sum[s] = A[k][s] + b[nxt_state(s, u)] + gamma_ref(s, u, la[k], ls[k], lp[k]);
        for (int i = 0; i < 7; i++) x[i] = sum[i];
        for (int i = 0; i < 5; i++) y[i] = NEGB;
        y[5] = max7_ref(x, mode);
        y[6] = sum[7];
        lu[u] = max7_ref(y, mode);
      end
      llr[k] = lu[1] - lu[0];
      nb = bwd_ref(b, la[k], ls[k], lp[k], mode);
      for (int i = 7; i >= 0; i--) nb[i] = nb[i] - nb[0];
      b = nb;
    end
  endfunction

  function automatic void ref_turbo(int K, int mode, int f1, int f2, int nit,
                                    int ls [], int lp1 [], int lp2 [], ref int outv [$]);
    int pi [] = new[K];
    int la1 [] = new[K];
    int la2 [] = new[K];
    int ls2 [] = new[K];
    int llr1 [], llr2 [];
    for (int k = 0; k < K; k++) begin
      pi[k] = int'((longint'(f1) * k + longint'(f2) * k * k) % K);
      la1[k] = 0;
    end
    outv.delete();
    for (int it = 0; it < nit; it++) begin
      siso(K, mode, la1, ls, lp1, llr1);
      for (int k = 0; k < K; k++) begin
        la2[k] = llr1[pi[k]] - la1[pi[k]] - ls[pi[k]];
        ls2[k] = ls[pi[k]];
      end
      siso(K, mode, la2, ls2, lp2, llr2);
      for (int k = 0; k < K; k++) la1[pi[k]] = llr2[k] - la2[k] - ls2[k];
      begin
        int o [] = new[K];
        for (int k = 0; k < K; k++) o[pi[k]] = llr2[k];
        for (int k = 0; k < K; k++) outv.push_back(o[k]);
      end
    end
  endfunction

  // ------------------------------------------------------------------ running
  int outq [$];
  int in_llr [3][$];
  bit active;
  int fed [3];

  always @(negedge clk) begin
    sin_push <= '0;
    sout_pop <= '0;
    if (!active) begin
      for (int s = 0; s < 3; s++) fed[s] = 0;
    end else begin
      for (int s = 0; s < 3; s++)
        if (fed[s] < in_llr[s].size() && !sin_full[s]) begin
          sin_push[s] <= 1'b1;
          sin_data[s] <= in_llr[s][fed[s]];
          fed[s]++;
        end
      if (!sout_empty[0]) begin
        sout_pop <= 1'b1;
        outq.push_back(sout_data[0]);
      end
    end
  end

  task automatic run(int K, int mode, int f1, int f2, int nit);
    int exp_out [$];
    int ls [], lp1 [], lp2 [];
    int cycles = 0;
    int n = K * nit;
    build(K, mode, f1, f2, nit);
    ls = new[K]; lp1 = new[K]; lp2 = new[K];
    for (int k = 0; k < K; k++) begin
      ls[k]  = int'($urandom_range(0, 96)) - 48;
      lp1[k] = int'($urandom_range(0, 96)) - 48;
      lp2[k] = int'($urandom_range(0, 96)) - 48;
    end
    for (int s = 0; s < 3; s++) in_llr[s].delete();
    for (int k = 0; k < K; k++) begin
      in_llr[0].push_back(ls[k]);
      in_llr[1].push_back(lp1[k]);
      in_llr[2].push_back(lp2[k]);
    end
    ref_turbo(K, mode, f1, f2, nit, ls, lp1, lp2, exp_out);
    rst_n = 0;
    @(negedge clk);
    for (int i = 0; i < cur; i++) begin
      imem_we = 1; imem_addr = 10'(i);
      for (int b = 0; b < NB; b++) imem_wdata[b*MOVE_W +: MOVE_W] = prog[i][b];
      @(negedge clk);
    end
    imem_we = 0;
    outq.delete();
    rst_n = 1;
    active = 1;
    while ((outq.size() < n || pc != 10'(end_at)) && cycles < 10_000_000) begin
      @(negedge clk);
      cycles++;
    end
    active = 0;
    check(outq.size() == n, $sformatf("K=%0d mode %0d: %0d LLRs", K, mode, outq.size()));
    for (int i = 0; i < n && i < outq.size(); i++)
      check(outq[i] == exp_out[i], $sformatf("K=%0d mode %0d iteration %0d LLR of bit %0d: got %0d exp %0d",
                                             K, mode, i / K + 1, i % K, outq[i], exp_out[i]));
    $display("K=%0d mode %0d: %0d iterations, %0d instructions, %0d cycles (%0.1f per bit per iteration)",
             K, mode, nit, cur, cycles, real'(cycles) / (K * nit));
  endtask

  initial begin
    for (int s = 0; s < 8; s++) sin_data[s] = '0;
    active = 0;
    for (int m = 0; m < 4; m++) run(40, m, 3, 10, 2);
    run(6144, 0, 263, 480, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
