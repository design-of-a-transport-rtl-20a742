// tb_tta_turbo_top: end-to-end test of the processor running a forward-recursion program.
//
// The testbench assembles a move program (a small assembler is below), loads it through the
// instruction-memory port and streams LLRs in through three input STREAM units: a priori,
// systematic and parity. The program is the forward half of a MAP component decoder:
//   for k in 0..K-1:
//     read La, Ls, Lp from the streams; one METRIC step in the selected mode;
//     normalise the eight new metrics by subtracting metric 0 (so metric 0 stays 0 and only
//     seven vectors are stored); store the seven values with an LSU into seven vectors of
//     VLEN words; send them out through the output STREAM unit; count and loop (ALU compare,
//     boolean register, guarded jump).
//   then load the seven metrics of the last step back with the three LSUs (3-cycle loads),
//   feed them to MAX7 in the same mode and send its result out.
// Every output is compared with a reference recursion from tb_ref_pkg.
//
// Runs: K=40 (the smallest LTE block) in each of the four modes, then K=6144 (the largest LTE
// block, filling the seven 6144-word vectors) in max-log-MAP mode. The processor is used with
// all its default parameters. Inputs arrive with random gaps, so reads from empty input
// FIFOs lock the processor; the output FIFO is not drained at first, so writes to a full FIFO
// lock it too. The test counts and requires: both kinds of lock, each METRIC/MAX7 mode, taken
// and not-taken guarded jumps, and 3-cycle loads reaching MAX7.
module tb_tta_turbo_top;
  import tta_pkg::*;
  import tb_ref_pkg::*;

  localparam int NB    = 30;       // processor defaults
  localparam int IMEM  = 1024;
  localparam int VLEN  = 6144;     // length of each stored metric vector
  localparam int NEG   = -512;     // "minus infinity" for the initial metrics
  localparam int NSIN  = 8;

  logic clk = 0, rst_n = 0;
  logic imem_we = 0;
  logic [9:0] imem_addr = '0;
  logic [NB*MOVE_W-1:0] imem_wdata = '0;
  logic [NSIN-1:0] sin_push = '0, sin_full;
  word_t sin_data [NSIN];
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
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ assembler
  move_t prog [IMEM][NB];
  int    n_ins, n_slot;

  function automatic void clear_prog();
    for (int i = 0; i < IMEM; i++) for (int b = 0; b < NB; b++) prog[i][b] = '0;
    n_ins = 0; n_slot = 0;
  endfunction
  function automatic void emit(move_t m);
    if (n_slot >= NB) $fatal(1, "too many moves in one instruction");
    prog[n_ins][n_slot] = m;
    n_slot++;
  endfunction
  function automatic void next_ins();
    n_ins++; n_slot = 0;
  endfunction
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

  int loop_at, guard_at, end_at;

  // forward recursion of K steps in the given mode, then MAX7 of the last step
  function automatic void build(int K, int mode);
    int L = lat_ref(mode);
    clear_prog();
    // initial metrics, counter (RF0 r0) and step index (RF1 r0)
    emit(mi(0, DST_METRIC + 0));
    for (int i = 1; i < 8; i++) emit(mi(NEG, DST_METRIC + i));
    emit(mi(K, DST_RF + 0));
    emit(mi(0, DST_RF + RF_SPAN));
    next_ins();
    loop_at = n_ins;
    for (int s = 0; s < 3; s++) emit(mi(0, DST_SIN + s, STREAM_RW));
    next_ins();
    emit(mv(SRC_SIN_DATA + 0, DST_METRIC + 8));
    emit(mv(SRC_SIN_DATA + 1, DST_METRIC + 9));
    emit(mv(SRC_SIN_DATA + 2, DST_METRIC + 10, mode));
    next_ins();
    for (int c = 1; c < L; c++) next_ins();                 // wait for METRIC
    for (int i = 1; i < 8; i++) begin
      emit(mv(SRC_METRIC + i, DST_ALU + 0));
      emit(mv(SRC_METRIC + 0, DST_ALU + 1, ALU_SUB));
      if (i > 1) emit(mv(SRC_ALU, DST_LSU + 1, LSU_STW));  // address of the previous value
      next_ins();
      emit(mv(SRC_ALU, DST_METRIC + i));
      emit(mv(SRC_ALU, DST_LSU + 0));
      emit(mv(SRC_ALU, DST_SOUT + 0, STREAM_RW));
      emit(mv(SRC_RF + RF_SPAN, DST_ALU + 0));
      emit(mi((i - 1) * VLEN, DST_ALU + 1, ALU_ADD));
      next_ins();
    end
    emit(mv(SRC_ALU, DST_LSU + 1, LSU_STW));
    emit(mv(SRC_RF + RF_SPAN, DST_ALU + 0));
    emit(mi(1, DST_ALU + 1, ALU_ADD));
    next_ins();
    emit(mv(SRC_ALU, DST_RF + RF_SPAN));
    emit(mv(SRC_RF + 0, DST_ALU + 0));
    emit(mi(1, DST_ALU + 1, ALU_SUB));
    next_ins();
    emit(mv(SRC_ALU, DST_RF + 0));
    emit(mv(SRC_ALU, DST_ALU + 0));
    emit(mi(0, DST_ALU + 1, ALU_GT));
    next_ins();
    emit(mv(SRC_ALU, DST_BOOL + 0));
    next_ins();
    guard_at = n_ins;
    begin
      move_t j = mi(loop_at, DST_GCU, GCU_JUMP);
      j.guard_en = 1'b1; j.guard_idx = 1'b0;
      emit(j);
    end
    next_ins();
    // read back the last step's seven metrics with the three LSUs
    for (int i = 1; i <= 7; i++) begin
      emit(mi((i - 1) * VLEN + K - 1, DST_LSU + 2 * ((i - 1) % 3) + 1, LSU_LDW));
      if (i % 3 == 0 || i == 7) next_ins();
    end
    // loads of cycles C, C+1, C+2 arrive at C+3, C+4, C+5
    for (int u = 0; u < 3; u++) emit(mv(SRC_LSU + u, DST_MAX7 + u));
    next_ins();
    for (int u = 0; u < 3; u++) emit(mv(SRC_LSU + u, DST_MAX7 + 3 + u));
    next_ins();
    emit(mv(SRC_LSU + 0, DST_MAX7 + 6, mode));
    next_ins();
    for (int c = 1; c < L; c++) next_ins();
    emit(mv(SRC_MAX7, DST_SOUT + 0, STREAM_RW));
    next_ins();
    end_at = n_ins;
    emit(mi(end_at, DST_GCU, GCU_JUMP));
    next_ins();
  endfunction

  // ------------------------------------------------------------------ mechanism counters
  int n_lock_in = 0, n_lock_out = 0, n_taken = 0, n_not_taken = 0;
  int n_mode [4] = '{default: 0};
  int n_max7_loads = 0;
  logic [9:0] pc_q;
  always @(posedge clk) if (rst_n) begin
    if (lock && |dut.sin_lock)  n_lock_in++;
    if (lock && |dut.sout_lock) n_lock_out++;
    pc_q <= pc;
  end
  always @(negedge clk) if (rst_n && !lock && pc_q == 10'(guard_at)) begin
    if (pc == 10'(loop_at)) n_taken++;
    else if (pc == 10'(guard_at + 1)) n_not_taken++;
  end

  // ------------------------------------------------------------------ one run
  int outq [$];
  int llr [3][$];
  bit feeding, draining;
  int drain_delay;

  task automatic run(int K, int mode);
    metrics_t a;
    int exp_q [$];
    int x7 [7];
    int cycles;
    build(K, mode);
    rst_n = 0;
    @(negedge clk);
    for (int i = 0; i < n_ins; i++) begin
      imem_we = 1; imem_addr = 10'(i);
      for (int b = 0; b < NB; b++) imem_wdata[b*MOVE_W +: MOVE_W] = prog[i][b];
      @(negedge clk);
    end
    // the self-jump at the end also fills the rest so a wrong jump cannot run old code
    imem_we = 0;
    for (int s = 0; s < 3; s++) begin
      llr[s].delete();
      for (int k = 0; k < K; k++) llr[s].push_back(int'($urandom_range(0, 64)) - 32);
    end
    // reference
    a[0] = 0;
    for (int i = 1; i < 8; i++) a[i] = NEG;
    for (int k = 0; k < K; k++) begin
      a = fwd_ref(a, llr[0][k], llr[1][k], llr[2][k], mode);
      for (int i = 7; i >= 0; i--) a[i] = a[i] - a[0];
      for (int i = 1; i < 8; i++) exp_q.push_back(a[i]);
    end
    for (int i = 0; i < 7; i++) x7[i] = a[i + 1];
    exp_q.push_back(max7_ref(x7, mode));
    outq.delete();
    n_mode[mode]++;
    rst_n = 1;
    feeding = 1; draining = 1;
    cycles = 0;
    while (outq.size() < exp_q.size() && cycles < 1_000_000) begin
      @(negedge clk);
      cycles++;
    end
    feeding = 0; draining = 0;
    check(outq.size() == exp_q.size(), $sformatf("K=%0d mode %0d: %0d outputs, expected %0d",
                                                 K, mode, outq.size(), exp_q.size()));
    for (int i = 0; i < exp_q.size() && i < outq.size(); i++)
      check(outq[i] == exp_q[i], $sformatf("K=%0d mode %0d output %0d: got %0d exp %0d",
                                           K, mode, i, outq[i], exp_q[i]));
    repeat (5) @(negedge clk);
    check(pc == 10'(end_at), "program reached its end");
    if (outq.size() == exp_q.size() && outq[$] == exp_q[$]) n_max7_loads++;
    $display("K=%0d mode %0d: %0d cycles, %0d outputs", K, mode, cycles, outq.size());
  endtask

  // input feeder with random gaps: each stream pushes its next sample when there is room
  int fed [3];
  always @(negedge clk) begin
    sin_push <= '0;
    if (!feeding) begin
      for (int s = 0; s < 3; s++) fed[s] = 0;
    end else begin
      for (int s = 0; s < 3; s++)
        if (fed[s] < llr[s].size() && !sin_full[s] && $urandom_range(0, 3) == 0) begin
          sin_push[s]  <= 1'b1;
          sin_data[s]  <= llr[s][fed[s]];
          fed[s]++;
        end
    end
  end

  // output drain: waits drain_delay cycles at the start of a run, then pops when data is there
  int since;
  always @(negedge clk) begin
    sout_pop <= '0;
    if (!draining) since = 0;
    else begin
      since++;
      if (since > drain_delay && !sout_empty[0]) begin
        sout_pop <= 1'b1;
        outq.push_back(sout_data[0]);
      end
    end
  end

  initial begin
    for (int s = 0; s < NSIN; s++) sin_data[s] = '0;
    drain_delay = 600;
    for (int m = 0; m < 4; m++) run(40, m);
    drain_delay = 3000;
    run(6144, 0);
    check(n_lock_in > 0,   $sformatf("input-FIFO locks: %0d", n_lock_in));
    check(n_lock_out > 0,  $sformatf("output-FIFO locks: %0d", n_lock_out));
    check(n_taken > 0,     "guarded jump taken");
    check(n_not_taken > 0, "guarded jump not taken");
    for (int m = 0; m < 4; m++) check(n_mode[m] > 0, $sformatf("mode %0d used", m));
    check(n_max7_loads > 0, "LSU loads into MAX7");
    $display("locks on empty input %0d, on full output %0d; jumps taken %0d, not taken %0d; runs per mode %0d %0d %0d %0d",
             n_lock_in, n_lock_out, n_taken, n_not_taken, n_mode[0], n_mode[1], n_mode[2], n_mode[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
