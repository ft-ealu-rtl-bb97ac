// tb_ftealu_top -- end-to-end test of the FT-EALU at its default size
// (16-bit data, 17-bit shared ALU).
//
// Phase 1, fault free: random and, or, xor, not, add, sub; the result and
//   all three per-version results must equal the true result, 5 cycles
//   after start.
// Phase 2, single stuck-at faults on the ALU operand or result buses, equal
//   weights: every per-version result and the vote must match the
//   reference model (ftealu_ref_pkg).
// Phase 3, learning: operations with faults in learning mode, half of them
//   with single or double faults applied from the fault scenario store; the
//   score sums and scenario count must match the reference scores.
// Phase 3c, the on-chip normalizer turns the scores into min-max weights;
//   faulted operations are checked against the model using those weights.
// Phase 3b, the same learning in the punitive scoring mode (scores never positive).
// Phase 4, weights derived from the scores (min-max scaled to 0.5..2.0)
//   are written and faulted operations are checked against the model.
// Phase 5, directed: a stuck-at-1 at ALU result bit 1 during 0x000A +
//   0x000C with the worked example's bit-0 weights (2, 0.5, 0.5): majority
//   is wrong at bit 0, the weighted vote is right.
// Each mechanism is counted and must occur: carry chained between the V3
// halves, borrow chained, versions disagreeing, a fault corrected, a
// learning update in each scoring mode, a stored fault scenario applied,
// an on-chip normalization, a weight write, the weighted vote overruling
// majority.
module tb_ftealu_top;
  import ftealu_pkg::*;
  import ftealu_ref_pkg::*;

  localparam int WIDTH = 16;
  localparam int H = WIDTH / 2;
  localparam int SW = SW_DEF;

  logic clk = 0, rst_n = 0;
  logic start = 0, train = 0, score_clr = 0, w_we = 0, punish_only = 0, norm_start = 0;
  logic norm_busy, norm_done;
  logic fs_we = 0, fs_apply = 0;
  logic [8:0] fs_waddr = 0, fs_sel = 0;
  fault_site_e fs_site = SITE_A;
  logic [WIDTH:0] fs_sa0 = 0, fs_sa1 = 0;
  // shadow copy of the stored fault scenarios
  localparam int NSTORE = 64;
  fault_site_e    st_site [NSTORE];
  logic [WIDTH:0] st_sa0 [NSTORE], st_sa1 [NSTORE];
  alu_op_e op = OP_AND;
  logic [WIDTH-1:0] a = 0, b = 0, golden = 0;
  logic busy, done;
  logic [WIDTH-1:0] result, r_v1, r_v2, r_v3;
  logic signed [SW-1:0] score [NVER][WIDTH];
  logic [SW-1:0] score_count;
  logic [1:0] w_ver = 0;
  logic [3:0] w_idx = 0;
  logic [7:0] w_data = 0;
  logic [WIDTH:0] fa_sa0 = 0, fa_sa1 = 0, fb_sa0 = 0, fb_sa1 = 0, fy_sa0 = 0, fy_sa1 = 0;

  ftealu_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_carry = 0, n_borrow = 0, n_disagree = 0, n_corrected = 0, n_train = 0,
      n_wwrite = 0, n_override = 0, n_fault_ops = 0, n_ok_faulty = 0, n_punitive = 0, n_norm = 0, n_stored = 0;
  real wt [3][32];       // weights currently loaded, as reals
  real ref_s [3][WIDTH]; // reference score sums
  int  ref_n = 0;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%h exp=%h at %0t", what, got, exp, $time);
    end
  endtask

  function automatic faults_t cur_faults();
    faults_t f;
    f.fa_sa0 = fa_sa0; f.fa_sa1 = fa_sa1; f.fb_sa0 = fb_sa0;
    f.fb_sa1 = fb_sa1; f.fy_sa0 = fy_sa0; f.fy_sa1 = fy_sa1;
    if (fs_apply) begin
      case (st_site[fs_sel])
        SITE_A:  begin f.fa_sa0 |= st_sa0[fs_sel]; f.fa_sa1 |= st_sa1[fs_sel]; end
        SITE_B:  begin f.fb_sa0 |= st_sa0[fs_sel]; f.fb_sa1 |= st_sa1[fs_sel]; end
        default: begin f.fy_sa0 |= st_sa0[fs_sel]; f.fy_sa1 |= st_sa1[fs_sel]; end
      endcase
    end
    return f;
  endfunction

  // Run one operation and check it against the model.
  task automatic run_op(alu_op_e o, logic [WIDTH-1:0] x, logic [WIDTH-1:0] y, bit learn);
    longint g, e1, e2, e3, ev, maj;
    int cyc;
    faults_t f;
    f = cur_faults();
    g = golden_of(o, x, y, WIDTH);
    versions(o, x, y, WIDTH, f, e1, e2, e3);
    ev  = vote(e1, e2, e3, WIDTH, wt);
    maj = (e1 & e2) | (e1 & e3) | (e2 & e3);
    @(negedge clk);
    op = o; a = x; b = y; golden = WIDTH'(g); train = learn; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 20) begin @(negedge clk); cyc++; end
    expect_eq("latency", cyc, 5);
    expect_eq("r_v1", r_v1, e1);
    expect_eq("r_v2", r_v2, e2);
    expect_eq("r_v3", r_v3, e3);
    expect_eq("result", result, ev);
    // mechanism counters
    if (o == OP_ADD && (((longint'(x) & msk(H)) + (longint'(y) & msk(H))) >> H) != 0) n_carry++;
    if (o == OP_SUB && (longint'(x) & msk(H)) < (longint'(y) & msk(H))) n_borrow++;
    if (e1 != e2 || e1 != e3) n_disagree++;
    if ((e1 != g || e2 != g || e3 != g) && ev == g) n_corrected++;
    if (maj != ev) n_override++;
    if (e1 != g || e2 != g || e3 != g) begin
      n_fault_ops++;
      if (ev == g) n_ok_faulty++;
    end
    if (fs_apply) n_stored++;
    if (learn) begin
      n_train++;
      if (punish_only) n_punitive++;
      ref_n++;
      for (int i = 0; i < WIDTH; i++) begin
        int nok;
        bit ok [3];
        ok[0] = ((e1 >> i) & 1) == ((g >> i) & 1);
        ok[1] = ((e2 >> i) & 1) == ((g >> i) & 1);
        ok[2] = ((e3 >> i) & 1) == ((g >> i) & 1);
        nok = int'(ok[0]) + int'(ok[1]) + int'(ok[2]);
        for (int v = 0; v < 3; v++)
          ref_s[v][i] += ok[v] ? (punish_only ? 0.0 : 1.0 / real'(nok)) : -1.0 / real'(3 - nok);
      end
    end
  endtask

  task automatic clear_faults();
    fa_sa0 = 0; fa_sa1 = 0; fb_sa0 = 0; fb_sa1 = 0; fy_sa0 = 0; fy_sa1 = 0;
  endtask

  // One random single stuck-at fault on one of the three ALU buses.
  task automatic random_fault();
    logic [WIDTH:0] m;
    clear_faults();
    m = (WIDTH+1)'(1) << $urandom_range(0, WIDTH);
    case ($urandom_range(0, 5))
      0: fa_sa0 = m;  1: fa_sa1 = m;
      2: fb_sa0 = m;  3: fb_sa1 = m;
      4: fy_sa0 = m;  default: fy_sa1 = m;
    endcase
  endtask

  task automatic write_weight(int v, int i, real val);
    @(negedge clk);
    w_we = 1; w_ver = 2'(v); w_idx = 4'(i); w_data = 8'($rtoi(val * 16.0 + 0.5));
    wt[v][i] = real'(w_data) / 16.0;
    @(negedge clk);
    w_we = 0;
    n_wwrite++;
  endtask

  function automatic alu_op_e rand_op();
    return alu_op_e'($urandom_range(0, 5));
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 3; v++) for (int i = 0; i < 32; i++) wt[v][i] = 1.0;
    for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++) ref_s[v][i] = 0.0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // Phase 1: fault free
    for (int n = 0; n < 300; n++) run_op(rand_op(), WIDTH'($urandom), WIDTH'($urandom), 0);
    // Phase 2: single stuck-at faults, equal weights
    for (int n = 0; n < 600; n++) begin
      random_fault();
      run_op(rand_op(), WIDTH'($urandom), WIDTH'($urandom), 0);
    end
    $display("equal weights: %0d of %0d faulty operations corrected", n_ok_faulty, n_fault_ops);
    // Phase 3: learning, half of the runs with faults from the ports and half
    // with single and double faults applied from the fault scenario store
    for (int k = 0; k < NSTORE; k++) begin
      logic [WIDTH:0] m;
      m = (WIDTH+1)'(1) << $urandom_range(0, WIDTH);
      if (k % 2) m |= (WIDTH+1)'(1) << $urandom_range(0, WIDTH);
      st_site[k] = fault_site_e'($urandom_range(0, 2));
      st_sa0[k] = $urandom_range(0, 1) ? m : '0;
      st_sa1[k] = m & ~st_sa0[k];
      @(negedge clk);
      fs_we = 1; fs_waddr = 9'(k); fs_site = st_site[k]; fs_sa0 = st_sa0[k]; fs_sa1 = st_sa1[k];
    end
    @(negedge clk); fs_we = 0;
    @(negedge clk); score_clr = 1; @(negedge clk); score_clr = 0;
    for (int n = 0; n < 600; n++) begin
      if (n % 2) begin
        clear_faults();
        fs_apply = 1; fs_sel = 9'($urandom_range(0, NSTORE - 1));
      end else begin
        fs_apply = 0;
        random_fault();
      end
      run_op(rand_op(), WIDTH'($urandom), WIDTH'($urandom), 1);
    end
    fs_apply = 0;
    clear_faults();
    @(negedge clk);
    expect_eq("score_count", score_count, ref_n);
    for (int v = 0; v < 3; v++)
      for (int i = 0; i < WIDTH; i++)
        expect_eq("score", longint'(score[v][i]), longint'($rtoi(ref_s[v][i] * 6.0 + (ref_s[v][i] >= 0 ? 0.5 : -0.5))));
    // Phase 3c: on-chip min-max normalization of the phase-3 scores; the
    // expected weights are computed here and the model votes with them
    begin
      longint mn, mx, sv;
      int cyc;
      mn = 1 << 40; mx = -(1 << 40);
      for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++) begin
        sv = longint'(score[v][i]);
        if (sv < mn) mn = sv;
        if (sv > mx) mx = sv;
      end
      for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++) begin
        sv = longint'(score[v][i]);
        wt[v][i] = real'((mx == mn) ? 16 : ((sv - mn) * 16 + (mx - mn) / 2) / (mx - mn)) / 16.0;
      end
      @(negedge clk); norm_start = 1; @(negedge clk); norm_start = 0;
      cyc = 0;
      while (!norm_done && cyc < 1000) begin @(negedge clk); cyc++; end
      expect_eq("normalizer finished", norm_done, 1);
      n_norm++;
      for (int n = 0; n < 300; n++) begin
        random_fault();
        run_op(rand_op(), WIDTH'($urandom), WIDTH'($urandom), 0);
      end
      clear_faults();
    end
    // Phase 3b: punitive scoring, checked the same way, then back to the
    // reward/punishment scores of phase 3 for the weights
    begin
      real keep_s [3][WIDTH];
      int  keep_n;
      keep_s = ref_s; keep_n = ref_n;
      @(negedge clk); score_clr = 1; @(negedge clk); score_clr = 0; punish_only = 1;
      for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++) ref_s[v][i] = 0.0;
      ref_n = 0;
      for (int n = 0; n < 300; n++) begin
        random_fault();
        run_op(rand_op(), WIDTH'($urandom), WIDTH'($urandom), 1);
      end
      clear_faults();
      @(negedge clk);
      expect_eq("punitive score_count", score_count, ref_n);
      for (int v = 0; v < 3; v++)
        for (int i = 0; i < WIDTH; i++) begin
          expect_eq("punitive score", longint'(score[v][i]), longint'($rtoi(ref_s[v][i] * 6.0 + (ref_s[v][i] >= 0 ? 0.5 : -0.5))));
          expect_eq("punitive score <= 0", score[v][i] <= 0, 1);
        end
      punish_only = 0;
      ref_s = keep_s; ref_n = keep_n;
    end
    // Phase 4: weights from the phase-3 scores, min-max scaled into 0.5 .. 2.0
    begin
      real mn, mx, s;
      mn = 1e9; mx = -1e9;
      for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++) begin
        s = ref_s[v][i] * 6.0;
        if (s < mn) mn = s;
        if (s > mx) mx = s;
      end
      for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++)
        write_weight(v, i, 0.5 + 1.5 * (ref_s[v][i] * 6.0 - mn) / ((mx > mn) ? (mx - mn) : 1.0));
    end
    n_fault_ops = 0; n_ok_faulty = 0;
    for (int n = 0; n < 600; n++) begin
      random_fault();
      run_op(rand_op(), WIDTH'($urandom), WIDTH'($urandom), 0);
    end
    $display("learned weights: %0d of %0d faulty operations corrected", n_ok_faulty, n_fault_ops);
    // Phase 5: directed override case (bit-0 weights of the worked example)
    write_weight(0, 0, 2.0); write_weight(1, 0, 0.5); write_weight(2, 0, 0.5);
    clear_faults();
    fy_sa1 = 17'b10;
    begin
      int ov_base;
      ov_base = n_override;
      run_op(OP_ADD, 16'h000A, 16'h000C, 0);
      expect_eq("directed: versions", {r_v1, r_v2, r_v3}, {16'h0016, 16'h0017, 16'h0117});
      expect_eq("directed: weighted result", result, 16'h0016);
      expect_eq("directed: majority overruled", n_override - ov_base, 1);
    end
    clear_faults();

    $display("mechanisms: carry_chain=%0d borrow_chain=%0d disagree=%0d corrected=%0d learn=%0d punitive_learn=%0d stored_faults=%0d normalize=%0d weight_write=%0d override=%0d",
             n_carry, n_borrow, n_disagree, n_corrected, n_train, n_punitive, n_stored, n_norm, n_wwrite, n_override);
    expect_eq("carry chain seen",  n_carry > 0, 1);
    expect_eq("borrow chain seen", n_borrow > 0, 1);
    expect_eq("disagreement seen", n_disagree > 0, 1);
    expect_eq("correction seen",   n_corrected > 0, 1);
    expect_eq("learning seen",     n_train > 0, 1);
    expect_eq("weight write seen", n_wwrite > 0, 1);
    expect_eq("punitive learning seen", n_punitive > 0, 1);
    expect_eq("on-chip normalization seen", n_norm > 0, 1);
    expect_eq("stored fault scenarios applied", n_stored > 0, 1);
    expect_eq("override seen",     n_override > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
