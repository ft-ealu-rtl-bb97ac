// fault_campaign_runner -- runs one stuck-at fault campaign on an FT-EALU.
//
// For a given data width it applies, to every evaluation sample and every
// operation (and, or, xor, not, add, sub), every single and every double
// stuck-at fault on bits 0..WIDTH-1 of the shared ALU's result bus (SITE 0)
// or operand A bus (SITE 1) (2*W single and C(W,2)*4 double faults), runs the operation on the RTL and checks the
// three per-version results and the vote bit-exactly against the reference
// model.  It tallies correction coverage: of the runs in which the fault
// corrupts at least one version, the share whose voted result is right.
// This is done first with equal weights (majority vote), then the unit
// learns scores over the training samples in learning mode (the fault list
// is loaded into the unit's fault scenario store and applied from there), the scores are
// min-max normalized to weights in 0..1 (the paper's first normalization;
// 4 fraction bits) by the on-chip normalizer, and the evaluation is
// repeated (the model votes with weights computed here, so a wrong weight
// shows as a mismatch); this is done
// for the reward/punishment scoring and again for the punitive scoring.
// NEVAL = 0 means all 2**(2W) operand pairs; likewise NTRAIN = 0.
module fault_campaign_runner
  import ftealu_pkg::*;
  import ftealu_ref_pkg::*;
#(
  parameter int WIDTH  = 16,
  parameter int NEVAL  = 100,
  parameter int NTRAIN = 400,
  parameter int SEED   = 1,
  parameter int SITE   = 0    // 0: ALU result bus, 1: ALU operand A bus
) (
  output bit finished,
  output int checks,
  output int failures
);
  localparam int SW = SW_DEF;
  localparam int IW = $clog2(WIDTH);

  logic clk = 0, rst_n = 0;
  logic start = 0, train = 0, score_clr = 0, w_we = 0, punish_only = 0, norm_start = 0;
  logic norm_busy, norm_done;
  alu_op_e op = OP_AND;
  logic [WIDTH-1:0] a = 0, b = 0, golden = 0;
  logic busy, done;
  logic [WIDTH-1:0] result, r_v1, r_v2, r_v3;
  logic signed [SW-1:0] score [NVER][WIDTH];
  logic [SW-1:0] score_count;
  logic [1:0] w_ver = 0;
  logic [IW-1:0] w_idx = 0;
  logic [7:0] w_data = 0;
  logic [WIDTH:0] fa_sa0 = 0, fa_sa1 = 0, fb_sa0 = 0, fb_sa1 = 0, fy_sa0 = 0, fy_sa1 = 0;
  logic fs_we = 0, fs_apply = 0;
  logic [8:0] fs_waddr = 0, fs_sel = 0;
  fault_site_e fs_site = SITE_Y;
  logic [WIDTH:0] fs_sa0 = 0, fs_sa1 = 0;
  logic [WIDTH:0] m_sa0, m_sa1;   // the fault of the current run, for the model

  ftealu_top #(.WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  real wt [3][32];
  int  n_faulty [6], n_fixed [6], n_runs, n_right;
  int  cls, c_faulty [2], c_fixed [2];   // by fault class: 0 single, 1 double
  logic [WIDTH:0] fl_sa0 [$], fl_sa1 [$];   // fault list
  longint ev_a [$], ev_b [$], tr_a [$], tr_b [$];

  task automatic run_op(alu_op_e o, longint x, longint y, bit learn);
    longint g, e1, e2, e3, ev;
    faults_t f;
    f.fa_sa0 = SITE ? m_sa0 : '0; f.fa_sa1 = SITE ? m_sa1 : '0;
    f.fb_sa0 = 0; f.fb_sa1 = 0;
    f.fy_sa0 = SITE ? '0 : m_sa0; f.fy_sa1 = SITE ? '0 : m_sa1;
    g = golden_of(o, x, y, WIDTH);
    versions(o, x, y, WIDTH, f, e1, e2, e3);
    ev = vote(e1, e2, e3, WIDTH, wt);
    @(negedge clk);
    op = o; a = WIDTH'(x); b = WIDTH'(y); golden = WIDTH'(g); train = learn; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (longint'(r_v1) != e1 || longint'(r_v2) != e2 || longint'(r_v3) != e3 || longint'(result) != ev) begin
      failures++;
      if (failures < 10) $display("FAIL W=%0d op=%s a=%h b=%h sa0=%h sa1=%h got %h %h %h -> %h exp %h %h %h -> %h",
        WIDTH, o.name(), x, y, m_sa0, m_sa1, r_v1, r_v2, r_v3, result, e1, e2, e3, ev);
    end
    n_runs++;
    if (ev == g) n_right++;
    if (e1 != g || e2 != g || e3 != g) begin
      n_faulty[int'(o)]++;
      c_faulty[cls]++;
      if (ev == g) begin n_fixed[int'(o)]++; c_fixed[cls]++; end
    end
  endtask

  // Evaluation runs drive the fault masks from the ports; learning runs
  // apply the fault list from the on-chip fault scenario store, entry k
  // holding fault k.
  task automatic campaign(longint xs [$], longint ys [$], bit learn);
    for (int s = 0; s < xs.size(); s++)
      for (int o = 0; o < 6; o++)
        for (int k = 0; k < fl_sa0.size(); k++) begin
          m_sa0 = fl_sa0[k]; m_sa1 = fl_sa1[k];
          if (learn) begin
            fs_apply = 1; fs_sel = 9'(k);
          end else if (SITE == 0) begin
            fy_sa0 = fl_sa0[k]; fy_sa1 = fl_sa1[k];
          end else begin
            fa_sa0 = fl_sa0[k]; fa_sa1 = fl_sa1[k];
          end
          cls = (k < 2 * WIDTH) ? 0 : 1;
          run_op(alu_op_e'(o), xs[s], ys[s], learn);
        end
    fy_sa0 = 0; fy_sa1 = 0; fa_sa0 = 0; fa_sa1 = 0; fs_apply = 0;
  endtask

  task automatic load_store();
    for (int k = 0; k < fl_sa0.size(); k++) begin
      @(negedge clk);
      fs_we = 1; fs_waddr = 9'(k); fs_site = SITE ? SITE_A : SITE_Y;
      fs_sa0 = fl_sa0[k]; fs_sa1 = fl_sa1[k];
    end
    @(negedge clk);
    fs_we = 0;
  endtask

  task automatic report(string tag);
    int tf, tx;
    string line;
    alu_op_e oe;
    tf = 0; tx = 0;
    line = "";
    for (int o = 0; o < 6; o++) begin
      tf += n_faulty[o]; tx += n_fixed[o];
      oe = alu_op_e'(o);
      line = {line, $sformatf(" %s=%0.2f%%", oe.name(),
              n_faulty[o] ? 100.0 * n_fixed[o] / n_faulty[o] : 100.0)};
      n_faulty[o] = 0; n_fixed[o] = 0;
    end
    $display("W=%0d %s faults, %s: correction coverage %0.2f%% (%0d of %0d corrupting runs);%s",
             WIDTH, SITE ? "operand-A" : "result", tag, tf ? 100.0 * tx / tf : 100.0, tx, tf, line);
    $display("W=%0d %s faults, %s: right output in %0.2f%% of all %0d faulty runs (masked faults included)",
             WIDTH, SITE ? "operand-A" : "result", tag, 100.0 * n_right / n_runs, n_runs);
    $display("W=%0d %s faults, %s: correction coverage single stuck-at %0.2f%%, double stuck-at %0.2f%%",
             WIDTH, SITE ? "operand-A" : "result", tag, 100.0 * c_fixed[0] / c_faulty[0], 100.0 * c_fixed[1] / c_faulty[1]);
    n_runs = 0; n_right = 0;
    c_faulty = '{0, 0}; c_fixed = '{0, 0};
  endtask

  // Learn scores in one scoring mode, turn them into weights, re-evaluate.
  task automatic learn_and_eval(bit pun);
    string tag;
    tag = pun ? "punitive" : "reward/punishment";
    @(negedge clk); score_clr = 1; punish_only = pun; @(negedge clk); score_clr = 0;
    load_store();
    campaign(tr_a, tr_b, 1);
    @(negedge clk);
    checks++;
    if (longint'(score_count) != longint'(tr_a.size()) * 6 * fl_sa0.size()) begin
      failures++;
      $display("FAIL W=%0d score_count=%0d", WIDTH, score_count);
    end
    begin
      longint mn, mx, sv;
      mn = longint'(1) << 40; mx = -(longint'(1) << 40);
      for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++) begin
        sv = longint'(score[v][i]);
        if (sv < mn) mn = sv;
        if (sv > mx) mx = sv;
      end
      // expected weights; the on-chip normalizer must produce the same
      for (int v = 0; v < 3; v++) for (int i = 0; i < WIDTH; i++) begin
        sv = longint'(score[v][i]);
        wt[v][i] = real'((mx == mn) ? 16 : ((sv - mn) * 16 + (mx - mn) / 2) / (mx - mn)) / 16.0;
      end
      @(negedge clk); norm_start = 1; @(negedge clk); norm_start = 0;
      while (!norm_done) @(negedge clk);
      for (int v = 0; v < 3; v++) begin
        string line;
        line = "";
        for (int i = WIDTH - 1; i >= 0; i--) line = {line, $sformatf(" %0.2f", wt[v][i])};
        $display("W=%0d %s weights V%0d (MSB first):%s", WIDTH, tag, v + 1, line);
      end
    end
    for (int o = 0; o < 6; o++) begin n_faulty[o] = 0; n_fixed[o] = 0; end
    n_runs = 0; n_right = 0;
    campaign(ev_a, ev_b, 0);
    report({"learned weights, ", tag, " scoring"});
  endtask

  initial begin
    void'($urandom(SEED));
    checks = 0; failures = 0; finished = 0; n_runs = 0; n_right = 0;
    c_faulty = '{0, 0}; c_fixed = '{0, 0};
    for (int v = 0; v < 3; v++) for (int i = 0; i < 32; i++) wt[v][i] = 1.0;
    for (int o = 0; o < 6; o++) begin n_faulty[o] = 0; n_fixed[o] = 0; end
    // single and double stuck-at faults on ALU result bits 0..WIDTH-1
    for (int i = 0; i < WIDTH; i++) begin
      fl_sa0.push_back((WIDTH+1)'(1) << i); fl_sa1.push_back('0);
      fl_sa0.push_back('0); fl_sa1.push_back((WIDTH+1)'(1) << i);
    end
    for (int i = 0; i < WIDTH; i++)
      for (int j = i + 1; j < WIDTH; j++)
        for (int vi = 0; vi < 2; vi++)
          for (int vj = 0; vj < 2; vj++) begin
            logic [WIDTH:0] m0, m1;
            m0 = '0; m1 = '0;
            if (vi) m1[i] = 1'b1; else m0[i] = 1'b1;
            if (vj) m1[j] = 1'b1; else m0[j] = 1'b1;
            fl_sa0.push_back(m0); fl_sa1.push_back(m1);
          end
    if (NEVAL == 0) begin
      for (longint x = 0; x < (longint'(1) << WIDTH); x++)
        for (longint y = 0; y < (longint'(1) << WIDTH); y++) begin ev_a.push_back(x); ev_b.push_back(y); end
    end else
      for (int s = 0; s < NEVAL; s++) begin
        ev_a.push_back(longint'($urandom) & msk(WIDTH)); ev_b.push_back(longint'($urandom) & msk(WIDTH));
      end
    if (NTRAIN == 0) begin tr_a = ev_a; tr_b = ev_b; end
    else
      for (int s = 0; s < NTRAIN; s++) begin
        tr_a.push_back(longint'($urandom) & msk(WIDTH)); tr_b.push_back(longint'($urandom) & msk(WIDTH));
      end

    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    campaign(ev_a, ev_b, 0);
    report("equal weights (majority)");

    learn_and_eval(0);
    learn_and_eval(1);
    finished = 1;
  end
endmodule
