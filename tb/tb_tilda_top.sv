// tb_tilda_top: end-to-end test of the classifier at reduced size.
//
// A stream of labelled vectors is learned, then groups of R unlabelled
// vectors are classified, with learning and classifying interleaved. The
// testbench keeps its own model of every anchor and counter of every subspace
// and predicts each parallel-vote result (majority of the P nearest-anchor
// classes) and each sequential-vote result (majority over the R results of a
// group). It checks both, the K+3 cycles of a learning step, the C*K cycles of
// a back-to-back classification, and counts that each mechanism happened:
// filling an empty anchor, averaging into a used one, the counter ceiling,
// an empty vote before anything is learned, back-to-back classification, both
// mode switches, and sequential votes with R = 1 and R > 1.
module tb_tilda_top;
  import tilda_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned T = 16, P = 4, K = 3, C = 4, INV_DEPTH = 8, R_W = 4;
  localparam int unsigned D = T / P, DEPTH = C * K;

  logic clk = 0, rst_n = 0, in_valid = 0, lp = 0;
  word_t in_class = '0;
  sword_t feature [T];
  logic [R_W-1:0] r_count = '0;
  logic in_ready, pmv_valid, smv_valid, learn_done;
  logic [C-1:0] pmv_class, smv_class;

  tilda_top #(.T(T), .P(P), .K(K), .C(C), .INV_DEPTH(INV_DEPTH), .R_W(R_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint my [P][DEPTH][], mn [P][DEPTH];
  int exp_pmv [$], exp_smv [$];
  int grp_cnt [C], grp_left = 0;
  int n_fill = 0, n_avg = 0, n_ceil = 0, n_novote = 0, n_chain = 0;
  int n_l2c = 0, n_c2l = 0, n_r1 = 0, n_rn = 0, n_learn = 0, n_class = 0;
  longint cycle = 0;
  int last_lp = -1;
  longint last_accept = -1;

  always @(posedge clk) cycle++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint sub(input sword_t f [T], input int p, input int j);
    return longint'(f[p * D + j]);
  endfunction

  // model of one learning step
  function automatic void model_learn(input sword_t f [T], input int cls);
    for (int p = 0; p < P; p++) begin
      longint xr[], best, s;
      int bi;
      xr = new[D];
      foreach (xr[j]) xr[j] = sub(f, p, j);
      bi = -1; best = 0;
      for (int i = 0; i < K; i++) begin
        int a;
        a = cls * K + i;
        s = score_ref(dist_ref(xr, my[p][a]), mn[p][a]);
        if (bi < 0 || s < best) begin best = s; bi = a; end
      end
      if (mn[p][bi] == 0) n_fill++; else n_avg++;
      if (mn[p][bi] >= INV_DEPTH - 1) n_ceil++;
      update_ref(my[p][bi], mn[p][bi], xr, INV_DEPTH - 1);
    end
  endfunction

  // model of one classification: returns the parallel-vote class
  function automatic int model_classify(input sword_t f [T]);
    int votes [C], best;
    bit any;
    foreach (votes[c]) votes[c] = 0;
    any = 0;
    for (int p = 0; p < P; p++) begin
      longint xr[], bd, s;
      int bi;
      xr = new[D];
      foreach (xr[j]) xr[j] = sub(f, p, j);
      bi = -1; bd = 0;
      for (int a = 0; a < DEPTH; a++) begin
        if (mn[p][a] == 0) continue;
        s = dist_ref(xr, my[p][a]);
        if (bi < 0 || s < bd) begin bd = s; bi = a; end
      end
      if (bi >= 0) begin votes[bi / K]++; any = 1; end
    end
    if (!any) n_novote++;
    best = 0;
    for (int c = 1; c < C; c++) if (votes[c] > votes[best]) best = c;
    return best;
  endfunction

  // features of class cls: a bump on the elements j with j % C == cls, plus noise
  function automatic void make_feature(input int cls, output sword_t f [T]);
    foreach (f[j])
      f[j] = sword_t'(((j % C) == cls ? 6000 : 0) + int'($urandom_range(0, 9000)) - 4500);
  endfunction

  // Offer one vector and wait until it is taken.
  task automatic offer(input bit mode, input int cls, input int r);
    sword_t f [T];
    make_feature(cls, f);
    @(negedge clk);
    in_valid = 1; lp = mode; in_class = word_t'(cls); feature = f; r_count = R_W'(r);
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    // accepted at the next rising edge
    if (last_accept >= 0) begin
      if (last_lp == 1 && mode == 1)
        check(cycle - last_accept == K + 3, $sformatf("learn step %0d cycles, expected K+3", cycle - last_accept));
      if (last_lp == 0 && mode == 0) begin
        check(cycle - last_accept == C * K, $sformatf("classify step %0d cycles, expected C*K", cycle - last_accept));
        n_chain++;
      end
      if (last_lp == 1 && mode == 0) n_l2c++;
      if (last_lp == 0 && mode == 1) n_c2l++;
    end
    last_accept = cycle; last_lp = mode;
    if (mode) begin
      model_learn(f, cls);
      n_learn++;
    end else begin
      int e;
      e = model_classify(f);
      exp_pmv.push_back(e);
      n_class++;
      if (grp_left == 0) begin
        grp_left = (r == 0) ? 1 : r;
        foreach (grp_cnt[c]) grp_cnt[c] = 0;
        if (grp_left == 1) n_r1++; else n_rn++;
      end
      grp_cnt[e]++;
      grp_left--;
      if (grp_left == 0) begin
        int b;
        b = 0;
        for (int c = 1; c < C; c++) if (grp_cnt[c] > grp_cnt[b]) b = c;
        exp_smv.push_back(b);
      end
    end
    @(posedge clk);
    #1 in_valid = 0;
  endtask

  // result monitors
  int n_pmv = 0, n_smv = 0, n_right = 0;
  always @(posedge clk) if (rst_n) begin
    if (pmv_valid) begin
      checks++;
      if (exp_pmv.size() == 0) begin failures++; $display("FAIL unexpected parallel vote"); end
      else begin
        int e;
        e = exp_pmv.pop_front();
        if (pmv_class != C'(1) << e) begin failures++; $display("FAIL pmv %b expected %0d", pmv_class, e); end
      end
      n_pmv++;
    end
    if (smv_valid) begin
      checks++;
      if (exp_smv.size() == 0) begin failures++; $display("FAIL unexpected sequential vote"); end
      else begin
        int e;
        e = exp_smv.pop_front();
        if (smv_class != C'(1) << e) begin failures++; $display("FAIL smv %b expected %0d", smv_class, e); end
      end
      n_smv++;
    end
  end

  task automatic count_mech(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("  %-34s %0d", what, n);
  endtask

  initial begin
    for (int p = 0; p < P; p++)
      for (int a = 0; a < DEPTH; a++) begin my[p][a] = new[D]; mn[p][a] = 0; end
    foreach (feature[j]) feature[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    offer(0, 0, 1);                                   // nothing learned yet
    for (int i = 0; i < 12; i++) offer(1, i % C, 1);  // fills every anchor
    for (int g = 0; g < 4; g++)                       // groups of R = 3
      for (int i = 0; i < 3; i++) offer(0, g % C, 3);
    for (int i = 0; i < 40; i++) offer(1, $urandom_range(0, C-1), 1);
    for (int i = 0; i < 6; i++) offer(0, i % C, 1);   // R = 1
    offer(1, 2, 1);
    for (int i = 0; i < 5; i++) offer(0, 1, 5);
    repeat (C * K + 3 * C) @(negedge clk);
    check(exp_pmv.size() == 0 && exp_smv.size() == 0, "all results delivered");
    $display("mechanisms:");
    count_mech(n_learn,  "learning steps");
    count_mech(n_class,  "classification steps");
    count_mech(n_fill,   "empty anchor filled");
    count_mech(n_avg,    "used anchor averaged");
    count_mech(n_ceil,   "counter ceiling");
    count_mech(n_novote, "empty vote (nothing learned)");
    count_mech(n_chain,  "back-to-back classification");
    count_mech(n_l2c,    "switch learn -> classify");
    count_mech(n_c2l,    "switch classify -> learn");
    count_mech(n_r1,     "sequential vote, R = 1");
    count_mech(n_rn,     "sequential vote, R > 1");
    count_mech(n_pmv,    "parallel vote results");
    count_mech(n_smv,    "sequential vote results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
