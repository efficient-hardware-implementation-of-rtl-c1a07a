// tb_processing_block: drives learning and classification sweeps into one
// processing block and checks each result against a reference model of the
// anchors and counters (Algorithm: argmin of distance*counter within the
// class, barycentre update; nearest trained anchor for classification).
// Also checks the K+3 cycle learning step, the val timing, and that a sweep
// started while val is high is not disturbed.
module tb_processing_block;
  import tilda_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned D = 8, K = 3, C = 3, INV_DEPTH = 64;
  localparam int unsigned DEPTH = C * K;
  logic   clk = 0, rst_n = 0, lp = 0, active = 0, first = 0, last = 0;
  sword_t x [D];
  word_t  addr = '0, indx;
  logic   val, learn, busy, upd_done;
  logic [C-1:0] class_onehot;
  longint my [DEPTH][], mn [DEPTH];
  int checks = 0, failures = 0;
  int learn_steps = 0, class_steps = 0;

  processing_block #(.D(D), .K(K), .C(C), .INV_DEPTH(INV_DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic void make_x(input int cls, output longint xr[]);
    xr = new[D];
    foreach (xr[j]) xr[j] = longint'(((j % C) == cls) ? 8192 : 0) + longint'($urandom_range(0, 4095)) - 2048;
  endfunction

  function automatic int ref_learn(input longint xr[], input int cls);
    longint best, s;
    int bi;
    best = 0; bi = -1;
    for (int i = 0; i < K; i++) begin
      int a;
      a = cls * K + i;
      s = score_ref(dist_ref(xr, my[a]), mn[a]);
      if (bi < 0 || s < best) begin best = s; bi = a; end
    end
    return bi;
  endfunction

  function automatic int ref_classify(input longint xr[]);
    longint best, s;
    int bi;
    best = 0; bi = -1;
    for (int a = 0; a < DEPTH; a++) begin
      if (mn[a] == 0) continue;
      s = dist_ref(xr, my[a]);
      if (bi < 0 || s < best) begin best = s; bi = a; end
    end
    return bi;
  endfunction

  // One sweep. Starts at the current negedge; returns at the negedge after
  // the last address (the cycle where val must be high).
  task automatic sweep(input bit mode, input int cls, input longint xr[]);
    int m;
    m = mode ? K : DEPTH;
    foreach (x[j]) x[j] = sword_t'(xr[j]);
    for (int i = 0; i < m; i++) begin
      lp = mode; active = 1; first = (i == 0); last = (i == m - 1);
      addr = word_t'((mode ? cls * K : 0) + i);
      @(negedge clk);
    end
    active = 0; first = 0; last = 0; addr = '0;
  endtask

  task automatic do_learn(input int cls);
    longint xr[];
    int e, cyc;
    make_x(cls, xr);
    e = ref_learn(xr, cls);
    sweep(1, cls, xr);
    cyc = K;
    check(val && learn && indx == word_t'(e), $sformatf("learn winner %0d expected %0d", indx, e));
    check(class_onehot == C'(1) << cls, "learn class");
    while (!upd_done) begin @(negedge clk); cyc++; if (cyc > K + 10) break; end
    cyc++;
    check(cyc == K + 3, $sformatf("learning step %0d cycles, expected K+3", cyc));
    @(negedge clk);
    update_ref(my[e], mn[e], xr, INV_DEPTH - 1);
    learn_steps++;
  endtask

  // back-to-back: the next classification sweep starts in the cycle val is high
  task automatic do_classify_chain(input int n);
    longint xr[];
    int e, prev_e;
    prev_e = -2;
    for (int t = 0; t <= n; t++) begin
      if (t < n) begin
        make_x($urandom_range(0, C-1), xr);
        e = ref_classify(xr);
        foreach (x[j]) x[j] = sword_t'(xr[j]);
        for (int i = 0; i < DEPTH; i++) begin
          lp = 0; active = 1; first = (i == 0); last = (i == DEPTH - 1); addr = word_t'(i);
          #1;
          if (i == 0 && prev_e != -2) begin
            check(val && !learn, "val while next sweep starts");
            check(class_onehot == ((prev_e < 0) ? '0 : C'(1) << (prev_e / K)), "chained class");
          end
          @(negedge clk);
        end
        prev_e = e;
        class_steps++;
      end else begin
        active = 0; first = 0; last = 0;
        #1;
        check(val && !learn, "val after last sweep");
        check(class_onehot == ((prev_e < 0) ? '0 : C'(1) << (prev_e / K)), "last class");
        @(negedge clk);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < DEPTH; a++) begin my[a] = new[D]; mn[a] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    do_classify_chain(1);          // nothing learned: no vote
    for (int t = 0; t < 40; t++) do_learn(t % C);
    do_classify_chain(12);
    for (int t = 0; t < 30; t++) do_learn($urandom_range(0, C-1));
    do_classify_chain(12);
    check(learn_steps > 0 && class_steps > 0, "both modes ran");
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
