// ldc_e2e_body.svh: shared body of the end-to-end testbenches of ldc_top.
//
// The including module declares the localparams N, K, DV, DF, VB, RUNS,
// instantiates ldc_top as "dut" on the signals declared here and adds the
// watchdog. The body acts
// as the host: it loads random value, feature and sample tables, builds the
// class vectors so that class (run mod K) lies a few bits from the query,
// starts inferences, and compares each Hamming distance, its cycle and the
// final argmin with a reference that evaluates Eq. (1) on bipolar integers.
// Features 0 and 1 of the first run are steered onto the threshold
// (m = floor(N/2) and m = floor(N/2)+1) to exercise the sgn(0) = +1 rule.
//
// Mechanisms counted (each must happen at least once): encodings, query bits
// at +1 and at -1, threshold cases, host loads into each of the four memories,
// distances streamed, argmin hits, back-to-back starts with unchanged memories.

  localparam int unsigned NW    = addr_w(N);
  localparam int unsigned KW    = addr_w(K);
  localparam int unsigned DW    = $clog2(DF + 1);
  localparam int unsigned M     = 1 << VB;
  localparam int unsigned LD_AW = (NW > VB) ? ((NW > KW) ? NW : KW) : ((VB > KW) ? VB : KW);
  localparam int unsigned LD_DW = (DF > VB) ? DF : VB;
  localparam int unsigned LAT   = N + K + 4;   // start cycle to done cycle

  logic clk = 1'b0;
  always #2.5 clk = ~clk;   // 200 MHz
  int checks = 0, failures = 0;

  logic             rst_n = 1'b0, ld_en = 1'b0, start = 1'b0;
  ld_sel_e          ld_sel = LD_SAMPLE;
  logic [LD_AW-1:0] ld_addr = '0;
  logic [LD_DW-1:0] ld_data = '0;
  logic             ready, hd_valid, done;
  logic [KW-1:0]    hd_k;
  logic [DW-1:0]    hd;

  // host copies of the memories
  logic [DF-1:0] mf [N];
  logic [DV-1:0] mv [M];
  logic [VB-1:0] ms [N];
  logic [DF-1:0] mc [K];

  // mechanism counters
  int n_encode = 0, n_plus = 0, n_minus = 0, n_thresh = 0, n_dist = 0;
  int n_argmin = 0, n_b2b = 0;
  int n_load [4] = '{0, 0, 0, 0};

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic logic [DF-1:0] rnd();
    logic [DF-1:0] v;
    for (int b = 0; b < int'(DF); b += 32) v = DF'({v, 32'($urandom)});
    return v;
  endfunction

  task automatic load(input ld_sel_e sel, input int addr, input logic [LD_DW-1:0] data);
    ld_en <= 1'b1; ld_sel <= sel; ld_addr <= LD_AW'(addr); ld_data <= data;
    @(posedge clk);
    n_load[int'(sel)]++;   // the caller lowers ld_en after its last word
  endtask

  // Eq. (1) with bipolar integers; +1 -> bit 0, sgn(0) = +1
  function automatic logic [DF-1:0] ref_query();
    logic [DF-1:0] s;
    for (int d = 0; d < int'(DF); d++) begin
      int sum = 0;
      for (int i = 0; i < int'(N); i++) begin
        int fb, vb;
        fb = mf[i][d] ? -1 : 1;
        vb = mv[ms[i]][d % DV] ? -1 : 1;
        sum += fb * vb;
      end
      s[d] = (sum >= 0) ? 1'b0 : 1'b1;
      if (sum >= 0) n_plus++; else n_minus++;
      if (sum >= -1 && sum <= 1) n_thresh++;
    end
    return s;
  endfunction

  // Start one inference (start is driven in cycle 0) and check the K
  // distances against hd_exp, their cycles, and the latency.
  task automatic run_one(input int exp_hd [K], output int got_hd [K], input bit back_to_back);
    int c, got;
    if (back_to_back) chk(ready, "ready for back-to-back start");
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    c = 1; got = 0;   // start was accepted at the end of cycle 0
    foreach (got_hd[k]) got_hd[k] = -1;
    forever begin
      @(posedge clk);
      c++;
      #0.1;
      if (hd_valid) begin
        chk(int'(hd_k) == got, $sformatf("class order: got %0d expected %0d", hd_k, got));
        chk(c == int'(N) + 5 + got, $sformatf("distance %0d in cycle %0d", got, c));
        chk(int'(hd) == exp_hd[got], $sformatf("distance to class %0d: got %0d expected %0d", got, hd, exp_hd[got]));
        got_hd[got] = int'(hd);
        got++;
        n_dist++;
      end
      if (done) begin
        chk(c == int'(LAT), $sformatf("latency %0d cycles, expected %0d", c, LAT));
        chk(got == int'(K), "all classes reported");
        break;
      end
      if (c > int'(LAT) + 50) begin
        chk(1'b0, "no done");
        break;
      end
    end
    n_encode++;
    // ready must come back one cycle after done
    @(posedge clk);
    #0.1 chk(ready, "ready after done");
  endtask

  task automatic one_sample(input int run);
    logic [DF-1:0] sq;
    int exp_hd [K], got_hd [K], got2 [K];
    int label, best;
    label = run % int'(K);
    // value table is rewritten every other run, feature vectors every run
    if (run % 2 == 0) begin
      for (int f = 0; f < int'(M); f++) begin
        mv[f] = DV'($urandom);
        load(LD_VALUE, f, LD_DW'(mv[f]));
      end
    end
    for (int i = 0; i < int'(N); i++) begin
      ms[i] = VB'($urandom);
      mf[i] = rnd();
      if (run == 0) begin
        // steer dimensions 0 and 1 onto the threshold
        mf[i][0] = mv[ms[i]][0] ^ ((i < int'(N / 2)) ? 1'b1 : 1'b0);
        mf[i][1] = mv[ms[i]][1] ^ ((i < int'(N / 2) + 1) ? 1'b1 : 1'b0);
      end
      load(LD_SAMPLE, i, LD_DW'(ms[i]));
      load(LD_FEATURE, i, LD_DW'(mf[i]));
    end
    sq = ref_query();
    if (run == 0) begin
      chk(sq[0] == 1'b0, "tie / below-threshold dimension gives +1");
      chk(sq[1] == 1'b1, "dimension above threshold gives -1");
    end
    for (int k = 0; k < int'(K); k++) begin
      if (k == label) begin
        mc[k] = sq;
        for (int f = 0; f < 3; f++) begin
          int b;
          b = int'($urandom_range(DF - 1));
          mc[k][b] = ~mc[k][b];
        end
      end else begin
        mc[k] = rnd();
      end
      load(LD_CLASS, k, LD_DW'(mc[k]));
      if (k == int'(K) - 1) ld_en <= 1'b0;
      exp_hd[k] = 0;
      for (int d = 0; d < int'(DF); d++) exp_hd[k] += (mc[k][d] != sq[d]) ? 1 : 0;
    end
    @(posedge clk);
    run_one(exp_hd, got_hd, 1'b0);
    // host argmin
    best = 0;
    for (int k = 1; k < int'(K); k++) if (got_hd[k] < got_hd[best]) best = k;
    chk(best == label, $sformatf("argmin %0d expected %0d", best, label));
    if (best == label) n_argmin++;
    // back-to-back: start again in the cycle ready returns, same memories
    run_one(exp_hd, got2, 1'b1);
    n_b2b++;
    foreach (got2[k]) chk(got2[k] == got_hd[k], "back-to-back result unchanged");
  endtask


  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    for (int r = 0; r < RUNS; r++) one_sample(r);
    $display("mechanisms: encodings=%0d plus_bits=%0d minus_bits=%0d threshold_dims=%0d distances=%0d argmin_hits=%0d back_to_back=%0d",
             n_encode, n_plus, n_minus, n_thresh, n_dist, n_argmin, n_b2b);
    $display("loads: sample=%0d value=%0d feature=%0d class=%0d",
             n_load[LD_SAMPLE], n_load[LD_VALUE], n_load[LD_FEATURE], n_load[LD_CLASS]);
    chk(n_encode > 0, "encoding happened");
    chk(n_plus > 0 && n_minus > 0, "both query bit values happened");
    chk(n_thresh > 0, "threshold case happened");
    chk(n_dist > 0, "distances streamed");
    chk(n_argmin > 0, "argmin hit happened");
    chk(n_b2b > 0, "back-to-back start happened");
    foreach (n_load[s]) chk(n_load[s] > 0, $sformatf("load into memory %0d happened", s));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
