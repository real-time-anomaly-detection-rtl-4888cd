// tb_axol1tl_full: the AXOL1TL block at its default parameters (no parameter
// overrides, 40,000,000-clock rate window), taken through complete
// operation: reset, configuration of the whole 57-32-16-8 network and the
// five thresholds, and a stream of events whose scores, seed bits and
// two-clock latency are compared with the integer reference model. A rate
// window of one second of beam is too long to simulate with the full network
// evaluated every clock, so the rate counters are only checked not to report
// early; the end-to-end test with a short window covers them.
module tb_axol1tl_full;
  import axo_pkg::*;
  import axo_ref_pkg::*;

  localparam int WIN     = 40_000_000;
  localparam int N_EV    = 200;
  localparam bit RATE_CK = 1'b1;   // rate_valid must stay low
  localparam int RW      = $clog2(WIN + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                cfg_we;
  logic [CFG_AW-1:0]   cfg_addr;
  logic [CFG_DW-1:0]   cfg_data;
  logic                in_valid;
  l1_obj_t             jet [N_JET];
  l1_obj_t             eg  [N_EG];
  l1_obj_t             mu  [N_MU];
  l1_obj_t             met;
  logic                out_valid;
  logic [SCORE_W-1:0]  score;
  logic [N_SEEDS-1:0]  trig;
  logic                rate_valid;
  logic [RW-1:0]       rate [N_SEEDS];
  logic [RW-1:0]       rate_events;
  logic [SCORE_W-1:0]  seed_thr [N_SEEDS];

  axol1tl_top dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .in_valid, .jet, .eg, .mu, .met,
    .out_valid, .score, .trig, .rate_valid, .rate, .rate_events, .seed_thr);

  int checks = 0, failures = 0;
  int cyc = 0;
  axo_model m;
  axo_model m0;   // all-zero network: the state after reset

  // mechanism counters
  int n_fire [N_SEEDS];
  int n_quiet [N_SEEDS];
  int n_b2b = 0, n_gap = 0, n_reprog = 0, n_windows = 0;

  typedef struct { int due; longint score; logic [N_SEEDS-1:0] trig; } exp_t;
  exp_t q [$];

  typedef struct { l1_obj_t o [N_OBJ]; } event_t;
  event_t ev [N_EV];
  longint ev_score [N_EV];
  longint thr_m [N_SEEDS];

  always @(posedge clk) cyc <= cyc + 1;

  // ---- independent count of the rate windows ----------------------------
  int win_tick = 0;
  int win_cnt [N_SEEDS];
  int win_ev = 0;
  int exp_rate [N_SEEDS];
  int exp_ev = 0;
  bit exp_rv = 1'b0;
  initial foreach (win_cnt[s]) win_cnt[s] = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      exp_rv <= (win_tick == WIN - 1);
      if (win_tick == WIN - 1) begin
        for (int s = 0; s < N_SEEDS; s++) begin
          exp_rate[s] <= win_cnt[s] + int'(out_valid && trig[s]);
          win_cnt[s]  <= 0;
        end
        exp_ev   <= win_ev + int'(out_valid);
        win_ev   <= 0;
        win_tick <= 0;
      end else begin
        for (int s = 0; s < N_SEEDS; s++) win_cnt[s] <= win_cnt[s] + int'(out_valid && trig[s]);
        win_ev   <= win_ev + int'(out_valid);
        win_tick <= win_tick + 1;
      end
    end
  end

  // ---- helpers -------------------------------------------------------------
  function automatic l1_obj_t rand_obj(bit big);
    l1_obj_t o;
    int sel;
    sel = int'($urandom % 4);
    o.pt  = big ? PT_W'(4095 - ($urandom % 64)) : (sel == 0 ? '0 : PT_W'($urandom % 400));
    o.eta = ETA_W'(axo_model::rnd(-230, 230));
    o.phi = PHI_W'($urandom % 576);
    return o;
  endfunction

  // feature vector as defined by the input ordering of the block
  function automatic void features(event_t e, output longint f [N_IN]);
    for (int k = 0; k < N_OBJ; k++) begin
      f[3*k]     = longint'(e.o[k].pt);
      f[3*k + 1] = (k == N_OBJ - 1) ? 0 : longint'(e.o[k].eta);
      f[3*k + 2] = longint'(e.o[k].phi);
    end
  endfunction

  task automatic cfg_write(logic [CFG_AW-1:0] a, longint d);
    @(negedge clk);
    check_out();
    cfg_we = 1'b1; cfg_addr = a; cfg_data = CFG_DW'(d);
    in_valid = 1'b0;
    @(negedge clk);
    cfg_we = 1'b0;
    check_out();
  endtask

  task automatic load_net();
    int ni, no;
    for (int l = 1; l <= 3; l++) begin
      ni = (l == 1) ? N_IN : (l == 2) ? H1 : H2;
      no = (l == 1) ? H1   : (l == 2) ? H2 : N_LATENT;
      for (int idx = 0; idx < ni * no + no; idx++) begin
        @(negedge clk);
        check_out();
        cfg_we = 1'b1;
        cfg_addr = {4'(l - 1), 12'(idx)};
        cfg_data = CFG_DW'(m.cfg_value(l, idx));
      end
    end
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic set_thresholds(int pct [N_SEEDS]);
    longint sorted [$];
    foreach (ev_score[i]) sorted.push_back(ev_score[i]);
    sorted.sort();
    for (int s = 0; s < N_SEEDS; s++) begin
      thr_m[s] = sorted[pct[s] * N_EV / 100] + 1;
      cfg_write({TGT_THR, 12'(s)}, thr_m[s]);
    end
    for (int s = 0; s < N_SEEDS; s++) begin
      checks++;
      if (longint'(seed_thr[s]) != thr_m[s]) begin failures++; $display("FAIL threshold read-back %0d", s); end
    end
  endtask

  task automatic check_out();
    exp_t e;
    if (out_valid) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected out_valid at %0d", cyc);
        return;
      end
      e = q.pop_front();
      checks += 3;
      if (e.due != cyc) begin failures++; $display("FAIL latency due %0d now %0d", e.due, cyc); end
      if (longint'(score) != e.score) begin
        failures++;
        $display("FAIL score got %0d exp %0d", score, e.score);
      end
      if (trig !== e.trig) begin
        failures++;
        $display("FAIL trig got %b exp %b (score %0d)", trig, e.trig, e.score);
      end
      for (int s = 0; s < N_SEEDS; s++) begin
        if (trig[s]) n_fire[s]++; else n_quiet[s]++;
      end
    end else if (q.size() != 0 && q[0].due <= cyc) begin
      checks++;
      failures++;
      $display("FAIL missing output due %0d", q[0].due);
      void'(q.pop_front());
    end
    if (RATE_CK && rst_n) begin
      checks++;
      if (rate_valid !== exp_rv) begin failures++; $display("FAIL rate_valid at %0d", cyc); end
      if (rate_valid) begin
        n_windows++;
        for (int s = 0; s < N_SEEDS; s++) begin
          checks++;
          if (int'(rate[s]) != exp_rate[s]) begin
            failures++;
            $display("FAIL rate[%0d] got %0d exp %0d", s, rate[s], exp_rate[s]);
          end
        end
        checks++;
        if (int'(rate_events) != exp_ev) begin failures++; $display("FAIL rate_events"); end
      end
    end
  endtask

  task automatic stream(axo_model mm, int first, int last);
    longint f [N_IN];
    longint lat [N_LATENT];
    exp_t   e;
    bit     prev_v;
    int     n;
    prev_v = 1'b0;
    n = first;
    while (n < last) begin
      @(negedge clk);
      check_out();
      in_valid = ($urandom % 4) != 0;
      for (int j = 0; j < N_JET; j++) jet[j] = ev[n].o[j];
      for (int j = 0; j < N_EG;  j++) eg[j]  = ev[n].o[N_JET + j];
      for (int j = 0; j < N_MU;  j++) mu[j]  = ev[n].o[N_JET + N_EG + j];
      met = ev[n].o[N_OBJ - 1];
      if (in_valid) begin
        features(ev[n], f);
        mm.encode(f, lat);
        e.due   = cyc + 2;
        e.score = axo_model::score(lat);
        for (int s = 0; s < N_SEEDS; s++) e.trig[s] = (e.score >= thr_m[s]);
        q.push_back(e);
        if (prev_v) n_b2b++;
        n++;
      end else begin
        n_gap++;
      end
      prev_v = in_valid;
    end
    @(negedge clk);
    check_out();
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint f [N_IN];
    longint lat [N_LATENT];
    int pct_a [N_SEEDS];
    int pct_b [N_SEEDS];
    pct_a = '{98, 93, 85, 70, 50};   // very tight .. very loose
    pct_b = '{99, 97, 92, 80, 60};
    m = new();
    m0 = new();
    foreach (n_fire[s]) begin n_fire[s] = 0; n_quiet[s] = 0; end
    cfg_we = 1'b0; cfg_addr = '0; cfg_data = '0;
    in_valid = 1'b0;
    for (int j = 0; j < N_JET; j++) jet[j] = '0;
    for (int j = 0; j < N_EG;  j++) eg[j]  = '0;
    for (int j = 0; j < N_MU;  j++) mu[j]  = '0;
    met = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    m.randomize_net(24, 3000);
    for (int i = 0; i < N_IN; i++) m.w1[0][i] = 100;
    for (int n = 0; n < N_EV; n++) begin
      for (int k = 0; k < N_OBJ; k++) ev[n].o[k] = rand_obj(n % 37 == 5);
      features(ev[n], f);
      m.encode(f, lat);
      ev_score[n] = axo_model::score(lat);
    end
    m.n_relu = 0;
    m.n_sat  = 0;

    // before loading: nothing fires
    thr_m = '{default: (longint'(1) << SCORE_W) - 1};
    stream(m0, 0, 10);
    load_net();
    set_thresholds(pct_a);
    n_reprog++;
    stream(m, 0, N_EV / 2);
    set_thresholds(pct_b);
    n_reprog++;
    stream(m, N_EV / 2, N_EV);
    repeat (40) begin @(negedge clk); check_out(); end

    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results never came", q.size()); end
    for (int s = 0; s < N_SEEDS; s++) begin
      checks += 2;
      if (n_fire[s] == 0)  begin failures++; $display("FAIL seed %0d never fired", s); end
      if (n_quiet[s] == 0) begin failures++; $display("FAIL seed %0d always fired", s); end
    end
    checks++;
    if (m.n_relu == 0 || m.n_sat == 0 || n_b2b == 0 || n_gap == 0 || n_reprog < 2 ||
        n_windows != 0) begin
      failures++;
      $display("FAIL mechanism not exercised");
    end
    $display("mechanisms: fired vt/t/n/l/vl = %0d/%0d/%0d/%0d/%0d, relu %0d, sat %0d, back-to-back %0d, gaps %0d, reprogram %0d, rate windows %0d",
             n_fire[0], n_fire[1], n_fire[2], n_fire[3], n_fire[4], m.n_relu, m.n_sat,
             n_b2b, n_gap, n_reprog, n_windows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
