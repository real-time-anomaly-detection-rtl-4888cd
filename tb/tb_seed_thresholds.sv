// tb_seed_thresholds: self-checking test of seed_thresholds.
// Checks that no seed fires with the reset thresholds, that thresholds read
// back as written, that a seed fires exactly when score >= threshold
// (including score == threshold and threshold - 1), that outputs appear one
// clock after the input and that invalid inputs never fire a seed.
module tb_seed_thresholds;
  import axo_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_wr_t            cfg;
  logic               in_valid;
  logic [SCORE_W-1:0] score;
  logic               out_valid;
  logic [SCORE_W-1:0] score_q;
  logic [N_SEEDS-1:0] trig;
  logic [SCORE_W-1:0] thr [N_SEEDS];

  seed_thresholds dut (.clk, .rst_n, .cfg, .in_valid, .score,
                       .out_valid, .score_q, .trig, .thr);

  int checks = 0, failures = 0;
  longint thr_m [N_SEEDS];

  task automatic set_thr(int s, longint v);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: {TGT_THR, 12'(s)}, data: 32'(v)};
    @(negedge clk);
    cfg.we = 1'b0;
    thr_m[s] = v;
  endtask

  // apply one input, check the registered output one clock later
  task automatic apply(logic v, longint sc);
    logic [N_SEEDS-1:0] exp_t;
    @(negedge clk);
    in_valid = v;
    score = SCORE_W'(sc);
    for (int s = 0; s < N_SEEDS; s++) exp_t[s] = v && (sc >= thr_m[s]);
    @(posedge clk);
    #1;
    checks += 3;
    if (out_valid !== v) begin failures++; $display("FAIL valid"); end
    if (trig !== exp_t) begin
      failures++;
      $display("FAIL trig score=%0d got %b exp %b", sc, trig, exp_t);
    end
    if (v && longint'(score_q) != sc) begin failures++; $display("FAIL score_q"); end
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    in_valid = 1'b0;
    score = '0;
    for (int s = 0; s < N_SEEDS; s++) thr_m[s] = (longint'(1) << SCORE_W) - 1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // unprogrammed: even the largest reachable score fires nothing
    apply(1'b1, 64'd8 << 26);
    apply(1'b1, 0);
    // program: very tight 1250, tight 250, nominal 100, loose 25, very loose 5
    set_thr(SEED_VERY_TIGHT, 1250);
    set_thr(SEED_TIGHT,      250);
    set_thr(SEED_NOMINAL,    100);
    set_thr(SEED_LOOSE,      25);
    set_thr(SEED_VERY_LOOSE, 5);
    for (int s = 0; s < N_SEEDS; s++) begin
      checks++;
      if (longint'(thr[s]) != thr_m[s]) begin failures++; $display("FAIL readback %0d", s); end
    end
    for (int s = 0; s < N_SEEDS; s++) begin
      apply(1'b1, thr_m[s]);
      apply(1'b1, thr_m[s] - 1);
      apply(1'b0, thr_m[s] + 7);
    end
    for (int k = 0; k < 300; k++) apply(1'($urandom), longint'($urandom % 1500));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
