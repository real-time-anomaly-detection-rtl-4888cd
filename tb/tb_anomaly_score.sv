// tb_anomaly_score: self-checking test of anomaly_score at the default size
// (8 latent means of 14 bits). Directed vectors (all zero, all most-negative,
// all most-positive, one hot) and random vectors are compared with a 64-bit
// sum of squares.
module tb_anomaly_score;
  localparam int N = 8, MW = 14, SW = 2*MW + 2;

  logic signed [MW-1:0] mu [N];
  logic [SW-1:0]        score;

  anomaly_score #(.N(N), .MU_W(MW), .SCORE_W(SW)) dut (.mu(mu), .score(score));

  int checks = 0, failures = 0;

  task automatic check(string tag);
    longint e;
    e = 0;
    for (int i = 0; i < N; i++) e += longint'(mu[i]) * longint'(mu[i]);
    #1;
    checks++;
    if (longint'(score) != e) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", tag, score, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) mu[i] = '0;
    check("zero");
    for (int i = 0; i < N; i++) mu[i] = {1'b1, {(MW-1){1'b0}}};
    check("all min");
    // the largest possible score must be exactly 8 * 2^26
    checks++;
    if (longint'(score) != 64'd8 * (64'd1 << 26)) begin
      failures++;
      $display("FAIL max score %0d", score);
    end
    for (int i = 0; i < N; i++) mu[i] = {1'b0, {(MW-1){1'b1}}};
    check("all max");
    for (int k = 0; k < N; k++) begin
      for (int i = 0; i < N; i++) mu[i] = (i == k) ? -MW'(k + 3) : '0;
      check("one hot");
    end
    for (int v = 0; v < 500; v++) begin
      for (int i = 0; i < N; i++) mu[i] = MW'($urandom);
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
