// tb_axo_encoder: self-checking test of axo_encoder at its default size
// (57 -> 32 -> 16 -> 8). Random weights and biases are written over the
// configuration port, then random feature vectors are streamed with random
// gaps, some back to back. Every latent mean is compared with the integer
// reference model in axo_ref_pkg, and each result must appear exactly one
// clock after its input. The test also requires that ReLU clipping and output
// saturation occurred, and that a write to the threshold target (3) leaves
// the encoder unchanged.
module tb_axo_encoder;
  import axo_pkg::*;
  import axo_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  cfg_wr_t               cfg;
  logic                  in_valid;
  logic signed [IN_W-1:0]  x  [N_IN];
  logic                  mu_valid;
  logic signed [ACT_W-1:0] mu [N_LATENT];

  axo_encoder dut (.clk, .rst_n, .cfg, .in_valid, .x, .mu_valid, .mu);

  int checks = 0, failures = 0;
  int cyc = 0;
  int n_b2b = 0;
  axo_model m;

  typedef struct { int due; longint mu [N_LATENT]; } exp_t;
  exp_t q [$];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic load_net();
    int ni, no;
    for (int l = 1; l <= 3; l++) begin
      ni = (l == 1) ? N_IN : (l == 2) ? H1 : H2;
      no = (l == 1) ? H1   : (l == 2) ? H2 : N_LATENT;
      for (int idx = 0; idx < ni * no + no; idx++) begin
        @(negedge clk);
        cfg = '{we: 1'b1, addr: {4'(l - 1), 12'(idx)}, data: 32'(m.cfg_value(l, idx))};
      end
    end
    // a threshold write must not disturb the encoder
    @(negedge clk);
    cfg = '{we: 1'b1, addr: {TGT_THR, 12'd0}, data: 32'hFFFF_FFFF};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic check_out();
    exp_t e;
    if (mu_valid) begin
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected mu_valid at cycle %0d", cyc);
        return;
      end
      e = q.pop_front();
      if (e.due != cyc) begin
        failures++;
        $display("FAIL latency: due %0d now %0d", e.due, cyc);
      end
      for (int k = 0; k < N_LATENT; k++) begin
        checks++;
        if (longint'(mu[k]) != e.mu[k]) begin
          failures++;
          $display("FAIL mu[%0d] got %0d exp %0d", k, mu[k], e.mu[k]);
        end
      end
    end else if (q.size() != 0 && q[0].due <= cyc) begin
      failures++;
      checks++;
      $display("FAIL missing output due %0d", q[0].due);
      void'(q.pop_front());
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xv [N_IN];
    exp_t   e;
    bit     prev_v;
    m = new();
    cfg = '0;
    in_valid = 1'b0;
    for (int i = 0; i < N_IN; i++) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    m.randomize_net(24, 3000);
    for (int i = 0; i < N_IN; i++) m.w1[0][i] = 100;   // neuron 0 saturates on large events
    load_net();
    prev_v = 1'b0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      check_out();
      in_valid = ($urandom % 3) != 0;
      for (int i = 0; i < N_IN; i++) begin
        if (n % 25 == 7) xv[i] = (i % 3 == 0) ? 4095 : 250;        // very large event
        else if (i % 3 == 1) xv[i] = axo_model::rnd(-200, 200);     // eta
        else xv[i] = axo_model::rnd(0, 600);                        // pT, phi
        x[i] = IN_W'(xv[i]);
      end
      if (in_valid) begin
        e.due = cyc + 1;
        m.encode(xv, e.mu);
        q.push_back(e);
        if (prev_v) n_b2b++;
      end
      prev_v = in_valid;
    end
    @(negedge clk);
    check_out();
    in_valid = 1'b0;
    repeat (3) begin @(negedge clk); check_out(); end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results never came", q.size()); end
    checks++;
    if (m.n_relu == 0 || m.n_sat == 0 || n_b2b == 0) begin
      failures++;
      $display("FAIL coverage relu=%0d sat=%0d back-to-back=%0d", m.n_relu, m.n_sat, n_b2b);
    end
    $display("coverage: relu clips %0d, saturations %0d, back-to-back events %0d",
             m.n_relu, m.n_sat, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
