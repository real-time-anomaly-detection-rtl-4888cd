// tb_seed_rate_monitor: self-checking test of seed_rate_monitor with a short
// window of 13 clocks. Random valid/trigger patterns are counted by the
// testbench; at each rate_valid pulse every seed's rate and the event count
// must equal the counts of the window just closed, and the pulses must be
// exactly WINDOW clocks apart.
module tb_seed_rate_monitor;
  localparam int NS = 5, WIN = 13;
  localparam int CW = $clog2(WIN + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          in_valid = 1'b0;
  logic [NS-1:0] trig = '0;
  logic          rate_valid;
  logic [CW-1:0] rate [NS];
  logic [CW-1:0] n_events;

  seed_rate_monitor #(.NS(NS), .WINDOW(WIN)) dut (
    .clk, .rst_n, .in_valid, .trig, .rate_valid, .rate, .n_events);

  int checks = 0, failures = 0;
  int cnt [NS];
  int ev, cyc, windows;
  int exp_rate [NS];
  int exp_ev;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (cnt[s]) cnt[s] = 0;
    ev = 0; cyc = 0; windows = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (windows < 40) begin
      in_valid = 1'($urandom);
      trig = NS'($urandom);
      if (windows == 5) trig = '1;          // a window where every seed fires often
      @(posedge clk);
      ev += int'(in_valid);
      for (int s = 0; s < NS; s++) cnt[s] += int'(in_valid && trig[s]);
      cyc++;
      if (cyc == WIN) begin
        for (int s = 0; s < NS; s++) begin exp_rate[s] = cnt[s]; cnt[s] = 0; end
        exp_ev = ev; ev = 0; cyc = 0;
        #1;
        checks++;
        if (!rate_valid) begin failures++; $display("FAIL no rate_valid at window end"); end
        for (int s = 0; s < NS; s++) begin
          checks++;
          if (int'(rate[s]) != exp_rate[s]) begin
            failures++;
            $display("FAIL window %0d seed %0d got %0d exp %0d", windows, s, rate[s], exp_rate[s]);
          end
        end
        checks++;
        if (int'(n_events) != exp_ev) begin failures++; $display("FAIL n_events"); end
        windows++;
      end else begin
        #1;
        checks++;
        if (rate_valid) begin failures++; $display("FAIL rate_valid mid-window"); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
