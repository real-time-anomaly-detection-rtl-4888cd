// tb_dense_layer: self-checking test of dense_layer.
// Two small instances share one configuration port: one with ReLU, one
// linear, both with a narrow 10-bit output so saturation happens often.
// Random weights, biases and inputs are loaded; each output is compared with
// a 64-bit recomputation of floor((b + sum w*x) / 2^SHIFT), ReLU and clamp.
// Also checked: writes to an index beyond the weight/bias range change
// nothing, and reset clears the store (outputs become 0 for any input).
module tb_dense_layer;
  localparam int NI = 6, NO = 4, IW = 13, WW = 8, BW = 24, OW = 10, SH = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  we = 1'b0;
  logic [11:0]           idx = '0;
  logic [31:0]           data = '0;
  logic signed [IW-1:0]  x  [NI];
  logic signed [OW-1:0]  yr [NO];
  logic signed [OW-1:0]  yl [NO];

  dense_layer #(.N_IN(NI), .N_OUT(NO), .IN_W(IW), .W_W(WW), .B_W(BW), .OUT_W(OW),
                .SHIFT(SH), .RELU(1'b1)) dut_r (
    .clk, .rst_n, .cfg_we(we), .cfg_idx(idx), .cfg_data(data), .x(x), .y(yr));
  dense_layer #(.N_IN(NI), .N_OUT(NO), .IN_W(IW), .W_W(WW), .B_W(BW), .OUT_W(OW),
                .SHIFT(SH), .RELU(1'b0)) dut_l (
    .clk, .rst_n, .cfg_we(we), .cfg_idx(idx), .cfg_data(data), .x(x), .y(yl));

  int checks = 0, failures = 0;
  int n_sat = 0, n_relu = 0;
  longint wm [NO][NI];
  longint bm [NO];

  function automatic longint rnd(longint lo, longint hi);
    return lo + longint'({$urandom, $urandom} % longint'(hi - lo + 1));
  endfunction

  function automatic longint model(int o, bit relu);
    longint acc, v, hi, lo;
    acc = bm[o];
    for (int i = 0; i < NI; i++) acc += wm[o][i] * longint'(x[i]);
    v  = acc >>> SH;                      // arithmetic shift of a 64-bit value
    hi = (longint'(1) << (OW - 1)) - 1;
    lo = -(longint'(1) << (OW - 1));
    if (relu && v < 0) v = 0;
    if (v > hi) v = hi;
    if (v < lo) v = lo;
    return v;
  endfunction

  task automatic write(int i, longint v);
    @(negedge clk);
    we = 1'b1; idx = 12'(i); data = 32'(v);
    @(negedge clk);
    we = 1'b0;
  endtask

  task automatic load_random();
    for (int o = 0; o < NO; o++) begin
      for (int i = 0; i < NI; i++) begin
        wm[o][i] = rnd(-128, 127);
        write(o * NI + i, wm[o][i]);
      end
      bm[o] = rnd(-(1 << 12), (1 << 12));
      write(NI * NO + o, bm[o]);
    end
  endtask

  task automatic check_vector();
    longint er, el;
    for (int i = 0; i < NI; i++) x[i] = IW'(rnd(-(1 << (IW-1)) / 8, (1 << (IW-1)) / 8));
    #1;
    for (int o = 0; o < NO; o++) begin
      er = model(o, 1'b1);
      el = model(o, 1'b0);
      checks += 2;
      if (longint'(yr[o]) != er) begin
        failures++;
        $display("FAIL relu o=%0d got %0d exp %0d", o, yr[o], er);
      end
      if (longint'(yl[o]) != el) begin
        failures++;
        $display("FAIL lin  o=%0d got %0d exp %0d", o, yl[o], el);
      end
      if (el >= (1 << (OW-1)) - 1 || el <= -(1 << (OW-1))) n_sat++;
      if (el < 0) n_relu++;
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
    for (int i = 0; i < NI; i++) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int round = 0; round < 4; round++) begin
      load_random();
      for (int v = 0; v < 60; v++) check_vector();
      // out-of-range write must be ignored
      write(NI * NO + NO, 32'h5A);
      for (int v = 0; v < 5; v++) check_vector();
    end
    // reset clears all weights and biases
    rst_n = 1'b0;
    #1;
    rst_n = 1'b1;
    foreach (wm[o, i]) wm[o][i] = 0;
    foreach (bm[o]) bm[o] = 0;
    for (int v = 0; v < 5; v++) check_vector();
    checks++;
    if (n_sat == 0 || n_relu == 0) begin
      failures++;
      $display("FAIL coverage: saturation %0d relu %0d", n_sat, n_relu);
    end
    $display("coverage: saturated outputs %0d, ReLU-clipped outputs %0d", n_sat, n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
