// seed_thresholds: turns the anomaly score into the five AXOL1TL trigger seeds.
//
// Each seed s (0 very tight, 1 tight, 2 nominal, 3 loose, 4 very loose; see
// axo_pkg::seed_e) fires when score >= thr[s]. The thresholds are registers
// written over the configuration bus (target 3, index = seed number, data in
// the low SCORE_W bits). They reset to all ones, a value the score cannot
// reach, so no seed fires before it is programmed. The seed bits, the score and
// the valid flag are registered: inputs in cycle t appear at the outputs in
// cycle t+1, one event per clock.
//
// From the published design: five seeds with those names, and higher scores
// being more anomalous. Own choices: >= comparison, programmable thresholds,
// reset value. Nothing forces the thresholds to be ordered; software is
// expected to program very tight >= tight >= nominal >= loose >= very loose.
module seed_thresholds
  import axo_pkg::*;
#(
  parameter int unsigned NS = N_SEEDS,
  parameter int unsigned SW = SCORE_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  cfg_wr_t        cfg,
  input  logic           in_valid,
  input  logic [SW-1:0]  score,
  output logic           out_valid,
  output logic [SW-1:0]  score_q,
  output logic [NS-1:0]  trig,
  output logic [SW-1:0]  thr [NS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NS; s++) thr[s] <= '1;
    end else if (cfg.we && cfg.addr[15:12] == TGT_THR) begin
      for (int s = 0; s < NS; s++)
        if (32'(cfg.addr[11:0]) == s) thr[s] <= SW'(cfg.data);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      score_q   <= '0;
      trig      <= '0;
    end else begin
      out_valid <= in_valid;
      score_q   <= in_valid ? score : '0;
      for (int s = 0; s < NS; s++)
        trig[s] <= in_valid && (score >= thr[s]);
    end
  end

  // A seed never fires without a valid event.
  a_trig_needs_valid: assert property (@(posedge clk) disable iff (!rst_n) !out_valid |-> trig == '0)
    else $error("seed_thresholds: seed bit set without out_valid");

endmodule
