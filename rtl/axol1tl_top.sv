// axol1tl_top: the AXOL1TL anomaly-detection trigger algorithm.
//
// Every bunch crossing the Global Trigger board receives the event's L1
// objects: 10 jets, 4 e/gamma candidates, 4 muons and the missing transverse
// energy (MET). This block
//   1. packs their raw hardware pT, eta, phi words into a 57-entry signed
//      feature vector (order: jets 0..9, e/gamma 0..3, muons 0..3, MET; each
//      object contributes pT, eta, phi in that order; MET has no eta, so its
//      eta feature is 0),
//   2. runs the VAE encoder (axo_encoder) to get the 8 latent means,
//   3. forms the anomaly score sum(mu_i^2) (anomaly_score),
//   4. compares it with five thresholds to give the very tight, tight,
//      nominal, loose and very loose seeds (seed_thresholds), which go to the
//      Global Trigger's final decision logic,
//   5. counts the rate of each seed (seed_rate_monitor).
//
// Timing: one event per clock (40 MHz bunch-crossing clock). Objects with
// in_valid in cycle t give out_valid, score and trig in cycle t+2, i.e. 50 ns,
// the latency budget quoted for the algorithm. Stage 1 is the encoder, stage 2
// the score and threshold comparison.
//
// Weights, biases and thresholds are written over the configuration port
// (cfg_we, cfg_addr, cfg_data; address map in axo_pkg). After reset every
// weight is zero and every threshold unreachable, so no seed fires until the
// network has been loaded.
//
// From the published design: the input objects, the latent size, the score,
// the five seeds, the 40 MHz rate and 50 ns latency, and the rate monitoring.
// Own choices: all word widths, hidden layer sizes, the configuration port,
// the split of the 50 ns into two clock stages and the rate window.
module axol1tl_top
  import axo_pkg::*;
#(
  parameter int unsigned RATE_WINDOW = 40_000_000,
  parameter int unsigned RATE_W      = $clog2(RATE_WINDOW + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_we,
  input  logic [CFG_AW-1:0]   cfg_addr,
  input  logic [CFG_DW-1:0]   cfg_data,
  // event input, one bunch crossing per clock
  input  logic                in_valid,
  input  l1_obj_t             jet [N_JET],
  input  l1_obj_t             eg  [N_EG],
  input  l1_obj_t             mu  [N_MU],
  input  l1_obj_t             met,
  // trigger output, two clocks after the input
  output logic                out_valid,
  output logic [SCORE_W-1:0]  score,
  output logic [N_SEEDS-1:0]  trig,
  // monitoring
  output logic                rate_valid,
  output logic [RATE_W-1:0]   rate [N_SEEDS],
  output logic [RATE_W-1:0]   rate_events,
  output logic [SCORE_W-1:0]  seed_thr [N_SEEDS]   // threshold read-back
);

  cfg_wr_t cfg;
  assign cfg = '{we: cfg_we, addr: cfg_addr, data: cfg_data};

  // ---- input assembly ---------------------------------------------------
  l1_obj_t              obj  [N_OBJ];
  logic signed [IN_W-1:0] feat [N_IN];

  always_comb begin
    for (int j = 0; j < N_JET; j++) obj[j]                = jet[j];
    for (int j = 0; j < N_EG;  j++) obj[N_JET + j]        = eg[j];
    for (int j = 0; j < N_MU;  j++) obj[N_JET + N_EG + j] = mu[j];
    obj[N_OBJ-1] = met;
    for (int k = 0; k < N_OBJ; k++) begin
      feat[3*k]     = signed'(IN_W'(obj[k].pt));
      feat[3*k + 1] = (k == N_OBJ-1) ? '0 : IN_W'(obj[k].eta);
      feat[3*k + 2] = signed'(IN_W'(obj[k].phi));
    end
  end

  // ---- stage 1: encoder -------------------------------------------------
  logic                   lat_valid;
  logic signed [ACT_W-1:0] lat [N_LATENT];

  axo_encoder u_enc (
    .clk, .rst_n, .cfg,
    .in_valid, .x(feat),
    .mu_valid(lat_valid), .mu(lat)
  );

  // ---- stage 2: score and seeds -----------------------------------------
  logic [SCORE_W-1:0] score_c;

  anomaly_score #(.N(N_LATENT), .MU_W(ACT_W), .SCORE_W(SCORE_W)) u_score (
    .mu(lat), .score(score_c)
  );

  seed_thresholds u_seeds (
    .clk, .rst_n, .cfg,
    .in_valid(lat_valid), .score(score_c),
    .out_valid, .score_q(score), .trig, .thr(seed_thr)
  );

  // ---- monitoring -------------------------------------------------------
  seed_rate_monitor #(.NS(N_SEEDS), .WINDOW(RATE_WINDOW), .CNT_W(RATE_W)) u_rate (
    .clk, .rst_n, .in_valid(out_valid), .trig,
    .rate_valid, .rate, .n_events(rate_events)
  );

endmodule
