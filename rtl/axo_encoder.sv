// axo_encoder: the encoder half of the AXOL1TL variational autoencoder.
//
// It maps the N_IN = 57 input features (pT, eta, phi of 10 jets, 4 e/gamma,
// 4 muons and missing ET) to the N_LATENT = 8 latent means mu_i, which are all
// the trigger needs: the decoder and the latent variances are used only in
// training. Three fully parallel dense layers are chained,
//     57 -> H1 (ReLU) -> H2 (ReLU) -> 8 (linear),
// and the latent means are registered once at the output, so in_valid/x in
// cycle t gives mu_valid/mu in cycle t+1 and one event is accepted per clock.
//
// Configuration writes (cfg, see axo_pkg) with target 0, 1 or 2 in
// cfg.addr[15:12] go to layer 1, 2 or 3; all other targets are ignored here.
//
// From the published design: the input vector, the latent size 8, the dense
// feed-forward structure and the one-event-per-bunch-crossing operation.
// Own choices: the two hidden widths (32, 16), ReLU on hidden layers, the
// word widths and the single output register.
module axo_encoder
  import axo_pkg::*;
#(
  parameter int unsigned NI    = N_IN,
  parameter int unsigned NH1   = H1,
  parameter int unsigned NH2   = H2,
  parameter int unsigned NL    = N_LATENT,
  parameter int unsigned XW    = IN_W,
  parameter int unsigned AW    = ACT_W,
  parameter int unsigned SHIFT = W_FRAC
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_wr_t               cfg,
  input  logic                  in_valid,
  input  logic signed [XW-1:0]  x  [NI],
  output logic                  mu_valid,
  output logic signed [AW-1:0]  mu [NL]
);

  logic signed [AW-1:0] h1 [NH1];
  logic signed [AW-1:0] h2 [NH2];
  logic signed [AW-1:0] z  [NL];

  logic we1, we2, we3;
  assign we1 = cfg.we && cfg.addr[15:12] == TGT_L1;
  assign we2 = cfg.we && cfg.addr[15:12] == TGT_L2;
  assign we3 = cfg.we && cfg.addr[15:12] == TGT_L3;

  dense_layer #(.N_IN(NI),  .N_OUT(NH1), .IN_W(XW), .W_W(W_W), .B_W(B_W),
                .OUT_W(AW), .SHIFT(SHIFT), .RELU(1'b1), .IDX_W(12), .DATA_W(CFG_DW))
    u_l1 (.clk, .rst_n, .cfg_we(we1), .cfg_idx(cfg.addr[11:0]), .cfg_data(cfg.data),
          .x(x), .y(h1));

  dense_layer #(.N_IN(NH1), .N_OUT(NH2), .IN_W(AW), .W_W(W_W), .B_W(B_W),
                .OUT_W(AW), .SHIFT(SHIFT), .RELU(1'b1), .IDX_W(12), .DATA_W(CFG_DW))
    u_l2 (.clk, .rst_n, .cfg_we(we2), .cfg_idx(cfg.addr[11:0]), .cfg_data(cfg.data),
          .x(h1), .y(h2));

  dense_layer #(.N_IN(NH2), .N_OUT(NL),  .IN_W(AW), .W_W(W_W), .B_W(B_W),
                .OUT_W(AW), .SHIFT(SHIFT), .RELU(1'b0), .IDX_W(12), .DATA_W(CFG_DW))
    u_l3 (.clk, .rst_n, .cfg_we(we3), .cfg_idx(cfg.addr[11:0]), .cfg_data(cfg.data),
          .x(h2), .y(z));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mu_valid <= 1'b0;
      for (int k = 0; k < NL; k++) mu[k] <= '0;
    end else begin
      mu_valid <= in_valid;
      if (in_valid)
        for (int k = 0; k < NL; k++) mu[k] <= z[k];
    end
  end

endmodule
