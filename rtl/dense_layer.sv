// dense_layer: one fully parallel fully-connected layer of a quantized network.
//
// Function: for every output neuron o
//     acc[o] = b[o] + sum_i W[o][i] * x[i]
//     y[o]   = sat_OUT_W( act( acc[o] >>> SHIFT ) )
// where act is ReLU when RELU=1 and the identity otherwise, >>> is an
// arithmetic (floor) shift and sat_OUT_W clamps to the signed OUT_W range.
// All N_IN*N_OUT products are formed in parallel, so a new input vector can be
// presented every clock (initiation interval 1). The datapath from x to y is
// combinational; the enclosing block decides where pipeline registers go.
//
// Weights and biases live in registers written over a simple word-wide
// configuration port (cfg_we, cfg_idx, cfg_data): index o*N_IN+i loads W[o][i]
// from cfg_data[W_W-1:0]; index N_IN*N_OUT+o loads b[o] from cfg_data[B_W-1:0].
// Reset clears every weight and bias. Writes to other indices are ignored.
//
// The published design only says the encoder is a dense feed-forward network
// deployed as fully parallel FPGA logic; the fixed-point formats, the
// shift-and-saturate requantization and the loadable weight store are this
// implementation's choices (the original firmware has the trained weights
// built in as constants).
module dense_layer #(
  parameter int unsigned N_IN   = 57,
  parameter int unsigned N_OUT  = 32,
  parameter int unsigned IN_W   = 13,
  parameter int unsigned W_W    = 8,
  parameter int unsigned B_W    = 24,
  parameter int unsigned OUT_W  = 14,
  parameter int unsigned SHIFT  = 6,
  parameter bit          RELU   = 1'b1,
  parameter int unsigned IDX_W  = 12,
  parameter int unsigned DATA_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     cfg_we,
  input  logic [IDX_W-1:0]         cfg_idx,
  input  logic [DATA_W-1:0]        cfg_data,
  input  logic signed [IN_W-1:0]   x [N_IN],
  output logic signed [OUT_W-1:0]  y [N_OUT]
);

  localparam int unsigned PROD_W = IN_W + W_W + $clog2(N_IN) + 1;
  localparam int unsigned ACC_W  = ((PROD_W > B_W) ? PROD_W : B_W) + 1;
  localparam int unsigned N_W    = N_IN * N_OUT;

  localparam logic signed [ACC_W-1:0] OUT_MAX = ACC_W'((longint'(1) <<< (OUT_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] OUT_MIN = -ACC_W'(longint'(1) <<< (OUT_W-1));

  initial begin
    assert (N_W + N_OUT <= (1 << IDX_W))
      else $fatal(1, "dense_layer: %0d weights+biases do not fit the %0d-bit index", N_W + N_OUT, IDX_W);
    assert (W_W <= DATA_W && B_W <= DATA_W)
      else $fatal(1, "dense_layer: weight or bias wider than the configuration word");
  end

  // ---- one row of weights, products and accumulator per output ---------
  for (genvar o = 0; o < N_OUT; o++) begin : g_row
    logic signed [B_W-1:0]   b;
    logic signed [ACC_W-1:0] prod [N_IN];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                        b <= '0;
      else if (cfg_we && cfg_idx == IDX_W'(N_W + o))     b <= B_W'(cfg_data);
    end

    for (genvar i = 0; i < N_IN; i++) begin : g_col
      logic signed [W_W-1:0] w;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)                                          w <= '0;
        else if (cfg_we && cfg_idx == IDX_W'(o * N_IN + i))  w <= W_W'(cfg_data);
      end
      assign prod[i] = ACC_W'(x[i] * w);
    end

    // sum, shift, activation, saturation for output o
    always_comb begin
      logic signed [ACC_W-1:0] acc;
      logic signed [ACC_W-1:0] sh;
      acc = ACC_W'(b);
      for (int i = 0; i < N_IN; i++) acc = acc + prod[i];
      sh = acc >>> SHIFT;
      if (RELU && sh < 0)        sh = '0;
      if (sh > OUT_MAX)          y[o] = OUT_MAX[OUT_W-1:0];
      else if (sh < OUT_MIN)     y[o] = OUT_MIN[OUT_W-1:0];
      else                       y[o] = sh[OUT_W-1:0];
    end
  end

endmodule
