// mlp: three-layer perceptron z_k = tanh( w_kj * tanh( w_ji * x_i ) ).
//
// The network of the paper: NIN inputs scaled to [-1,1], one hidden layer of
// NHID tanh neurons, NOUT tanh outputs, and a constant bias node (x_0 = 1) in
// front of each layer. All neurons of a layer are computed in parallel, every
// weight having its own multiplier (the paper's fully parallel implementation;
// the default 20-60 network needs 1200 + 61*NOUT multipliers of the target's
// 3600). The paper's 20-60-1 latency study is the default shape with NOUT=1;
// the prediction chain uses NOUT=2 (z and theta).
//
// Number format (this design's choice): weights, inputs and outputs are signed
// 16 bit with 12 fraction bits. Products are summed at full precision, the sum
// is shifted right by 12 (rounding towards minus infinity) and fed to tanh_lut.
//
// Weights live in registers loaded from the parameter memory, WPB weights per
// memory beat: beat b carries weights b*WPB .. b*WPB+WPB-1, weight k in bits
// 16k+15..16k. Weight order: hidden neuron j (0..NHID-1) has its bias at
// j*(NIN+1) and input weight i (1..NIN) at j*(NIN+1)+i; output k has its bias
// at NHID*(NIN+1) + k*(NHID+1) and hidden weight j+1 after it.
//
// Timing: `start` samples x; y is valid (out_valid high for one cycle) LAT = 5
// clocks later. Stages: input register, hidden sums, hidden tanh, output sums,
// output tanh. A new start may be given every clock. Weights must not change
// while a computation is in flight.
module mlp
  import nt_pkg::*;
#(
  parameter int NIN  = 20,
  parameter int NHID = 60,
  parameter int NOUT = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // weight load
  input  logic             wr_en,
  input  logic [15:0]      wr_beat,
  input  logic [MEM_W-1:0] wr_data,
  // computation
  input  logic             start,
  input  fx_t              x [NIN],
  output logic             out_valid,
  output fx_t              y [NOUT]
);

  localparam int NW   = mlp_nw(NIN, NHID, NOUT);
  localparam int OB   = NHID * (NIN + 1);          // first output-layer weight
  localparam int SW   = 2 * FX_W + 8;              // sum width
  localparam int AW   = SW - FX_FRAC;              // activation input width

  fx_t w [NW];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int k = 0; k < WPB; k++) begin
        if (int'(wr_beat) * WPB + k < NW)
          w[int'(wr_beat) * WPB + k] <= wr_data[k*FX_W +: FX_W];
      end
    end
  end

  logic [4:0]           v;
  fx_t                  x_q   [NIN];
  logic signed [AW-1:0] hsum  [NHID];
  fx_t                  h     [NHID];
  logic signed [AW-1:0] osum  [NOUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[3:0], start};
  end

  always_ff @(posedge clk) begin
    if (start) x_q <= x;
  end

  // hidden layer: bias + sum_i w_ji x_i
  always_ff @(posedge clk) begin
    for (int j = 0; j < NHID; j++) begin
      logic signed [SW-1:0] acc;
      acc = SW'(w[j*(NIN+1)]) <<< FX_FRAC;
      for (int i = 0; i < NIN; i++)
        acc += SW'(w[j*(NIN+1) + i + 1]) * SW'(x_q[i]);
      hsum[j] <= AW'(acc >>> FX_FRAC);
    end
  end

  for (genvar j = 0; j < NHID; j++) begin : g_hact
    tanh_lut #(.IN_W(AW)) u_act (.clk(clk), .x(hsum[j]), .y(h[j]));
  end

  // output layer: bias + sum_j w_kj h_j
  always_ff @(posedge clk) begin
    for (int k = 0; k < NOUT; k++) begin
      logic signed [SW-1:0] acc;
      acc = SW'(w[OB + k*(NHID+1)]) <<< FX_FRAC;
      for (int j = 0; j < NHID; j++)
        acc += SW'(w[OB + k*(NHID+1) + j + 1]) * SW'(h[j]);
      osum[k] <= AW'(acc >>> FX_FRAC);
    end
  end

  for (genvar k = 0; k < NOUT; k++) begin : g_oact
    tanh_lut #(.IN_W(AW)) u_act (.clk(clk), .x(osum[k]), .y(y[k]));
  end

  assign out_valid = v[4];

endmodule
