// conv_layer: a continuous-flow convolutional layer (k x k, zero padding
// P = (K-1)/2, stride S) built from KPUs.
//
// The layer receives NS interleaved input streams (NS = ceil(r_in), the input
// data rate in features per cycle). Stream s carries input channels
// s*C .. s*C+C-1, one per cycle in configuration order, so C = DIN/NS.
// Every filter f owns NS KPUs, one per stream, each switching between the C
// kernels of its channels; their outputs are added and accumulated over the
// C configurations by a chan_accum, the filter bias is added and ReLU with
// requantisation gives the 8-bit output. There are NS*DOUT KPUs in total.
// A conv_ctrl supplies the zero slots of the top/bottom padding, the
// column-dependent padding selects, the configuration index and the output
// validity.
//
// Weight (filter f, input channel ch, tap j) is param_byte(SEED,
// (f*DIN+ch)*K*K + j); the bias of filter f is param_byte(SEED+1000, f)
// scaled by 2^SHIFT, i.e. given in units of the output activation.
//
// Interface: in_valid/in_ready handshake on all NS streams at once, in_data
// is the current sample of each stream. out_valid pulses once per output
// pixel with the values of all DOUT filters on out_data. stall holds the
// layer (used for back-pressure from the FIFOs downstream).
// Latency: an output leaves 2 cycles after the enabled cycle in which the
// last sample of its window and last configuration entered.
//
// Lint note: all filters' accumulators produce the same valid strobe, so
// only filter 0's is used, and with one filter per accumulator (I = 1) the
// filter index output of chan_accum is left unread.
module conv_layer
  import cf_pkg::*;
#(
  parameter int unsigned F     = 12,
  parameter int unsigned K     = 5,
  parameter int unsigned P     = 2,
  parameter int unsigned S     = 1,
  parameter int unsigned DIN   = 8,
  parameter int unsigned DOUT  = 16,
  parameter int unsigned NS    = 2,
  parameter int unsigned SHIFT = 10,
  parameter int unsigned SEED  = 23
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [DW-1:0]  in_data [NS],
  input  logic                  stall,
  output logic                  out_valid,
  output logic signed [DW-1:0]  out_data [DOUT]
);
  localparam int unsigned C   = DIN / NS;          // kernels per KPU
  localparam int unsigned KK  = K * K;
  localparam int unsigned AW  = DW + WW + $clog2(KK);
  localparam int unsigned SW  = AW + $clog2(DIN) + 2;

  logic               en, zero, ov;
  logic [cw(C)-1:0]   cfg;
  logic [K-1:0]       pad;
  logic               v_q;
  logic [cw(C)-1:0]   cfg_q;

  conv_ctrl #(.F(F), .K(K), .P(P), .S(S), .C(C)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .stall(stall), .en(en), .zero(zero), .cfg(cfg), .pad(pad), .out_valid(ov)
  );

  // the KPU outputs are registered: delay the validity to match
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q   <= 1'b0;
      cfg_q <= '0;
    end else begin
      v_q <= ov;
      if (en) cfg_q <= cfg;
    end
  end

  logic signed [DW-1:0] xs [NS];
  for (genvar s = 0; s < int'(NS); s++) begin : g_x
    assign xs[s] = zero ? '0 : in_data[s];
  end

  logic [DOUT-1:0] fv;
  for (genvar f = 0; f < int'(DOUT); f++) begin : g_f
    logic signed [AW-1:0] ky [NS];
    logic signed [SW-1:0] acc;
    logic [0:0]           idx;
    for (genvar s = 0; s < int'(NS); s++) begin : g_s
      kpu #(.K(K), .F(F), .C(C), .SEED(SEED), .BASE((f * DIN + s * C) * KK), .AW(AW)) u_kpu (
        .clk(clk), .rst_n(rst_n), .en(en), .cfg(cfg), .x(xs[s]), .pad(pad), .y(ky[s])
      );
    end
    chan_accum #(.J(NS), .NACC(C), .I(1), .IW(AW), .OW(SW),
                 .BSEED(SEED + 1000), .BBASE(f), .BSH(SHIFT)) u_acc (
      .clk(clk), .rst_n(rst_n), .in_valid(v_q), .in_cfg(cfg_q), .in_data(ky),
      .out_valid(fv[f]), .out_idx(idx), .out_data(acc)
    );
    relu_requant #(.IW(SW), .OW(DW), .SHIFT(SHIFT), .RELU(1'b1)) u_act (
      .in(acc), .out(out_data[f])
    );
  end

  assign out_valid = fv[0];

  initial begin
    assert (DIN % NS == 0) else $error("conv_layer: DIN must be a multiple of NS");
  end
endmodule
