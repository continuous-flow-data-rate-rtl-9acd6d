// cnn_top: the five-layer continuous-flow CNN of the running example,
//   C1 conv 5x5, 1 -> 8 channels, 24x24, padding 2     (8 KPUs, r = 1 -> 8)
//   P1 max pool 2x2, stride 2                           (8 PPUs, r = 8 -> 2)
//   C2-IL interleave 8 channels into 2 streams          (8 FIFOs, 2 4:1 muxes)
//   C2 conv 5x5, 8 -> 16 channels, 12x12, padding 2    (32 KPUs, C = 4, r = 2 -> 4)
//   P1-IL interleave 16 channels into 4 streams         (16 FIFOs, 4 4:1 muxes)
//   P2 max pool 3x3, stride 3                           (4 PPUs, C = 4, r = 4 -> 4/9)
//   F1 fully connected 256 -> 10                        (2 FCUs, j = 4, h = 5)
//
// The input image (24x24, one 8-bit channel) enters one pixel per accepted
// cycle on in_valid/in_ready, in raster order, frame after frame. Every
// layer's unit count follows its input data rate, so the arithmetic units
// are busy nearly every cycle. The ten 12-bit class scores leave as five
// pulses of out_valid per frame; in pulse n, out_data[0] is score n and
// out_data[1] is score 5+n.
//
// Flow control: each interleaver and the F1 FIFO raise almost_full, which
// stalls the layer feeding them (C1, C2 and P2 respectively); a stalled C1
// drops in_ready. In steady state only the zero slots of the padded
// convolutions cost throughput. stall_c1/stall_c2/stall_p2 expose these
// events for observation.
//
// Lint note: rst_n is reported as both synchronous and asynchronous only
// because of the FIFO protocol assertions (see sync_fifo).
module cnn_top
  import cf_pkg::*;
#(
  parameter int unsigned IL2_DEPTH = 16,   // C2-IL FIFO depth
  parameter int unsigned IL3_DEPTH = 16,   // P1-IL FIFO depth
  parameter int unsigned F1_DEPTH  = 32    // F1 input FIFO depth (groups)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic signed [DW-1:0]    in_data,
  output logic                    out_valid,
  output logic [2:0]              out_idx,
  output logic signed [OUT_W-1:0] out_data [2],
  output logic                    stall_c1,
  output logic                    stall_c2,
  output logic                    stall_p2
);
  // ---- C1 ----
  logic signed [DW-1:0] c1_in [1];
  logic                 c1_v;
  logic signed [DW-1:0] c1_y [8];
  logic                 il2_af;

  assign c1_in[0] = in_data;
  assign stall_c1 = il2_af;

  conv_layer #(.F(24), .K(5), .P(2), .S(1), .DIN(1), .DOUT(8), .NS(1),
               .SHIFT(9), .SEED(11)) u_c1 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .in_data(c1_in), .stall(il2_af), .out_valid(c1_v), .out_data(c1_y)
  );

  // ---- P1 ----
  logic                 p1_v, p1_rdy_unused;
  logic [0:0]           p1_cfg_unused;
  logic signed [DW-1:0] p1_y [8];

  pool_layer #(.F(24), .K(2), .S(2), .NS(8), .C(1)) u_p1 (
    .clk(clk), .rst_n(rst_n), .in_valid(c1_v), .in_ready(p1_rdy_unused),
    .in_data(c1_y), .stall(1'b0), .out_valid(p1_v), .out_cfg(p1_cfg_unused),
    .out_data(p1_y)
  );

  // ---- C2-IL ----
  logic                 il2_v, c2_rdy;
  logic [1:0]           il2_cfg_unused;
  logic signed [DW-1:0] il2_y [2];

  interleaver #(.NIN(8), .NOUT(2), .STRIDED(1'b0), .DEPTH(IL2_DEPTH), .AF_MARGIN(6)) u_il2 (
    .clk(clk), .rst_n(rst_n), .in_valid(p1_v), .in_data(p1_y),
    .almost_full(il2_af), .out_valid(il2_v), .out_ready(c2_rdy),
    .out_cfg(il2_cfg_unused), .out_data(il2_y)
  );

  // ---- C2 ----
  logic                 c2_v, il3_af;
  logic signed [DW-1:0] c2_y [16];

  assign stall_c2 = il3_af;

  conv_layer #(.F(12), .K(5), .P(2), .S(1), .DIN(8), .DOUT(16), .NS(2),
               .SHIFT(10), .SEED(23)) u_c2 (
    .clk(clk), .rst_n(rst_n), .in_valid(il2_v), .in_ready(c2_rdy),
    .in_data(il2_y), .stall(il3_af), .out_valid(c2_v), .out_data(c2_y)
  );

  // ---- P1-IL (interleaving in front of P2) ----
  logic                 il3_v, p2_rdy;
  logic [1:0]           il3_cfg_unused;
  logic signed [DW-1:0] il3_y [4];

  interleaver #(.NIN(16), .NOUT(4), .STRIDED(1'b1), .DEPTH(IL3_DEPTH), .AF_MARGIN(6)) u_il3 (
    .clk(clk), .rst_n(rst_n), .in_valid(c2_v), .in_data(c2_y),
    .almost_full(il3_af), .out_valid(il3_v), .out_ready(p2_rdy),
    .out_cfg(il3_cfg_unused), .out_data(il3_y)
  );

  // ---- P2 ----
  logic                 p2_v, f1_af;
  logic [1:0]           p2_cfg_unused;
  logic signed [DW-1:0] p2_y [4];

  assign stall_p2 = f1_af;

  pool_layer #(.F(12), .K(3), .S(3), .NS(4), .C(4)) u_p2 (
    .clk(clk), .rst_n(rst_n), .in_valid(il3_v), .in_ready(p2_rdy),
    .in_data(il3_y), .stall(f1_af), .out_valid(p2_v), .out_cfg(p2_cfg_unused),
    .out_data(p2_y)
  );

  // ---- F1 ----
  fc_layer #(.DIN(256), .DOUT(10), .J(4), .H(5), .DEPTH(F1_DEPTH), .SHIFT(7), .SEED(37)) u_f1 (
    .clk(clk), .rst_n(rst_n), .in_valid(p2_v), .in_data(p2_y),
    .almost_full(f1_af), .out_valid(out_valid), .out_idx(out_idx),
    .out_data(out_data)
  );
endmodule
