// fc_layer: continuous-flow fully connected layer.
//
// Groups of J features (one per input lane) are written into a FIFO, which
// absorbs the bursts in which the pooling layer in front delivers them. All
// DOUT/H FCUs read the same group at the same time, FCU u computing neurons
// u*H .. u*H+H-1. The finished sums are rescaled and saturated to OUT_W bits
// (no activation: this is the classifier output).
//
// Interface: in_valid writes in_data into the FIFO; almost_full asks the
// producer to stall. out_valid pulses H times per input vector; in each
// pulse out_data[u] is neuron u*H + out_idx.
//
// Lint note: the FCUs run in lockstep, so only the ready and valid of FCU 0
// are used; those of the other FCUs are equal and left unread. The FIFO
// assertions make verilator report rst_n as sync and async (see sync_fifo).
module fc_layer
  import cf_pkg::*;
#(
  parameter int unsigned DIN   = 256,
  parameter int unsigned DOUT  = 10,
  parameter int unsigned J     = 4,
  parameter int unsigned H     = 5,
  parameter int unsigned DEPTH = 32,
  parameter int unsigned SHIFT = 7,
  parameter int unsigned SEED  = 37
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [DW-1:0]    in_data [J],
  output logic                    almost_full,
  output logic                    out_valid,
  output logic [cw(H)-1:0]        out_idx,
  output logic signed [OUT_W-1:0] out_data [DOUT/H]
);
  localparam int unsigned NF = DOUT / H;
  localparam int unsigned AW = DW + WW + $clog2(DIN);

  logic [J*DW-1:0]      wd, rdw;
  logic                 emp, full_unused;
  logic signed [DW-1:0] grp [J];
  logic [NF-1:0]        rdy, ov;
  logic [cw(H)-1:0]     oi [NF];
  logic                 take;

  for (genvar l = 0; l < int'(J); l++) begin : g_l
    assign wd[l*DW +: DW] = in_data[l];
    assign grp[l]         = rdw[l*DW +: DW];
  end

  sync_fifo #(.W(J*DW), .DEPTH(DEPTH), .AF_MARGIN(6)) u_fifo (
    .clk(clk), .rst_n(rst_n), .wr_en(in_valid), .wr_data(wd), .rd_en(take),
    .rd_data(rdw), .empty(emp), .full(full_unused), .almost_full(almost_full)
  );

  // all FCUs run in lockstep, so they are ready together
  assign take = !emp && rdy[0];

  for (genvar u = 0; u < int'(NF); u++) begin : g_fcu
    logic signed [AW-1:0] y;
    fcu #(.J(J), .H(H), .DIN(DIN), .SEED(SEED), .NBASE(u * H), .AW(AW)) u_fcu (
      .clk(clk), .rst_n(rst_n), .in_valid(take), .in_ready(rdy[u]), .in_data(grp),
      .out_valid(ov[u]), .out_idx(oi[u]), .out_data(y)
    );
    relu_requant #(.IW(AW), .OW(OUT_W), .SHIFT(SHIFT), .RELU(1'b0)) u_q (
      .in(y), .out(out_data[u])
    );
  end

  assign out_valid = ov[0];
  assign out_idx   = oi[0];

  initial begin
    assert (DOUT % H == 0) else $error("fc_layer: DOUT must be a multiple of H");
  end
endmodule
