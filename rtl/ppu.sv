// ppu: pooling processing unit, k x k max pooling in the same transposed
// structure as the KPU, with C interleaved channels.
//
// Tap 0 passes the sample; tap j > 0 takes the maximum of the delayed
// result of tap j-1 and the current sample. The delay is C registers within
// a window row and a C*(F-K+1) line buffer between window rows, so the unit
// has K*K-1 MAX units and the register count of a KPU. For K = 2, C = 1 this
// is D - MAX - LD - MAX - D - MAX.
//
// Timing: y is registered; the maximum of the window whose bottom-right
// sample entered in an enabled cycle appears after that clock edge. Which
// windows are wanted (stride, borders) is decided by pool_layer.
module ppu
  import cf_pkg::*;
#(
  parameter int unsigned K = 2,
  parameter int unsigned F = 24,
  parameter int unsigned C = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  localparam int unsigned KK = K * K;
  localparam int unsigned L  = F - K + 1;

  logic signed [DW-1:0] a  [KK];
  logic signed [DW-1:0] dq [KK];

  assign a[0] = x;
  for (genvar j = 1; j < int'(KK); j++) begin : g_tap
    localparam int unsigned DLY = ((j % K) == 0) ? C * L : C;
    delay_line #(.W(DW), .DEPTH(DLY)) u_d (
      .clk(clk), .rst_n(rst_n), .en(en), .d(a[j-1]), .q(dq[j])
    );
    assign a[j] = (dq[j] > x) ? dq[j] : x;   // MAX unit
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= a[KK-1];
  end
endmodule
