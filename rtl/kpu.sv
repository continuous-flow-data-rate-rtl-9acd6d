// kpu: kernel processing unit, a k x k convolution in transposed form with
// implicit zero padding and C interleaved weight configurations.
//
// Every enabled cycle the input sample x is multiplied by all K*K weights of
// the current configuration cfg. Product j (row r = j/K, column c = j%K of the
// kernel) is added to the partial sum of the previous tap, which waits in a
// C-deep register (within a kernel row) or in a C*(F-K+1)-deep line buffer
// (between kernel rows). With C = 1 this is the plain row-buffered KPU of
// k^2 multipliers, k^2-1 adders, k(k-1) registers and k-1 line buffers; with
// C > 1 every register becomes a C-deep shift register, so C interleaved
// input channels, each with its own kernel, share the arithmetic.
// pad[c] gates the sample into the multipliers of kernel column c (a 2:1
// mux to zero), which implements zero padding at the left and right border
// without breaking the input flow; the controller derives pad from the
// column of the current pixel.
//
// Timing: y is registered. The window sum whose last (bottom-right) sample is
// presented in an enabled cycle appears on y after that clock edge and is
// held until the next enabled cycle. All state advances only when en is high.
module kpu
  import cf_pkg::*;
#(
  parameter int unsigned K    = 3,
  parameter int unsigned F    = 5,
  parameter int unsigned C    = 1,
  parameter int unsigned SEED = 1,
  parameter int unsigned BASE = 0,
  parameter int unsigned AW   = DW + WW + $clog2(K * K)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  en,
  input  logic [cw(C)-1:0]      cfg,
  input  logic signed [DW-1:0]  x,
  input  logic [K-1:0]          pad,
  output logic signed [AW-1:0]  y
);
  localparam int unsigned KK = K * K;
  localparam int unsigned L  = F - K + 1;   // line-buffer length per channel

  logic signed [WW-1:0] w [KK];
  logic signed [AW-1:0] prod [KK];
  logic signed [AW-1:0] a    [KK];          // a_{r,c}: adder outputs
  logic signed [AW-1:0] dq   [KK];          // delayed partial sums

  weight_rom #(.N(KK), .DEPTH(C), .SEED(SEED), .BASE(BASE)) u_rom (
    .addr(cfg), .w(w)
  );

  always_comb begin
    for (int j = 0; j < int'(KK); j++) begin
      logic signed [DW-1:0] xm;
      xm      = pad[j % K] ? x : '0;          // padding multiplexer
      prod[j] = AW'(xm * w[j]);
    end
  end

  assign a[0] = prod[0];
  for (genvar j = 1; j < int'(KK); j++) begin : g_tap
    localparam int unsigned DLY = ((j % K) == 0) ? C * L : C;
    delay_line #(.W(AW), .DEPTH(DLY)) u_d (
      .clk(clk), .rst_n(rst_n), .en(en), .d(a[j-1]), .q(dq[j])
    );
    assign a[j] = dq[j] + prod[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  y <= '0;
    else if (en) y <= a[KK-1];
  end

  initial begin
    assert (F >= K) else $error("kpu: feature map smaller than kernel");
  end
endmodule
