// fcu: fully connected unit computing H neurons from DIN input features that
// arrive J at a time.
//
// A group of J features is loaded into the input registers and held for H
// cycles. In cycle n of a group the J features are multiplied by the weights
// of configuration g*H+n (g = group number) from per-input ROMs, the
// products are summed by an adder tree, and the sum is added to the running
// sum of neuron n, read from an H-deep register buffer (hD); for the first
// group the running sum is taken as zero. There are C = H*DIN/J weight
// configurations. While the last group is processed, the H finished neuron
// sums leave one per cycle, so the unit has a continuous output even though
// its input arrives in bursts.
//
// Weight (neuron NBASE+n, feature idx) is param_byte(SEED, (NBASE+n)*DIN +
// idx); feature idx = g*J + lane.
//
// Interface: in_valid/in_ready handshake for groups; in_ready is high when
// no group is held or the held group is in its last cycle. out_valid is
// registered: it pulses H times per DIN features, with out_idx = n.
module fcu
  import cf_pkg::*;
#(
  parameter int unsigned J     = 4,
  parameter int unsigned H     = 5,
  parameter int unsigned DIN   = 256,
  parameter int unsigned SEED  = 37,
  parameter int unsigned NBASE = 0,
  parameter int unsigned AW    = DW + WW + $clog2(DIN)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [DW-1:0]  in_data [J],
  output logic                  out_valid,
  output logic [cw(H)-1:0]      out_idx,
  output logic signed [AW-1:0]  out_data
);
  localparam int unsigned G  = DIN / J;   // groups per input vector
  localparam int unsigned NC = H * G;     // weight configurations

  logic signed [DW-1:0] xh [J];
  logic                 hold;
  logic [cw(H)-1:0]     n;
  logic [cw(G)-1:0]     g;
  logic [cw(NC)-1:0]    cfg;
  logic signed [WW-1:0] rom [NC][J];
  logic signed [AW-1:0] p, q, acc;
  logic                 last_n;

  for (genvar gi = 0; gi < int'(G); gi++) begin : g_g
    for (genvar ni = 0; ni < int'(H); ni++) begin : g_n
      for (genvar li = 0; li < int'(J); li++) begin : g_l
        localparam logic signed [WW-1:0] V =
          param_byte(SEED, (NBASE + ni) * DIN + gi * J + li);
        assign rom[gi * H + ni][li] = V;
      end
    end
  end

  assign cfg = cw(NC)'(int'(g) * int'(H) + int'(n));

  always_comb begin
    p = '0;
    for (int l = 0; l < int'(J); l++) p += AW'(xh[l] * rom[cfg][l]);
  end

  delay_line #(.W(AW), .DEPTH(H)) u_hd (
    .clk(clk), .rst_n(rst_n), .en(hold), .d(acc), .q(q)
  );

  assign acc      = (g == '0) ? p : q + p;
  assign last_n   = (n == cw(H)'(H - 1));
  assign in_ready = !hold || last_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold      <= 1'b0;
      n         <= '0;
      g         <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
      for (int l = 0; l < int'(J); l++) xh[l] <= '0;
    end else begin
      out_valid <= hold && (g == cw(G)'(G - 1));
      if (hold) begin
        out_idx  <= n;
        out_data <= acc;
      end
      if (hold) begin
        if (last_n) begin
          n <= '0;
          g <= (g == cw(G)'(G - 1)) ? '0 : g + 1'b1;
          hold <= 1'b0;
        end else n <= n + 1'b1;
      end
      if (in_valid && in_ready) begin
        hold <= 1'b1;
        for (int l = 0; l < int'(J); l++) xh[l] <= in_data[l];
      end
    end
  end

  initial begin
    assert (DIN % J == 0) else $error("fcu: DIN must be a multiple of J");
  end
endmodule
