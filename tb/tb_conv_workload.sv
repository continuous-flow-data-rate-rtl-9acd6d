// tb_conv_workload: the evaluated single-layer workload, a 28x28 map with a
// 7x7 kernel (padding 3), 8 input and 16 output channels, built at two input
// data rates:
//   r_in = 2: NS = 2 streams, 32 KPUs, C = 4 kernels per KPU
//   r_in = 1: NS = 1 stream,  16 KPUs, C = 8 kernels per KPU
// (the r_in = 8 and 4 variants are the same RTL with NS = 8 or 4; they are
// left out only to keep the build short).
// Two frames are fed to each layer without gaps. Every output of every
// filter is compared with a direct convolution computed here. The test also
// checks the throughput the rate analysis predicts: a frame occupies
// C*(f*f + (f+1)*p) cycles, i.e. the full cycles of its data plus its
// padding slots, and the second frame's outputs must be spread over exactly
// that many cycles after the first frame's.
module tb_conv_workload;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  localparam int F = 28, K = 7, P = 3, DIN = 8, DOUT = 16, SH = 12, SEED = 51;
  localparam int NFR = 2;
  localparam int FRAME_SLOTS = F * F + (F + 1) * P;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int img [NFR][DIN][F][F];

  function automatic int ref_conv(int f, int r, int c, int fr);
    longint acc;
    acc = 0;
    for (int ch = 0; ch < DIN; ch++)
      for (int j = 0; j < K * K; j++) begin
        int rr, cc;
        rr = r + j / K - P; cc = c + j % K - P;
        if (rr >= 0 && rr < F && cc >= 0 && cc < F)
          acc += longint'(ref_param(SEED, (f * DIN + ch) * K * K + j)) * img[fr][ch][rr][cc];
      end
    acc += longint'(ref_param(SEED + 1000, f)) <<< SH;
    return int'(ref_requant(acc, SH, 1'b1, 8));
  endfunction

  initial begin
    for (int n = 0; n < NFR; n++)
      for (int ch = 0; ch < DIN; ch++)
        for (int r = 0; r < F; r++)
          for (int c = 0; c < F; c++)
            img[n][ch][r][c] = int'($urandom_range(0, 127));
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
  end

  // one layer per rate; drivers and checkers are identical apart from NS
  int nout [2] = '{0, 0};
  int first_out [2][NFR];

  for (genvar g = 0; g < 2; g++) begin : g_rate
    localparam int NS = (g == 0) ? 2 : 1;
    localparam int C  = DIN / NS;
    logic v, rdy, ov;
    logic signed [7:0] din [NS];
    logic signed [7:0] dout [DOUT];

    conv_layer #(.F(F), .K(K), .P(P), .S(1), .DIN(DIN), .DOUT(DOUT), .NS(NS),
                 .SHIFT(SH), .SEED(SEED)) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(v), .in_ready(rdy), .in_data(din),
      .stall(1'b0), .out_valid(ov), .out_data(dout)
    );

    // driver: stream s carries channel s*C+i in sub-slot i
    initial begin
      int p, i;
      p = 0; i = 0;
      v = 0; din = '{default: '0};
      @(posedge rst_n);
      while (p < NFR * F * F) begin
        v = 1;
        for (int s = 0; s < NS; s++)
          din[s] = 8'(img[p / (F * F)][s * C + i][(p % (F * F)) / F][p % F]);
        @(posedge clk);
        if (rdy) begin
          if (i == C - 1) begin i = 0; p++; end else i++;
        end
        #1;
      end
      v = 0;
    end

    // checker
    initial begin
      @(posedge rst_n);
      forever begin
        @(posedge clk); #1;
        if (ov) begin
          int fr, o;
          fr = nout[g] / (F * F); o = nout[g] % (F * F);
          if (o == 0 && fr < NFR) first_out[g][fr] = cyc;
          if (fr < NFR)
            for (int f = 0; f < DOUT; f++) begin
              int e;
              e = ref_conv(f, o / F, o % F, fr);
              checks++;
              if (int'(dout[f]) != e) begin
                failures++;
                if (failures < 10)
                  $display("r=%0d mismatch fr=%0d o=%0d f=%0d got=%0d exp=%0d", NS, fr, o, f, dout[f], e);
              end
            end
          nout[g]++;
        end
      end
    end
  end

  initial begin
    wait (nout[0] >= NFR * F * F && nout[1] >= NFR * F * F);
    repeat (20) @(posedge clk);
    for (int g = 0; g < 2; g++) begin
      int c, spacing;
      c = (g == 0) ? 4 : 8;
      spacing = first_out[g][1] - first_out[g][0];
      checks++;
      if (spacing != c * FRAME_SLOTS) begin
        failures++;
        $display("rate %0d: frame spacing %0d cycles, expected %0d", 2 - g, spacing, c * FRAME_SLOTS);
      end
      $display("rate %0d: %0d KPUs, frame spacing %0d cycles", 2 - g, 16 * (2 - g), spacing);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
