// tb_conv_layer: end-to-end test of a padded convolutional layer.
//
// Instance A reproduces the timing table of the padded 3x3 KPU on a 5x5
// map (P = 1, one input channel, two filters), fed without gaps for three
// frames: the first pixel must be taken 6 cycles after reset (six zero
// slots of top padding), the first output must leave at cycle 14 (window
// complete at cycle 12, plus the KPU and accumulator registers), and the 25
// outputs of a frame must leave in 25 consecutive cycles (continuous flow at
// the output).
// Instance B is an interleaved layer: 6x6 map, 4 input channels on 2 streams
// (C = 2 kernels per KPU), 3 filters, stride 2, with random input gaps and
// random stalls, over three frames.
// All output values are compared with a direct convolution computed here
// (zero padding, weights and biases from the reference parameter table,
// shift / ReLU / saturate).
module tb_conv_layer;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NFR = 3;

  // ---------------- reference ----------------
  function automatic int ref_conv(int seed, int shift, int F, int K, int P, int DIN,
                                  int f, int r, int c, ref int img [][][]);
    longint acc = 0;
    for (int ch = 0; ch < DIN; ch++)
      for (int j = 0; j < K * K; j++) begin
        int rr, cc;
        rr = r + j / K - P; cc = c + j % K - P;
        if (rr >= 0 && rr < F && cc >= 0 && cc < F)
          acc += longint'(ref_param(seed, (f * DIN + ch) * K * K + j)) * img[ch][rr][cc];
      end
    acc += longint'(ref_param(seed + 1000, f)) <<< shift;
    return int'(ref_requant(acc, shift, 1'b1, 8));
  endfunction

  // ---------------- instance A ----------------
  localparam int FA = 5, KA = 3, PA = 1, DA = 1, OA = 2, SHA = 6, SDA = 3;
  logic va, ra, ova;
  logic signed [7:0] ina [1];
  logic signed [7:0] outa [OA];
  conv_layer #(.F(FA), .K(KA), .P(PA), .S(1), .DIN(DA), .DOUT(OA), .NS(1),
               .SHIFT(SHA), .SEED(SDA)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(va), .in_ready(ra), .in_data(ina),
    .stall(1'b0), .out_valid(ova), .out_data(outa)
  );
  int imga [][][];
  int first_take_a = -1, first_out_a = -1, nouta = 0, last_out_a = -1, gaps_a = 0;

  // ---------------- instance B ----------------
  localparam int FB = 6, KB = 3, PB = 1, DB = 4, OB = 3, NSB = 2, CB = 2, SB = 2,
                 SHB = 7, SDB = 17;
  logic vb, rb, stb, ovb;
  logic signed [7:0] inb [NSB];
  logic signed [7:0] outb [OB];
  conv_layer #(.F(FB), .K(KB), .P(PB), .S(SB), .DIN(DB), .DOUT(OB), .NS(NSB),
               .SHIFT(SHB), .SEED(SDB)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(vb), .in_ready(rb), .in_data(inb),
    .stall(stb), .out_valid(ovb), .out_data(outb)
  );
  int imgb [][][];
  int noutb = 0, nstall_b = 0;

  int fra [NFR][][][];
  int frb [NFR][][][];

  initial begin
    for (int n = 0; n < NFR; n++) begin
      fra[n] = new[DA];
      foreach (fra[n][ch]) begin
        fra[n][ch] = new[FA];
        foreach (fra[n][ch][r]) begin
          fra[n][ch][r] = new[FA];
          foreach (fra[n][ch][r][c]) fra[n][ch][r][c] = int'($signed(8'($urandom)));
        end
      end
      frb[n] = new[DB];
      foreach (frb[n][ch]) begin
        frb[n][ch] = new[FB];
        foreach (frb[n][ch][r]) begin
          frb[n][ch][r] = new[FB];
          foreach (frb[n][ch][r][c]) frb[n][ch][r][c] = int'($urandom_range(0, 127));
        end
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
  end

  // driver A: always valid
  initial begin
    int p = 0;
    va = 0; ina[0] = 0;
    @(posedge rst_n);
    while (p < NFR * FA * FA) begin
      va = 1;
      ina[0] = 8'(fra[p / (FA * FA)][0][(p % (FA * FA)) / FA][p % FA]);
      @(posedge clk);
      if (ra) begin
        if (first_take_a < 0) first_take_a = cyc;
        p++;
      end
      #1;
    end
    va = 0;
  end

  // checker A
  initial begin
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (ova) begin
        int fr, o;
        fr = nouta / (FA * FA); o = nouta % (FA * FA);
        if (first_out_a < 0) first_out_a = cyc;
        if (o != 0 && last_out_a != cyc - 2) gaps_a++;
        last_out_a = cyc - 1;
        for (int f = 0; f < OA; f++) begin
          int e;
          e = ref_conv(SDA, SHA, FA, KA, PA, DA, f, o / FA, o % FA, fra[fr]);
          checks++;
          if (int'(outa[f]) != e) begin
            failures++;
            if (failures < 10) $display("A mismatch fr=%0d o=%0d f=%0d got=%0d exp=%0d", fr, o, f, outa[f], e);
          end
        end
        nouta++;
      end
    end
  end

  // driver B: random gaps and stalls, channel s*C+i on stream s in sub-slot i
  initial begin
    int p = 0, i = 0;
    vb = 0; stb = 0; inb = '{default: '0};
    @(posedge rst_n);
    while (p < NFR * FB * FB) begin
      vb  = ($urandom_range(0, 3) != 0);
      stb = ($urandom_range(0, 7) == 0);
      if (stb) nstall_b++;
      for (int s = 0; s < NSB; s++)
        inb[s] = 8'(frb[p / (FB * FB)][s * CB + i][(p % (FB * FB)) / FB][p % FB]);
      @(posedge clk);
      if (vb && rb) begin
        if (i == CB - 1) begin i = 0; p++; end else i++;
      end
      #1;
    end
    vb = 0; stb = 0;
    // flush: the trailing zero slots run without input
  end

  // checker B: wanted outputs are rows/cols multiple of SB, raster order
  initial begin
    localparam int NO = ((FB + SB - 1) / SB);
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (ovb) begin
        int fr, o, r, c;
        fr = noutb / (NO * NO); o = noutb % (NO * NO);
        r = (o / NO) * SB; c = (o % NO) * SB;
        for (int f = 0; f < OB; f++) begin
          int e;
          e = ref_conv(SDB, SHB, FB, KB, PB, DB, f, r, c, frb[fr]);
          checks++;
          if (int'(outb[f]) != e) begin
            failures++;
            if (failures < 10) $display("B mismatch fr=%0d r=%0d c=%0d f=%0d got=%0d exp=%0d", fr, r, c, f, outb[f], e);
          end
        end
        noutb++;
      end
    end
  end

  initial begin
    localparam int NO = ((FB + SB - 1) / SB);
    wait (nouta == NFR * FA * FA && noutb == NFR * NO * NO);
    repeat (50) @(posedge clk);
    checks += 6;
    if (first_take_a != 6)  begin failures++; $display("A first pixel taken at %0d, expected 6", first_take_a); end
    if (first_out_a != 14)  begin failures++; $display("A first output at %0d, expected 14", first_out_a); end
    if (gaps_a != 0)        begin failures++; $display("A output not continuous (%0d gaps)", gaps_a); end
    if (nouta != NFR * FA * FA) failures++;
    if (noutb != NFR * NO * NO) failures++;
    if (nstall_b == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
