// tb_pool_layer: test of strided max-pooling layers over several frames.
//
// Instance A: 2x2 pooling, stride 2, 8x8 frames, 2 PPUs without
// interleaving. Instance B: 3x3 pooling, stride 3, 6x6 frames, 2 PPUs with
// C = 2 interleaved channels (stream s, step i = channel s*2+i), random
// input gaps and stalls. Every output is compared with the window maximum
// computed here; the number of outputs per frame must be (F/S)^2 per
// channel, and instance A's output must follow the last pixel of its
// window by exactly one cycle.
module tb_pool_layer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam int NFR = 3;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_max(int K, int r0, int c0, ref int img [][]);
    int m = -1000;
    for (int r = 0; r < K; r++) for (int c = 0; c < K; c++)
      if (img[r0 + r][c0 + c] > m) m = img[r0 + r][c0 + c];
    return m;
  endfunction

  // ---- A ----
  localparam int FA = 8, KA = 2, SA = 2, NA = 2;
  logic va, ra, ova; logic [0:0] cfa;
  logic signed [7:0] ina [NA], outa [NA];
  pool_layer #(.F(FA), .K(KA), .S(SA), .NS(NA), .C(1)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(va), .in_ready(ra), .in_data(ina), .stall(1'b0),
    .out_valid(ova), .out_cfg(cfa), .out_data(outa));
  // ---- B ----
  localparam int FB = 6, KB = 3, SB = 3, NB = 2, CB = 2;
  logic vb, rb, stb, ovb; logic [0:0] cfb;
  logic signed [7:0] inb [NB], outb [NB];
  pool_layer #(.F(FB), .K(KB), .S(SB), .NS(NB), .C(CB)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(vb), .in_ready(rb), .in_data(inb), .stall(stb),
    .out_valid(ovb), .out_cfg(cfb), .out_data(outb));

  int fa [NFR][NA][][];
  int fb [NFR][NB*CB][][];
  int nouta = 0, noutb = 0, lat_bad = 0, want_cyc = -1;

  initial begin
    for (int n = 0; n < NFR; n++) begin
      for (int ch = 0; ch < NA; ch++) begin
        fa[n][ch] = new[FA];
        foreach (fa[n][ch][r]) begin
          fa[n][ch][r] = new[FA];
          foreach (fa[n][ch][r][c]) fa[n][ch][r][c] = int'($signed(8'($urandom)));
        end
      end
      for (int ch = 0; ch < NB * CB; ch++) begin
        fb[n][ch] = new[FB];
        foreach (fb[n][ch][r]) begin
          fb[n][ch][r] = new[FB];
          foreach (fb[n][ch][r][c]) fb[n][ch][r][c] = int'($signed(8'($urandom)));
        end
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
  end

  initial begin  // driver A, continuous
    va = 0; ina = '{default: '0};
    @(posedge rst_n);
    for (int p = 0; p < NFR * FA * FA; p++) begin
      int r, c;
      r = (p % (FA * FA)) / FA; c = p % FA;
      va = 1;
      for (int s = 0; s < NA; s++) ina[s] = 8'(fa[p / (FA * FA)][s][r][c]);
      @(posedge clk);
      want_cyc = (r % SA == SA - 1 && c % SA == SA - 1) ? 1 : 0;
      #1;
      checks++;
      if (ova != want_cyc[0]) lat_bad++;
    end
    va = 0;
  end

  initial begin  // checker A
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (ova) begin
        int fr, o, no;
        no = FA / SA;
        fr = nouta / (no * no); o = nouta % (no * no);
        for (int s = 0; s < NA; s++) begin
          checks++;
          if (int'(outa[s]) != ref_max(KA, (o / no) * SA, (o % no) * SA, fa[fr][s])) begin
            failures++;
            if (failures < 10) $display("A mismatch fr=%0d o=%0d s=%0d", fr, o, s);
          end
        end
        nouta++;
      end
    end
  end

  initial begin  // driver B
    int p = 0, i = 0;
    vb = 0; stb = 0; inb = '{default: '0};
    @(posedge rst_n);
    while (p < NFR * FB * FB) begin
      vb = ($urandom_range(0, 3) != 0);
      stb = ($urandom_range(0, 5) == 0);
      for (int s = 0; s < NB; s++)
        inb[s] = 8'(fb[p / (FB * FB)][s * CB + i][(p % (FB * FB)) / FB][p % FB]);
      @(posedge clk);
      if (vb && rb) begin if (i == CB - 1) begin i = 0; p++; end else i++; end
      #1;
    end
    vb = 0; stb = 0;
  end

  initial begin  // checker B
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (ovb) begin
        int fr, o, i, no;
        no = FB / SB;
        fr = noutb / (no * no * CB); o = (noutb / CB) % (no * no); i = noutb % CB;
        checks++;
        if (int'(cfb) != i) failures++;
        for (int s = 0; s < NB; s++) begin
          checks++;
          if (int'(outb[s]) != ref_max(KB, (o / no) * SB, (o % no) * SB, fb[fr][s * CB + i])) begin
            failures++;
            if (failures < 10) $display("B mismatch fr=%0d o=%0d i=%0d s=%0d", fr, o, i, s);
          end
        end
        noutb++;
      end
    end
  end

  initial begin
    wait (nouta == NFR * (FA / SA) * (FA / SA) && noutb == NFR * (FB / SB) * (FB / SB) * CB);
    repeat (20) @(posedge clk);
    checks += 3;
    if (lat_bad != 0) begin failures++; $display("A output timing wrong in %0d cycles", lat_bad); end
    if (nouta != NFR * (FA / SA) * (FA / SA)) failures++;
    if (noutb != NFR * (FB / SB) * (FB / SB) * CB) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
