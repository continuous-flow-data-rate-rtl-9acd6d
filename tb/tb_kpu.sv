// tb_kpu: self-checking test of the interleaved, padded KPU.
//
// A 3x3 KPU on 5-pixel rows with C = 2 configurations receives a random
// interleaved stream (two channels, random padding selects per pixel,
// random stall cycles). For every enabled cycle whose window lies wholly in
// the stream, the registered output of the next cycle is compared with the
// window sum worked out here from the stream history: taps (r,c) take pixel
// m - (K-1-r)*F - (K-1-c) of the same channel, masked by the pad bit that
// pixel had for column c. The check is made right after the enabling clock
// edge (one-cycle latency) and again one disabled cycle later (hold).
module tb_kpu;
  import tb_ref_pkg::*;
  localparam int K = 3, F = 5, C = 2, SEED = 5, BASE = 7, KK = K * K;
  localparam int AW = 8 + 8 + 4;
  localparam int NPIX = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en;
  logic [0:0] cfg;
  logic signed [7:0] x;
  logic [K-1:0] pad;
  logic signed [AW-1:0] y;

  kpu #(.K(K), .F(F), .C(C), .SEED(SEED), .BASE(BASE), .AW(AW)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .cfg(cfg), .x(x), .pad(pad), .y(y)
  );

  int checks = 0, failures = 0;
  int xs [C][NPIX];
  bit [K-1:0] ps [NPIX];

  function automatic longint expect_y(int i, int m);
    longint s = 0;
    for (int j = 0; j < KK; j++) begin
      int r = j / K, c = j % K;
      int mj = m - (K - 1 - r) * F - (K - 1 - c);
      if (ps[mj][c]) s += longint'(ref_param(SEED, BASE + i * KK + j)) * xs[i][mj];
    end
    return s;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NPIX; m++) begin
      ps[m] = K'($urandom);
      for (int i = 0; i < C; i++) xs[i][m] = int'($signed(8'($urandom)));
    end
    en = 0; cfg = 0; x = 0; pad = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < NPIX; m++) begin
      for (int i = 0; i < C; i++) begin
        // random stall cycles
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk); en = 0; x = 8'($urandom);
          @(posedge clk); #1;
        end
        @(negedge clk);
        en = 1; cfg = 1'(i); x = 8'(xs[i][m]); pad = ps[m];
        @(posedge clk); #1;
        if (m >= (K - 1) * F + K - 1) begin
          checks++;
          if (longint'(y) != expect_y(i, m)) begin
            failures++;
            if (failures < 10) $display("kpu mismatch m=%0d i=%0d y=%0d exp=%0d", m, i, y, expect_y(i, m));
          end
        end
        @(negedge clk); en = 0;
        // output must hold while disabled
        @(posedge clk); #1;
        if (m >= (K - 1) * F + K - 1) begin
          checks++;
          if (longint'(y) != expect_y(i, m)) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
