// tb_ppu: self-checking test of the interleaved max-pooling unit.
//
// A 3x3 PPU on 6-pixel rows with C = 2 interleaved channels gets a random
// stream with random stall cycles. After every enabled cycle whose window
// lies in the stream, y must equal the maximum of the K*K samples
// m - (K-1-r)*F - (K-1-c) of the same channel, worked out from the stream
// history, and must hold over a following disabled cycle.
module tb_ppu;
  localparam int K = 3, F = 6, C = 2, NPIX = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic en;
  logic signed [7:0] x, y;

  ppu #(.K(K), .F(F), .C(C)) dut (.clk(clk), .rst_n(rst_n), .en(en), .x(x), .y(y));

  int checks = 0, failures = 0;
  int xs [C][NPIX];

  function automatic int expect_y(int i, int m);
    int mx = -1000;
    for (int j = 0; j < K * K; j++) begin
      int mj = m - (K - 1 - j / K) * F - (K - 1 - j % K);
      if (xs[i][mj] > mx) mx = xs[i][mj];
    end
    return mx;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NPIX; m++)
      for (int i = 0; i < C; i++) xs[i][m] = int'($signed(8'($urandom)));
    en = 0; x = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < NPIX; m++) begin
      for (int i = 0; i < C; i++) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk); en = 0; x = 8'($urandom);
          @(posedge clk); #1;
        end
        @(negedge clk); en = 1; x = 8'(xs[i][m]);
        @(posedge clk); #1;
        if (m >= (K - 1) * F + K - 1) begin
          checks++;
          if (int'(y) != expect_y(i, m)) begin
            failures++;
            if (failures < 10) $display("ppu mismatch m=%0d i=%0d y=%0d exp=%0d", m, i, y, expect_y(i, m));
          end
        end
        @(negedge clk); en = 0;
        @(posedge clk); #1;
        if (m >= (K - 1) * F + K - 1) begin
          checks++;
          if (int'(y) != expect_y(i, m)) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
