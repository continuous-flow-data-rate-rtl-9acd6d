// tb_fc_layer: test of a fully connected layer of two FCUs behind a FIFO.
//
// 16 features in groups of 4 lanes, 4 neurons computed by 2 FCUs of h = 2.
// Groups arrive in random bursts (faster than the FCUs consume them, so the
// FIFO fills); the producer honours almost_full, which must rise at least
// once. Every output pair (neuron n and 2+n) is compared with the dot
// product from the reference weight table, rescaled and saturated to 12
// bits.
module tb_fc_layer;
  import tb_ref_pkg::*;
  localparam int DIN = 16, DOUT = 4, J = 4, H = 2, SH = 4, SEED = 31, NV = 30;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, naf = 0, nout = 0;

  logic v, af, ov; logic [0:0] oi;
  logic signed [7:0] in [J];
  logic signed [11:0] od [DOUT / H];

  fc_layer #(.DIN(DIN), .DOUT(DOUT), .J(J), .H(H), .DEPTH(8), .SHIFT(SH), .SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(v), .in_data(in), .almost_full(af),
    .out_valid(ov), .out_idx(oi), .out_data(od));

  int x [NV][DIN];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (x[a, b]) x[a][b] = int'($signed(8'($urandom)));
    v = 0; in = '{default: '0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int g = 0; g < NV * DIN / J; g++) begin
      while (af || $urandom_range(0, 9) == 0) begin
        if (af) naf++;
        v = 0; @(negedge clk);
      end
      v = 1;
      for (int l = 0; l < J; l++) in[l] = 8'(x[g / (DIN / J)][(g % (DIN / J)) * J + l]);
      @(negedge clk);
    end
    v = 0;
  end

  initial begin
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (ov) begin
        int vv, n;
        vv = nout / H; n = nout % H;
        checks++;
        if (int'(oi) != n) failures++;
        for (int u = 0; u < DOUT / H; u++) begin
          longint s = 0;
          s = 0;
          for (int k = 0; k < DIN; k++) s += longint'(ref_param(SEED, (u * H + n) * DIN + k)) * x[vv][k];
          checks++;
          if (longint'(od[u]) != ref_requant(s, SH, 1'b0, 12)) begin
            failures++;
            if (failures < 10) $display("mismatch v=%0d n=%0d u=%0d got=%0d exp=%0d", vv, n, u, od[u], ref_requant(s, SH, 1'b0, 12));
          end
        end
        nout++;
      end
    end
  end

  initial begin
    wait (nout == NV * H);
    repeat (20) @(posedge clk);
    checks++;
    if (naf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
