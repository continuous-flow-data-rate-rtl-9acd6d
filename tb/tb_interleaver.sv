// tb_interleaver: self-checking test of both interleaving orders.
//
// Two instances take 8 channels into 2 streams: contiguous (stream g, step
// i = channel 4g+i) and strided (channel g+2i). Pixels of all channels are
// written in random bursts, the consumer accepts with random out_ready, and
// every accepted word is compared with the model: the k-th word of stream g
// is channel ch(g, k%4) of pixel k/4. almost_full must rise before any FIFO
// can be full (the producer here obeys it) and must rise at least once.
module tb_interleaver;
  localparam int NIN = 8, NOUT = 2, C = 4, DEPTH = 8, AFM = 2, NPIX = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  logic signed [7:0] in_data [NIN];
  logic af [2], ov [2], ordy [2];
  logic [1:0] ocfg [2];
  logic signed [7:0] od0 [NOUT], od1 [NOUT];

  interleaver #(.NIN(NIN), .NOUT(NOUT), .STRIDED(1'b0), .DEPTH(DEPTH), .AF_MARGIN(AFM)) dut0 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .almost_full(af[0]),
    .out_valid(ov[0]), .out_ready(ordy[0]), .out_cfg(ocfg[0]), .out_data(od0)
  );
  interleaver #(.NIN(NIN), .NOUT(NOUT), .STRIDED(1'b1), .DEPTH(DEPTH), .AF_MARGIN(AFM)) dut1 (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_data(in_data), .almost_full(af[1]),
    .out_valid(ov[1]), .out_ready(ordy[1]), .out_cfg(ocfg[1]), .out_data(od1)
  );

  int checks = 0, failures = 0, naf = 0;
  int pix [NPIX][NIN];
  int cnt [2];

  function automatic int ch(int d, int g, int i);
    return d ? g + NOUT * i : g * C + i;
  endfunction

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    for (int p = 0; p < NPIX; p++) for (int n = 0; n < NIN; n++) pix[p][n] = int'($signed(8'($urandom)));
    in_valid = 0; in_data = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk);
      while (af[0] || af[1] || $urandom_range(0, 2) == 0) begin
        in_valid = 0;
        if (af[0] || af[1]) naf++;
        @(negedge clk);
      end
      in_valid = 1;
      for (int n = 0; n < NIN; n++) in_data[n] = 8'(pix[p][n]);
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
  end

  // consumers and checker
  initial begin
    cnt = '{0, 0};
    ordy = '{0, 0};
    @(posedge rst_n);
    while (cnt[0] < NPIX * C || cnt[1] < NPIX * C) begin
      @(negedge clk);
      ordy[0] = ($urandom_range(0, 3) != 0);
      ordy[1] = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      for (int d = 0; d < 2; d++) begin
        if (ov[d] && ordy[d]) begin
          int p, i;
          p = cnt[d] / C; i = cnt[d] % C;
          for (int g = 0; g < NOUT; g++) begin
            int got;
            got = (d == 0) ? int'(od0[g]) : int'(od1[g]);
            checks++;
            if (got != pix[p][ch(d, g, i)] || int'(ocfg[d]) != i) begin
              failures++;
              if (failures < 10) $display("il%0d mismatch p=%0d i=%0d g=%0d got=%0d exp=%0d", d, p, i, g, got, pix[p][ch(d, g, i)]);
            end
          end
          cnt[d]++;
        end
      end
    end
    checks++;
    if (naf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
