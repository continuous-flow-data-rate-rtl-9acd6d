// tb_chan_accum: self-checking test of channel accumulation and bias.
//
// J = 2 inputs, NACC = 4 configurations, I = 2 interleaved filters (filter
// c % 2 owns configuration c). Random sums arrive with random gaps; after
// configuration 2 and 3 of each round the registered output, one cycle
// later, must be the sum of that filter's inputs over the round plus its
// bias param(BSEED, BBASE+filter) * 2^BSH. No other cycle may pulse.
module tb_chan_accum;
  import tb_ref_pkg::*;
  localparam int J = 2, NACC = 4, I = 2, IW = 16, OW = 20, BSEED = 9, BBASE = 3, BSH = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  logic [1:0] in_cfg;
  logic signed [IW-1:0] in_data [J];
  logic out_valid;
  logic [0:0] out_idx;
  logic signed [OW-1:0] out_data;

  chan_accum #(.J(J), .NACC(NACC), .I(I), .IW(IW), .OW(OW), .BSEED(BSEED),
               .BBASE(BBASE), .BSH(BSH)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_cfg(in_cfg), .in_data(in_data),
    .out_valid(out_valid), .out_idx(out_idx), .out_data(out_data)
  );

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum [I];
    in_valid = 0; in_cfg = 0; in_data = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 200; round++) begin
      sum = '{default: 0};
      for (int c = 0; c < NACC; c++) begin
        while ($urandom_range(0, 2) == 0) begin
          @(negedge clk); in_valid = 0;
          @(posedge clk); #1;
          checks++; if (out_valid && !(c == 0)) failures++;
        end
        @(negedge clk);
        in_valid = 1; in_cfg = 2'(c);
        for (int j = 0; j < J; j++) begin
          in_data[j] = IW'($urandom);
          sum[c % I] += longint'(in_data[j]);
        end
        @(posedge clk); #1;
        @(negedge clk); in_valid = 0;
        checks++;
        if (c >= NACC - I) begin
          longint e;
          e = sum[c % I] + (longint'(ref_param(BSEED, BBASE + c % I)) <<< BSH);
          if (!out_valid || int'(out_idx) != c % I || longint'(out_data) != e) begin
            failures++;
            if (failures < 10) $display("acc mismatch r=%0d c=%0d v=%0b d=%0d e=%0d", round, c, out_valid, out_data, e);
          end
        end else if (out_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
