// tb_cnn_top: end-to-end test of the running-example CNN with small FIFOs.
//
// Four random 24x24 images are streamed in back to back (the source offers
// a pixel every cycle; the design takes it when in_ready is high). The ten
// scores of each image are compared with the reference model. The FIFOs in
// front of C2, P2 and F1 are made shallow so that every flow-control path
// is exercised; the test counts and requires at least one each of: C1 zero
// (padding) slots, C2 zero slots, C1 stall from the C2 interleaver, C2
// stall from the P2 interleaver, P2 stall from the F1 FIFO, and a complete
// set of classifier outputs per image.
module tb_cnn_top;
  import tb_cnn_ref_pkg::*;
  localparam int NIMG = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, s1, s2, s3;
  logic signed [7:0] in_data;
  logic [2:0] out_idx;
  logic signed [11:0] out_data [2];

  cnn_top #(.IL2_DEPTH(12), .IL3_DEPTH(8), .F1_DEPTH(8)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(out_valid), .out_idx(out_idx), .out_data(out_data),
    .stall_c1(s1), .stall_c2(s2), .stall_p2(s3));

  int checks = 0, failures = 0;
  int n_zero1 = 0, n_zero2 = 0, n_st1 = 0, n_st2 = 0, n_st3 = 0, nout = 0;
  img1_t imgs [NIMG];
  scores_t exp_sc [NIMG];

  initial begin : watchdog
    repeat (NIMG * 1500 + 5000) @(posedge clk);
    failures++;
    $display("watchdog: %0d outputs", nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.u_c1.u_ctrl.zphase && !s1) n_zero1++;
    if (dut.u_c2.u_ctrl.zphase && dut.u_c2.u_ctrl.en) n_zero2++;
    if (s1) n_st1++;
    if (s2) n_st2++;
    if (s3) n_st3++;
  end

  initial begin
    foreach (imgs[n, r, c]) imgs[n][r][c] = int'($urandom_range(0, 127));
    for (int n = 0; n < NIMG; n++) run(imgs[n], exp_sc[n]);
    in_valid = 0; in_data = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int p = 0; p < NIMG * 576; p++) begin
      in_valid = 1;
      in_data = 8'(imgs[p / 576][(p % 576) / 24][p % 24]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0;
  end

  initial begin
    @(posedge rst_n);
    while (nout < NIMG * 5) begin
      @(posedge clk); #1;
      if (out_valid) begin
        int im, n;
        im = nout / 5; n = nout % 5;
        checks += 3;
        if (int'(out_idx) != n) failures++;
        if (int'(out_data[0]) != exp_sc[im][n]) begin
          failures++; $display("image %0d score %0d: got %0d expected %0d", im, n, out_data[0], exp_sc[im][n]);
        end
        if (int'(out_data[1]) != exp_sc[im][5 + n]) begin
          failures++; $display("image %0d score %0d: got %0d expected %0d", im, 5 + n, out_data[1], exp_sc[im][5 + n]);
        end
        nout++;
      end
    end
    $display("C1 zero cycles %0d, C2 zero cycles %0d, stalls C1/C2/P2 %0d/%0d/%0d",
             n_zero1, n_zero2, n_st1, n_st2, n_st3);
    checks += 5;
    if (n_zero1 == 0) failures++;
    if (n_zero2 == 0) failures++;
    if (n_st1 == 0) failures++;
    if (n_st2 == 0) failures++;
    if (n_st3 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
