// tb_sync_fifo: random push/pop test of the FIFO against a queue model:
// data order, empty/full/almost_full flags, no loss.
module tb_sync_fifo;
  localparam int W = 8, DEPTH = 8, AFM = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, rd_en, empty, full, almost_full;
  logic [W-1:0] wr_data, rd_data;

  sync_fifo #(.W(W), .DEPTH(DEPTH), .AF_MARGIN(AFM)) dut (
    .clk(clk), .rst_n(rst_n), .wr_en(wr_en), .wr_data(wr_data), .rd_en(rd_en),
    .rd_data(rd_data), .empty(empty), .full(full), .almost_full(almost_full)
  );

  int checks = 0, failures = 0, nfull = 0;
  logic [W-1:0] q [$];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks += 4;
      if (empty != (q.size() == 0)) failures++;
      if (full != (q.size() == DEPTH)) failures++;
      if (almost_full != (q.size() + AFM >= DEPTH)) failures++;
      if (q.size() > 0 && rd_data != q[0]) failures++;
      if (full) nfull++;
      // phases of mostly-write and mostly-read traffic
      wr_en = !full && ($urandom_range(0, 99) < ((n / 200) % 2 ? 30 : 70));
      rd_en = !empty && ($urandom_range(0, 99) < ((n / 200) % 2 ? 70 : 30));
      wr_data = W'($urandom);
      @(posedge clk);
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    checks++;
    if (nfull == 0) failures++;   // the full state must have been reached
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
