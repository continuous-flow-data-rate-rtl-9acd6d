// tb_relu_requant: exhaustive-corner and random test of the activation /
// requantisation step, with ReLU (8-bit out) and without (12-bit out).
module tb_relu_requant;
  import tb_ref_pkg::*;
  localparam int IW = 24;

  logic signed [IW-1:0] in;
  logic signed [7:0]    o8;
  logic signed [11:0]   o12;

  relu_requant #(.IW(IW), .OW(8),  .SHIFT(5), .RELU(1'b1)) dut_r (.in(in), .out(o8));
  relu_requant #(.IW(IW), .OW(12), .SHIFT(3), .RELU(1'b0)) dut_l (.in(in), .out(o12));

  int checks = 0, failures = 0;

  task automatic check(input logic signed [IW-1:0] v);
    in = v; #1;
    checks += 2;
    if (longint'(o8)  != ref_requant(longint'(v), 5, 1'b1, 8))  failures++;
    if (longint'(o12) != ref_requant(longint'(v), 3, 1'b0, 12)) failures++;
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check('0); check(-1); check(31); check(32); check(4095); check(4096); check(-4096);
    check(24'sd16383); check(24'sd16384); check(-24'sd16384); check(-24'sd16392);
    for (int n = 0; n < 2000; n++) check(IW'($urandom) >>> $urandom_range(0, 12));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
