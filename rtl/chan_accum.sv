// chan_accum: channel accumulation and bias of one convolutional output signal.
//
// A filter of a convolutional layer sums its kernel outputs over all input
// channels. The J KPUs that serve one filter deliver J kernel sums per valid
// cycle (one per input stream); they are added, and the result is
// accumulated over the NACC configurations of the KPUs (the interleaved
// input channels). This is the FCU structure with its multipliers removed:
// J-input adder, one accumulating adder and an I-deep register buffer, so
// that I filters interleaved on the same KPUs keep separate sums
// (configuration c belongs to filter c % I). After the last configuration of
// a filter the bias of that filter, chosen by an I:1 multiplexer, is added.
//
// Interface: in_valid/in_cfg/in_data come once per KPU sub-slot. out_valid is
// registered and pulses one cycle after the in_valid of the last
// configuration of a filter, with out_idx = that filter's index (0..I-1).
// The bias of filter i is param_byte(BSEED, BBASE+i) scaled by 2^BSH.
module chan_accum
  import cf_pkg::*;
#(
  parameter int unsigned J     = 2,
  parameter int unsigned NACC  = 4,
  parameter int unsigned I     = 1,
  parameter int unsigned IW    = 24,
  parameter int unsigned OW    = IW + $clog2(J * NACC) + 1,
  parameter int unsigned BSEED = 1,
  parameter int unsigned BBASE = 0,
  parameter int unsigned BSH   = 0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [cw(NACC)-1:0]   in_cfg,
  input  logic signed [IW-1:0]  in_data [J],
  output logic                  out_valid,
  output logic [cw(I)-1:0]      out_idx,
  output logic signed [OW-1:0]  out_data
);
  logic signed [OW-1:0] s, q, acc;
  logic signed [OW-1:0] bias [I];
  logic [cw(I)-1:0]     fidx;

  for (genvar i = 0; i < int'(I); i++) begin : g_b
    localparam logic signed [WW-1:0] B = param_byte(BSEED, BBASE + i);
    assign bias[i] = OW'(B) <<< BSH;
  end

  always_comb begin
    s = '0;
    for (int j = 0; j < int'(J); j++) s += OW'(in_data[j]);
  end

  // I-deep buffer of running sums (one D when I = 1)
  delay_line #(.W(OW), .DEPTH(I)) u_buf (
    .clk(clk), .rst_n(rst_n), .en(in_valid), .d(acc), .q(q)
  );

  assign acc  = (int'(in_cfg) < int'(I)) ? s : q + s;
  assign fidx = cw(I)'(int'(in_cfg) % int'(I));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && (int'(in_cfg) >= int'(NACC) - int'(I));
      if (in_valid) begin
        out_idx  <= fidx;
        out_data <= acc + bias[fidx];
      end
    end
  end

  initial begin
    assert (NACC % I == 0) else $error("chan_accum: NACC must be a multiple of I");
  end
endmodule
