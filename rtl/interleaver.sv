// interleaver: pipeline interleaving of low-rate channels into continuous
// streams (the "-IL" stages of the architecture).
//
// NIN channels, all written together when in_valid is high (the outputs of
// one pixel of the previous layer), are buffered in one FIFO each. NOUT
// output streams are formed by NOUT multiplexers of C = NIN/NOUT inputs;
// the multiplexers step through their inputs in lockstep, one per accepted
// cycle, with the step number on out_cfg. Stream g in step i reads
//   channel g*C + i        (STRIDED = 0, e.g. FIFO 0..3 -> stream 0), or
//   channel g + NOUT*i     (STRIDED = 1, e.g. FIFO 0,4,8,12 -> stream 0).
// out_valid is high when all FIFOs of the current step hold data; the
// consumer takes the word with out_ready (valid/ready handshake).
// almost_full tells the producer to stall before any FIFO can overflow.
//
// Lint note: the FIFOs' protocol assertions make verilator report rst_n as
// used both synchronously and asynchronously (see sync_fifo).
module interleaver
  import cf_pkg::*;
#(
  parameter int unsigned NIN       = 8,
  parameter int unsigned NOUT      = 2,
  parameter bit          STRIDED   = 1'b0,
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned AF_MARGIN = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [DW-1:0]  in_data [NIN],
  output logic                  almost_full,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [cw(NIN/NOUT)-1:0] out_cfg,
  output logic signed [DW-1:0]  out_data [NOUT]
);
  localparam int unsigned C = NIN / NOUT;

  logic [DW-1:0]    q  [NIN];
  logic [NIN-1:0]   emp, af, rd;
  logic [cw(C)-1:0] ph;
  logic             take;

  function automatic int unsigned chan(input int unsigned g, input int unsigned i);
    return STRIDED ? g + NOUT * i : g * C + i;
  endfunction

  for (genvar n = 0; n < int'(NIN); n++) begin : g_fifo
    logic full_unused;
    sync_fifo #(.W(DW), .DEPTH(DEPTH), .AF_MARGIN(AF_MARGIN)) u_fifo (
      .clk(clk), .rst_n(rst_n), .wr_en(in_valid), .wr_data(in_data[n]),
      .rd_en(rd[n]), .rd_data(q[n]), .empty(emp[n]), .full(full_unused),
      .almost_full(af[n])
    );
  end

  always_comb begin
    out_valid = 1'b1;
    rd        = '0;
    for (int g = 0; g < int'(NOUT); g++) begin
      out_data[g] = '0;
      for (int i = 0; i < int'(C); i++) begin
        if (ph == cw(C)'(i)) begin
          out_data[g] = q[chan(g, i)];
          if (emp[chan(g, i)]) out_valid = 1'b0;
        end
      end
    end
    take = out_valid && out_ready;
    for (int g = 0; g < int'(NOUT); g++)
      for (int i = 0; i < int'(C); i++)
        if (ph == cw(C)'(i)) rd[chan(g, i)] = take;
  end

  assign almost_full = |af;
  assign out_cfg     = ph;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ph <= '0;
    else if (take) ph <= (ph == cw(C)'(C - 1)) ? '0 : ph + 1'b1;
  end

  initial begin
    assert (NIN % NOUT == 0) else $error("interleaver: NIN must be a multiple of NOUT");
  end
endmodule
