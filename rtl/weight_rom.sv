// weight_rom: read-only weight memory of a KPU (the weight multiplexers of
// the interleaved KPU).
//
// Holds DEPTH configurations of N weights each. For configuration addr the N
// weights of that configuration appear on w, combinationally, as the weight
// multiplexers of the reconfigurable KPU do; on an FPGA the table maps to
// LUT-ROM or block RAM. Word n of configuration a is
//   param_byte(SEED, BASE + a*N + n)
// (see cf_pkg); BASE places this ROM's slice in the layer's weight tensor.
module weight_rom
  import cf_pkg::*;
#(
  parameter int unsigned N     = 9,
  parameter int unsigned DEPTH = 4,
  parameter int unsigned SEED  = 1,
  parameter int unsigned BASE  = 0
) (
  input  logic [cw(DEPTH)-1:0]  addr,
  output logic signed [WW-1:0]  w [N]
);
  logic signed [WW-1:0] rom [DEPTH][N];

  for (genvar a = 0; a < int'(DEPTH); a++) begin : g_a
    for (genvar n = 0; n < int'(N); n++) begin : g_n
      localparam logic signed [WW-1:0] V = param_byte(SEED, BASE + a * N + n);
      assign rom[a][n] = V;
    end
  end

  always_comb begin
    for (int n = 0; n < int'(N); n++) w[n] = rom[addr][n];
  end
endmodule
