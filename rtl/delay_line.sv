// delay_line: clock-enabled shift register of DEPTH words.
//
// Used for the D registers (DEPTH = C), the C-interleaved "CD" registers and
// the line buffers LD (DEPTH = C*(f-k+1)) of the KPU and the PPU. The word
// presented on d while en is high leaves on q DEPTH enabled cycles later;
// q is the oldest stored word. DEPTH = 0 makes a plain wire.
// The contents are cleared by reset.
module delay_line #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (DEPTH == 0) begin : g_wire
    assign q = d;
  end else begin : g_sr
    logic [W-1:0] sr [DEPTH];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < int'(DEPTH); i++) sr[i] <= '0;
      end else if (en) begin
        sr[0] <= d;
        for (int i = 1; i < int'(DEPTH); i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[DEPTH-1];
  end
endmodule
