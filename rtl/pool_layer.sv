// pool_layer: k x k max-pooling layer with stride S, NS PPUs each serving C
// interleaved channels (stream s, cycle cfg carries channel s + NS*cfg or
// s*C + cfg, whichever order the interleaver in front produced; the layer
// only needs the count).
//
// Pixels of F x F frames arrive in raster order, C cycles per pixel, frame
// after frame without gaps (pooling uses no padding). A counter tracks the
// row and column of the current pixel; the window ending at (row, col) is a
// wanted output when its top-left corner (row-K+1, col-K+1) lies in the
// frame and both coordinates are multiples of S. The output rate is thus
// 1/S^2 of the input rate.
//
// Interface: in_valid/in_ready (in_ready = !stall). out_valid pulses,
// registered, one cycle after the accepted sample that completes a wanted
// window, with out_cfg = that sample's configuration and out_data = the
// maxima of all NS streams.
module pool_layer
  import cf_pkg::*;
#(
  parameter int unsigned F  = 24,
  parameter int unsigned K  = 2,
  parameter int unsigned S  = 2,
  parameter int unsigned NS = 8,
  parameter int unsigned C  = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [DW-1:0]  in_data [NS],
  input  logic                  stall,
  output logic                  out_valid,
  output logic [cw(C)-1:0]      out_cfg,
  output logic signed [DW-1:0]  out_data [NS]
);
  localparam int unsigned FW = cw(F);

  logic             en, want;
  logic [FW-1:0]    row, col;
  logic [cw(C)-1:0] sub;

  assign in_ready = !stall;
  assign en       = in_valid && !stall;
  assign want     = (int'(row) >= int'(K) - 1) && (int'(col) >= int'(K) - 1) &&
                    (((int'(row) - int'(K) + 1) % int'(S)) == 0) &&
                    (((int'(col) - int'(K) + 1) % int'(S)) == 0);

  for (genvar s = 0; s < int'(NS); s++) begin : g_ppu
    ppu #(.K(K), .F(F), .C(C)) u_ppu (
      .clk(clk), .rst_n(rst_n), .en(en), .x(in_data[s]), .y(out_data[s])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row       <= '0;
      col       <= '0;
      sub       <= '0;
      out_valid <= 1'b0;
      out_cfg   <= '0;
    end else begin
      out_valid <= en && want;
      if (en) begin
        out_cfg <= sub;
        if (sub == cw(C)'(C - 1)) begin
          sub <= '0;
          if (col == FW'(F - 1)) begin
            col <= '0;
            row <= (row == FW'(F - 1)) ? '0 : row + 1'b1;
          end else col <= col + 1'b1;
        end else sub <= sub + 1'b1;
      end
    end
  end
endmodule
