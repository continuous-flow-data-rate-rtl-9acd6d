// conv_ctrl: per-layer control of a padded convolutional layer.
//
// The KPUs of a layer see a stream of pixel slots; each slot lasts C enabled
// cycles (sub-slots), one per interleaved configuration, reported on cfg.
// After reset the controller feeds (F+1)*P zero slots (the top padding), then
// accepts the F*F pixels of a frame (in_ready high), then feeds (F+1)*P zero
// slots again: they pad the bottom of this frame and the top of the next
// one. While a zero slot is fed, zero is high and the layer's input is not
// consumed. Left and right padding is implicit: pad[i] masks kernel column i
// according to the column c of the current pixel,
//   pad[i] = 0 if c >= F-P+i or c < P-K+i+1, else 1.
// With P = (K-1)/2 the window sums for all F*F output pixels appear in F*F
// consecutive slots starting (F+1)*P slots after the first pixel of a frame.
// out_valid marks the sub-slots of those slots whose output row and column
// are multiples of the stride S.
//
// en is high in a cycle in which the KPUs advance: in a zero slot always, in
// a pixel slot when in_valid is high; stall (downstream FIFOs nearly full)
// holds the whole layer. out_valid and cfg refer to the same cycle as en.
module conv_ctrl
  import cf_pkg::*;
#(
  parameter int unsigned F = 5,
  parameter int unsigned K = 3,
  parameter int unsigned P = 1,
  parameter int unsigned S = 1,
  parameter int unsigned C = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic               stall,
  output logic               en,
  output logic               zero,
  output logic [cw(C)-1:0]   cfg,
  output logic [K-1:0]       pad,
  output logic               out_valid
);
  localparam int unsigned FF = F * F;
  localparam int unsigned Z  = (F + 1) * P;   // zero slots between frames
  localparam int unsigned PW = cw(FF > Z ? FF : Z);
  localparam int unsigned FW = cw(F);

  logic             zphase;      // feeding zero slots
  logic [PW-1:0]    cnt;         // slot index within the phase
  logic [FW-1:0]    col;         // column of the current input pixel
  logic [cw(C)-1:0] sub;
  logic             out_act;     // current slot carries an output pixel
  logic [FW-1:0]    orow, ocol;
  logic             slot_end;

  assign zero     = zphase;
  assign in_ready = !stall && !zphase;
  assign en       = !stall && (zphase || in_valid);
  assign cfg      = sub;
  assign slot_end = en && (sub == cw(C)'(C - 1));

  always_comb begin
    for (int i = 0; i < int'(K); i++) begin
      pad[i] = 1'b1;
      if (!zphase) begin
        if (int'(col) >= int'(F) - int'(P) + i)         pad[i] = 1'b0;
        if (int'(col) <  int'(P) - int'(K) + i + 1)     pad[i] = 1'b0;
      end
    end
  end

  assign out_valid = en && out_act && ((orow % FW'(S)) == 0) && ((ocol % FW'(S)) == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zphase  <= 1'b1;
      cnt     <= '0;
      col     <= '0;
      sub     <= '0;
      out_act <= 1'b0;
      orow    <= '0;
      ocol    <= '0;
    end else if (en) begin
      sub <= slot_end ? '0 : sub + 1'b1;
      if (slot_end) begin
        // input side
        if (zphase) begin
          if (cnt == PW'(Z - 1)) begin zphase <= 1'b0; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        end else begin
          col <= (col == FW'(F - 1)) ? '0 : col + 1'b1;
          if (cnt == PW'(FF - 1)) begin zphase <= 1'b1; cnt <= '0; end
          else cnt <= cnt + 1'b1;
        end
        // output side: F*F output slots, the first one Z slots after the
        // first pixel of the frame
        if (out_act) begin
          if (ocol == FW'(F - 1)) begin
            ocol <= '0;
            if (orow == FW'(F - 1)) begin orow <= '0; out_act <= 1'b0; end
            else orow <= orow + 1'b1;
          end else ocol <= ocol + 1'b1;
        end
        if (!zphase && cnt == PW'(Z - 1)) begin
          out_act <= 1'b1;
          orow    <= '0;
          ocol    <= '0;
        end
      end
    end
  end

  initial begin
    assert (2 * P + 1 == K) else $error("conv_ctrl: continuous flow needs P = (K-1)/2");
    assert (Z < FF) else $error("conv_ctrl: padding longer than a frame");
  end
endmodule
