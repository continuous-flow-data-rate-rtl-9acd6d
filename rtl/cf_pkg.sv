// cf_pkg: widths and shared helpers of the continuous-flow CNN.
//
// Activations and weights are 8-bit signed fixed-point numbers, the format the
// design was quantised to; the final layer produces 12-bit outputs. Sums are
// sized by worst-case growth (product width plus log2 of the number of terms).
//
// The trained network parameters are not available, so every weight and bias
// ROM in this design is filled by param_byte(): a fixed integer hash of
// (seed, index). Replacing that function (or the ROM contents) with trained
// values is the only change needed to run a real network.
//
// Lint note: checked on its own, the package's constants look unused; they
// are used by the modules that import it.
package cf_pkg;

  localparam int unsigned DW     = 8;   // activation width
  localparam int unsigned WW     = 8;   // weight width
  localparam int unsigned OUT_W  = 12;  // width of the last layer's outputs

  // Deterministic stand-in for a trained parameter: a byte of an integer hash.
  function automatic logic signed [7:0] param_byte(input int unsigned seed,
                                                   input int unsigned idx);
    logic [31:0] h;
    h = (idx + 32'd1) * 32'h9E37_79B1;
    h = h ^ (seed * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 13);
    return h[7:0];
  endfunction

  // Bits needed to count 0..n-1 (at least 1).
  function automatic int unsigned cw(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
