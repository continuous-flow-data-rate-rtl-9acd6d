// tb_ref_pkg: reference helpers shared by the testbenches.
//
// ref_param() restates the parameter table of the design (the integer hash
// that fills every weight and bias ROM) so that expected values are worked
// out without the RTL's own function. ref_requant() is the reference of the
// shift / ReLU / saturate step.
package tb_ref_pkg;

  function automatic int ref_param(input int unsigned seed, input int unsigned idx);
    bit [31:0] h;
    h = (idx + 1) * 32'd2654435761;
    h = h ^ (seed * 32'd2246822507);
    h = h ^ {15'b0, h[31:15]};
    h = h * 32'd739982445;
    h = h ^ {13'b0, h[31:13]};
    return int'($signed(h[7:0]));
  endfunction

  function automatic longint ref_requant(input longint v, input int shift,
                                         input bit relu, input int ow);
    longint r, mx, mn;
    r  = v >>> shift;
    mx = (longint'(1) << (ow - 1)) - 1;
    mn = -(longint'(1) << (ow - 1));
    if (relu && r < 0) r = 0;
    if (r > mx) r = mx;
    if (r < mn) r = mn;
    return r;
  endfunction

endpackage
