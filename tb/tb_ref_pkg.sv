// tb_ref_pkg: reference functions shared by the testbenches.
//
// They describe, from the convolution itself rather than from the RTL, which
// output pixels an input value belongs to and which receiver command turns
// the receiver set of one input into that of the next. Along one axis, input
// position x (window k, stride s, n outputs) feeds outputs lo(x)..hi(x) with
//   hi(x) = min(floor(x/s), n-1),   lo(x) = x < k ? 0 : ceil((x-k+1)/s).
package tb_ref_pkg;
  import cnn_pkg::*;

  function automatic int ref_hi(int x, int s, int n);
    return (x / s < n - 1) ? x / s : n - 1;
  endfunction

  function automatic int ref_lo(int x, int k, int s);
    return (x < k) ? 0 : (x - k + s) / s;
  endfunction

  // Command that accompanies input (y, x) of a channel.
  function automatic icmd_e ref_cmd(int wo, int ho, int kx, int ky, int sx, int sy, int y, int x);
    bit dh, dl;
    if (x == 0 && y == 0) return CMD_START;
    if (x == 0) begin
      dh = ref_hi(y, sy, ho) > ref_hi(y - 1, sy, ho);
      dl = ref_lo(y, ky, sy) > ref_lo(y - 1, ky, sy);
      return dh && dl ? CMD_SHIFTY : dh ? CMD_DILATEY : dl ? CMD_ERODEY : CMD_ROTATEY;
    end
    dh = ref_hi(x, sx, wo) > ref_hi(x - 1, sx, wo);
    dl = ref_lo(x, kx, sx) > ref_lo(x - 1, kx, sx);
    return dh && dl ? CMD_SHIFTX : dh ? CMD_DILATEX : dl ? CMD_ERODEX : CMD_NOP;
  endfunction

  // Does PE p (output pixel p = oy*wo + ox) need input (y, x)?
  function automatic bit ref_needs(int p, int wo, int ho, int kx, int ky, int sx, int sy, int y, int x);
    int ox = p % wo, oy = p / wo;
    if (p >= wo * ho) return 0;
    return ox >= ref_lo(x, kx, sx) && ox <= ref_hi(x, sx, wo) &&
           oy >= ref_lo(y, ky, sy) && oy <= ref_hi(y, sy, ho);
  endfunction

  function automatic int dot4(logic [31:0] a, logic [31:0] b);
    int s = 0;
    for (int l = 0; l < 4; l++) s += int'($signed(a[8*l +: 8])) * int'($signed(b[8*l +: 8]));
    return s;
  endfunction

endpackage
