// tb_ref_pkg: reference arithmetic for the testbenches, written independently of the RTL.
//   * sbr_ho/sbr_lo: signed bit-slice representation of a 7-bit weight
//     (HO = (w >>> 3) + s, LO = (w & 7) - 8s, s = sign of w), so w = 8*HO + LO.
//   * dbs_ho/dbs_lo: distribution-based slicing of a uint8 with LO width l = 4 + sh:
//     HO = x[7:l] << sh (4 bits), LO = x[l-1:sh]; value kept = 16*HO + 2^sh*LO.
//   * rle_encode: which vectors of a 32-long segment are sent and with which run index,
//     given the compressible flags (runs capped at 15).
//   * slot: 4-bit field helpers.
package tb_ref_pkg;
  function automatic int sbr_ho(int w);
    int s = (w < 0) ? 1 : 0;
    return (w >>> 3) + s;
  endfunction
  function automatic int sbr_lo(int w);
    int s = (w < 0) ? 1 : 0;
    return (w & 7) - 8 * s;
  endfunction
  function automatic int dbs_ho(int x, int sh);
    return ((x >> (4 + sh)) << sh) & 15;
  endfunction
  function automatic int dbs_lo(int x, int sh);
    return (x >> sh) & 15;
  endfunction
  function automatic int dbs_val(int x, int sh);
    return 16 * dbs_ho(x, sh) + (dbs_lo(x, sh) << sh);
  endfunction
  // send[k]=1 if vector k is stored; rle[k] its run index
  function automatic void rle_encode(input bit comp [32], output bit send [32], output int rle [32],
                                     output int n);
    int run = 0;
    n = 0;
    for (int k = 0; k < 32; k++) begin
      send[k] = 0; rle[k] = 0;
      if (!comp[k] || run == 15) begin
        send[k] = 1; rle[k] = run; run = 0; n++;
      end else run++;
    end
  endfunction
  function automatic logic [15:0] pack4(int e0, int e1, int e2, int e3);
    return {4'(e3), 4'(e2), 4'(e1), 4'(e0)};
  endfunction
endpackage
