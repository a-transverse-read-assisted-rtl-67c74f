// tb_ref_pkg: reference functions shared by the testbenches.
//
// The reference builds the low-discrepancy stochastic number bit by bit from
// its definition (S_q = B_k, k = trailing zeros of q+1, B_0 the MSB) and
// counts ones, so it does not reuse any of the hardware's wiring.
//
// Used by: tb_pfc_encoder, tb_sn_lsb_gen, tb_pfc_snm, tb_tr_mac_top. No
// timing; pure functions. The stream definition follows the paper; the
// helper functions are this testbench's.
package tb_ref_pkg;

  // SN bit q of the nb-bit value v.
  function automatic bit sn_bit(input int unsigned v, input int unsigned nb, input int unsigned q);
    int unsigned k, x;
    k = 0;
    x = q + 1;
    while ((x % 2) == 0) begin
      x = x / 2;
      k++;
    end
    if (k >= nb) return 1'b0;
    return bit'((v >> (nb - 1 - k)) & 1);
  endfunction

  // Number of ones in SN(max(a,b)) over the first min(a,b) positions: the
  // LD-SC product count.
  function automatic int unsigned ldsc_count(input int unsigned a, input int unsigned b,
                                             input int unsigned nb);
    int unsigned sv, uv, c;
    sv = (a >= b) ? a : b;
    uv = (a >= b) ? b : a;
    c  = 0;
    for (int unsigned q = 0; q < uv; q++) c += sn_bit(sv, nb, q);
    return c;
  endfunction

  // Number of segments a PFC multiplier emits.
  function automatic int unsigned nsegs(input int unsigned a, input int unsigned b,
                                        input int unsigned p);
    int unsigned uv;
    uv = (a >= b) ? b : a;
    return uv / p + ((uv % p) != 0 ? 1 : 0);
  endfunction

endpackage
