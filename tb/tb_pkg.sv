// tb_pkg: helpers shared by the plane, H-tree and die testbenches: building
// header and argument words, and a reference model of one PIM pass that is
// written from the arithmetic (bit-serial inputs, two 4-bit cells per 8-bit
// weight, 9-bit ADC with an LSB of 2^lsb_shift cell steps, shift-add), not
// from the RTL.
package tb_pkg;
  import pim_pkg::*;

  typedef int unsigned uvec_t[];

  function automatic word_t mk_hdr(opcode_e op, int addr, int bcast, int len,
                                   int unsigned modes [MAX_LEVELS]);
    hdr_t h;
    h = '0;
    h.op = op;
    h.addr = MAX_LEVELS'(addr);
    h.bcast = MAX_LEVELS'(bcast);
    h.len = 16'(len);
    for (int l = 0; l < MAX_LEVELS; l++) h.up_mode[l] = 3'(modes[l]);
    return word_t'(h);
  endfunction

  function automatic word_t mk_args(int row, int layer, int group, int mux, int offset, int count);
    args_t a;
    a = '0;
    a.row = 8'(row); a.layer = 7'(layer); a.group = 1'(group); a.mux = 2'(mux);
    a.offset = 8'(offset); a.count = 8'(count);
    return word_t'(a);
  endfunction

  // One PIM pass. x[n]: 8-bit inputs; w[n*n_out + k]: 8-bit weights of
  // output k at active row n. Returns n_out results.
  function automatic uvec_t ref_pim(uvec_t x, uvec_t w, int n_act, int n_out,
                                    int adc_bits, int lsb_shift);
    uvec_t o;
    o = new[n_out];
    foreach (o[k]) o[k] = 0;
    for (int b = 0; b < 8; b++)
      for (int k = 0; k < n_out; k++) begin
        int unsigned hi, lo, chi, clo, full;
        hi = 0; lo = 0;
        for (int n = 0; n < n_act; n++)
          if ((x[n] >> b) & 1) begin
            hi += (w[n*n_out + k] >> 4) & 15;
            lo += w[n*n_out + k] & 15;
          end
        full = (1 << adc_bits) - 1;
        chi = hi >> lsb_shift; if (chi > full) chi = full;
        clo = lo >> lsb_shift; if (clo > full) clo = full;
        o[k] += ((chi << 4) + clo) << b;
      end
    return o;
  endfunction
endpackage
