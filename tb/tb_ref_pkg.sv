// tb_ref_pkg -- Reference functions for the testbenches, written apart from
// the RTL: the two address maps built from explicit field tables, the
// physical address of an MRAM byte of a PIM core, and the initial contents of
// memory.
package tb_ref_pkg;
  import pimmmu_pkg::*;

  // Physical address of MRAM byte m of PIM core `core` (core = {ch,ra,bg,bk,chip}).
  function automatic pa_t ref_pim_pa(pa_t pim_base, int core, longint m);
    longint unit_ = core / 8;
    int chip = core % 8;
    return pim_base + pa_t'(unit_ * (longint'(1) << 29)) + pa_t'(m * 8) + pa_t'(7 - chip);
  endfunction

  // Device address of physical address pa, from field tables.
  function automatic dev_addr_t ref_dev(pa_t pa, pa_t pim_base, pa_t pim_limit);
    dev_addr_t d;
    longint o;
    int taps0 [9] = '{6, 17, 19, 21, 23, 25, 27, 29, 31};
    int taps1 [9] = '{7, 18, 20, 22, 24, 26, 28, 30, 32};
    d = '0;
    if (pa >= pim_base && pa < pim_limit) begin
      o = longint'(pa - pim_base);
      d.is_pim = 1;
      d.col = 10'((o >> 3) % 1024);
      d.row = 16'((o >> 13) % 65536);
      d.bk  = 2'((o >> 29) % 2);
      d.bg  = 2'((o >> 30) % 4);
      d.ra  = 1'((o >> 32) % 2);
      d.ch  = 2'((o >> 33) % 4);
    end else begin
      o = longint'(pa);
      d.is_pim = 0;
      d.ch = 0;
      foreach (taps0[i]) d.ch[0] ^= o[taps0[i]];
      foreach (taps1[i]) d.ch[1] ^= o[taps1[i]];
      d.col = 10'(((o >> 3) % 8) + 8 * ((o >> 9) % 128));
      d.bg  = 2'(((o >> 8) % 2) + 2 * ((o >> 24) % 2));
      d.ra  = 1'((o >> 16) % 2);
      d.row = 16'(((o >> 17) % 128) + 128 * ((o >> 27) % 256));
      d.bk  = 2'((o >> 25) % 4);
    end
    return d;
  endfunction

  // Initial byte i of the line with key k.
  function automatic logic [7:0] init_byte(longint k, int i);
    longint h = k * 64'h9E37_79B9_7F4A_7C15 + longint'(i) * 64'hC2B2_AE3D_27D4_EB4F;
    return 8'(h >> 37);
  endfunction
endpackage
