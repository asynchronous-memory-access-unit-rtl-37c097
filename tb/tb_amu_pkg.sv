// tb_amu_pkg: helpers shared by the AMU testbenches.
// far_word() is the initial content of far memory: every 8-byte word holds a
// value derived from its own address, so a checker can predict any byte
// without a reference copy of memory.
package tb_amu_pkg;
  import amu_pkg::*;

  function automatic logic [63:0] far_word(logic [MEM_AW-1:0] byte_addr);
    logic [63:0] a;
    a = 64'(byte_addr) & ~64'h7;
    return (a * 64'h9E37_79B9_7F4A_7C15) ^ 64'h0123_4567_89AB_CDEF;
  endfunction

  function automatic line_t far_line(logic [MEM_AW-1:0] line_addr);
    line_t l;
    for (int w = 0; w < LINE_BYTES / 8; w++)
      l[w*64 +: 64] = far_word(line_addr + MEM_AW'(w * 8));
    return l;
  endfunction

  function automatic logic [7:0] far_byte(logic [MEM_AW-1:0] byte_addr);
    logic [63:0] w;
    w = far_word(byte_addr);
    return w[8*byte_addr[2:0] +: 8];
  endfunction

  function automatic lvr_t make_vec(int n, int first);
    lvr_t v;
    v = '0;
    v.pos = POS_W'(n);
    for (int i = 0; i < n; i++) v.ids[i] = id_t'(first + i);
    return v;
  endfunction
endpackage
