// tb_mem_pkg: backing store shared by the behavioural main-memory models of the testbenches.
// Lines never written read as a fixed pattern: element k of line L holds the double
// (8*L + k) mod 4096, so every element's value follows from its address.
package tb_mem_pkg;
  import casper_pkg::*;

  line_data_t mem [line_addr_t];

  function automatic dword_t init_elem(longint unsigned elem_index);
    return $realtobits(real'(elem_index % 4096));
  endfunction

  function automatic line_data_t read_line(line_addr_t l);
    line_data_t d;
    if (mem.exists(l)) return mem[l];
    for (int k = 0; k < LANES; k++) d[64*k +: 64] = init_elem(longint'(l) * 8 + k);
    return d;
  endfunction

  function automatic void write_line(line_addr_t l, line_data_t d);
    mem[l] = d;
  endfunction
endpackage
