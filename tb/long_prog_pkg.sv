// long_prog_pkg -- the generated program of tb_long_program.
//
// Word k of the program (k = 0 .. n-1) is, with off = k mod 16384 (its slot
// in a bank):
//   k = n-1     STOP, delay 1
//   off = 100   LOOP, 2 passes, delay 2
//   off = 102   END LOOP back to the LOOP, delay 2
//   otherwise   CONTINUE, delay 2 + (k mod 2)
// and its flags are 16'hBEEF followed by k, so every word is distinct.
package long_prog_pkg;
  import psoc_pkg::*;

  localparam int unsigned BANK = 16384;
  localparam int unsigned RAMW = 32768;

  function automatic instr_t gen_word(int unsigned k, int unsigned n);
    int unsigned off = k % BANK;
    logic [FLAG_W-1:0] f = {16'hBEEF, 48'(k)};
    if (k == n - 1)      return make_instr(f, OP_STOP, '0, 32'd1);
    else if (off == 100) return make_instr(f, OP_LOOP, 20'd2, 32'd2);
    else if (off == 102) return make_instr(f, OP_END_LOOP, DATA_W'((k - 2) % RAMW), 32'd2);
    else                 return make_instr(f, OP_CONTINUE, '0, 32'(2 + k % 2));
  endfunction
endpackage
