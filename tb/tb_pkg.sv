// tb_pkg: helpers shared by the testbenches.
//
// init_line gives the contents the behavioural HBM model returns for a line
// that has never been written: each 32-bit word is the line address mixed
// with the word index, so every line and word is distinct. rand_line makes a
// random 128-byte line from $urandom.
package tb_pkg;
  import copa_pkg::*;

  function automatic line_t init_line(input laddr_t a);
    line_t l;
    for (int w = 0; w < LINE_W/32; w++)
      l[w*32 +: 32] = {1'b0, a} ^ (32'h9E37_79B9 * (w + 1));
    return l;
  endfunction

  function automatic line_t rand_line();
    line_t l;
    for (int w = 0; w < LINE_W/32; w++) l[w*32 +: 32] = $urandom;
    return l;
  endfunction
endpackage
