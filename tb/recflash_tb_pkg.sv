// recflash_tb_pkg: reference data shared by the testbenches.
//
// The NAND model stores no data: the 32-bit word w of the page at row r is
// the hash nand_word(r, w), and byte c of the page is byte c%4 of word c/4
// (little-endian). Testbenches compute expected vectors and SLS sums from the
// same function, independently of the design.
package recflash_tb_pkg;
  function automatic logic [31:0] nand_word(logic [23:0] row, logic [15:0] w);
    logic [31:0] x;
    x = {8'h0, row} * 32'h9E3779B1 + {16'h0, w} * 32'h85EBCA77;
    x = x ^ (x >> 13);
    return x * 32'hC2B2AE3D;
  endfunction

  function automatic logic [7:0] nand_byte(logic [23:0] row, logic [15:0] col);
    logic [31:0] wv;
    wv = nand_word(row, col >> 2);
    return wv[8*col[1:0] +: 8];
  endfunction
endpackage
