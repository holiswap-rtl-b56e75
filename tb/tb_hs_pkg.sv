// tb_hs_pkg: helpers shared by the cache testbenches and the memory model.
//
// init_word gives the contents of memory that no store has written yet: a
// fixed hash of the word address, so that a checker can predict any load
// without keeping a copy of the whole memory.
package tb_hs_pkg;
  function automatic logic [31:0] init_word(input logic [31:0] addr);
    logic [31:0] a;
    a = {addr[31:2], 2'b00};
    return (a * 32'h9E37_79B1) ^ 32'h5A5A_0F0F;
  endfunction
endpackage
