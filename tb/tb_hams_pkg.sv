// tb_hams_pkg -- helpers shared by the HAMS testbenches.
//
// flash_word(a) is the content the flash models hold, before anything was
// written, at the 8-byte MoS word whose byte address is a. Testbenches use
// it to predict read data independently of the design.
package tb_hams_pkg;
  function automatic logic [63:0] flash_word(logic [63:0] a);
    return (a * 64'h9E37_79B9_7F4A_7C15) ^ 64'h0123_4567_89AB_CDEF ^ (a >> 7);
  endfunction
endpackage
