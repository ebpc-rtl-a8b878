// ebpc_pkg: types shared by the EBPC (extended bit-plane compression) compressor
// and decompressor.
//
// The bit-plane coder classifies every plane it emits into one of the code
// symbols of the EBPC symbol table (base word, multi-all-0 DBX, all-0 DBX,
// all-1 DBX, all-0 DBP, two consecutive ones, single one, uncompressed).
// The class is carried next to the symbol so that testbenches and the user
// can observe how a stream was coded; the encoding itself never depends on it.
package ebpc_pkg;

  typedef enum logic [3:0] {
    SYM_NONE       = 4'd0,  // flush marker, no bits
    SYM_BASE       = 4'd1,  // base word, WORD_W bits, MSB first
    SYM_MULTI_ZERO = 4'd2,  // '001' & bin(run-2)
    SYM_ZERO_DBX   = 4'd3,  // '01'
    SYM_ALL_ONE    = 4'd4,  // '00000'
    SYM_ZERO_DBP   = 4'd5,  // '00001'
    SYM_TWO_ONES   = 4'd6,  // '00010' & bin(position of the lower one)
    SYM_SINGLE_ONE = 4'd7,  // '00011' & bin(position of the one)
    SYM_RAW        = 4'd8   // '1' & DBX word, MSB first
  } sym_kind_e;

  // Width needed to hold the values 0..v.
  function automatic int unsigned bits_for(input int unsigned v);
    return (v < 2) ? 1 : $clog2(v + 1);
  endfunction

endpackage
