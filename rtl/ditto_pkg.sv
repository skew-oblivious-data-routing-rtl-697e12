// ditto_pkg: types and constants shared by the skew-oblivious data routing
// blocks. A tuple is 8 bytes (32-bit key, 32-bit value) as in the paper's
// evaluation; bin counters are 32 bits wide (a design choice). The
// decoder's preset table is described here by the function that fills it:
// entry m holds the number of set bits of the N-bit mask m and, for
// k = 0..count-1, the lane index of the k-th set bit counted from lane 0.
package ditto_pkg;

  localparam int KEY_W = 32;
  localparam int VAL_W = 32;
  localparam int CNT_W = 32;

  typedef struct packed {
    logic [KEY_W-1:0] key;
    logic [VAL_W-1:0] value;
  } tuple_t;


  // Lane index of the k-th set bit of mask (k counted from 0), or 0 if
  // the mask has fewer than k+1 set bits.
  function automatic int unsigned kth_set_bit(input logic [31:0] mask,
                                               input int unsigned n,
                                               input int unsigned k);
    int unsigned seen;
    int unsigned pos;
    seen = 0;
    pos  = 0;
    for (int unsigned i = 0; i < n; i++) begin
      if (mask[i]) begin
        if (seen == k) pos = i;
        seen++;
      end
    end
    return pos;
  endfunction

  function automatic int unsigned count_set_bits(input logic [31:0] mask,
                                                  input int unsigned n);
    int unsigned c;
    c = 0;
    for (int unsigned i = 0; i < n; i++) c += int'(mask[i]);
    return c;
  endfunction

endpackage
