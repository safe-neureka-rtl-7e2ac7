// ecc_pkg: parity-check matrix of the Hsiao SEC-DED code shared by the
// encoder (hsiao_enc) and decoder (hsiao_dec).
//
// A Hsiao code uses distinct odd-weight columns in its parity-check matrix:
// a single error gives an odd-weight syndrome equal to one column, a double
// error gives a non-zero even-weight syndrome. Column j of the data part is
// the j-th R-bit vector, in increasing numeric order, whose weight is 3; when
// those run out, weight-5 vectors follow, then weight 7. For 32 data bits and
// 7 check bits this gives the (39,32) code of the memory words; for the 69
// metadata bits of a bus request it gives a (77,69) code with 8 check bits.
// The code family follows the paper; the particular column order is this
// design's own choice (the paper does not print a matrix).
package ecc_pkg;

  localparam int unsigned MAX_R = 16;

  function automatic int unsigned popcount16(logic [MAX_R-1:0] v);
    int unsigned n = 0;
    for (int i = 0; i < MAX_R; i++) n += int'(v[i]);
    return n;
  endfunction

  // Column j (0-based) of the data part of the parity-check matrix, R <= MAX_R.
  function automatic logic [MAX_R-1:0] hsiao_column(int unsigned j, int unsigned r);
    int unsigned found = 0;
    logic [MAX_R-1:0] col = '0;
    for (int unsigned wgt = 3; wgt <= r; wgt += 2) begin
      for (int unsigned v = 0; v < (1 << r); v++) begin
        if (popcount16(MAX_R'(v)) == wgt) begin
          if (found == j) return MAX_R'(v);
          found++;
        end
      end
    end
    return col;
  endfunction

  // Smallest number of check bits for k data bits (columns of weight >= 3, odd).
  function automatic int unsigned hsiao_check_bits(int unsigned k);
    for (int unsigned r = 4; r <= MAX_R; r++) begin
      int unsigned avail = 0;
      for (int unsigned v = 0; v < (1 << r); v++)
        if (popcount16(MAX_R'(v)) >= 3 && popcount16(MAX_R'(v)) % 2 == 1) avail++;
      if (avail >= k) return r;
    end
    return MAX_R;
  endfunction

endpackage
