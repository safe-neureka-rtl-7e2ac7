// hsiao_dec: Hsiao SEC-DED decoder.
//
// Recomputes the check bits of the data half of a {check, data} codeword and
// XORs them with the stored check bits to form the syndrome. A zero syndrome
// means no error. A syndrome equal to a data column flips that data bit; a
// syndrome with a single bit set is an error in a check bit (data is fine);
// both are reported on single_err_o. Any other non-zero syndrome (even weight,
// or odd weight matching no column) is uncorrectable and raises double_err_o.
// Purely combinational. Follows the paper's SEC-DED scheme; the column order
// comes from ecc_pkg.
module hsiao_dec #(
  parameter int unsigned K = 32,
  parameter int unsigned R = ecc_pkg::hsiao_check_bits(K)
) (
  input  logic [K+R-1:0] code_i,
  output logic [K-1:0]   data_o,
  output logic           single_err_o,
  output logic           double_err_o
);
  function automatic logic [K-1:0][R-1:0] build_cols();
    logic [K-1:0][R-1:0] cols;
    for (int unsigned j = 0; j < K; j++) cols[j] = R'(ecc_pkg::hsiao_column(j, R));
    return cols;
  endfunction
  localparam logic [K-1:0][R-1:0] COLS = build_cols();

  logic [K-1:0] data;
  logic [R-1:0] recomputed, syndrome;
  logic [K-1:0] flip;

  assign data = code_i[K-1:0];

  always_comb begin
    recomputed = '0;
    for (int unsigned j = 0; j < K; j++)
      if (data[j]) recomputed ^= COLS[j];
    syndrome = recomputed ^ code_i[K+R-1:K];
    for (int unsigned j = 0; j < K; j++) flip[j] = (syndrome == COLS[j]);
    data_o       = data ^ flip;
    single_err_o = (|flip) || ($countones(syndrome) == 1);
    double_err_o = (syndrome != '0) && !single_err_o;
  end
endmodule
