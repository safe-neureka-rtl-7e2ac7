// hsiao_enc: Hsiao SEC-DED encoder.
//
// Computes the R check bits of a K-bit data word; check bit i is the XOR of
// the data bits whose parity-check column has bit i set (see ecc_pkg). The
// codeword is {check, data}: data in the low K bits, check bits above them,
// so a 32-bit word becomes the 39-bit word the memory stores.
// Purely combinational, no latency. K=32 (R=7) is the paper's memory word;
// the streamer also uses it with K=69 for request metadata.
module hsiao_enc #(
  parameter int unsigned K = 32,
  parameter int unsigned R = ecc_pkg::hsiao_check_bits(K)
) (
  input  logic [K-1:0]   data_i,
  output logic [K+R-1:0] code_o
);
  // Row masks: ROW[i][j] = bit i of column j.
  function automatic logic [R-1:0][K-1:0] build_rows();
    logic [R-1:0][K-1:0] rows = '0;
    for (int unsigned j = 0; j < K; j++) begin
      logic [ecc_pkg::MAX_R-1:0] col = ecc_pkg::hsiao_column(j, R);
      for (int unsigned i = 0; i < R; i++) rows[i][j] = col[i];
    end
    return rows;
  endfunction
  localparam logic [R-1:0][K-1:0] ROWS = build_rows();

  logic [R-1:0] check;
  always_comb begin
    for (int unsigned i = 0; i < R; i++) check[i] = ^(data_i & ROWS[i]);
  end
  assign code_o = {check, data_i};
endmodule
