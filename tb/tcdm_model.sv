// tcdm_model: behavioural model of the ECC-protected L1 memory (TCDM) as seen
// through the accelerator's port of the cluster interconnect. Not
// synthesizable; testbench only.
//
// Stores MEM_WORDS 39-bit words ({7 check bits, 32 data bits}, the same
// Hsiao code as the RTL). A request is granted with probability GNT_PCT
// percent each cycle (a refused request stalls the accelerator); a granted
// read returns the nine words starting at the request address one cycle
// later, a granted write stores every word whose four byte enables are set.
// The metadata check bits of every granted request are verified and
// mismatches counted in meta_errors. Functions let the testbench preload
// and read back data words and flip stored bits to emulate upsets.
module tcdm_model #(
  parameter int unsigned MEM_WORDS = 32768,
  parameter int unsigned GNT_PCT   = 100
) (
  input  logic           clk_i,
  input  logic           req_i,
  output logic           gnt_o,
  input  logic [31:0]    add_i,
  input  logic           we_i,
  input  logic [35:0]    be_i,
  input  logic [350:0]   data_i,
  input  logic [7:0]     meta_ecc_i,
  output logic [350:0]   r_data_o,
  output logic           r_valid_o
);
  logic [38:0] mem [MEM_WORDS];
  int unsigned meta_errors = 0;
  int unsigned stalls = 0;
  int unsigned reads = 0;
  int unsigned writes = 0;

  function automatic logic [6:0] check7(logic [31:0] d);
    logic [6:0] c = '0;
    for (int j = 0; j < 32; j++)
      if (d[j]) c ^= 7'(ecc_pkg::hsiao_column(j, 7));
    return c;
  endfunction

  function automatic logic [7:0] check_meta(logic [68:0] d);
    logic [7:0] c = '0;
    for (int j = 0; j < 69; j++)
      if (d[j]) c ^= 8'(ecc_pkg::hsiao_column(j, 8));
    return c;
  endfunction

  function automatic void put_word(int unsigned byte_addr, logic [31:0] d);
    mem[(byte_addr / 4) % MEM_WORDS] = {check7(d), d};
  endfunction

  function automatic logic [31:0] get_word(int unsigned byte_addr);
    return mem[(byte_addr / 4) % MEM_WORDS][31:0];
  endfunction

  // 1 when the stored check bits match the stored data
  function automatic bit word_ok(int unsigned byte_addr);
    logic [38:0] w = mem[(byte_addr / 4) % MEM_WORDS];
    return w[38:32] == check7(w[31:0]);
  endfunction

  function automatic void flip_bit(int unsigned byte_addr, int unsigned b);
    mem[(byte_addr / 4) % MEM_WORDS][b] = ~mem[(byte_addr / 4) % MEM_WORDS][b];
  endfunction

  function automatic void clear_all();
    for (int unsigned i = 0; i < MEM_WORDS; i++) mem[i] = '0;
  endfunction

  logic gnt_roll;
  always_comb gnt_o = req_i && gnt_roll;

  initial begin
    r_valid_o = 1'b0;
    r_data_o  = '0;
    gnt_roll  = 1'b1;
  end

  always @(posedge clk_i) begin
    r_valid_o <= 1'b0;
    if (gnt_o) begin
      if (check_meta({we_i, be_i, add_i}) != meta_ecc_i) meta_errors++;
      if (we_i) begin
        writes++;
        for (int w = 0; w < 9; w++)
          if (&be_i[w*4 +: 4]) mem[(add_i / 4 + w) % MEM_WORDS] <= data_i[w*39 +: 39];
      end else begin
        reads++;
        for (int w = 0; w < 9; w++) r_data_o[w*39 +: 39] <= mem[(add_i / 4 + w) % MEM_WORDS];
        r_valid_o <= 1'b1;
      end
    end else if (req_i) begin
      stalls++;
    end
    gnt_roll <= ($urandom_range(99) < GNT_PCT);
  end
endmodule
