// streamer: load/store unit of Safe-NEureka with SEC-DED protection.
//
// One TCDM port is shared by the source (loads) and the sink (stores); the
// sink has priority, though the controller never drives both at once.
// Every request carries a 288-bit payload split into nine 32-bit words, each
// encoded by its own (39,32) Hsiao encoder, so the port carries 351 data
// bits. The request metadata (address, byte enables, write enable) is
// protected by a second Hsiao code whose 8 check bits travel on
// tcdm_meta_ecc_o. Read data is decoded word by word; single errors are
// corrected, and the number of corrected and uncorrectable words in each
// response is reported for the register file's counters.
//
// Protocol (TCDM style): a request is held until tcdm_gnt_i; a granted read
// returns tcdm_r_valid_i with data exactly one cycle later. The source's tag
// is stored at the grant and returned with the data on rsp_o. A sink write
// stores 256 bits (words 0..7, byte enables 0..31) from snk_data_i.
// ECC on nine 32-bit chunks and the shared source/sink port follow the
// paper; metadata ECC width, tag handling and write format are this
// design's own.
module streamer
  import neureka_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // source (load) requests
  input  logic                  src_valid_i,
  input  logic [31:0]           src_addr_i,
  input  tag_t                  src_tag_i,
  output logic                  src_gnt_o,
  // sink (store) requests
  input  logic                  snk_valid_i,
  input  logic [31:0]           snk_addr_i,
  input  logic [OUT_W-1:0]      snk_data_i,
  output logic                  snk_gnt_o,
  // decoded read responses
  output rsp_t                  rsp_o,
  output logic [3:0]            ecc_corr_o,
  output logic [3:0]            ecc_unc_o,
  // TCDM port
  output logic                  tcdm_req_o,
  input  logic                  tcdm_gnt_i,
  output logic [31:0]           tcdm_add_o,
  output logic                  tcdm_we_o,
  output logic [BE_W-1:0]       tcdm_be_o,
  output logic [ECC_DATA_W-1:0] tcdm_data_o,
  output logic [7:0]            tcdm_meta_ecc_o,
  input  logic [ECC_DATA_W-1:0] tcdm_r_data_i,
  input  logic                  tcdm_r_valid_i
);
  logic [DATA_W-1:0] wdata;
  logic [META_W+7:0] meta_code;

  // Request multiplexing
  always_comb begin
    tcdm_req_o = snk_valid_i || src_valid_i;
    tcdm_we_o  = snk_valid_i;
    tcdm_add_o = snk_valid_i ? snk_addr_i : src_addr_i;
    tcdm_be_o  = snk_valid_i ? BE_W'({(OUT_W/8){1'b1}}) : '1;
    wdata      = snk_valid_i ? DATA_W'(snk_data_i) : '0;
    snk_gnt_o  = snk_valid_i && tcdm_gnt_i;
    src_gnt_o  = !snk_valid_i && src_valid_i && tcdm_gnt_i;
  end

  // Payload encoders
  for (genvar w = 0; w < N_WORDS; w++) begin : g_enc
    hsiao_enc #(.K(32), .R(7)) u_enc (
      .data_i(wdata[w*32 +: 32]),
      .code_o(tcdm_data_o[w*WORD_ECC_W +: WORD_ECC_W])
    );
  end

  // Metadata encoder
  hsiao_enc #(.K(META_W), .R(8)) u_meta_enc (
    .data_i({tcdm_we_o, tcdm_be_o, tcdm_add_o}),
    .code_o(meta_code)
  );
  assign tcdm_meta_ecc_o = meta_code[META_W +: 8];

  // Tag of the outstanding read
  tag_t tag_q;
  logic pend_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tag_q  <= '0;
      pend_q <= 1'b0;
    end else begin
      pend_q <= src_gnt_o;
      if (src_gnt_o) tag_q <= src_tag_i;
    end
  end

  // Payload decoders
  logic [N_WORDS-1:0] sgl, dbl;
  for (genvar w = 0; w < N_WORDS; w++) begin : g_dec
    hsiao_dec #(.K(32), .R(7)) u_dec (
      .code_i      (tcdm_r_data_i[w*WORD_ECC_W +: WORD_ECC_W]),
      .data_o      (rsp_o.data[w*32 +: 32]),
      .single_err_o(sgl[w]),
      .double_err_o(dbl[w])
    );
  end

  logic rvalid;
  assign rvalid      = tcdm_r_valid_i && pend_q;
  assign rsp_o.valid = rvalid;
  assign rsp_o.tag   = tag_q;
  assign ecc_corr_o  = rvalid ? 4'($countones(sgl)) : 4'd0;
  assign ecc_unc_o   = rvalid ? 4'($countones(dbl)) : 4'd0;

  // A granted read must be answered in the next cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni) pend_q |-> tcdm_r_valid_i)
    else $error("streamer: read response missing one cycle after grant");
endmodule
