// regfile: memory-mapped register file of the Safe-NEureka controller.
//
// Holds the job description (pointers, layer sizes, quantisation), the HMR
// mode bit and three error counters. The configuration port is a simple
// request port: a write takes effect at the next clock edge; a read returns
// cfg_rdata_o with cfg_rvalid_o one cycle after the request.
//
// Map (word offsets, see neureka_pkg): 0 TRIGGER (write starts a job),
// 1 STATUS (bit 0 busy), 2 HMR_MODE (bit 0: 1 = redundancy), 3 ERR_STATUS
// (datapath mismatches detected by the output checker), 4 ECC_CORR and
// 5 ECC_UNC (corrected / uncorrectable words seen by the streamer),
// 6..8 input, weight and output pointers, 9..12 KI, KO, HO, WO,
// 13 QUANT ([7:0] scale, [12:8] shift). Writing a counter clears it.
// While a job runs (busy_i) writes to the job registers, the mode and the
// trigger are ignored: the mode can only change while the accelerator is
// idle, and it applies to every later job.
// The mode field, the error_status register and the ECC counters are named
// by the paper; the map and widths are this design's own.
module regfile
  import neureka_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        cfg_req_i,
  input  logic        cfg_we_i,
  input  logic [3:0]  cfg_addr_i,
  input  logic [31:0] cfg_wdata_i,
  output logic [31:0] cfg_rdata_o,
  output logic        cfg_rvalid_o,
  input  logic        busy_i,
  input  logic        err_inc_i,
  input  logic [3:0]  ecc_corr_i,
  input  logic [3:0]  ecc_unc_i,
  output job_cfg_t    cfg_o,
  output logic        start_o
);
  job_cfg_t    cfg_q;
  logic [31:0] err_q, corr_q, unc_q;
  logic        wr, rd;

  assign wr = cfg_req_i && cfg_we_i;
  assign rd = cfg_req_i && !cfg_we_i;
  assign start_o = wr && !busy_i && (cfg_addr_i == REG_TRIGGER);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q <= '0;
      err_q <= '0; corr_q <= '0; unc_q <= '0;
      cfg_rdata_o <= '0; cfg_rvalid_o <= 1'b0;
    end else begin
      // counters
      if (wr && cfg_addr_i == REG_ERR_STAT) err_q <= '0;
      else if (err_inc_i)                   err_q <= err_q + 32'd1;
      if (wr && cfg_addr_i == REG_ECC_CORR) corr_q <= '0;
      else                                  corr_q <= corr_q + 32'(ecc_corr_i);
      if (wr && cfg_addr_i == REG_ECC_UNC)  unc_q <= '0;
      else                                  unc_q <= unc_q + 32'(ecc_unc_i);
      // job registers
      if (wr && !busy_i) begin
        unique case (cfg_addr_i)
          REG_HMR_MODE: cfg_q.redundancy <= cfg_wdata_i[0];
          REG_IN_PTR:   cfg_q.in_ptr     <= cfg_wdata_i;
          REG_WT_PTR:   cfg_q.wt_ptr     <= cfg_wdata_i;
          REG_OUT_PTR:  cfg_q.out_ptr    <= cfg_wdata_i;
          REG_KI:       cfg_q.ki         <= cfg_wdata_i[15:0];
          REG_KO:       cfg_q.ko         <= cfg_wdata_i[15:0];
          REG_HO:       cfg_q.ho         <= cfg_wdata_i[15:0];
          REG_WO:       cfg_q.wo         <= cfg_wdata_i[15:0];
          REG_QUANT:    cfg_q.quant      <= '{scale: cfg_wdata_i[7:0], shift: cfg_wdata_i[12:8]};
          default: ;
        endcase
      end
      // read port
      cfg_rvalid_o <= rd;
      if (rd) begin
        unique case (cfg_addr_i)
          REG_STATUS:   cfg_rdata_o <= {31'd0, busy_i};
          REG_HMR_MODE: cfg_rdata_o <= {31'd0, cfg_q.redundancy};
          REG_ERR_STAT: cfg_rdata_o <= err_q;
          REG_ECC_CORR: cfg_rdata_o <= corr_q;
          REG_ECC_UNC:  cfg_rdata_o <= unc_q;
          REG_IN_PTR:   cfg_rdata_o <= cfg_q.in_ptr;
          REG_WT_PTR:   cfg_rdata_o <= cfg_q.wt_ptr;
          REG_OUT_PTR:  cfg_rdata_o <= cfg_q.out_ptr;
          REG_KI:       cfg_rdata_o <= {16'd0, cfg_q.ki};
          REG_KO:       cfg_rdata_o <= {16'd0, cfg_q.ko};
          REG_HO:       cfg_rdata_o <= {16'd0, cfg_q.ho};
          REG_WO:       cfg_rdata_o <= {16'd0, cfg_q.wo};
          REG_QUANT:    cfg_rdata_o <= {19'd0, cfg_q.quant.shift, cfg_q.quant.scale};
          default:      cfg_rdata_o <= '0;
        endcase
      end
    end
  end

  assign cfg_o = cfg_q;
endmodule
