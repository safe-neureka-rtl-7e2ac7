// controller_core: one copy of the Safe-NEureka controller (register file,
// control FSM, two uloops and address generation). The controller module
// instantiates three of these and votes on their outputs.
//
// A job computes a 3x3 convolution (stride 1, no padding) of a KI-channel
// input into a KO x HO x WO output, tile by tile. A tile is 4x2 output
// pixels by 32 output channels; for each tile the FSM runs, per 32-channel
// input block, INPUT LOAD (24 pixels into an input buffer) and MM (32 input
// channels x 8 weight beats), then, after the last input block, OUTPUT
// CHECK (redundancy mode only) and STREAMOUT (8 output beats).
//
// Performance mode: uloop 0 walks the even and uloop 1 the odd column tiles.
// INPUT LOAD fills buffer 0 then buffer 1 back to back, MM feeds both
// datapaths at once, STREAMOUT drains datapath 0 then datapath 1.
// Redundancy mode: uloop 0 walks every tile and each pixel is sent to both
// buffers; uloop 1 stays at the first input block of the current tile as a
// checkpoint. If the check finds a mismatch the FSM enters ERROR, counts it,
// reloads uloop 0 from uloop 1, clears the accumulators and recomputes the
// tile from INPUT LOAD; a passing check lets the tile stream out and moves
// the checkpoint to the next tile.
//
// Memory layouts (byte addresses, all this design's own):
//   input   in_ptr  + ((h*(WO+2) + w)*KI + c)            c = channel
//   weights wt_ptr  + ((ko_blk*KI + ki)*8 + beat)*36     36 bytes = 4 ch x 9 taps
//   output  out_ptr + ((h*WO + w)*KO + ko_blk*32)        32 bytes per pixel block
// KI and KO must be multiples of 32, HO of 4 and WO of 2.
// Timing: one request per cycle while the memory grants; the FSM leaves MM
// only when no read is still in flight. The state sequence, the serialised
// loads/stores, the checkpoint rollback and the 2+TIMESHIFT-cycle check
// follow the paper; the rest is this design's own.
module controller_core
  import neureka_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             cfg_req_i,
  input  logic             cfg_we_i,
  input  logic [3:0]       cfg_addr_i,
  input  logic [31:0]      cfg_wdata_i,
  input  logic             src_gnt_i,
  input  logic             snk_gnt_i,
  input  logic             mismatch_i,
  input  logic [3:0]       ecc_corr_i,
  input  logic [3:0]       ecc_unc_i,
  output ctrl_out_t        out_o
);
  job_cfg_t cfg;
  logic     start;
  state_e   state_q, state_d;
  logic [7:0] cnt_q, cnt_d;
  logic       dp_q, dp_d;
  logic [3:0] chk_q, chk_d;
  logic       issued_q, issued_d;
  logic       pend_q;
  logic       clear, err_inc;
  logic       busy;

  // uloop commands
  logic       u_init, u_next, u0_load, u1_load;
  tile_idx_t  u0_idx, u0_nxt, u1_idx, u1_nxt, u0_ld_val, u1_ld_val;
  logic       u0_last_ki, u0_last, u0_valid, u1_last_ki, u1_last, u1_valid;
  logic [10:0] n_ko, n_h, n_w, n_ki;

  assign busy = (state_q != S_IDLE);
  assign n_ko = cfg.ko[15:5];
  assign n_h  = 11'(cfg.ho[15:2]);
  assign n_w  = 11'(cfg.wo[15:1]);
  assign n_ki = cfg.ki[15:5];

  regfile u_regfile (
    .clk_i, .rst_ni,
    .cfg_req_i, .cfg_we_i, .cfg_addr_i, .cfg_wdata_i,
    .cfg_rdata_o (out_o.cfg_rdata),
    .cfg_rvalid_o(out_o.cfg_rvalid),
    .busy_i      (busy),
    .err_inc_i   (err_inc),
    .ecc_corr_i, .ecc_unc_i,
    .cfg_o       (cfg),
    .start_o     (start)
  );

  uloop u_uloop0 (
    .clk_i, .rst_ni,
    .ko_n_i(n_ko), .h_n_i(n_h), .w_n_i(n_w), .ki_n_i(n_ki),
    .stride2_i(!cfg.redundancy), .w0_i(11'd0),
    .init_i(u_init), .next_i(u_next), .load_i(u0_load), .load_val_i(u0_ld_val),
    .idx_o(u0_idx), .nxt_o(u0_nxt), .last_ki_o(u0_last_ki), .last_o(u0_last),
    .valid_o(u0_valid)
  );

  uloop u_uloop1 (
    .clk_i, .rst_ni,
    .ko_n_i(n_ko), .h_n_i(n_h), .w_n_i(n_w), .ki_n_i(n_ki),
    .stride2_i(!cfg.redundancy), .w0_i(cfg.redundancy ? 11'd0 : 11'd1),
    .init_i(u_init), .next_i(u_next && !cfg.redundancy), .load_i(u1_load),
    .load_val_i(u1_ld_val),
    .idx_o(u1_idx), .nxt_o(u1_nxt), .last_ki_o(u1_last_ki), .last_o(u1_last),
    .valid_o(u1_valid)
  );

  assign u0_ld_val = u1_idx;   // rollback: restore from the checkpoint
  assign u1_ld_val = u0_nxt;   // checkpoint advance: next tile, first input block

  // Address generation for the tile of the datapath being served
  tile_idx_t t;
  logic [31:0] wi, in_addr, wt_addr, out_addr;
  logic [31:0] h_in, w_in, h_out, w_out, ic_abs;
  assign t = dp_q ? u1_idx : u0_idx;
  always_comb begin
    wi      = 32'(cfg.wo) + 32'd2;
    h_in    = 32'(t.h_t) * SUB_H + 32'(cnt_q[4:0] / 5'(IN_W));
    w_in    = 32'(t.w_t) * SUB_W + 32'(cnt_q[4:0] % 5'(IN_W));
    in_addr = cfg.in_ptr + (h_in * wi + w_in) * 32'(cfg.ki) + 32'(t.ki_t) * CH_BLK;
    ic_abs  = 32'(t.ki_t) * CH_BLK + 32'(cnt_q[7:3]);
    wt_addr = cfg.wt_ptr
            + ((32'(t.ko_t) * 32'(cfg.ki) + ic_abs) * BEATS_PER_IC + 32'(cnt_q[2:0])) * BE_W;
    h_out   = 32'(t.h_t) * SUB_H + 32'(cnt_q[2:0] / 3'(SUB_W));
    w_out   = 32'(t.w_t) * SUB_W + 32'(cnt_q[2:0] % 3'(SUB_W));
    out_addr = cfg.out_ptr + (h_out * 32'(cfg.wo) + w_out) * 32'(cfg.ko) + 32'(t.ko_t) * CH_BLK;
  end

  // FSM
  always_comb begin
    state_d  = state_q;
    cnt_d    = cnt_q;
    dp_d     = dp_q;
    chk_d    = chk_q;
    issued_d = issued_q;
    clear    = 1'b0;
    err_inc  = 1'b0;
    u_init   = 1'b0;
    u_next   = 1'b0;
    u0_load  = 1'b0;
    u1_load  = 1'b0;

    out_o.src_valid = 1'b0;
    out_o.src_addr  = '0;
    out_o.src_tag   = '0;
    out_o.snk_valid = 1'b0;
    out_o.snk_addr  = out_addr;
    out_o.eng.chk_en = 1'b0;

    unique case (state_q)
      S_IDLE: begin
        if (start) begin
          u_init  = 1'b1;
          clear   = 1'b1;
          cnt_d   = '0;
          dp_d    = 1'b0;
          state_d = S_LOAD;
        end
      end
      S_LOAD: begin
        out_o.src_valid     = 1'b1;
        out_o.src_addr      = in_addr;
        out_o.src_tag.is_wt = 1'b0;
        out_o.src_tag.bmask = cfg.redundancy ? 2'b11 : (dp_q ? 2'b10 : 2'b01);
        out_o.src_tag.idx   = {3'd0, cnt_q[4:0]};
        if (src_gnt_i) begin
          cnt_d = cnt_q + 8'd1;
          if (cnt_q == 8'(N_PIX - 1)) begin
            cnt_d = '0;
            if (!cfg.redundancy && !dp_q && u1_valid) dp_d = 1'b1;
            else begin
              dp_d     = 1'b0;
              issued_d = 1'b0;
              state_d  = S_MM;
            end
          end
        end
      end
      S_MM: begin
        out_o.src_valid     = !issued_q;
        out_o.src_addr      = wt_addr;
        out_o.src_tag.is_wt = 1'b1;
        out_o.src_tag.bmask = 2'b11;
        out_o.src_tag.idx   = cnt_q;
        if (!issued_q && src_gnt_i) begin
          cnt_d = cnt_q + 8'd1;
          if (cnt_q == 8'(CH_BLK * BEATS_PER_IC - 1)) issued_d = 1'b1;
        end
        if (issued_q && !pend_q) begin
          cnt_d = '0;
          dp_d  = 1'b0;
          if (!u0_last_ki) begin
            u_next  = 1'b1;
            state_d = S_LOAD;
          end else if (cfg.redundancy) begin
            chk_d   = '0;
            state_d = S_CHECK;
          end else begin
            state_d = S_STREAMOUT;
          end
        end
      end
      S_CHECK: begin
        out_o.eng.chk_en = 1'b1;
        chk_d = chk_q + 4'd1;
        if (chk_q == 4'(TIMESHIFT + 1)) begin
          state_d = mismatch_i ? S_ERROR : S_STREAMOUT;
        end
      end
      S_ERROR: begin
        err_inc = 1'b1;
        u0_load = 1'b1;
        clear   = 1'b1;
        cnt_d   = '0;
        state_d = S_LOAD;
      end
      S_STREAMOUT: begin
        out_o.snk_valid = 1'b1;
        if (snk_gnt_i) begin
          cnt_d = cnt_q + 8'd1;
          if (cnt_q == 8'(N_PE - 1)) begin
            cnt_d = '0;
            if (!cfg.redundancy && !dp_q && u1_valid) dp_d = 1'b1;
            else begin
              dp_d  = 1'b0;
              clear = 1'b1;
              if (u0_last) state_d = S_DONE;
              else begin
                u_next  = 1'b1;
                u1_load = cfg.redundancy;
                state_d = S_LOAD;
              end
            end
          end
        end
      end
      S_DONE: begin
        state_d = S_IDLE;
      end
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= S_IDLE;
      cnt_q    <= '0;
      dp_q     <= 1'b0;
      chk_q    <= '0;
      issued_q <= 1'b0;
      pend_q   <= 1'b0;
    end else begin
      state_q  <= state_d;
      cnt_q    <= cnt_d;
      dp_q     <= dp_d;
      chk_q    <= chk_d;
      issued_q <= issued_d;
      pend_q   <= out_o.src_valid && src_gnt_i;
    end
  end

  assign out_o.eng.redundancy = cfg.redundancy;
  assign out_o.eng.clear      = clear;
  assign out_o.eng.so_dp      = dp_q;
  assign out_o.eng.so_pe      = cnt_q[2:0];
  assign out_o.eng.quant      = cfg.quant;
  assign out_o.busy           = busy;
  assign out_o.done           = (state_q == S_DONE);
  assign out_o.err_detected   = err_inc;
  assign out_o.state          = state_q;
endmodule
