// uloop: tiling unit (micro-loop) of the Safe-NEureka controller.
//
// Walks the four loops of a convolution layer, outermost first:
//   for ko_t in 0..ko_n-1      (output-channel blocks of 32)
//    for h_t in 0..h_n-1       (output row tiles of 4)
//     for w_t in w0..w_n-1 step (output column tiles of 2)
//      for ki_t in 0..ki_n-1   (input-channel blocks of 32)
// The step of the w loop is 2 in performance mode, where uloop 0 starts at
// w0=0 and uloop 1 at w0=1 so that the two datapaths take alternate column
// tiles, and 1 in redundancy mode. init_i restarts the walk, next_i moves to
// the next iteration, load_i overwrites the position with load_val_i (used
// to restore uloop 0 from the checkpoint held by uloop 1, and to move the
// checkpoint forward). idx_o is the current position, nxt_o the position
// next_i would reach, last_ki_o marks the last input-channel block,
// last_o the last iteration of the whole walk, valid_o that w_t is inside
// the layer (uloop 1 may run one column tile past the edge).
// Timing: commands act at the next clock edge; outputs are combinational
// from the state. The loop order, the stride-2 walk and the checkpoint role
// follow the paper's pseudo-code; the paper's uloop is programmable by
// microcode, this one is a fixed loop nest.
module uloop
  import neureka_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic [10:0] ko_n_i,
  input  logic [10:0] h_n_i,
  input  logic [10:0] w_n_i,
  input  logic [10:0] ki_n_i,
  input  logic        stride2_i,
  input  logic [10:0] w0_i,
  input  logic        init_i,
  input  logic        next_i,
  input  logic        load_i,
  input  tile_idx_t   load_val_i,
  output tile_idx_t   idx_o,
  output tile_idx_t   nxt_o,
  output logic        last_ki_o,
  output logic        last_o,
  output logic        valid_o
);
  tile_idx_t q;
  logic [10:0] step, w_next, base_w;
  logic        last_w, last_h, last_ko;

  assign step    = stride2_i ? 11'd2 : 11'd1;
  assign w_next  = q.w_t + step;
  assign base_w  = w0_i;
  assign last_ki_o = (q.ki_t + 11'd1 >= ki_n_i);
  assign last_w  = (w_next - base_w >= w_n_i);  // same count for both uloops
  assign last_h  = (q.h_t + 11'd1 >= h_n_i);
  assign last_ko = (q.ko_t + 11'd1 >= ko_n_i);
  assign last_o  = last_ki_o && last_w && last_h && last_ko;
  assign valid_o = (q.w_t < w_n_i);

  always_comb begin
    nxt_o = q;
    if (!last_ki_o) begin
      nxt_o.ki_t = q.ki_t + 11'd1;
    end else begin
      nxt_o.ki_t = '0;
      if (!last_w) begin
        nxt_o.w_t = w_next;
      end else begin
        nxt_o.w_t = base_w;
        if (!last_h) begin
          nxt_o.h_t = q.h_t + 11'd1;
        end else begin
          nxt_o.h_t  = '0;
          nxt_o.ko_t = last_ko ? '0 : q.ko_t + 11'd1;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     q <= '0;
    else if (init_i) q <= '{ko_t: '0, h_t: '0, w_t: base_w, ki_t: '0};
    else if (load_i) q <= load_val_i;
    else if (next_i) q <= nxt_o;
  end

  assign idx_o = q;
endmodule
