// quadrant_processing -- Quadrant Processing Module (QPM) for one quadrant.
//
// Two shift kernels in series.  The first takes the quadrant's rows (bit 0
// next to the centre column) and compresses each row toward the centre
// column; its output stream is the quadrant's columns.  The second takes
// those columns as lines, compresses each toward the centre row, and outputs
// rows again.  One row-wise plus one column-wise pass is an iteration; the
// output of the second kernel is fed back into the first until N_ITER
// iterations are done, after which the rows are the quadrant's final state.
// The iteration number travels with the data as a tag, so no extra control
// is needed.  A movement recording unit turns the "moved" vectors of both
// kernels into move records in original array coordinates.
//
// Following the design this RTL is based on: row-then-column shifting
// repeated a fixed number of times (four), one pathway per quadrant, and the
// reuse of the same kernel for both directions by treating columns as rows.
// This design's choice: a separate kernel instance per direction chained
// with a loop-back, as the two units and the arrows between them in the
// block diagram suggest.
//
// Timing: first input row at t0; iteration n's column-wise output lines at
// t0 + (n+1)*2*(QW+1) + k, k = 0..QW-1, so the final rows are out at
// t0 + 2*N_ITER*(QW+1) + k.  Input must not arrive while a job is running.
module quadrant_processing
  import qrm_pkg::*;
#(
  parameter int    W      = 50,
  parameter int    N_ITER = 4,
  parameter quad_e QUAD   = QUAD_NW
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [W/2-1:0]               s_en_row,
  input  logic [W/2-1:0]               s_en_col,
  input  logic                         in_valid,
  input  logic [W/2-1:0]               in_vec,
  input  logic                         in_last,
  // final rows of the quadrant (quadrant-local, bit 0 next to the centre)
  output logic                         fin_valid,
  output logic [W/2-1:0]               fin_vec,
  output logic [$clog2(W/2)-1:0]       fin_idx,
  output logic                         fin_last,
  // move records
  output logic                         h_rec_valid,
  output logic [rec_w(W, N_ITER)-1:0]  h_rec,
  output logic                         v_rec_valid,
  output logic [rec_w(W, N_ITER)-1:0]  v_rec
);

  localparam int QW = W / 2;
  localparam int TW = tag_w(N_ITER);
  localparam int IW = $clog2(QW);

  // row-wise kernel
  logic           rk_in_valid, rk_in_last;
  logic [QW-1:0]  rk_in_vec;
  logic [TW-1:0]  rk_in_tag;
  logic           rk_valid, rk_last;
  logic [QW-1:0]  rk_vec, rk_cmd, rk_mov;
  logic [IW-1:0]  rk_idx;
  logic [TW-1:0]  rk_tag;
  // column-wise kernel
  logic           ck_valid, ck_last;
  logic [QW-1:0]  ck_vec, ck_cmd, ck_mov;
  logic [IW-1:0]  ck_idx;
  logic [TW-1:0]  ck_tag;

  logic           loop_valid, is_final;

  assign is_final   = (int'(ck_tag) == N_ITER - 1);
  assign loop_valid = ck_valid && !is_final;

  always_comb begin
    if (in_valid) begin
      rk_in_valid = 1'b1;
      rk_in_vec   = in_vec;
      rk_in_last  = in_last;
      rk_in_tag   = '0;
    end else begin
      rk_in_valid = loop_valid;
      rk_in_vec   = ck_vec;
      rk_in_last  = ck_last;
      rk_in_tag   = ck_tag + 1'b1;
    end
  end

  shift_kernel #(.QW(QW), .TAG_W(TW)) u_row_kernel (
    .clk, .rst_n,
    .s_en      (s_en_row),
    .in_valid  (rk_in_valid),
    .in_vec    (rk_in_vec),
    .in_last   (rk_in_last),
    .in_tag    (rk_in_tag),
    .out_valid (rk_valid),
    .out_vec   (rk_vec),
    .out_cmd   (rk_cmd),
    .out_mov   (rk_mov),
    .out_idx   (rk_idx),
    .out_last  (rk_last),
    .out_tag   (rk_tag)
  );

  shift_kernel #(.QW(QW), .TAG_W(TW)) u_col_kernel (
    .clk, .rst_n,
    .s_en      (s_en_col),
    .in_valid  (rk_valid),
    .in_vec    (rk_vec),
    .in_last   (rk_last),
    .in_tag    (rk_tag),
    .out_valid (ck_valid),
    .out_vec   (ck_vec),
    .out_cmd   (ck_cmd),
    .out_mov   (ck_mov),
    .out_idx   (ck_idx),
    .out_last  (ck_last),
    .out_tag   (ck_tag)
  );

  movement_recording #(.W(W), .N_ITER(N_ITER), .QUAD(QUAD)) u_rec (
    .clk, .rst_n,
    .h_valid     (rk_valid),
    .h_mov       (rk_mov),
    .h_idx       (rk_idx),
    .h_tag       (rk_tag),
    .v_valid     (ck_valid),
    .v_mov       (ck_mov),
    .v_idx       (ck_idx),
    .v_tag       (ck_tag),
    .h_rec_valid (h_rec_valid),
    .h_rec       (h_rec),
    .v_rec_valid (v_rec_valid),
    .v_rec       (v_rec)
  );

  assign fin_valid = ck_valid && is_final;
  assign fin_vec   = ck_vec;
  assign fin_idx   = ck_idx;
  assign fin_last  = ck_valid && is_final && ck_last;

  // The raw shift commands are kept for observation only; the schedule is
  // built from the "moved" vectors, which drop shifts that move nothing.
  logic unused_cmd;
  assign unused_cmd = ^{rk_cmd, ck_cmd};

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    !(in_valid && loop_valid));

endmodule
