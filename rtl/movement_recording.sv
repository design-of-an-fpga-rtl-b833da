// movement_recording -- movement recording unit of one quadrant.
//
// The two shift kernels of a quadrant report, for every step k of a pass, a
// "moved" vector over the lines of the quadrant (bit r: line r had its site k
// empty and atoms beyond it slid one site toward the centre).  This unit
// undoes the quadrant flip and turns each report into a move record in the
// coordinates of the original W x W array (record layout: see qrm_pkg):
//   horizontal (row-wise kernel): the hole is in original column
//       QW-1-k (west quadrants) or QW+k (east quadrants); the selection is
//       over original rows, line r = row QW-1-r (north) or QW+r (south);
//   vertical (column-wise kernel): the hole is in original row QW-1-k
//       (north) or QW+k (south); the selection is over original columns,
//       line j = column QW-1-j (west) or QW+j (east).
// Selection bits outside this quadrant's half are 0, so the records of two
// quadrants on the same side can simply be ORed downstream.
//
// That a per-quadrant unit restores the original positions of the moves comes
// from the design this RTL follows; the record format is this design's own.
// Every move of this schedule is one site long, so no step count is stored.
//
// Timing: records are registered, one cycle after the kernel outputs.
module movement_recording
  import qrm_pkg::*;
#(
  parameter int    W      = 50,
  parameter int    N_ITER = 4,
  parameter quad_e QUAD   = QUAD_NW
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              h_valid,
  input  logic [W/2-1:0]                    h_mov,
  input  logic [$clog2(W/2)-1:0]            h_idx,
  input  logic [tag_w(N_ITER)-1:0]          h_tag,
  input  logic                              v_valid,
  input  logic [W/2-1:0]                    v_mov,
  input  logic [$clog2(W/2)-1:0]            v_idx,
  input  logic [tag_w(N_ITER)-1:0]          v_tag,
  output logic                              h_rec_valid,
  output logic [rec_w(W, N_ITER)-1:0]       h_rec,
  output logic                              v_rec_valid,
  output logic [rec_w(W, N_ITER)-1:0]       v_rec
);

  localparam int QW = W / 2;
  localparam int XW = idx_w(W);

  logic [W-1:0]  h_sel, v_sel;
  logic [XW-1:0] h_line, v_line;

  always_comb begin
    h_sel = '0;
    v_sel = '0;
    for (int r = 0; r < QW; r++) begin
      if (is_north(QUAD)) h_sel[QW-1-r] = h_mov[r];
      else                h_sel[QW+r]   = h_mov[r];
      if (is_west(QUAD))  v_sel[QW-1-r] = v_mov[r];
      else                v_sel[QW+r]   = v_mov[r];
    end
    h_line = is_west(QUAD)  ? XW'(QW - 1 - int'(h_idx)) : XW'(QW + int'(h_idx));
    v_line = is_north(QUAD) ? XW'(QW - 1 - int'(v_idx)) : XW'(QW + int'(v_idx));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_rec_valid <= 1'b0;
      v_rec_valid <= 1'b0;
      h_rec       <= '0;
      v_rec       <= '0;
    end else begin
      h_rec_valid <= h_valid;
      v_rec_valid <= v_valid;
      if (h_valid) h_rec <= {h_tag, AXIS_H, ~is_west(QUAD),  h_line, h_sel};
      if (v_valid) v_rec <= {v_tag, AXIS_V, ~is_north(QUAD), v_line, v_sel};
    end
  end

endmodule
