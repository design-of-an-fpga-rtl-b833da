// row_combination -- Row Combination Unit.
//
// Merges the move records of the four quadrant pipelines into the moves of
// the whole array and reassembles the final array.
//
// Merging.  All four quadrants run in lockstep, so records of the same step
// arrive in the same cycle.  Quadrants on the same side of the centre share
// the same moving columns (or rows), so one command can serve both:
//   west  = NW | SW horizontal      east  = NE | SE horizontal
//   north = NW | NE vertical        south = SW | SE vertical
// The selections of the two records lie in disjoint halves, so they are ORed.
// A merged command whose selection is empty is dropped (and flagged on
// m_drop), so the schedule carries no empty shifts.  Output lane order:
// 0 west, 1 east, 2 north, 3 south.
//
// Final array.  The final quadrant rows of the last iteration arrive with
// their quadrant-local index k; row k of NW and NE make up original row
// QW-1-k, row k of SW and SE original row QW+k, each half mirrored back.
// final_done pulses once the last row is stored; final_bits is row-major,
// bit R*W+C = row R, column C.
//
// The four pairings and the removal of empty shifts follow the design this
// RTL is based on; merging on the fly instead of through a FIFO, the lane
// order and the final-array assembly here are this design's choices.
//
// Timing: merged records and stored rows are registered (one cycle).
module row_combination
  import qrm_pkg::*;
#(
  parameter int W      = 50,
  parameter int N_ITER = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         h_valid [4],
  input  logic [rec_w(W, N_ITER)-1:0]  h_rec   [4],
  input  logic                         v_valid [4],
  input  logic [rec_w(W, N_ITER)-1:0]  v_rec   [4],
  input  logic                         fin_valid,
  input  logic [W/2-1:0]               fin_vec [4],
  input  logic [$clog2(W/2)-1:0]       fin_idx,
  input  logic                         fin_last,
  output logic                         m_valid [4],
  output logic [rec_w(W, N_ITER)-1:0]  m_rec   [4],
  output logic                         m_drop  [4],
  output logic [W*W-1:0]               final_bits,
  output logic                         final_done
);

  localparam int QW = W / 2;
  localparam int RW = rec_w(W, N_ITER);

  logic [W-1:0]  rows [W];
  logic          pv   [4];
  logic [RW-1:0] pr   [4];

  // pair (a, b) for each output lane
  function automatic void merge(input logic va, input logic [RW-1:0] ra,
                                input logic vb, input logic [RW-1:0] rb,
                                output logic v, output logic [RW-1:0] r);
    v = va | vb;
    r = va ? ra : rb;
    r[W-1:0] = (va ? ra[W-1:0] : '0) | (vb ? rb[W-1:0] : '0);
  endfunction

  always_comb begin
    merge(h_valid[QUAD_NW], h_rec[QUAD_NW], h_valid[QUAD_SW], h_rec[QUAD_SW], pv[0], pr[0]);
    merge(h_valid[QUAD_NE], h_rec[QUAD_NE], h_valid[QUAD_SE], h_rec[QUAD_SE], pv[1], pr[1]);
    merge(v_valid[QUAD_NW], v_rec[QUAD_NW], v_valid[QUAD_NE], v_rec[QUAD_NE], pv[2], pr[2]);
    merge(v_valid[QUAD_SW], v_rec[QUAD_SW], v_valid[QUAD_SE], v_rec[QUAD_SE], pv[3], pr[3]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < 4; l++) begin
        m_valid[l] <= 1'b0;
        m_drop[l]  <= 1'b0;
        m_rec[l]   <= '0;
      end
      final_done <= 1'b0;
    end else begin
      for (int l = 0; l < 4; l++) begin
        m_valid[l] <= pv[l] && (pr[l][W-1:0] != '0);
        m_drop[l]  <= pv[l] && (pr[l][W-1:0] == '0);
        if (pv[l]) m_rec[l] <= pr[l];
      end
      final_done <= fin_valid && fin_last;
    end
  end

  function automatic logic [QW-1:0] reverse(input logic [QW-1:0] v);
    for (int j = 0; j < QW; j++) reverse[j] = v[QW-1-j];
  endfunction

  // Final array rows: written once per job, fully overwritten each job.
  always_ff @(posedge clk) begin
    if (fin_valid) begin
      rows[QW-1-int'(fin_idx)] <= {fin_vec[QUAD_NE], reverse(fin_vec[QUAD_NW])};
      rows[QW+int'(fin_idx)]   <= {fin_vec[QUAD_SE], reverse(fin_vec[QUAD_SW])};
    end
  end

  always_comb
    for (int r = 0; r < W; r++) final_bits[r*W +: W] = rows[r];

  // Records paired here must describe the same step.
  for (genvar p = 0; p < 2; p++) begin : g_chk
    a_h_pair: assert property (@(posedge clk) disable iff (!rst_n)
      (h_valid[p] && h_valid[p+2]) |-> (h_rec[p][RW-1:W] == h_rec[p+2][RW-1:W]));
  end

endmodule
