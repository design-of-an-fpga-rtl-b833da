// qrm_accelerator -- quadrant-based neutral-atom rearrangement accelerator.
//
// Input: the occupancy bit-field of a W x W optical-trap array (1 = atom),
// sent as PKT_W-bit packets, row-major, bit R*W+C = row R (0 = north),
// column C (0 = west).  Output: a schedule of parallel one-site moves that
// compresses the atoms toward the array centre, followed by the array as it
// is after those moves.
//
// Structure (data flows left to right, all stages pipelined):
//   load_data           buffers the packets, then streams the four mirrored
//                       quadrants, one row of each per cycle;
//   quadrant_processing four identical pipelines; each runs N_ITER
//                       iterations of a row-wise and a column-wise shift pass
//                       and records the moves in original coordinates;
//   output_combination  merges the moves of quadrants on the same side,
//                       drops empty ones, packs them, rebuilds the final
//                       array and sends everything out as one stream.
// The rearrangement starts when the last input packet arrives; new input is
// refused until the last output beat has been accepted.  s_en_row / s_en_col
// block shifting at chosen distances from the centre (bit k = site k away);
// all ones lets every stage shift.
//
// Status: busy from the first input packet until done; done pulses with the
// last output beat; n_moves / n_dropped count the merged commands sent and
// the empty ones removed; cycles counts from the start of the rearrangement
// to done.
//
// Timing at W = 50, N_ITER = 4, output never stalled: 243 cycles from the
// last input packet to done (0.97 us at 250 MHz).  The quadrant pipelines
// take about 2*N_ITER*(W/2+1)+W/2 of these; the rest is loading, merging and the
// output beats.
//
// What follows the design this RTL is based on: the three-stage structure,
// the quadrant split and flip, the shift pipeline, four iterations, the
// pairing of quadrants when merging moves and the 1024-bit packets.  The
// stream formats, the control and the status outputs are this design's own.
module qrm_accelerator
  import qrm_pkg::*;
#(
  parameter int W          = 50,
  parameter int N_ITER     = 4,
  parameter int FIFO_DEPTH = out_fifo_depth(W, N_ITER)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [W/2-1:0]     s_en_row,
  input  logic [W/2-1:0]     s_en_col,
  // input stream
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  input  logic [PKT_W-1:0]   s_axis_tdata,
  input  logic               s_axis_tlast,
  // output stream
  output logic               m_axis_tvalid,
  input  logic               m_axis_tready,
  output logic [PKT_W-1:0]   m_axis_tdata,
  output logic               m_axis_tlast,
  output logic               m_axis_tuser,
  // status
  output logic               busy,
  output logic               done,
  output logic [15:0]        n_moves,
  output logic [15:0]        n_dropped,
  output logic [15:0]        cycles
);

  localparam int QW = W / 2;
  localparam int RW = rec_w(W, N_ITER);
  localparam int IW = $clog2(QW);

  initial assert (W % 2 == 0 && W >= 4) else $fatal(1, "W must be even and at least 4");

  logic          start;
  logic          q_valid, q_last;
  logic [QW-1:0] q_vec [4];

  logic          fin_valid [4];
  logic [QW-1:0] fin_vec   [4];
  logic [IW-1:0] fin_idx   [4];
  logic          fin_last  [4];
  logic          h_valid   [4];
  logic [RW-1:0] h_rec     [4];
  logic          v_valid   [4];
  logic [RW-1:0] v_rec     [4];
  logic          running;

  load_data #(.W(W)) u_ldm (
    .clk, .rst_n,
    .s_tvalid    (s_axis_tvalid),
    .s_tready    (s_axis_tready),
    .s_tdata     (s_axis_tdata),
    .s_tlast     (s_axis_tlast),
    .release_i   (done),
    .busy        (busy),
    .start_pulse (start),
    .q_valid, .q_vec, .q_last
  );

  for (genvar q = 0; q < 4; q++) begin : g_qpm
    quadrant_processing #(.W(W), .N_ITER(N_ITER), .QUAD(quad_e'(q))) u_qpm (
      .clk, .rst_n,
      .s_en_row,
      .s_en_col,
      .in_valid    (q_valid),
      .in_vec      (q_vec[q]),
      .in_last     (q_last),
      .fin_valid   (fin_valid[q]),
      .fin_vec     (fin_vec[q]),
      .fin_idx     (fin_idx[q]),
      .fin_last    (fin_last[q]),
      .h_rec_valid (h_valid[q]),
      .h_rec       (h_rec[q]),
      .v_rec_valid (v_valid[q]),
      .v_rec       (v_rec[q])
    );
  end

  output_combination #(.W(W), .N_ITER(N_ITER), .FIFO_DEPTH(FIFO_DEPTH)) u_ocm (
    .clk, .rst_n,
    .start,
    .h_valid, .h_rec, .v_valid, .v_rec,
    .fin_valid (fin_valid[0]),
    .fin_vec,
    .fin_idx   (fin_idx[0]),
    .fin_last  (fin_last[0]),
    .m_tvalid  (m_axis_tvalid),
    .m_tready  (m_axis_tready),
    .m_tdata   (m_axis_tdata),
    .m_tlast   (m_axis_tlast),
    .m_tuser   (m_axis_tuser),
    .done,
    .n_moves,
    .n_dropped
  );

  // rearrangement latency counter
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      cycles  <= '0;
    end else if (start) begin
      running <= 1'b1;
      cycles  <= '0;
    end else if (running) begin
      cycles <= cycles + 1'b1;
      if (done) running <= 1'b0;
    end
  end

  // The four quadrant pipelines run in lockstep.
  for (genvar q = 1; q < 4; q++) begin : g_lock
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      (fin_valid[q] == fin_valid[0]) && (h_valid[q] == h_valid[0]) && (v_valid[q] == v_valid[0]));
  end

endmodule
