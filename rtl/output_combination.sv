// output_combination -- Output Combination Module (OCM).
//
// Turns what the four quadrant pipelines produce into one output stream:
//   1. row_combination merges the quadrants' move records (dropping empty
//      shifts) and rebuilds the final W x W array;
//   2. moves_packer packs the merged records into PKT_W-bit beats;
//   3. after the last final row, the packer is flushed and the final array is
//      cut into NPKT = ceil(W*W/PKT_W) beats (row-major, bit R*W+C);
//   4. all beats pass through a FIFO to the output stream, so the stream may
//      stall without stalling the kernels.
// Stream format: move beats first (m_tuser = 1), then the array beats
// (m_tuser = 0), m_tlast on the last array beat.  The number of records of a move beat is not sent: unused
// record slots are all zero, and a real record never is, because its
// selection is never empty.  n_moves counts the merged records of the job.
//
// That moves and final array leave through a single stream follows the
// design this RTL is based on; the beat order, tuser, the FIFO and the
// counters are this design's choices.
//
// Timing: records reach the FIFO two cycles after they leave the quadrant
// pipelines; the array beats follow the last final row after FLUSH_WAIT+1
// cycles; `done` pulses when the beat with m_tlast is accepted.
module output_combination
  import qrm_pkg::*;
#(
  parameter int W          = 50,
  parameter int N_ITER     = 4,
  parameter int FIFO_DEPTH = out_fifo_depth(W, N_ITER)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic                         h_valid [4],
  input  logic [rec_w(W, N_ITER)-1:0]  h_rec   [4],
  input  logic                         v_valid [4],
  input  logic [rec_w(W, N_ITER)-1:0]  v_rec   [4],
  input  logic                         fin_valid,
  input  logic [W/2-1:0]               fin_vec [4],
  input  logic [$clog2(W/2)-1:0]       fin_idx,
  input  logic                         fin_last,
  output logic                         m_tvalid,
  input  logic                         m_tready,
  output logic [PKT_W-1:0]             m_tdata,
  output logic                         m_tlast,
  output logic                         m_tuser,
  output logic                         done,
  output logic [15:0]                  n_moves,
  output logic [15:0]                  n_dropped
);

  localparam int RW   = rec_w(W, N_ITER);
  localparam int RPB  = PKT_W / RW;
  localparam int NPKT = (W*W + PKT_W - 1) / PKT_W;
  localparam int PCW  = (NPKT > 1) ? $clog2(NPKT) : 1;
  // cycles from final_done until the last record has been taken by the packer
  localparam int FLUSH_WAIT = 2;

  // worst case: 4 merged records per step, QW steps per pass, 2 passes
  localparam int MAX_RECS = N_ITER * 2 * 2 * (W / 2);
  initial assert (FIFO_DEPTH >= (MAX_RECS + RPB - 1) / RPB + NPKT)
    else $fatal(1, "FIFO_DEPTH too small for one job");

  logic          m_valid [4];
  logic [RW-1:0] m_rec   [4];
  logic          m_drop  [4];
  logic [W*W-1:0] final_bits;
  logic          final_done;

  logic          beat_valid;
  logic [PKT_W-1:0] beat_data;
  logic [$clog2(RPB+1)-1:0] beat_count;

  row_combination #(.W(W), .N_ITER(N_ITER)) u_rowcomb (
    .clk, .rst_n,
    .h_valid, .h_rec, .v_valid, .v_rec,
    .fin_valid, .fin_vec, .fin_idx, .fin_last,
    .m_valid, .m_rec, .m_drop,
    .final_bits, .final_done
  );

  typedef enum logic [1:0] {O_RUN, O_WAIT, O_ARRAY, O_DRAIN} ostate_e;
  ostate_e        ost;
  logic [1:0]     wait_cnt;
  logic [PCW-1:0] pkt_cnt;
  logic           flush;

  assign flush = (ost == O_WAIT) && (wait_cnt == 2'(FLUSH_WAIT));

  moves_packer #(.W(W), .N_ITER(N_ITER)) u_packer (
    .clk, .rst_n,
    .in_valid (m_valid),
    .in_rec   (m_rec),
    .flush,
    .beat_valid, .beat_data, .beat_count
  );

  logic [NPKT*PKT_W-1:0] final_pad;
  assign final_pad = {{(NPKT*PKT_W - W*W){1'b0}}, final_bits};

  logic             f_in_valid;
  logic [PKT_W+1:0] f_in_data, f_out_data;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_level;

  always_comb begin
    if (ost == O_ARRAY) begin
      f_in_valid = 1'b1;
      f_in_data  = {1'b0, (int'(pkt_cnt) == NPKT - 1), final_pad[int'(pkt_cnt)*PKT_W +: PKT_W]};
    end else begin
      f_in_valid = beat_valid;
      f_in_data  = {1'b1, 1'b0, beat_data};
    end
  end

  stream_fifo #(.WIDTH(PKT_W + 2), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid  (f_in_valid),
    .in_data   (f_in_data),
    .out_valid (m_tvalid),
    .out_ready (m_tready),
    .out_data  (f_out_data),
    .level     (f_level)
  );

  assign m_tuser = f_out_data[PKT_W+1];
  assign m_tlast = f_out_data[PKT_W];
  assign m_tdata = f_out_data[PKT_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ost       <= O_RUN;
      wait_cnt  <= '0;
      pkt_cnt   <= '0;
      done      <= 1'b0;
      n_moves   <= '0;
      n_dropped <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n_moves   <= '0;
        n_dropped <= '0;
      end else begin
        n_moves   <= n_moves   + 16'(int'(m_valid[0]) + int'(m_valid[1]) + int'(m_valid[2]) + int'(m_valid[3]));
        n_dropped <= n_dropped + 16'(int'(m_drop[0]) + int'(m_drop[1]) + int'(m_drop[2]) + int'(m_drop[3]));
      end
      unique case (ost)
        O_RUN: if (final_done) begin
          ost      <= O_WAIT;
          wait_cnt <= '0;
        end
        O_WAIT: begin
          wait_cnt <= wait_cnt + 1'b1;
          // the flushed beat (if any) is written in the cycle after flush
          if (wait_cnt == 2'(FLUSH_WAIT + 1)) begin
            ost     <= O_ARRAY;
            pkt_cnt <= '0;
          end
        end
        O_ARRAY: begin
          if (int'(pkt_cnt) == NPKT - 1) ost <= O_DRAIN;
          else pkt_cnt <= pkt_cnt + 1'b1;
        end
        O_DRAIN: if (m_tvalid && m_tready && m_tlast) begin
          done <= 1'b1;
          ost  <= O_RUN;
        end
        default: ost <= O_RUN;
      endcase
    end
  end

  logic unused;
  assign unused = ^{beat_count, f_level};

  a_no_beat_in_array: assert property (@(posedge clk) disable iff (!rst_n)
    (ost == O_ARRAY) |-> !beat_valid);

endmodule
