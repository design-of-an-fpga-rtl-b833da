// load_data -- Load Data Module (LDM): input buffer plus four Load Vector units.
//
// The processor side sends the W x W occupancy bit-field as PKT_W-bit packets
// (NPKT = ceil(W*W/PKT_W) of them, packed row-major from bit 0 of the first
// packet, bit R*W+C = row R, column C).  They are written into an on-chip
// buffer.  As soon as the last packet is in, the module streams the array out
// as four parallel quadrant streams, one mirrored quadrant row per quadrant
// per cycle, rows i = 0 .. W/2-1 (i = 0 next to the centre), with q_last on
// the last row.  It then holds the buffer and refuses new input until
// `release_i` says the job's results have left the accelerator.
//
// A buffer in front of the kernels, the 1024-bit packets and four Load Vector
// units come from the design this RTL follows; the valid/ready/last
// handshake, the packing order and the one-job-at-a-time lock are this
// design's choices.
//
// Timing: one packet per cycle while s_tready is high; first quadrant rows
// two cycles after the last packet; W/2 consecutive cycles of rows.
module load_data
  import qrm_pkg::*;
#(
  parameter int W = 50
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // input stream from memory
  input  logic                 s_tvalid,
  output logic                 s_tready,
  input  logic [PKT_W-1:0]     s_tdata,
  input  logic                 s_tlast,
  // job control
  input  logic                 release_i,
  output logic                 busy,
  output logic                 start_pulse,
  // quadrant streams, index = quad_e value
  output logic                 q_valid,
  output logic [W/2-1:0]       q_vec [4],
  output logic                 q_last
);

  localparam int QW    = W / 2;
  localparam int NPKT  = (W*W + PKT_W - 1) / PKT_W;
  localparam int PCW   = (NPKT > 1) ? $clog2(NPKT) : 1;
  localparam int RIW   = $clog2(QW);

  typedef enum logic [1:0] {RECV, STREAM, HOLD} state_e;
  state_e st;

  logic [NPKT*PKT_W-1:0] buffer;
  logic [PCW-1:0]        pkt_cnt;
  logic [RIW-1:0]        row_cnt;
  logic                  rd_valid, rd_last;
  logic [4-1:0]          lv_valid, lv_last;

  assign s_tready = (st == RECV);
  assign busy     = (st != RECV) || (pkt_cnt != '0);
  assign rd_valid = (st == STREAM);
  assign rd_last  = (st == STREAM) && (int'(row_cnt) == QW - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= RECV;
      pkt_cnt     <= '0;
      row_cnt     <= '0;
      start_pulse <= 1'b0;
    end else begin
      start_pulse <= 1'b0;
      unique case (st)
        RECV: if (s_tvalid) begin
          if (int'(pkt_cnt) == NPKT - 1) begin
            pkt_cnt     <= '0;
            st          <= STREAM;
            start_pulse <= 1'b1;
          end else begin
            pkt_cnt <= pkt_cnt + 1'b1;
          end
        end
        STREAM: begin
          if (rd_last) begin
            row_cnt <= '0;
            st      <= HOLD;
          end else begin
            row_cnt <= row_cnt + 1'b1;
          end
        end
        HOLD: if (release_i) st <= RECV;
        default: st <= RECV;
      endcase
    end
  end

  // The buffer needs no reset: every bit is written before it is read.
  always_ff @(posedge clk) begin
    if (st == RECV && s_tvalid)
      buffer[int'(pkt_cnt)*PKT_W +: PKT_W] <= s_tdata;
  end

  for (genvar q = 0; q < 4; q++) begin : g_lv
    load_vector #(.W(W), .QUAD(quad_e'(q))) u_lv (
      .clk        (clk),
      .rst_n      (rst_n),
      .array_bits (buffer[W*W-1:0]),
      .row_valid  (rd_valid),
      .row_idx    (row_cnt),
      .row_last   (rd_last),
      .vec_valid  (lv_valid[q]),
      .vec        (q_vec[q]),
      .vec_last   (lv_last[q])
    );
  end

  assign q_valid = lv_valid[0];
  assign q_last  = lv_last[0];

  // The last packet of an array must carry tlast, and only that one.
  a_tlast: assert property (@(posedge clk) disable iff (!rst_n)
    (st == RECV && s_tvalid) |-> (s_tlast == (int'(pkt_cnt) == NPKT - 1)));

endmodule
