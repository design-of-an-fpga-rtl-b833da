// load_vector -- one of the four Load Vector units of the load-data stage.
//
// Given the whole initial array and a quadrant-local row number i, it returns
// row i of its quadrant, mirrored so that index 0 is always the site next to
// the array centre.  With QW = W/2 the mapping from quadrant-local (i, j) to
// the original (row R, column C) is
//     NW: R = QW-1-i, C = QW-1-j      NE: R = QW-1-i, C = QW+j
//     SW: R = QW+i,   C = QW-1-j      SE: R = QW+i,   C = QW+j
// so after this flip the same compression schedule works for every quadrant.
// The split into four units and the flip follow the design this RTL is based
// on; the exact mirroring (index 0 = centre) and the bit order of the input
// (row-major, bit R*W+C, row 0 north, column 0 west) are this design's choice.
//
// Interface: array_bits is held stable by the caller; row_valid/row_idx/
// row_last request a row.  Timing: one row per cycle, the result appears on
// vec_valid/vec/vec_last one cycle after the request.
module load_vector
  import qrm_pkg::*;
#(
  parameter int    W    = 50,
  parameter quad_e QUAD = QUAD_NW
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [W*W-1:0]             array_bits,
  input  logic                       row_valid,
  input  logic [$clog2(W/2)-1:0]     row_idx,
  input  logic                       row_last,
  output logic                       vec_valid,
  output logic [W/2-1:0]             vec,
  output logic                       vec_last
);

  localparam int QW = W / 2;

  logic [W-1:0]  row_bits;
  logic [QW-1:0] flipped;
  int unsigned   r_sel;

  always_comb begin
    r_sel    = is_north(QUAD) ? (QW - 1 - int'(row_idx)) : (QW + int'(row_idx));
    row_bits = array_bits[r_sel*W +: W];
    for (int j = 0; j < QW; j++)
      flipped[j] = is_west(QUAD) ? row_bits[QW-1-j] : row_bits[QW+j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec_valid <= 1'b0;
      vec_last  <= 1'b0;
      vec       <= '0;
    end else begin
      vec_valid <= row_valid;
      vec_last  <= row_valid & row_last;
      if (row_valid)
        vec <= flipped;
    end
  end

endmodule
