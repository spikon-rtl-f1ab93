// pu_array -- a 4x4 array of processing units (one quarter of a lane).
//
// Every PU has its own A operand; all PUs of a row share one B operand, which enters the
// row from the lane's input buffer B. All PUs share mode, valid, clear and data volume, so
// they step together and the array's 'done' is the AND of its PUs' done flags.
// The 4x4 size follows the source design; the row-shared B operand is this design's reading
// of the lane diagram, where buffer-B data enters the arrays row by row.
// Timing: as the PU, one pair per cycle, results in PS one cycle after the pair.
module pu_array
  import spikon_pkg::*;
#(
  parameter int unsigned ROWS = 4,
  parameter int unsigned COLS = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  mode,
  input  logic                  valid,
  input  logic [DV_W-1:0]       data_volume,
  input  logic [ROWS*COLS*32-1:0] a_vec,   // PU (r,c) uses word r*COLS+c
  input  logic [ROWS*32-1:0]      b_row,   // row r uses word r
  output logic [ROWS*COLS*32-1:0] psum,
  output logic                  done
);

  logic [ROWS*COLS-1:0] pu_done;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned K = r * COLS + c;
      logic [DV_W-1:0] count;
      pu u_pu (
        .clk, .rst_n, .clear, .mode, .valid,
        .a(a_vec[K*32 +: 32]), .b(b_row[r*32 +: 32]),
        .data_volume, .psum(psum[K*32 +: 32]), .count, .done(pu_done[K])
      );
    end
  end

  assign done = &pu_done;

endmodule
