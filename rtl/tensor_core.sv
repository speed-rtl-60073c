// tensor_core: TILE_R x TILE_C systolic array of multi-precision PEs.
//
// Row r receives one input operand word per step (parallelism on inputs,
// POI = TILE_R), column c one weight word (parallelism on weights, POW = TILE_C);
// inside every PE PP = 1/4/16 products are formed per step. Inputs travel to the
// right and weights downwards through the PE registers, so each operand is read
// once from the queues and reused by a whole row or column.
//
// The caller presents the operands of one step aligned in time (x_i[r], w_i[c],
// valid/first/last once for the step). The core delays row r by r cycles and
// column c by c cycles so that operand pairs meet in PE(r,c) r+c cycles later;
// the control flags travel with the inputs. PE(r,c) raises res_valid_o[r][c]
// r+c+2 cycles after the step that carried "last". Results leave every PE in
// parallel to the result collector of the MPTU (the row-wise transfer to the
// result queue of the paper is done there).
//
// From the paper: the 2-D PE array sized by TILE_R/TILE_C, store-and-forward of
// inputs and weights between neighbour PEs, output-stationary accumulation.
// This design's choice: the input skew registers and the parallel result outputs.
module tensor_core
  import speed_pkg::*;
#(
  parameter int unsigned TILE_R = 2,
  parameter int unsigned TILE_C = 2
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  prec_e              prec_i,
  input  logic [WORD_W-1:0]  x_i [TILE_R],
  input  logic [WORD_W-1:0]  w_i [TILE_C],
  input  logic               valid_i,
  input  logic               first_i,
  input  logic               last_i,
  output logic [RES_W-1:0]   res_o       [TILE_R][TILE_C],
  output logic               res_valid_o [TILE_R][TILE_C]
);

  // skewed operands entering the array
  logic [WORD_W-1:0] xs [TILE_R];
  logic              vs [TILE_R], fs [TILE_R], ls [TILE_R];
  logic [WORD_W-1:0] wsk [TILE_C];

  // row skew: row r delayed by r cycles
  for (genvar r = 0; r < TILE_R; r++) begin : g_rskew
    if (r == 0) begin : g_r0
      assign xs[r] = x_i[r];
      assign vs[r] = valid_i;
      assign fs[r] = first_i;
      assign ls[r] = last_i;
    end else begin : g_rn
      logic [WORD_W-1:0] xd [r];
      logic [2:0]        cd [r];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < r; i++) begin xd[i] <= '0; cd[i] <= '0; end
        end else begin
          xd[0] <= x_i[r];
          cd[0] <= {valid_i, first_i, last_i};
          for (int i = 1; i < r; i++) begin xd[i] <= xd[i-1]; cd[i] <= cd[i-1]; end
        end
      end
      assign xs[r] = xd[r-1];
      assign vs[r] = cd[r-1][2];
      assign fs[r] = cd[r-1][1];
      assign ls[r] = cd[r-1][0];
    end
  end

  // column skew: column c delayed by c cycles
  for (genvar c = 0; c < TILE_C; c++) begin : g_cskew
    if (c == 0) begin : g_c0
      assign wsk[c] = w_i[c];
    end else begin : g_cn
      logic [WORD_W-1:0] wd [c];
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          for (int i = 0; i < c; i++) wd[i] <= '0;
        end else begin
          wd[0] <= w_i[c];
          for (int i = 1; i < c; i++) wd[i] <= wd[i-1];
        end
      end
      assign wsk[c] = wd[c-1];
    end
  end

  // PE mesh: x/control run along rows, w runs down columns
  logic [WORD_W-1:0] xh [TILE_R][TILE_C+1];
  logic              vh [TILE_R][TILE_C+1];
  logic              fh [TILE_R][TILE_C+1];
  logic              lh [TILE_R][TILE_C+1];
  logic [WORD_W-1:0] wv [TILE_R+1][TILE_C];

  for (genvar r = 0; r < TILE_R; r++) begin : g_row
    assign xh[r][0] = xs[r];
    assign vh[r][0] = vs[r];
    assign fh[r][0] = fs[r];
    assign lh[r][0] = ls[r];
  end
  for (genvar c = 0; c < TILE_C; c++) begin : g_col
    assign wv[0][c] = wsk[c];
  end

  for (genvar r = 0; r < TILE_R; r++) begin : g_pr
    for (genvar c = 0; c < TILE_C; c++) begin : g_pc
      mp_pe u_pe (
        .clk_i       (clk_i),
        .rst_ni      (rst_ni),
        .prec_i      (prec_i),
        .x_i         (xh[r][c]),
        .w_i         (wv[r][c]),
        .valid_i     (vh[r][c]),
        .first_i     (fh[r][c]),
        .last_i      (lh[r][c]),
        .x_o         (xh[r][c+1]),
        .w_o         (wv[r+1][c]),
        .valid_o     (vh[r][c+1]),
        .first_o     (fh[r][c+1]),
        .last_o      (lh[r][c+1]),
        .res_o       (res_o[r][c]),
        .res_valid_o (res_valid_o[r][c])
      );
    end
  end

endmodule
