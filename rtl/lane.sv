// lane: one scalable module of SPEED.
//
// A lane holds its slice of the vector register file (VRF), the lane sequencer,
// the ALU and the multi-precision tensor unit (MPTU). Lane instructions (ALU and
// MPTU) arrive from the vector instruction sequencer; the load and store units
// reach the VRF through their own ports. The seven VRF requesters, in priority
// order (0 highest), are: load-unit write, MPTU write, ALU write, MPTU read, ALU
// operand a, ALU operand b, store-unit read. All ports follow the vrf protocol:
// request with address, grant in the same cycle, read data one cycle later.
//
// From the paper: the lane's parts and their roles (Fig. 3). The port list and
// the VRF priority order are this design's choices.
module lane
  import speed_pkg::*;
#(
  parameter int unsigned LANES   = 4,
  parameter int unsigned LANE_ID = 0,
  parameter int unsigned TILE_R  = 2,
  parameter int unsigned TILE_C  = 2,
  parameter int unsigned WORDS   = 512,
  parameter int unsigned NBANKS  = 8,
  parameter int unsigned QDEPTH  = 32,
  localparam int unsigned WPV    = WORDS / NVREG,
  localparam int unsigned AW     = $clog2(WORDS)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // from the sequencer
  input  vinstr_t           instr_i,
  input  logic              alu_valid_i,
  input  logic              mptu_valid_i,
  output logic              alu_done_o,
  output logic              mptu_done_o,
  // load unit write port
  input  logic              ld_req_i,
  input  logic [AW-1:0]     ld_addr_i,
  input  logic [WORD_W-1:0] ld_wdata_i,
  output logic              ld_gnt_o,
  // store unit read port
  input  logic              st_req_i,
  input  logic [AW-1:0]     st_addr_i,
  output logic              st_gnt_o,
  output logic              st_rvalid_o,
  output logic [WORD_W-1:0] st_rdata_o,
  // observation
  output logic              mptu_busy_o,
  output logic              ev_w_reuse_o,
  output logic              ev_i_reuse_o,
  output logic              ev_acc_o
);

  localparam int unsigned NP = 7;
  localparam int unsigned P_LD = 0, P_MW = 1, P_AW = 2, P_MR = 3, P_AA = 4, P_AB = 5, P_ST = 6;

  logic              req   [NP];
  logic              we    [NP];
  logic [AW-1:0]     addr  [NP];
  logic [WORD_W-1:0] wdata [NP];
  logic              gnt   [NP];
  logic              rvalid[NP];
  logic [WORD_W-1:0] rdata [NP];

  vrf #(.WORDS(WORDS), .NBANKS(NBANKS), .WPV(WPV), .NP(NP)) u_vrf (
    .clk_i, .rst_ni,
    .req_i(req), .we_i(we), .addr_i(addr), .wdata_i(wdata),
    .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata)
  );

  // load unit
  assign req[P_LD] = ld_req_i;  assign we[P_LD] = 1'b1;
  assign addr[P_LD] = ld_addr_i; assign wdata[P_LD] = ld_wdata_i;
  assign ld_gnt_o = gnt[P_LD];
  // store unit
  assign req[P_ST] = st_req_i;  assign we[P_ST] = 1'b0;
  assign addr[P_ST] = st_addr_i; assign wdata[P_ST] = '0;
  assign st_gnt_o = gnt[P_ST];
  assign st_rvalid_o = rvalid[P_ST];
  assign st_rdata_o  = rdata[P_ST];

  // sequencer + ALU
  logic              mptu_start, mptu_done;
  vinstr_t           mptu_instr;
  alu_op_e           alu_op;
  logic [1:0]        alu_sew;
  logic [WORD_W-1:0] alu_a, alu_b, alu_y;

  assign we[P_AA] = 1'b0; assign wdata[P_AA] = '0;
  assign we[P_AB] = 1'b0; assign wdata[P_AB] = '0;
  assign we[P_AW] = 1'b1;

  lane_sequencer #(.LANES(LANES), .LANE_ID(LANE_ID), .WPV(WPV), .AW(AW)) u_seq (
    .clk_i, .rst_ni,
    .instr_i, .alu_valid_i, .mptu_valid_i, .alu_done_o, .mptu_done_o,
    .mptu_start_o(mptu_start), .mptu_instr_o(mptu_instr), .mptu_done_i(mptu_done),
    .alu_op_o(alu_op), .alu_sew_o(alu_sew), .alu_a_o(alu_a), .alu_b_o(alu_b), .alu_y_i(alu_y),
    .a_req_o(req[P_AA]), .a_addr_o(addr[P_AA]), .a_gnt_i(gnt[P_AA]), .a_rvalid_i(rvalid[P_AA]), .a_rdata_i(rdata[P_AA]),
    .b_req_o(req[P_AB]), .b_addr_o(addr[P_AB]), .b_gnt_i(gnt[P_AB]), .b_rvalid_i(rvalid[P_AB]), .b_rdata_i(rdata[P_AB]),
    .w_req_o(req[P_AW]), .w_addr_o(addr[P_AW]), .w_wdata_o(wdata[P_AW]), .w_gnt_i(gnt[P_AW])
  );

  valu u_alu (.op_i(alu_op), .sew_i(alu_sew), .a_i(alu_a), .b_i(alu_b), .y_o(alu_y));

  // MPTU
  assign we[P_MR] = 1'b0; assign wdata[P_MR] = '0;
  assign we[P_MW] = 1'b1;

  mptu #(.TILE_R(TILE_R), .TILE_C(TILE_C), .WPV(WPV), .AW(AW), .QDEPTH(QDEPTH)) u_mptu (
    .clk_i, .rst_ni,
    .start_i(mptu_start), .instr_i(mptu_instr), .busy_o(mptu_busy_o), .done_o(mptu_done),
    .rd_req_o(req[P_MR]), .rd_addr_o(addr[P_MR]), .rd_gnt_i(gnt[P_MR]),
    .rd_rvalid_i(rvalid[P_MR]), .rd_rdata_i(rdata[P_MR]),
    .wr_req_o(req[P_MW]), .wr_addr_o(addr[P_MW]), .wr_wdata_o(wdata[P_MW]), .wr_gnt_i(gnt[P_MW]),
    .ev_w_reuse_o, .ev_i_reuse_o, .ev_acc_o
  );

endmodule
