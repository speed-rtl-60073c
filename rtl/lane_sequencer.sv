// lane_sequencer: per-lane control of the ALU and the MPTU.
//
// An ALU instruction issued by the vector instruction sequencer is executed here
// word by word over this lane's share of the vector: the lane holds the 64-bit
// words w with w mod LANES = LANE_ID, local index i = w / LANES, so it processes
// ceil((nwords - LANE_ID) / LANES) words. For each word it requests the vs2 and
// vs1 operands from the VRF (two ports, usually different banks, so one cycle),
// registers them, lets the ALU compute and requests the write of vd; a new word
// starts after the write is granted (about three cycles per word). When the
// lane's last word is written, alu_done_o pulses. An MPTU instruction is passed
// to the lane's MPTU and its done pulse is forwarded as mptu_done_o. The two
// units run independently, so an ALU and an MPTU instruction can overlap.
//
// From the paper: the lane sequencer requests data reads from the VRFs and
// answers the sequencer when an instruction finishes. The word loop and its
// timing are this design's choice.
module lane_sequencer
  import speed_pkg::*;
#(
  parameter int unsigned LANES   = 4,
  parameter int unsigned LANE_ID = 0,
  parameter int unsigned WPV     = 16,
  parameter int unsigned AW      = 9
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  vinstr_t           instr_i,
  input  logic              alu_valid_i,
  input  logic              mptu_valid_i,
  output logic              alu_done_o,
  output logic              mptu_done_o,
  // MPTU control
  output logic              mptu_start_o,
  output vinstr_t           mptu_instr_o,
  input  logic              mptu_done_i,
  // ALU datapath
  output alu_op_e           alu_op_o,
  output logic [1:0]        alu_sew_o,
  output logic [WORD_W-1:0] alu_a_o,
  output logic [WORD_W-1:0] alu_b_o,
  input  logic [WORD_W-1:0] alu_y_i,
  // VRF ports: operand a (vs2), operand b (vs1), result write (vd)
  output logic              a_req_o,
  output logic [AW-1:0]     a_addr_o,
  input  logic              a_gnt_i,
  input  logic              a_rvalid_i,
  input  logic [WORD_W-1:0] a_rdata_i,
  output logic              b_req_o,
  output logic [AW-1:0]     b_addr_o,
  input  logic              b_gnt_i,
  input  logic              b_rvalid_i,
  input  logic [WORD_W-1:0] b_rdata_i,
  output logic              w_req_o,
  output logic [AW-1:0]     w_addr_o,
  output logic [WORD_W-1:0] w_wdata_o,
  input  logic              w_gnt_i
);

  typedef enum logic [1:0] {A_IDLE, A_RD, A_WR} ast_e;
  ast_e        st_q;
  vinstr_t     ai_q;
  logic [15:0] i_q, nloc_q;
  logic        ga_q, gb_q, da_q, db_q;
  logic [WORD_W-1:0] a_q, b_q;

  assign mptu_start_o = mptu_valid_i;
  assign mptu_instr_o = instr_i;
  assign mptu_done_o  = mptu_done_i;

  assign alu_op_o  = ai_q.alu_op;
  assign alu_sew_o = ai_q.sew;
  assign alu_a_o   = a_q;
  assign alu_b_o   = b_q;

  assign a_req_o   = (st_q == A_RD) && !ga_q;
  assign b_req_o   = (st_q == A_RD) && !gb_q;
  assign a_addr_o  = AW'(int'(ai_q.vs2) * WPV + int'(i_q));
  assign b_addr_o  = AW'(int'(ai_q.vs1) * WPV + int'(i_q));
  assign w_req_o   = (st_q == A_WR);
  assign w_addr_o  = AW'(int'(ai_q.vd) * WPV + int'(i_q));
  assign w_wdata_o = alu_y_i;

  logic [15:0] nloc_in;
  assign nloc_in = (instr_i.nwords > 16'(LANE_ID))
                 ? 16'((int'(instr_i.nwords) - LANE_ID + LANES - 1) / LANES) : 16'd0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= A_IDLE; ai_q <= '0; i_q <= '0; nloc_q <= '0;
      ga_q <= 1'b0; gb_q <= 1'b0; da_q <= 1'b0; db_q <= 1'b0;
      a_q <= '0; b_q <= '0; alu_done_o <= 1'b0;
    end else begin
      alu_done_o <= 1'b0;
      case (st_q)
        A_IDLE: begin
          if (alu_valid_i) begin
            ai_q   <= instr_i;
            nloc_q <= nloc_in;
            i_q    <= '0;
            ga_q <= 1'b0; gb_q <= 1'b0; da_q <= 1'b0; db_q <= 1'b0;
            if (nloc_in == 0) alu_done_o <= 1'b1;
            else              st_q <= A_RD;
          end
        end
        A_RD: begin
          if (a_req_o && a_gnt_i) ga_q <= 1'b1;
          if (b_req_o && b_gnt_i) gb_q <= 1'b1;
          if (a_rvalid_i && ga_q && !da_q) begin a_q <= a_rdata_i; da_q <= 1'b1; end
          if (b_rvalid_i && gb_q && !db_q) begin b_q <= b_rdata_i; db_q <= 1'b1; end
          if ((da_q || (a_rvalid_i && ga_q)) && (db_q || (b_rvalid_i && gb_q))) st_q <= A_WR;
        end
        A_WR: begin
          if (w_gnt_i) begin
            ga_q <= 1'b0; gb_q <= 1'b0; da_q <= 1'b0; db_q <= 1'b0;
            if (i_q + 1 == nloc_q) begin
              alu_done_o <= 1'b1;
              st_q       <= A_IDLE;
            end else begin
              i_q  <= i_q + 1'b1;
              st_q <= A_RD;
            end
          end
        end
        default: st_q <= A_IDLE;
      endcase
    end
  end

endmodule
