// vis: vector instruction sequencer (IS and CO stages).
//
// The sequencer takes decoded instructions in program order from the decode
// unit, recognises their target functional unit (load unit, store unit, lane
// ALUs, lane MPTUs) and issues each one when
//   * that unit has no instruction in flight (every unit runs one at a time), and
//   * its vector registers do not overlap those of any instruction still in
//     flight: no read of a register being written (RAW), no write of a register
//     being read (WAR) or written (WAW);
//   * for memory instructions, no memory instruction of the other kind is in
//     flight, so loads and stores reach memory in program order.
// It keeps for each unit the running instruction, its register occupancy masks
// and, for lane instructions, which lanes have reported completion. When the
// unit (all lanes) is done the instruction commits (CO): its entry and its
// register occupancy are cleared and its tag goes to the decode unit, one commit
// per cycle, in fixed unit order. Issue to a unit is a one-cycle pulse on
// *_valid_o with the instruction on issue_o; units report done with a one-cycle
// pulse.
//
// From the paper: issue to the target FU, tracking of running instructions and
// of the vector registers they access to avoid hazards, clearing at commit.
// The occupancy masks, the one-per-unit policy and the memory ordering rule are
// this design's choices.
module vis
  import speed_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // from the decode unit
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  vinstr_t          in_i,
  // issue
  output vinstr_t          issue_o,
  output logic             ld_valid_o,
  output logic             st_valid_o,
  output logic             alu_valid_o,
  output logic             mptu_valid_o,
  // completion
  input  logic             ld_done_i,
  input  logic             st_done_i,
  input  logic [LANES-1:0] alu_done_i,
  input  logic [LANES-1:0] mptu_done_i,
  // commit to the decode unit
  output logic             cmt_valid_o,
  input  logic             cmt_ready_i,
  output logic [3:0]       cmt_tag_o,
  // observation: a ready instruction waited for a register hazard this cycle
  output logic             hazard_stall_o
);

  localparam int unsigned NFU = 4;   // 0 VLDU, 1 VSTU, 2 ALU, 3 MPTU

  typedef struct packed {
    logic             busy;
    logic [31:0]      rmask;
    logic [31:0]      wmask;
    logic [3:0]       tag;
    logic [LANES-1:0] done;
  } entry_t;

  entry_t ent_q [NFU];

  // IS register
  logic    head_valid_q;
  vinstr_t head_q;

  function automatic logic [1:0] fu_idx(fu_e f);
    case (f)
      FU_VLDU: return 0;
      FU_VSTU: return 1;
      FU_ALU:  return 2;
      default: return 3;
    endcase
  endfunction

  logic hazard, fu_free, mem_order_ok, issue;
  logic [1:0] hf;
  assign hf = fu_idx(head_q.fu);

  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < NFU; i++) begin
      if (ent_q[i].busy) begin
        if ((head_q.rmask & ent_q[i].wmask) != 0) hazard = 1'b1;
        if ((head_q.wmask & ent_q[i].rmask) != 0) hazard = 1'b1;
        if ((head_q.wmask & ent_q[i].wmask) != 0) hazard = 1'b1;
      end
    end
    fu_free      = !ent_q[hf].busy;
    mem_order_ok = 1'b1;
    if (head_q.fu == FU_VLDU && ent_q[1].busy) mem_order_ok = 1'b0;
    if (head_q.fu == FU_VSTU && ent_q[0].busy) mem_order_ok = 1'b0;
  end

  assign issue          = head_valid_q && fu_free && !hazard && mem_order_ok;
  assign hazard_stall_o = head_valid_q && fu_free && hazard;
  assign in_ready_o     = !head_valid_q || issue;

  assign issue_o      = head_q;
  assign ld_valid_o   = issue && head_q.fu == FU_VLDU;
  assign st_valid_o   = issue && head_q.fu == FU_VSTU;
  assign alu_valid_o  = issue && head_q.fu == FU_ALU;
  assign mptu_valid_o = issue && head_q.fu == FU_MPTU;

  // finished entries and commit selection
  logic [NFU-1:0] fin;
  logic [1:0]     csel;
  always_comb begin
    for (int i = 0; i < NFU; i++) fin[i] = ent_q[i].busy && (&ent_q[i].done);
    cmt_valid_o = |fin;
    csel = '0;
    for (int i = NFU - 1; i >= 0; i--) if (fin[i]) csel = 2'(i);
  end
  assign cmt_tag_o = ent_q[csel].tag;

  logic [LANES-1:0] done_in [NFU];
  assign done_in[0] = {LANES{ld_done_i}};
  assign done_in[1] = {LANES{st_done_i}};
  assign done_in[2] = alu_done_i;
  assign done_in[3] = mptu_done_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      head_valid_q <= 1'b0;
      head_q       <= '0;
      for (int i = 0; i < NFU; i++) ent_q[i] <= '0;
    end else begin
      for (int i = 0; i < NFU; i++)
        if (ent_q[i].busy) ent_q[i].done <= ent_q[i].done | done_in[i];
      if (cmt_valid_o && cmt_ready_i) ent_q[csel] <= '0;
      if (issue) begin
        ent_q[hf].busy  <= 1'b1;
        ent_q[hf].rmask <= head_q.rmask;
        ent_q[hf].wmask <= head_q.wmask;
        ent_q[hf].tag   <= head_q.tag;
        ent_q[hf].done  <= '0;
      end
      if (in_ready_o) begin
        head_valid_q <= in_valid_i;
        if (in_valid_i) head_q <= in_i;
      end
    end
  end

  // a unit never reports done while it has nothing in flight
  assert property (@(posedge clk_i) disable iff (!rst_ni) ld_done_i |-> ent_q[0].busy);
  assert property (@(posedge clk_i) disable iff (!rst_ni) st_done_i |-> ent_q[1].busy);

endmodule
