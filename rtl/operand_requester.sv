// operand_requester: address generator and request arbiter of the MPTU.
//
// On start_i it walks the stages of one VSAM/VSAC (speed_pkg::stage_plan). For
// every stage that needs new operands it picks the free bank of the input and/or
// weight queue (two banks each, used alternately), clears it, hands a stage
// descriptor to the compute control and then streams VRF read requests: for
// step k = 0..L-1 first the TILE_C weight words, then the TILE_R input words.
// A stage that reuses the inputs or weights of the previous stage issues no
// request for them; this is the operand reuse of OP1 (weights) and of the MM
// strategy (inputs). A bank is only refilled once the compute control has
// consumed every stage that reads it (stages_done_i).
//
// Stages that accumulate onto earlier partial sums (second half of MM and FFCS)
// queue an accumulation job; a separate generator reads the partial sums of
// that output block from vd into the acc queue once the earlier stage that
// produced them has been written back (tiles_done_i), and while the stream
// generator already fetches the next stage. The request arbiter gives the single
// VRF read port to the accumulation generator first, then to the stream. VRF
// data returns one cycle after the grant and is routed by a tag register.
//
// Address layout (this design's choice), in lane-local 64-bit words:
//   input  (s,k,r): vs1*WPV + in_blk*L*TILE_R + k*TILE_R + r
//   weight (s,k,c): vs2*WPV + w_blk*L*TILE_C + k*TILE_C + c   (VSAC: one word per k)
//   output / acc  : vd*WPV  + out_blk*NW + j, NW = TILE_R*TILE_C/2 (VSAC: TILE_R/2)
// The paper gives the parts (address generator, request arbiter, prioritised
// requests of inputs, weights and accumulation data, overlap with computing);
// the bank scheme, priorities and address layout are this design's.
module operand_requester
  import speed_pkg::*;
#(
  parameter int unsigned TILE_R = 2,
  parameter int unsigned TILE_C = 2,
  parameter int unsigned WPV    = 16,
  parameter int unsigned AW     = 9,
  parameter int unsigned QDEPTH = 32,
  parameter int unsigned ACCQ_DEPTH = 4,
  localparam int unsigned KW    = $clog2(QDEPTH)
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               start_i,
  input  vinstr_t            instr_i,
  output logic               idle_o,       // nothing left to request
  input  logic [7:0]         stages_done_i,
  input  logic [7:0]         tiles_done_i,
  input  logic [$clog2(ACCQ_DEPTH+1)-1:0] accq_cnt_i,
  // stage descriptors to the compute control
  output logic               desc_valid_o,
  input  logic               desc_ready_i,
  output mptu_desc_t         desc_o,
  // operand queue bank clear
  output logic               clr_in_o,
  output logic               clr_w_o,
  output logic               clr_bank_in_o,
  output logic               clr_bank_w_o,
  // VRF read port
  output logic               rd_req_o,
  output logic [AW-1:0]      rd_addr_o,
  input  logic               rd_gnt_i,
  input  logic               rd_rvalid_i,
  input  logic [WORD_W-1:0]  rd_rdata_i,
  // operand queue write
  output logic               qw_valid_o,
  output logic               qw_is_w_o,
  output logic               qw_bank_o,
  output logic [KW-1:0]      qw_k_o,
  output logic [2:0]         qw_idx_o,
  output logic               qw_last_o,    // completes step k of that queue
  output logic               qw_bcast_o,   // VSAC: write the word to every column
  output logic [WORD_W-1:0]  qw_data_o,
  // acc queue write
  output logic               acc_valid_o,
  output logic [WORD_W-1:0]  acc_data_o
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_STREAM} st_e;
  st_e state_q;

  vinstr_t     ins_q;
  logic [7:0]  s_q;          // current stage
  logic [7:0]  nst_q;        // number of stages
  logic [15:0] len_q;        // L
  logic [15:0] k_q;
  logic [2:0]  idx_q;
  logic        phase_w_q;    // 1: weights of step k, 0: inputs of step k
  logic        need_i_q, need_w_q;
  logic        ib_q, wb_q;   // banks of the current stage
  logic [7:0]  ilast_q [2], wlast_q [2];
  logic        iused_q [2], wused_q [2];
  logic [AW-1:0] in_base_q, w_base_q;

  localparam int unsigned NW_MM = TILE_R * TILE_C / 2;
  localparam int unsigned NW_AC = TILE_R / 2;

  stage_t st;
  assign st = stage_plan(ins_q.cfg.dataflow, ins_q.vsac, ins_q.cfg.nstage_m1, int'(s_q));

  int unsigned cw;   // weight words per step
  int unsigned nw;   // output words per tile
  assign cw = ins_q.vsac ? 1 : TILE_C;
  assign nw = ins_q.vsac ? NW_AC : NW_MM;

  // -------- stage setup: bank availability ---------------------------------
  logic ib_new, wb_new, bank_ok;
  assign ib_new = ~ib_q;
  assign wb_new = ~wb_q;
  always_comb begin
    bank_ok = 1'b1;
    if (st.in_new && iused_q[ib_new] && !(stages_done_i > ilast_q[ib_new])) bank_ok = 1'b0;
    if (st.w_new  && wused_q[wb_new] && !(stages_done_i > wlast_q[wb_new])) bank_ok = 1'b0;
  end

  // accumulation jobs
  typedef struct packed {
    logic [7:0]    src_tile;   // tile that produced the partial sums
    logic [AW-1:0] addr;
  } accjob_t;
  logic    aj_push, aj_ready, aj_valid, aj_pop;
  accjob_t aj_in, aj_out;

  logic [AW-1:0] out_addr;
  assign out_addr = AW'(int'(ins_q.vd) * WPV + int'(st.out_blk) * nw);

  logic setup_fire;
  assign setup_fire = (state_q == S_SETUP) && bank_ok && desc_ready_i && (!st.acc || aj_ready);

  assign desc_valid_o = (state_q == S_SETUP) && bank_ok && (!st.acc || aj_ready);
  always_comb begin
    desc_o          = '0;
    desc_o.ib       = st.in_new ? ib_new : ib_q;
    desc_o.wb       = st.w_new  ? wb_new : wb_q;
    desc_o.len      = len_q;
    desc_o.first    = st.first;
    desc_o.emit     = st.emit;
    desc_o.acc      = st.acc;
    desc_o.vsac     = ins_q.vsac;
    desc_o.out_addr = 16'(out_addr);
  end
  assign clr_in_o      = setup_fire && st.in_new;
  assign clr_w_o       = setup_fire && st.w_new;
  assign clr_bank_in_o = ib_new;
  assign clr_bank_w_o  = wb_new;

  assign aj_push = setup_fire && st.acc;
  assign aj_in.src_tile = s_q - (8'(ins_q.cfg.nstage_m1) + 8'd1);
  assign aj_in.addr     = out_addr;

  vec_fifo #(.T(accjob_t), .DEPTH(4)) u_ajq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .valid_i(aj_push), .ready_o(aj_ready), .data_i(aj_in),
    .valid_o(aj_valid), .ready_i(aj_pop), .data_o(aj_out), .count_o()
  );

  // -------- accumulation generator -----------------------------------------
  logic [7:0] aj_j_q;
  logic       acc_inflight_q;
  logic       acc_req;
  assign acc_req = aj_valid && (tiles_done_i > aj_out.src_tile) &&
                   ((32'(accq_cnt_i) + (acc_inflight_q ? 32'd1 : 32'd0)) < ACCQ_DEPTH);

  // -------- stream generator -----------------------------------------------
  logic          str_req;
  logic [AW-1:0] str_addr;
  assign str_req = (state_q == S_STREAM);
  always_comb begin
    if (phase_w_q)
      str_addr = AW'(int'(w_base_q) + int'(k_q) * cw + int'(idx_q));
    else
      str_addr = AW'(int'(in_base_q) + int'(k_q) * TILE_R + int'(idx_q));
  end

  // -------- request arbiter: acc first, then stream ------------------------
  logic grant_acc, grant_str;
  assign rd_req_o  = acc_req || str_req;
  assign rd_addr_o = acc_req ? AW'(aj_out.addr + AW'(aj_j_q)) : str_addr;
  assign grant_acc = acc_req && rd_gnt_i;
  assign grant_str = !acc_req && str_req && rd_gnt_i;
  assign aj_pop    = grant_acc && (int'(aj_j_q) == nw - 1);

  // -------- response tag ---------------------------------------------------
  typedef struct packed {
    logic          acc;
    logic          is_w;
    logic          bank;
    logic [KW-1:0] k;
    logic [2:0]    idx;
    logic          last;
  } tag_t;
  tag_t tag_q;

  assign qw_valid_o  = rd_rvalid_i && !tag_q.acc;
  assign qw_is_w_o   = tag_q.is_w;
  assign qw_bank_o   = tag_q.bank;
  assign qw_k_o      = tag_q.k;
  assign qw_idx_o    = tag_q.idx;
  assign qw_last_o   = tag_q.last;
  assign qw_bcast_o  = ins_q.vsac && tag_q.is_w;
  assign qw_data_o   = rd_rdata_i;
  assign acc_valid_o = rd_rvalid_i && tag_q.acc;
  assign acc_data_o  = rd_rdata_i;

  // stream position advance
  logic str_last_idx, str_last_k;
  assign str_last_idx = phase_w_q ? (int'(idx_q) == cw - 1) : (int'(idx_q) == TILE_R - 1);
  assign str_last_k   = (k_q == len_q - 1);

  assign idle_o = (state_q == S_IDLE) && !aj_valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= S_IDLE;
      ins_q     <= '0;
      s_q       <= '0;
      nst_q     <= '0;
      len_q     <= '0;
      k_q       <= '0;
      idx_q     <= '0;
      phase_w_q <= 1'b0;
      need_i_q  <= 1'b0;
      need_w_q  <= 1'b0;
      ib_q      <= 1'b1;
      wb_q      <= 1'b1;
      in_base_q <= '0;
      w_base_q  <= '0;
      for (int b = 0; b < 2; b++) begin
        ilast_q[b] <= '0; wlast_q[b] <= '0; iused_q[b] <= 1'b0; wused_q[b] <= 1'b0;
      end
      aj_j_q         <= '0;
      acc_inflight_q <= 1'b0;
      tag_q          <= '0;
    end else begin
      acc_inflight_q <= grant_acc;
      if (grant_acc) begin
        tag_q <= '{acc: 1'b1, is_w: 1'b0, bank: 1'b0, k: '0, idx: '0, last: 1'b0};
        aj_j_q <= (int'(aj_j_q) == nw - 1) ? '0 : aj_j_q + 1'b1;
      end else if (grant_str) begin
        tag_q <= '{acc: 1'b0, is_w: phase_w_q, bank: phase_w_q ? wb_q : ib_q,
                   k: KW'(k_q), idx: idx_q, last: str_last_idx};
      end

      case (state_q)
        S_IDLE: begin
          if (start_i) begin
            ins_q   <= instr_i;
            s_q     <= '0;
            nst_q   <= 8'(n_stages(instr_i.cfg.dataflow, instr_i.vsac, instr_i.cfg.nstage_m1));
            len_q   <= instr_i.red_len;
            ib_q    <= 1'b1;
            wb_q    <= 1'b1;
            for (int b = 0; b < 2; b++) begin iused_q[b] <= 1'b0; wused_q[b] <= 1'b0; end
            state_q <= S_SETUP;
          end
        end
        S_SETUP: begin
          if (setup_fire) begin
            if (st.in_new) begin
              ib_q <= ib_new; iused_q[ib_new] <= 1'b1; ilast_q[ib_new] <= s_q;
            end else begin
              ilast_q[ib_q] <= s_q;
            end
            if (st.w_new) begin
              wb_q <= wb_new; wused_q[wb_new] <= 1'b1; wlast_q[wb_new] <= s_q;
            end else begin
              wlast_q[wb_q] <= s_q;
            end
            in_base_q <= AW'(int'(ins_q.vs1) * WPV + int'(st.in_blk) * int'(len_q) * TILE_R);
            w_base_q  <= AW'(int'(ins_q.vs2) * WPV + int'(st.w_blk) * int'(len_q) * cw);
            need_i_q  <= st.in_new;
            need_w_q  <= st.w_new;
            k_q       <= '0;
            idx_q     <= '0;
            phase_w_q <= st.w_new;
            if (st.in_new || st.w_new) begin
              state_q <= S_STREAM;
            end else if (s_q + 1 == nst_q) begin
              state_q <= S_IDLE;
            end else begin
              s_q <= s_q + 1'b1;
            end
          end
        end
        S_STREAM: begin
          if (grant_str) begin
            if (!str_last_idx) begin
              idx_q <= idx_q + 1'b1;
            end else begin
              idx_q <= '0;
              if (phase_w_q && need_i_q) begin
                phase_w_q <= 1'b0;
              end else if (!str_last_k) begin
                k_q       <= k_q + 1'b1;
                phase_w_q <= need_w_q;
              end else begin
                // stage fully requested
                if (s_q + 1 == nst_q) state_q <= S_IDLE;
                else begin
                  s_q     <= s_q + 1'b1;
                  state_q <= S_SETUP;
                end
              end
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // the operand queues hold one stage: L must fit
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   start_i |-> (instr_i.red_len != 0) && (32'(instr_i.red_len) <= QDEPTH));

endmodule
