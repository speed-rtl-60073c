// mptu: multi-precision tensor unit of one lane.
//
// The MPTU executes the customised arithmetic instructions VSAM (matrix-matrix)
// and VSAC (matrix-vector) in its lane. It is made of
//   * the operand requester (address generator + request arbiter), which reads
//     inputs, weights and accumulation data from the lane's VRF;
//   * the operand queues: input and weight queues, two banks each, indexed by the
//     step k of a stage so that a stage can reuse the operands of the previous
//     one, plus the acc queue (FIFO of partial-sum words from vd);
//   * the tensor core (TILE_R x TILE_C PEs);
//   * the result collector and result queue, and the write-back, which adds the
//     acc-queue partial sums when a stage accumulates and writes the 32-bit results
//     (two per 64-bit word) back to vd.
// The precision travels with the instruction (instr_i.cfg.prec), so consecutive
// instructions may use different precisions without any reconfiguration step.
//
// Compute control: for each stage descriptor the steps k = 0..L-1 are fed to the
// tensor core as soon as step k of both queues is filled, so computing overlaps
// with requesting. The step that completes an output ("last") is held back until
// the previous output has left the array (TILE_R+TILE_C+1 cycles) and the result
// queue has room, so the core itself never has to stall.
//
// Interface: start_i (one cycle, with instr_i) while idle; busy_o until done_o
// pulses after the last result word has been written. One VRF read port and one
// VRF write port in the vrf request/grant protocol.
//
// From the paper: the parts and their names, the four queues, the priorities of
// operand requests, output-stationary PEs, the dataflows. This design's choices:
// queue organisation and depth (QDEPTH steps per bank), handshakes, result packing.
module mptu
  import speed_pkg::*;
#(
  parameter int unsigned TILE_R = 2,
  parameter int unsigned TILE_C = 2,
  parameter int unsigned WPV    = 16,
  parameter int unsigned AW     = 9,
  parameter int unsigned QDEPTH = 32
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  vinstr_t           instr_i,
  output logic              busy_o,
  output logic              done_o,
  // VRF read port
  output logic              rd_req_o,
  output logic [AW-1:0]     rd_addr_o,
  input  logic              rd_gnt_i,
  input  logic              rd_rvalid_i,
  input  logic [WORD_W-1:0] rd_rdata_i,
  // VRF write port
  output logic              wr_req_o,
  output logic [AW-1:0]     wr_addr_o,
  output logic [WORD_W-1:0] wr_wdata_o,
  input  logic              wr_gnt_i,
  // event counters for observation
  output logic              ev_w_reuse_o,  // a stage reused the weights in the queue
  output logic              ev_i_reuse_o,  // a stage reused the inputs in the queue
  output logic              ev_acc_o       // an output word was accumulated with a partial sum
);

  localparam int unsigned KW         = $clog2(QDEPTH);
  localparam int unsigned ACCQ_DEPTH = 4;
  localparam int unsigned RQ_DEPTH   = 2;
  localparam int unsigned GAP        = TILE_R + TILE_C + 1;
  localparam int unsigned NW_MM      = TILE_R * TILE_C / 2;
  localparam int unsigned NW_AC      = TILE_R / 2;

  // ------------------------------------------------------------------------
  // instruction state
  // ------------------------------------------------------------------------
  logic       busy_q;
  prec_e      prec_q;
  logic [7:0] n_emit_q;
  logic [7:0] stages_done_q, tiles_done_q;

  // ------------------------------------------------------------------------
  // operand requester
  // ------------------------------------------------------------------------
  logic        req_idle;
  logic        desc_valid, desc_ready;
  mptu_desc_t  desc;
  logic        clr_in, clr_w, clr_bank_in, clr_bank_w;
  logic        qw_valid, qw_is_w, qw_bank, qw_last, qw_bcast;
  logic [KW-1:0] qw_k;
  logic [2:0]  qw_idx;
  logic [WORD_W-1:0] qw_data;
  logic        accq_in_valid;
  logic [WORD_W-1:0] accq_in_data;
  logic [$clog2(ACCQ_DEPTH+1)-1:0] accq_cnt;

  operand_requester #(
    .TILE_R(TILE_R), .TILE_C(TILE_C), .WPV(WPV), .AW(AW), .QDEPTH(QDEPTH), .ACCQ_DEPTH(ACCQ_DEPTH)
  ) u_req (
    .clk_i, .rst_ni,
    .start_i      (start_i && !busy_q),
    .instr_i      (instr_i),
    .idle_o       (req_idle),
    .stages_done_i(stages_done_q),
    .tiles_done_i (tiles_done_q),
    .accq_cnt_i   (accq_cnt),
    .desc_valid_o (desc_valid),
    .desc_ready_i (desc_ready),
    .desc_o       (desc),
    .clr_in_o     (clr_in),
    .clr_w_o      (clr_w),
    .clr_bank_in_o(clr_bank_in),
    .clr_bank_w_o (clr_bank_w),
    .rd_req_o, .rd_addr_o, .rd_gnt_i, .rd_rvalid_i, .rd_rdata_i,
    .qw_valid_o   (qw_valid),
    .qw_is_w_o    (qw_is_w),
    .qw_bank_o    (qw_bank),
    .qw_k_o       (qw_k),
    .qw_idx_o     (qw_idx),
    .qw_last_o    (qw_last),
    .qw_bcast_o   (qw_bcast),
    .qw_data_o    (qw_data),
    .acc_valid_o  (accq_in_valid),
    .acc_data_o   (accq_in_data)
  );

  // ------------------------------------------------------------------------
  // input and weight queues (two banks, indexed by step)
  // ------------------------------------------------------------------------
  logic [WORD_W-1:0] iq [2][QDEPTH][TILE_R];
  logic [WORD_W-1:0] wq [2][QDEPTH][TILE_C];
  logic              iq_v [2][QDEPTH];
  logic              wq_v [2][QDEPTH];

  always_ff @(posedge clk_i) begin
    if (qw_valid) begin
      if (qw_is_w) begin
        for (int c = 0; c < TILE_C; c++)
          if (qw_bcast || c == int'(qw_idx)) wq[qw_bank][qw_k][c] <= qw_data;
      end else begin
        for (int r = 0; r < TILE_R; r++)
          if (r == int'(qw_idx)) iq[qw_bank][qw_k][r] <= qw_data;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < 2; b++)
        for (int k = 0; k < QDEPTH; k++) begin iq_v[b][k] <= 1'b0; wq_v[b][k] <= 1'b0; end
    end else begin
      if (clr_in) for (int k = 0; k < QDEPTH; k++) iq_v[clr_bank_in][k] <= 1'b0;
      if (clr_w)  for (int k = 0; k < QDEPTH; k++) wq_v[clr_bank_w][k]  <= 1'b0;
      if (qw_valid && qw_last) begin
        if (qw_is_w) wq_v[qw_bank][qw_k] <= 1'b1;
        else         iq_v[qw_bank][qw_k] <= 1'b1;
      end
    end
  end

  // ------------------------------------------------------------------------
  // compute control
  // ------------------------------------------------------------------------
  logic        cd_valid;
  mptu_desc_t  cd;
  logic        cd_pop;

  vec_fifo #(.T(mptu_desc_t), .DEPTH(4)) u_descq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .valid_i(desc_valid), .ready_o(desc_ready), .data_i(desc),
    .valid_o(cd_valid), .ready_i(cd_pop), .data_o(cd), .count_o()
  );

  logic [15:0] ck_q;
  logic [7:0]  gap_q;
  logic [1:0]  credits_q;     // emitted tiles not yet written back
  logic        is_last_step, step_ok, feed;
  logic        rq_pop_wb;

  assign is_last_step = (ck_q == cd.len - 1);
  always_comb begin
    step_ok = cd_valid && iq_v[cd.ib][KW'(ck_q)] && wq_v[cd.wb][KW'(ck_q)];
    if (is_last_step && cd.emit && (gap_q != 0 || credits_q == 2'(RQ_DEPTH))) step_ok = 1'b0;
  end
  assign feed   = step_ok;
  assign cd_pop = feed && is_last_step;

  logic [WORD_W-1:0] tc_x [TILE_R];
  logic [WORD_W-1:0] tc_w [TILE_C];
  always_comb begin
    for (int r = 0; r < TILE_R; r++) tc_x[r] = iq[cd.ib][KW'(ck_q)][r];
    for (int c = 0; c < TILE_C; c++) tc_w[c] = wq[cd.wb][KW'(ck_q)][c];
  end

  logic [RES_W-1:0] tc_res   [TILE_R][TILE_C];
  logic             tc_res_v [TILE_R][TILE_C];

  tensor_core #(.TILE_R(TILE_R), .TILE_C(TILE_C)) u_tc (
    .clk_i, .rst_ni,
    .prec_i      (prec_q),
    .x_i         (tc_x),
    .w_i         (tc_w),
    .valid_i     (feed),
    .first_i     (feed && cd.first && ck_q == 0),
    .last_i      (feed && cd.emit && is_last_step),
    .res_o       (tc_res),
    .res_valid_o (tc_res_v)
  );

  // descriptors of emitted tiles, in order, for the collector
  typedef struct packed {
    logic [15:0] out_addr;
    logic        acc;
    logic        vsac;
  } tdesc_t;
  tdesc_t td_in, td_out;
  logic   td_valid, td_pop;
  assign td_in = '{out_addr: cd.out_addr, acc: cd.acc, vsac: cd.vsac};

  vec_fifo #(.T(tdesc_t), .DEPTH(4)) u_tdq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .valid_i(cd_pop && cd.emit), .ready_o(), .data_i(td_in),
    .valid_o(td_valid), .ready_i(td_pop), .data_o(td_out), .count_o()
  );

  // ------------------------------------------------------------------------
  // result collector and result queue
  // ------------------------------------------------------------------------
  typedef struct packed {
    logic [15:0]                      out_addr;
    logic                             acc;
    logic                             vsac;
    logic [TILE_R*TILE_C*RES_W-1:0]   tile;
  } rq_t;

  logic [RES_W-1:0] stg   [TILE_R][TILE_C];
  logic             stg_v [TILE_R][TILE_C];
  logic             tile_full;
  rq_t              rq_in, rq_out;
  logic             rq_valid;

  always_comb begin
    tile_full = 1'b1;
    for (int r = 0; r < TILE_R; r++)
      for (int c = 0; c < TILE_C; c++)
        if (!stg_v[r][c]) tile_full = 1'b0;
  end
  assign td_pop = tile_full && td_valid;

  always_comb begin
    rq_in = '0;
    rq_in.out_addr = td_out.out_addr;
    rq_in.acc      = td_out.acc;
    rq_in.vsac     = td_out.vsac;
    for (int r = 0; r < TILE_R; r++)
      for (int c = 0; c < TILE_C; c++)
        rq_in.tile[(r*TILE_C + c)*RES_W +: RES_W] = stg[r][c];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int r = 0; r < TILE_R; r++)
        for (int c = 0; c < TILE_C; c++) begin stg_v[r][c] <= 1'b0; stg[r][c] <= '0; end
    end else begin
      for (int r = 0; r < TILE_R; r++)
        for (int c = 0; c < TILE_C; c++) begin
          if (tc_res_v[r][c]) begin
            stg[r][c]   <= tc_res[r][c];
            stg_v[r][c] <= 1'b1;
          end else if (td_pop) begin
            stg_v[r][c] <= 1'b0;
          end
        end
    end
  end

  vec_fifo #(.T(rq_t), .DEPTH(RQ_DEPTH)) u_resq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .valid_i(td_pop), .ready_o(), .data_i(rq_in),
    .valid_o(rq_valid), .ready_i(rq_pop_wb), .data_o(rq_out), .count_o()
  );

  // ------------------------------------------------------------------------
  // acc queue
  // ------------------------------------------------------------------------
  logic              accq_valid, accq_pop;
  logic [WORD_W-1:0] accq_data;

  vec_fifo #(.T(logic [WORD_W-1:0]), .DEPTH(ACCQ_DEPTH)) u_accq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .valid_i(accq_in_valid), .ready_o(), .data_i(accq_in_data),
    .valid_o(accq_valid), .ready_i(accq_pop), .data_o(accq_data), .count_o(accq_cnt)
  );

  // ------------------------------------------------------------------------
  // write-back to the VRF
  // ------------------------------------------------------------------------
  logic [7:0]  wj_q;
  int unsigned nw;
  logic [RES_W-1:0] lo, hi;
  logic        wb_ok;

  assign nw = rq_out.vsac ? NW_AC : NW_MM;
  always_comb begin
    int unsigned i0, i1;
    if (rq_out.vsac) begin
      i0 = (2 * int'(wj_q)) * TILE_C;       // column 0 of rows 2j and 2j+1
      i1 = (2 * int'(wj_q) + 1) * TILE_C;
    end else begin
      i0 = 2 * int'(wj_q);
      i1 = 2 * int'(wj_q) + 1;
    end
    lo = rq_out.tile[i0*RES_W +: RES_W];
    hi = rq_out.tile[i1*RES_W +: RES_W];
    if (rq_out.acc) begin
      lo = lo + accq_data[RES_W-1:0];
      hi = hi + accq_data[2*RES_W-1:RES_W];
    end
  end

  assign wb_ok      = rq_valid && (!rq_out.acc || accq_valid);
  assign wr_req_o   = wb_ok;
  assign wr_addr_o  = AW'(rq_out.out_addr + 16'(wj_q));
  assign wr_wdata_o = {hi, lo};
  assign accq_pop   = wb_ok && wr_gnt_i && rq_out.acc;
  assign rq_pop_wb  = wb_ok && wr_gnt_i && (int'(wj_q) == nw - 1);
  assign ev_acc_o   = accq_pop;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) wj_q <= '0;
    else if (wb_ok && wr_gnt_i) wj_q <= rq_pop_wb ? '0 : wj_q + 1'b1;
  end

  // ------------------------------------------------------------------------
  // counters, busy and done
  // ------------------------------------------------------------------------
  logic done_d;
  assign done_d = busy_q && req_idle && !cd_valid && (tiles_done_q == n_emit_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q        <= 1'b0;
      prec_q        <= PREC_16;
      n_emit_q      <= '0;
      stages_done_q <= '0;
      tiles_done_q  <= '0;
      ck_q          <= '0;
      gap_q         <= '0;
      credits_q     <= '0;
      done_o        <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i && !busy_q) begin
        busy_q        <= 1'b1;
        prec_q        <= instr_i.cfg.prec;
        stages_done_q <= '0;
        tiles_done_q  <= '0;
        if (instr_i.vsac || instr_i.cfg.dataflow != DF_CF)
          n_emit_q <= 8'(n_stages(instr_i.cfg.dataflow, instr_i.vsac, instr_i.cfg.nstage_m1));
        else
          n_emit_q <= 8'd1;
      end else if (done_d) begin
        busy_q <= 1'b0;
        done_o <= 1'b1;
      end
      if (feed) ck_q <= is_last_step ? '0 : ck_q + 1'b1;
      if (cd_pop) stages_done_q <= stages_done_q + 1'b1;
      if (rq_pop_wb) tiles_done_q <= tiles_done_q + 1'b1;
      if (feed && is_last_step && cd.emit) gap_q <= 8'(GAP);
      else if (gap_q != 0) gap_q <= gap_q - 1'b1;
      credits_q <= credits_q + ((feed && is_last_step && cd.emit) ? 2'd1 : 2'd0)
                             - (rq_pop_wb ? 2'd1 : 2'd0);
    end
  end

  assign busy_o = busy_q;

  // reuse events: a stage starts without new operand requests
  assign ev_w_reuse_o = desc_valid && desc_ready && !clr_w;
  assign ev_i_reuse_o = desc_valid && desc_ready && !clr_in;

endmodule
