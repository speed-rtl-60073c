// vidu: vector instruction decode unit (ID stage).
//
// Takes one vector instruction per cycle from the vector instruction queue
// (32-bit instruction word, the scalar rs1 value and a tag chosen by the scalar
// core), decodes official RVV instructions (VSETVLI, VLE8/16/32/64, VSE, integer
// OPIVV arithmetic) and the customised ones (VSACFG, VSALD, VSAM, VSAC), and
// hands a decoded record (speed_pkg::vinstr_t) to the sequencer through a
// one-entry pipeline register.
//
// The unit keeps the configuration register rd written by VSACFG (precision,
// kernel size, stage count, dataflow) and the vl/vtype state written by VSETVLI,
// and attaches both to every decoded instruction. A configuration instruction
// therefore changes the precision of all later instructions after one cycle
// while earlier ones keep theirs; it never goes to the sequencer and completes
// directly (ID then CO). The unit also reports every completion to the scalar
// core (resp_*): its own configuration instructions first, then the commits
// forwarded by the sequencer. An unknown instruction completes with
// resp_illegal_o set.
//
// From the paper (Fig. 1): the VSACFG, VSALD, VSAM and VSAC field layouts and
// fixed bits. This design's choices: zimm[1:0] precision (0:16, 1:8, 2:4 bit),
// zimm[5:2] kernel size, zimm[8:6] stage count N-1, uimm[1:0] dataflow (0:MM,
// 1:FFCS, 2:CF, 3:FF); VSALD width code 001 for 4-bit elements; the VSACFG
// result (the new configuration) returned to the scalar rd; L = vl for MM and
// VSAC, L = kernel size squared for the convolution dataflows.
module vidu
  import speed_pkg::*;
#(
  parameter int unsigned LANES  = 4,
  parameter int unsigned WPV    = 16,   // words of a vector register per lane
  parameter int unsigned TILE_R = 2,
  parameter int unsigned TILE_C = 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // from the vector instruction queue
  input  logic        in_valid_i,
  output logic        in_ready_o,
  input  logic [31:0] in_instr_i,
  input  logic [31:0] in_rs1_i,
  input  logic [3:0]  in_tag_i,
  // to the sequencer (IS)
  output logic        out_valid_o,
  input  logic        out_ready_i,
  output vinstr_t     out_o,
  // commits from the sequencer (CO)
  input  logic        cmt_valid_i,
  output logic        cmt_ready_o,
  input  logic [3:0]  cmt_tag_i,
  // completion to the scalar core
  output logic        resp_valid_o,
  output logic [3:0]  resp_tag_o,
  output logic [31:0] resp_result_o,
  output logic        resp_illegal_o,
  // current configuration (observation)
  output mptu_cfg_t   cfg_o,
  output logic [15:0] vl_o
);

  localparam int unsigned VLEN = LANES * WPV * WORD_W;   // bits per vector register

  mptu_cfg_t   cfg_q;
  logic [15:0] vl_q;
  logic [1:0]  sew_q;
  logic [1:0]  lmul_q;     // log2 LMUL, 0..3

  logic        out_valid_q;
  vinstr_t     out_q;

  // ---------------- field extraction ----------------
  logic [6:0] opc;
  logic [2:0] f3;
  logic [5:0] f6;
  logic [4:0] f_vd, f_vs1, f_vs2;
  assign opc   = in_instr_i[6:0];
  assign f3    = in_instr_i[14:12];
  assign f6    = in_instr_i[31:26];
  assign f_vd  = in_instr_i[11:7];
  assign f_vs1 = in_instr_i[19:15];
  assign f_vs2 = in_instr_i[24:20];

  typedef enum logic [2:0] {K_ILLEGAL, K_VSETVLI, K_VSACFG, K_FU} kind_e;
  kind_e   kind;
  vinstr_t dec;
  mptu_cfg_t new_cfg;
  logic [15:0] new_vl;
  logic [1:0]  new_sew, new_lmul;

  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  always_comb begin
    int unsigned eew, nw, nloc, l, cw, nwo, vlmax, avl, sew_b;
    kind     = K_ILLEGAL;
    dec      = '0;
    dec.tag  = in_tag_i;
    dec.cfg  = cfg_q;
    dec.sew  = sew_q;
    dec.vd   = f_vd;
    dec.vs1  = f_vs1;
    dec.vs2  = f_vs2;
    dec.addr = in_rs1_i;
    new_cfg  = cfg_q;
    new_vl   = vl_q;
    new_sew  = sew_q;
    new_lmul = lmul_q;
    eew = 8; nw = 0; nloc = 0; l = 1; cw = TILE_C; nwo = 0; vlmax = 0; avl = 0; sew_b = 8;

    case (opc)
      OPC_OPV: begin
        if (f3 == F3_CFG) begin
          if (in_instr_i[31:29] == VSACFG_TOP) begin
            // VSACFG: zimm[8:0] = instr[28:20], uimm[4:0] = instr[19:15]
            kind = K_VSACFG;
            new_cfg.prec      = (in_instr_i[21:20] == 2'd3) ? PREC_4 : prec_e'(in_instr_i[21:20]);
            new_cfg.ksize     = (in_instr_i[25:22] == 4'd0) ? 4'd1 : in_instr_i[25:22];
            new_cfg.nstage_m1 = in_instr_i[28:26];
            new_cfg.dataflow  = dataflow_e'(in_instr_i[16:15]);
          end else if (!in_instr_i[31]) begin
            // VSETVLI: vtype = instr[30:20]; vsew = vtype[5:3], vlmul = vtype[2:0]
            kind     = K_VSETVLI;
            new_sew  = (in_instr_i[25:23] > 3'd3) ? 2'd3 : in_instr_i[24:23];
            new_lmul = in_instr_i[22] ? 2'd0 : in_instr_i[21:20];   // fractional LMUL as 1
            sew_b    = 8 << new_sew;
            vlmax    = (VLEN << new_lmul) / sew_b;
            avl      = (f_vs1 == 5'd0) ? vlmax : int'(in_rs1_i);
            new_vl   = 16'((avl < vlmax) ? avl : vlmax);
          end
        end else if (f3 == F3_OPMVV && (f6 == F6_VSAM || f6 == F6_VSAC)) begin
          kind     = K_FU;
          dec.fu   = FU_MPTU;
          dec.vsac = (f6 == F6_VSAC);
          if (dec.vsac || cfg_q.dataflow == DF_MM) l = int'(vl_q);
          else                                     l = int'(cfg_q.ksize) * int'(cfg_q.ksize);
          dec.red_len = 16'(l);
          cw  = dec.vsac ? 1 : TILE_C;
          nwo = dec.vsac ? TILE_R / 2 : TILE_R * TILE_C / 2;
          dec.rmask = vreg_span(f_vs1, n_in_blocks(cfg_q.dataflow, dec.vsac, cfg_q.nstage_m1) * l * TILE_R, WPV)
                    | vreg_span(f_vs2, n_w_blocks(cfg_q.dataflow, dec.vsac, cfg_q.nstage_m1) * l * cw, WPV);
          dec.wmask = vreg_span(f_vd, n_out_blocks(cfg_q.dataflow, dec.vsac, cfg_q.nstage_m1) * nwo, WPV);
          if (!dec.vsac && (cfg_q.dataflow == DF_MM || cfg_q.dataflow == DF_FFCS))
            dec.rmask = dec.rmask | dec.wmask;
        end else if (f3 == F3_OPIVV) begin
          kind   = K_FU;
          dec.fu = FU_ALU;
          case (f6)
            F6_VADD:  dec.alu_op = ALU_ADD;
            F6_VSUB:  dec.alu_op = ALU_SUB;
            F6_VMINU: dec.alu_op = ALU_MINU;
            F6_VMIN:  dec.alu_op = ALU_MIN;
            F6_VMAXU: dec.alu_op = ALU_MAXU;
            F6_VMAX:  dec.alu_op = ALU_MAX;
            F6_VAND:  dec.alu_op = ALU_AND;
            F6_VOR:   dec.alu_op = ALU_OR;
            F6_VXOR:  dec.alu_op = ALU_XOR;
            F6_VSLL:  dec.alu_op = ALU_SLL;
            F6_VSRL:  dec.alu_op = ALU_SRL;
            F6_VSRA:  dec.alu_op = ALU_SRA;
            default:  kind = K_ILLEGAL;
          endcase
          nw   = ceil_div(int'(vl_q) * (8 << sew_q), WORD_W);
          nloc = ceil_div(nw, LANES);
          dec.nwords = 16'(nw);
          dec.rmask  = vreg_span(f_vs1, nloc, WPV) | vreg_span(f_vs2, nloc, WPV);
          dec.wmask  = vreg_span(f_vd, nloc, WPV);
        end
      end
      OPC_LOADV, OPC_STOREV: begin
        case (f3)
          3'b000:  eew = 8;
          3'b101:  eew = 16;
          3'b110:  eew = 32;
          3'b111:  eew = 64;
          3'b001:  eew = 4;
          default: eew = 0;
        endcase
        nw   = ceil_div(int'(vl_q) * eew, WORD_W);
        nloc = ceil_div(nw, LANES);
        dec.nwords = 16'(nw);
        if (in_instr_i[27:26] == 2'b00 && in_instr_i[31:29] == 3'b000 && eew != 0) begin
          if (opc == OPC_LOADV && f_vs2 == 5'b00000 && eew != 4) begin
            kind      = K_FU;          // VLE: sequential allocation over the lanes
            dec.fu    = FU_VLDU;
            dec.wmask = vreg_span(f_vd, nloc, WPV);
          end else if (opc == OPC_LOADV && f_vs2 == LUMOP_VSALD) begin
            kind      = K_FU;          // VSALD: multi-broadcast to every lane
            dec.fu    = FU_VLDU;
            dec.bcast = 1'b1;
            dec.wmask = vreg_span(f_vd, nw, WPV);
          end else if (opc == OPC_STOREV && f_vs2 == 5'b00000 && eew != 4) begin
            kind      = K_FU;          // VSE (vs3 in the vd field)
            dec.fu    = FU_VSTU;
            dec.rmask = vreg_span(f_vd, nloc, WPV);
          end
        end
      end
      default: kind = K_ILLEGAL;
    endcase
  end

  // ---------------- handshakes ----------------
  logic own_resp;      // this cycle's instruction completes in ID
  assign in_ready_o  = (kind != K_FU) || !out_valid_q || out_ready_i;
  assign own_resp    = in_valid_i && in_ready_o && (kind != K_FU);
  assign cmt_ready_o = !own_resp;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q          <= CFG_RESET;
      vl_q           <= '0;
      sew_q          <= '0;
      lmul_q         <= '0;
      out_valid_q    <= 1'b0;
      out_q          <= '0;
      resp_valid_o   <= 1'b0;
      resp_tag_o     <= '0;
      resp_result_o  <= '0;
      resp_illegal_o <= 1'b0;
    end else begin
      if (out_valid_q && out_ready_i) out_valid_q <= 1'b0;
      resp_valid_o   <= 1'b0;
      resp_illegal_o <= 1'b0;
      if (in_valid_i && in_ready_o) begin
        case (kind)
          K_FU: begin
            out_valid_q <= 1'b1;
            out_q       <= dec;
          end
          K_VSACFG: begin
            cfg_q         <= new_cfg;
            resp_valid_o  <= 1'b1;
            resp_tag_o    <= in_tag_i;
            resp_result_o <= 32'(new_cfg);
          end
          K_VSETVLI: begin
            vl_q          <= new_vl;
            sew_q         <= new_sew;
            lmul_q        <= new_lmul;
            resp_valid_o  <= 1'b1;
            resp_tag_o    <= in_tag_i;
            resp_result_o <= 32'(new_vl);
          end
          default: begin
            resp_valid_o   <= 1'b1;
            resp_illegal_o <= 1'b1;
            resp_tag_o     <= in_tag_i;
            resp_result_o  <= '0;
          end
        endcase
      end
      if (!own_resp && cmt_valid_i) begin
        resp_valid_o  <= 1'b1;
        resp_tag_o    <= cmt_tag_i;
        resp_result_o <= '0;
      end
    end
  end

  assign out_valid_o = out_valid_q;
  assign out_o       = out_q;
  assign cfg_o       = cfg_q;
  assign vl_o        = vl_q;

endmodule
