// speed_pkg: types, constants and helper functions shared by the SPEED vector
// processor.
//
// It holds the instruction encodings, the decoded-instruction record that travels
// from the decode unit through the sequencer to the functional units, the
// configuration written by VSACFG, and the stage plan of the four dataflows of the
// multi-precision tensor unit (MPTU).
//
// From the paper: the opcodes, funct6/funct3 values and field positions of VSACFG,
// VSALD, VSAM and VSAC, the three precisions (16/8/4 bit), the kernel size range
// 1..15, the four dataflows (MM, FFCS, CF, FF) and the stage order of each of them.
// This design's own choices: the bit layout inside zimm[8:0] and uimm[4:0], the
// width code of 4-bit VSALD, how many stages one VSAM runs (N from zimm) and how the
// operand blocks are laid out in the vector registers (see stage_plan below).
package speed_pkg;

  // ---------------------------------------------------------------------------
  // Opcodes and function codes
  // ---------------------------------------------------------------------------
  localparam logic [6:0] OPC_OPV   = 7'b1010111;  // OP-V: arithmetic and config
  localparam logic [6:0] OPC_LOADV = 7'b0000111;  // LOAD-FP: VLE / VSALD
  localparam logic [6:0] OPC_STOREV= 7'b0100111;  // STORE-FP: VSE

  localparam logic [2:0] F3_OPIVV  = 3'b000;
  localparam logic [2:0] F3_OPMVV  = 3'b010;
  localparam logic [2:0] F3_CFG    = 3'b111;

  localparam logic [5:0] F6_VSAM   = 6'b101010;
  localparam logic [5:0] F6_VSAC   = 6'b101110;
  localparam logic [2:0] VSACFG_TOP= 3'b101;      // bits [31:29] of VSACFG
  localparam logic [4:0] LUMOP_VSALD = 5'b00100;  // bits [24:20] of VSALD

  // Official RVV OPIVV funct6 codes supported by the lane ALU
  localparam logic [5:0] F6_VADD   = 6'b000000;
  localparam logic [5:0] F6_VSUB   = 6'b000010;
  localparam logic [5:0] F6_VMINU  = 6'b000100;
  localparam logic [5:0] F6_VMIN   = 6'b000101;
  localparam logic [5:0] F6_VMAXU  = 6'b000110;
  localparam logic [5:0] F6_VMAX   = 6'b000111;
  localparam logic [5:0] F6_VAND   = 6'b001001;
  localparam logic [5:0] F6_VOR    = 6'b001010;
  localparam logic [5:0] F6_VXOR   = 6'b001011;
  localparam logic [5:0] F6_VSLL   = 6'b100101;
  localparam logic [5:0] F6_VSRL   = 6'b101000;
  localparam logic [5:0] F6_VSRA   = 6'b101001;

  // ---------------------------------------------------------------------------
  // Architectural sizes shared by all blocks
  // ---------------------------------------------------------------------------
  localparam int unsigned WORD_W  = 64;   // lane datapath / VRF word width
  localparam int unsigned NVREG   = 32;   // RVV vector registers
  localparam int unsigned RES_W   = 32;   // PE output width ("32-bit output")

  // ---------------------------------------------------------------------------
  // Enumerations
  // ---------------------------------------------------------------------------
  typedef enum logic [1:0] {
    PREC_16 = 2'd0,
    PREC_8  = 2'd1,
    PREC_4  = 2'd2
  } prec_e;

  typedef enum logic [1:0] {
    DF_MM   = 2'd0,   // matrix multiplication strategy
    DF_FFCS = 2'd1,   // feature-map-first-channel-second (CONV)
    DF_CF   = 2'd2,   // channel-first (PWCV)
    DF_FF   = 2'd3    // feature-map-first (DWCV)
  } dataflow_e;

  typedef enum logic [2:0] {
    FU_NONE = 3'd0,
    FU_VLDU = 3'd1,
    FU_VSTU = 3'd2,
    FU_ALU  = 3'd3,
    FU_MPTU = 3'd4
  } fu_e;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR,
    ALU_MIN, ALU_MAX, ALU_MINU, ALU_MAXU,
    ALU_SLL, ALU_SRL, ALU_SRA
  } alu_op_e;

  // Configuration written by VSACFG and kept in the decode unit's rd register.
  // zimm[1:0] = precision, zimm[5:2] = kernel size, zimm[8:6] = N-1,
  // uimm[1:0] = dataflow.
  typedef struct packed {
    prec_e      prec;
    logic [3:0] ksize;     // 1..15
    logic [2:0] nstage_m1; // N-1, N = 1..8
    dataflow_e  dataflow;
  } mptu_cfg_t;

  localparam mptu_cfg_t CFG_RESET = '{prec: PREC_16, ksize: 4'd1, nstage_m1: 3'd0, dataflow: DF_MM};

  // Decoded instruction, built in ID, carried through IS to the FUs.
  typedef struct packed {
    fu_e        fu;
    alu_op_e    alu_op;
    logic [4:0] vd;
    logic [4:0] vs1;
    logic [4:0] vs2;
    logic [1:0] sew;      // 0:8 1:16 2:32 3:64 bit (ALU)
    logic [15:0] nwords;  // 64-bit words of the whole vector operand (ALU, VLDU, VSTU)
    logic [15:0] red_len; // MPTU: operand words per PE row per stage (L)
    logic [31:0] addr;    // memory base address (byte, beat aligned)
    logic        bcast;   // VSALD multi-broadcast
    logic        vsac;    // MPTU matrix-vector form
    mptu_cfg_t   cfg;     // precision etc. attached in ID
    logic [31:0] rmask;   // vector registers read
    logic [31:0] wmask;   // vector registers written
    logic [3:0]  tag;     // scalar-side tag echoed on completion
  } vinstr_t;

  // One stage of an MPTU instruction
  typedef struct packed {
    logic [3:0] in_blk;
    logic [3:0] w_blk;
    logic [3:0] out_blk;
    logic       acc;    // add the partial sums read from vd (acc queue)
    logic       first;  // PE starts a new accumulation
    logic       emit;   // PE results leave to the result queue after this stage
    logic       in_new; // inputs differ from the previous stage (else reused)
    logic       w_new;  // weights differ from the previous stage (else reused)
  } stage_t;

  // Stage descriptor handed from the operand requester to the MPTU's compute
  // control: which operand-queue banks to read, how many steps, what to do with
  // the results.
  typedef struct packed {
    logic        ib;        // input queue bank
    logic        wb;        // weight queue bank
    logic [15:0] len;       // steps L
    logic        first;
    logic        emit;
    logic        acc;
    logic        vsac;
    logic [15:0] out_addr;  // lane-local VRF word address of the output block
  } mptu_desc_t;

  // Number of stages of one VSAM/VSAC
  function automatic int unsigned n_stages(dataflow_e df, logic vsac, logic [2:0] nstage_m1);
    int unsigned n;
    n = int'(nstage_m1) + 1;
    if (vsac) return 1;
    case (df)
      DF_MM, DF_FFCS: return 2 * n;
      default:        return n;
    endcase
  endfunction

  // Operand block of each stage.
  //   MM  : 2N stages; input block s/N reused over N weight blocks, the second half
  //         accumulates onto the outputs of the first half (Sec. III-A).
  //   FFCS: 2N stages; N input blocks with weight block 0 (OP1), then N more with
  //         weight block 1 (OP2), accumulated onto the first N outputs.
  //   CF  : N stages along input channels, accumulated inside the PEs, one output.
  //   FF  : N stages, new inputs, weight block 0 reused, each stage emits.
  function automatic stage_t stage_plan(dataflow_e df, logic vsac, logic [2:0] nstage_m1,
                                        int unsigned s);
    stage_t st;
    int unsigned n;
    int unsigned ib, wb, ib_p, wb_p;
    n = int'(nstage_m1) + 1;
    st = '0;
    ib = 0; wb = 0; ib_p = 0; wb_p = 0;
    if (vsac) begin
      st.first = 1'b1; st.emit = 1'b1;
    end else begin
      case (df)
        DF_MM: begin
          ib = s / n; wb = s; st.out_blk = 4'(s % n); st.acc = (s >= n);
          st.first = 1'b1; st.emit = 1'b1;
          if (s > 0) begin ib_p = (s - 1) / n; wb_p = s - 1; end
        end
        DF_FFCS: begin
          ib = s; wb = s / n; st.out_blk = 4'(s % n); st.acc = (s >= n);
          st.first = 1'b1; st.emit = 1'b1;
          if (s > 0) begin ib_p = s - 1; wb_p = (s - 1) / n; end
        end
        DF_CF: begin
          ib = s; wb = s; st.out_blk = 4'd0; st.acc = 1'b0;
          st.first = (s == 0); st.emit = (s == n - 1);
          if (s > 0) begin ib_p = s - 1; wb_p = s - 1; end
        end
        default: begin // DF_FF
          ib = s; wb = 0; st.out_blk = 4'(s); st.acc = 1'b0;
          st.first = 1'b1; st.emit = 1'b1;
          if (s > 0) begin ib_p = s - 1; wb_p = 0; end
        end
      endcase
    end
    st.in_blk = 4'(ib);
    st.w_blk  = 4'(wb);
    st.in_new = (s == 0) || (ib != ib_p);
    st.w_new  = (s == 0) || (wb != wb_p);
    return st;
  endfunction

  // Number of distinct input / weight / output blocks of an MPTU instruction
  function automatic int unsigned n_in_blocks(dataflow_e df, logic vsac, logic [2:0] nstage_m1);
    int unsigned n;
    n = int'(nstage_m1) + 1;
    if (vsac) return 1;
    case (df)
      DF_MM:   return 2;
      DF_FFCS: return 2 * n;
      default: return n;
    endcase
  endfunction

  function automatic int unsigned n_w_blocks(dataflow_e df, logic vsac, logic [2:0] nstage_m1);
    int unsigned n;
    n = int'(nstage_m1) + 1;
    if (vsac) return 1;
    case (df)
      DF_MM:   return 2 * n;
      DF_FFCS: return 2;
      DF_CF:   return n;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned n_out_blocks(dataflow_e df, logic vsac, logic [2:0] nstage_m1);
    int unsigned n;
    n = int'(nstage_m1) + 1;
    if (vsac) return 1;
    case (df)
      DF_CF:   return 1;
      default: return n;
    endcase
  endfunction

  // Mask of the vector registers [base, base+ceil(words/wpv)) modulo 32
  function automatic logic [31:0] vreg_span(logic [4:0] base, int unsigned words, int unsigned wpv);
    logic [31:0] m;
    int unsigned nregs;
    m = '0;
    nregs = (words + wpv - 1) / wpv;
    if (nregs > NVREG) nregs = NVREG;
    for (int unsigned i = 0; i < NVREG; i++)
      if (i < nregs) m[5'(int'(base) + i)] = 1'b1;
    return m;
  endfunction

  // Element width in bits of a precision
  function automatic int unsigned prec_bits(prec_e p);
    case (p)
      PREC_8:  return 8;
      PREC_4:  return 4;
      default: return 16;
    endcase
  endfunction

endpackage
