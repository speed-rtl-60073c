// tb_speed_top: end-to-end test of the SPEED vector processor at its default
// configuration (4 lanes, 2x2 tensor core per lane, 16 KiB VRF).
//
// The testbench plays the scalar core: it offloads a program of vector
// instructions (VSETVLI, VSACFG, VLE, VSALD, VSAM in all four dataflows, VSAC,
// VADD, VSE and one illegal word) through the instruction port, and an external
// memory model serves the load and store units. Inputs are loaded with VSALD
// (broadcast, the same in every lane) and weights with VLE (sequential
// allocation, so every lane computes its own output channels). Alongside, the
// testbench executes the same program on its own sequential model of the lanes'
// registers, written from the instruction semantics (dataflow formulas below),
// and at the end compares every stored result word in memory and every response
// (tag, vl, configuration). It also counts how often each mechanism happened
// (register hazard stall, instruction-queue back-pressure, input reuse, weight
// reuse, partial-sum accumulation, precision switch, multi-broadcast load, illegal
// instruction) and counts a failure for any that never did.
module tb_speed_top;
  import speed_pkg::*;

  localparam int unsigned LANES = 4, R = 2, C = 2, WPV = 16, NW = R * C / 2;
  localparam int unsigned BUS_W = LANES * 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               req_valid, req_ready;
  logic [31:0]        req_instr, req_rs1;
  logic [3:0]         req_tag;
  logic               rsp_valid, rsp_illegal;
  logic [3:0]         rsp_tag;
  logic [31:0]        rsp_result;
  logic               m_valid, m_ready, m_we, m_rvalid;
  logic [31:0]        m_addr;
  logic [BUS_W-1:0]   m_wdata, m_rdata;
  logic [BUS_W/8-1:0] m_wstrb;
  logic               o_haz;
  logic [LANES-1:0]   o_wr, o_ir, o_acc, o_busy;
  mptu_cfg_t          o_cfg;
  logic [15:0]        o_vl;

  speed_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .acc_req_valid_i(req_valid), .acc_req_ready_o(req_ready), .acc_req_instr_i(req_instr),
    .acc_req_rs1_i(req_rs1), .acc_req_tag_i(req_tag),
    .acc_resp_valid_o(rsp_valid), .acc_resp_tag_o(rsp_tag), .acc_resp_result_o(rsp_result),
    .acc_resp_illegal_o(rsp_illegal),
    .mem_req_valid_o(m_valid), .mem_req_ready_i(m_ready), .mem_req_we_o(m_we),
    .mem_req_addr_o(m_addr), .mem_req_wdata_o(m_wdata), .mem_req_wstrb_o(m_wstrb),
    .mem_rsp_valid_i(m_rvalid), .mem_rsp_rdata_i(m_rdata),
    .obs_hazard_stall_o(o_haz), .obs_w_reuse_o(o_wr), .obs_i_reuse_o(o_ir),
    .obs_acc_o(o_acc), .obs_mptu_busy_o(o_busy), .obs_cfg_o(o_cfg), .obs_vl_o(o_vl)
  );

  localparam int unsigned NBEATS = 1024;
  ext_mem_model #(.BUS_W(BUS_W), .NBEATS(NBEATS)) u_mem (
    .clk_i(clk), .rst_ni(rst_n),
    .mem_req_valid_i(m_valid), .mem_req_ready_o(m_ready), .mem_req_we_i(m_we),
    .mem_req_addr_i(m_addr), .mem_req_wdata_i(m_wdata), .mem_req_wstrb_i(m_wstrb),
    .mem_rsp_valid_o(m_rvalid), .mem_rsp_rdata_o(m_rdata)
  );

  int checks = 0, failures = 0;

  // ---------------- reference model state ----------------
  logic [63:0] mv [LANES][512];          // lanes' registers, word granular
  logic [63:0] mw [NBEATS*LANES];        // memory, 64-bit words
  logic        mv_known [LANES][512];
  int unsigned m_vl, m_sew, m_prec, m_ks, m_n, m_df;

  function automatic int signed dotw(logic [63:0] x, logic [63:0] w, int unsigned prec);
    int signed s = 0;
    case (prec)
      0: s = int'($signed(x[15:0])) * int'($signed(w[15:0]));
      1: for (int e = 0; e < 4; e++)  s += int'($signed(x[e*8 +: 8])) * int'($signed(w[e*8 +: 8]));
      default: for (int e = 0; e < 16; e++) s += int'($signed(x[e*4 +: 4])) * int'($signed(w[e*4 +: 4]));
    endcase
    return s;
  endfunction

  // partial product of input block ib and weight block wb, PE (r,c), lane l
  function automatic int signed pblk(int l, int vs1, int vs2, int ib, int wb, int r, int c,
                                     int L, int prec);
    int signed s = 0;
    for (int k = 0; k < L; k++)
      s += dotw(mv[l][vs1*WPV + ib*L*R + k*R + r], mv[l][vs2*WPV + wb*L*C + k*C + c], prec);
    return s;
  endfunction

  task automatic model_mptu(bit vsac, int vd, int vs1, int vs2);
    int L, N;
    int signed res [R*C];
    N = m_n;
    L = (vsac || m_df == 0) ? m_vl : m_ks * m_ks;
    for (int l = 0; l < LANES; l++) begin
      if (vsac) begin
        for (int r = 0; r < R; r++) begin
          res[r] = 0;
          for (int k = 0; k < L; k++) res[r] += dotw(mv[l][vs1*WPV + k*R + r], mv[l][vs2*WPV + k], m_prec);
        end
        for (int j = 0; j < R/2; j++) begin
          mv[l][vd*WPV + j] = {res[2*j+1], res[2*j]};
          mv_known[l][vd*WPV + j] = 1'b1;
        end
      end else begin
        for (int o = 0; o < ((m_df == 2) ? 1 : N); o++) begin
          for (int r = 0; r < R; r++)
            for (int c = 0; c < C; c++) begin
              case (m_df)
                0: res[r*C+c] = pblk(l, vs1, vs2, 0, o, r, c, L, m_prec) + pblk(l, vs1, vs2, 1, N + o, r, c, L, m_prec);
                1: res[r*C+c] = pblk(l, vs1, vs2, o, 0, r, c, L, m_prec) + pblk(l, vs1, vs2, N + o, 1, r, c, L, m_prec);
                2: begin
                  res[r*C+c] = 0;
                  for (int s = 0; s < N; s++) res[r*C+c] += pblk(l, vs1, vs2, s, s, r, c, L, m_prec);
                end
                default: res[r*C+c] = pblk(l, vs1, vs2, o, 0, r, c, L, m_prec);
              endcase
            end
          for (int j = 0; j < NW; j++) begin
            mv[l][vd*WPV + o*NW + j] = {res[2*j+1], res[2*j]};
            mv_known[l][vd*WPV + o*NW + j] = 1'b1;
          end
        end
      end
    end
  endtask

  // ---------------- instruction encodings ----------------
  function automatic logic [31:0] e_vsetvli(int sew, int lmul);
    return {1'b0, 11'((sew << 3) | lmul), 5'd1, 3'b111, 5'd0, 7'b1010111};
  endfunction
  function automatic logic [31:0] e_vsacfg(int prec, int ks, int n, int df);
    return {3'b101, 3'(n - 1), 4'(ks), 2'(prec), 3'b000, 2'(df), 3'b111, 5'd0, 7'b1010111};
  endfunction
  function automatic logic [31:0] e_mem(bit store, bit bcast, int vd);
    return {3'b000, 1'b0, 2'b00, 1'b1, bcast ? 5'b00100 : 5'b00000, 5'd1, 3'b111, 5'(vd),
            store ? 7'b0100111 : 7'b0000111};
  endfunction
  function automatic logic [31:0] e_vsam(bit vsac, int vd, int vs1, int vs2);
    return {vsac ? 6'b101110 : 6'b101010, 1'b1, 5'(vs2), 5'(vs1), 3'b010, 5'(vd), 7'b1010111};
  endfunction
  function automatic logic [31:0] e_vadd(int vd, int vs2, int vs1);
    return {6'b000000, 1'b1, 5'(vs2), 5'(vs1), 3'b000, 5'(vd), 7'b1010111};
  endfunction

  // ---------------- offload and responses ----------------
  bit          pend [16];
  logic [31:0] exp_res [16];
  bit          exp_chk [16];
  bit          exp_ill [16];
  int unsigned seq = 0, n_sent = 0, n_resp = 0;

  task automatic send(logic [31:0] ins, logic [31:0] rs1, bit chk, logic [31:0] res, bit ill);
    int t;
    t = seq % 16;
    while (pend[t]) @(posedge clk);
    pend[t] = 1'b1; exp_chk[t] = chk; exp_res[t] = res; exp_ill[t] = ill;
    req_valid <= 1'b1; req_instr <= ins; req_rs1 <= rs1; req_tag <= 4'(t);
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    req_valid <= 1'b0;
    seq++; n_sent++;
  endtask

  always @(posedge clk) if (rst_n && rsp_valid) begin
    checks++;
    if (!pend[rsp_tag] || rsp_illegal != exp_ill[rsp_tag] ||
        (exp_chk[rsp_tag] && rsp_result != exp_res[rsp_tag])) begin
      failures++;
      $display("ERROR: response tag %0d result %h illegal %0d (expected %h %0d)",
               rsp_tag, rsp_result, rsp_illegal, exp_res[rsp_tag], exp_ill[rsp_tag]);
    end
    pend[rsp_tag] = 1'b0;
    n_resp++;
  end

  // ---------------- program helpers (issue + model) ----------------
  task automatic vsetvli(int avl, int sew, int lmul);
    int vlmax;
    vlmax = (LANES * WPV * 64 << lmul) / (8 << sew);
    m_vl = (avl < vlmax) ? avl : vlmax; m_sew = sew;
    send(e_vsetvli(sew, lmul), 32'(avl), 1'b1, 32'(m_vl), 1'b0);
  endtask
  task automatic vsacfg(int prec, int ks, int n, int df);
    mptu_cfg_t c;
    m_prec = prec; m_ks = ks; m_n = n; m_df = df;
    c.prec = prec_e'(prec); c.ksize = 4'(ks); c.nstage_m1 = 3'(n - 1); c.dataflow = dataflow_e'(df);
    send(e_vsacfg(prec, ks, n, df), 0, 1'b1, 32'(c), 1'b0);
  endtask
  // loads/stores with 64-bit elements: nwords = vl
  task automatic vle(int vd, int base, bit bcast);
    for (int w = 0; w < m_vl; w++)
      for (int l = 0; l < LANES; l++)
        if (bcast) begin
          mv[l][vd*WPV + w] = mw[base/8 + w]; mv_known[l][vd*WPV + w] = 1'b1;
        end else if (w % LANES == l) begin
          mv[l][vd*WPV + w/LANES] = mw[base/8 + w]; mv_known[l][vd*WPV + w/LANES] = 1'b1;
        end
    send(e_mem(1'b0, bcast, vd), 32'(base), 1'b0, 0, 1'b0);
  endtask
  task automatic vse(int vs, int base);
    for (int w = 0; w < m_vl; w++) mw[base/8 + w] = mv[w % LANES][vs*WPV + w/LANES];
    send(e_mem(1'b1, 1'b0, vs), 32'(base), 1'b0, 0, 1'b0);
  endtask
  task automatic vsam(bit vsac, int vd, int vs1, int vs2);
    model_mptu(vsac, vd, vs1, vs2);
    send(e_vsam(vsac, vd, vs1, vs2), 0, 1'b0, 0, 1'b0);
  endtask
  task automatic vadd32(int vd, int vs2, int vs1);
    int nw;
    nw = (m_vl * 32 + 63) / 64;
    for (int w = 0; w < nw; w++) begin
      int l, i;
      l = w % LANES; i = w / LANES;
      mv[l][vd*WPV + i] = {mv[l][vs2*WPV + i][63:32] + mv[l][vs1*WPV + i][63:32],
                           mv[l][vs2*WPV + i][31:0]  + mv[l][vs1*WPV + i][31:0]};
    end
    send(e_vadd(vd, vs2, vs1), 0, 1'b0, 0, 1'b0);
  endtask

  // ---------------- mechanism counters ----------------
  int n_haz = 0, n_viq_full = 0, n_ireuse = 0, n_wreuse = 0, n_acc = 0, n_prec = 0;
  int n_bcast = 0, n_ill = 0, n_cycles = 0;
  prec_e last_prec;
  bit    prec_seen = 1'b0;
  always @(posedge clk) if (rst_n) begin
    n_cycles++;
    if (o_haz) n_haz++;
    if (req_valid && !req_ready) n_viq_full++;
    if (|o_ir)  n_ireuse++;
    if (|o_wr)  n_wreuse++;
    if (|o_acc) n_acc++;
    if (rsp_valid && rsp_illegal) n_ill++;
    if (|o_busy) begin
      if (prec_seen && o_cfg.prec != last_prec) n_prec++;
    end
    if (|o_busy) begin last_prec = o_cfg.prec; prec_seen = 1'b1; end
  end

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("ERROR: mechanism %s never happened", name); end
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int A_IN = 32'h0000, A_W = 32'h2000, A_OUT = 32'h6000;

  initial begin
    int unsigned ow;
    req_valid = 1'b0; req_instr = '0; req_rs1 = '0; req_tag = '0;
    for (int t = 0; t < 16; t++) begin pend[t] = 0; exp_res[t] = 0; exp_chk[t] = 0; exp_ill[t] = 0; end
    for (int b = 0; b < NBEATS; b++) begin
      for (int j = 0; j < LANES; j++) begin
        mw[b*LANES + j] = {$urandom, $urandom};
        u_mem.mem[b][j*64 +: 64] = mw[b*LANES + j];
      end
    end
    for (int l = 0; l < LANES; l++) for (int i = 0; i < 512; i++) begin mv[l][i] = '0; mv_known[l][i] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // A: 8-bit MM, N = 2, L = 4 (input reuse over N weight blocks, accumulation)
    vsetvli(16, 3, 0);  vle(1, A_IN + 'h000, 1'b1); n_bcast++;        // inputs 2*L*R = 16 words
    vsetvli(128, 3, 1); vle(2, A_W + 'h000, 1'b0);                     // weights 2N*L*C = 32/lane
    vsacfg(1, 1, 2, 0);
    vsetvli(4, 3, 0);   vsam(1'b0, 4, 1, 2);
    // B: 16-bit FFCS, 3x3 kernel (L = 9), N = 2 (weight reuse OP1, accumulation OP2)
    vsetvli(72, 3, 1);  vle(5, A_IN + 'h200, 1'b1); n_bcast++;        // 2N*L*R = 72 words
    vsetvli(144, 3, 2); vle(10, A_W + 'h400, 1'b0);                   // 2*L*C = 36/lane
    vsacfg(0, 3, 2, 1); vsam(1'b0, 13, 5, 10);
    // C: 4-bit CF, 1x1 kernel, N = 3 (accumulation inside the PEs)
    vsetvli(6, 3, 0);   vle(14, A_IN + 'h600, 1'b1); n_bcast++;
    vsetvli(24, 3, 0);  vle(15, A_W + 'h900, 1'b0);
    vsacfg(2, 1, 3, 2); vsam(1'b0, 16, 14, 15);
    // D: 8-bit FF, 3x3 kernel, N = 2 (weights reused over feature-map blocks)
    vsetvli(36, 3, 0);  vle(17, A_IN + 'h700, 1'b1); n_bcast++;
    vsetvli(72, 3, 1);  vle(20, A_W + 'hA00, 1'b0);
    vsacfg(1, 3, 2, 3); vsam(1'b0, 22, 17, 20);
    // E: 16-bit VSAC with vl = 5
    vsetvli(10, 3, 0);  vle(23, A_IN + 'h900, 1'b1); n_bcast++;
    vsetvli(20, 3, 0);  vle(24, A_W + 'hD00, 1'b0);
    vsacfg(0, 1, 1, 0);
    vsetvli(5, 3, 0);   vsam(1'b1, 25, 23, 24);
    // ALU: 32-bit add of two MPTU results
    vsetvli(32, 2, 0);  vadd32(26, 4, 13);
    // an unknown instruction
    send(32'h0000_0013, 0, 1'b0, 0, 1'b1);
    // store everything back
    vsetvli(16, 3, 0);  vse(4,  A_OUT + 'h000); vse(13, A_OUT + 'h100);
    vse(22, A_OUT + 'h300); vse(26, A_OUT + 'h500);
    vsetvli(8, 3, 0);   vse(16, A_OUT + 'h200);
    vsetvli(4, 3, 0);   vse(25, A_OUT + 'h400);

    while (n_resp < n_sent) @(posedge clk);
    repeat (5) @(posedge clk);

    // compare the output area
    for (int a = A_OUT; a < A_OUT + 'h600; a += 8) begin
      ow = (a / 8) % (NBEATS * LANES);
      checks++;
      if (u_mem.mem[ow / LANES][(ow % LANES)*64 +: 64] !== mw[ow]) begin
        failures++;
        if (failures < 20)
          $display("ERROR: mem[%h] = %h, expected %h", a, u_mem.mem[ow / LANES][(ow % LANES)*64 +: 64], mw[ow]);
      end
    end

    mech("register hazard stall", n_haz);
    mech("instruction queue full", n_viq_full);
    mech("input reuse", n_ireuse);
    mech("weight reuse", n_wreuse);
    mech("partial-sum accumulation", n_acc);
    mech("precision switch", n_prec);
    mech("multi-broadcast load", n_bcast);
    mech("illegal instruction", n_ill);
    $display("program of %0d instructions took %0d cycles", n_sent, n_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
