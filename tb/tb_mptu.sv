// tb_mptu: self-checking test of one lane's MPTU (with its operand requester).
//
// The testbench models the VRF behind the MPTU's read and write ports: random
// grants (about three in four cycles), read data one cycle after the grant. It
// fills the model with random operands, starts VSAM in each dataflow (MM, FFCS,
// CF, FF) and VSAC at each precision, waits for done_o and compares every output
// word with results computed here from the dataflow formulas:
//   MM   out[o] = P(in0, w[o]) + P(in1, w[N+o])
//   FFCS out[o] = P(in[o], w0) + P(in[N+o], w1)
//   CF   out    = sum_s P(in[s], w[s])
//   FF   out[o] = P(in[o], w0)
// where P is the TILE_R x TILE_C product of one input and one weight block over
// L steps. It also checks busy_o, and that the reuse and accumulation events
// occurred where the dataflow implies them.
module tb_mptu;
  import speed_pkg::*;
  localparam int R = 2, C = 2, WPV = 16, NW = R * C / 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, busy, done;
  vinstr_t     ins;
  logic        rreq, rgnt, rvalid, wreq, wgnt;
  logic [8:0]  raddr, waddr;
  logic [63:0] rdata, wdata;
  logic        ev_w, ev_i, ev_a;

  mptu #(.TILE_R(R), .TILE_C(C), .WPV(WPV), .AW(9), .QDEPTH(32)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .instr_i(ins), .busy_o(busy), .done_o(done),
    .rd_req_o(rreq), .rd_addr_o(raddr), .rd_gnt_i(rgnt), .rd_rvalid_i(rvalid), .rd_rdata_i(rdata),
    .wr_req_o(wreq), .wr_addr_o(waddr), .wr_wdata_o(wdata), .wr_gnt_i(wgnt),
    .ev_w_reuse_o(ev_w), .ev_i_reuse_o(ev_i), .ev_acc_o(ev_a));

  int checks = 0, failures = 0;
  logic [63:0] mv [512];
  bit rgate, wgate;

  always_ff @(posedge clk) begin
    rgate <= ($urandom_range(3) != 0);
    wgate <= ($urandom_range(3) != 0);
  end
  assign rgnt = rreq && rgate;
  assign wgnt = wreq && wgate;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rvalid <= 1'b0; rdata <= '0; end
    else begin
      rvalid <= rgnt;
      rdata  <= mv[raddr];
      if (wgnt) mv[waddr] <= wdata;
    end
  end

  int n_w = 0, n_i = 0, n_a = 0;
  always @(posedge clk) begin
    if (ev_w) n_w++;
    if (ev_i) n_i++;
    if (ev_a) n_a++;
  end

  function automatic int signed dotw(logic [63:0] x, logic [63:0] w, int prec);
    int signed s = 0;
    case (prec)
      0: s = int'($signed(x[15:0])) * int'($signed(w[15:0]));
      1: for (int e = 0; e < 4; e++)  s += int'($signed(x[e*8 +: 8])) * int'($signed(w[e*8 +: 8]));
      default: for (int e = 0; e < 16; e++) s += int'($signed(x[e*4 +: 4])) * int'($signed(w[e*4 +: 4]));
    endcase
    return s;
  endfunction

  function automatic int signed pblk(int vs1, int vs2, int ib, int wb, int r, int c, int L, int prec);
    int signed s = 0;
    for (int k = 0; k < L; k++)
      s += dotw(mv[vs1*WPV + ib*L*R + k*R + r], mv[vs2*WPV + wb*L*C + k*C + c], prec);
    return s;
  endfunction

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int df, bit vsac, int prec, int N, int L);
    logic [63:0] expv [16];
    int signed res [R*C];
    int nout, vd, vs1, vs2, t0, ew, ei, ea;
    vd = 24; vs1 = 0; vs2 = 10;
    for (int i = 0; i < 24 * WPV; i++) mv[i] = {$urandom, $urandom};
    nout = vsac ? 1 : ((df == 2) ? NW : N * NW);
    if (vsac) begin
      for (int r = 0; r < R; r++) begin
        res[r] = 0;
        for (int k = 0; k < L; k++) res[r] += dotw(mv[vs1*WPV + k*R + r], mv[vs2*WPV + k], prec);
      end
      expv[0] = {res[1], res[0]};
    end else begin
      for (int o = 0; o < ((df == 2) ? 1 : N); o++) begin
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
          case (df)
            0: res[r*C+c] = pblk(vs1, vs2, 0, o, r, c, L, prec) + pblk(vs1, vs2, 1, N + o, r, c, L, prec);
            1: res[r*C+c] = pblk(vs1, vs2, o, 0, r, c, L, prec) + pblk(vs1, vs2, N + o, 1, r, c, L, prec);
            2: begin
              res[r*C+c] = 0;
              for (int s = 0; s < N; s++) res[r*C+c] += pblk(vs1, vs2, s, s, r, c, L, prec);
            end
            default: res[r*C+c] = pblk(vs1, vs2, o, 0, r, c, L, prec);
          endcase
        for (int j = 0; j < NW; j++) expv[o*NW + j] = {res[2*j+1], res[2*j]};
      end
    end
    ew = n_w; ei = n_i; ea = n_a;
    @(negedge clk);
    ins = '0;
    ins.fu = FU_MPTU; ins.vd = 5'(vd); ins.vs1 = 5'(vs1); ins.vs2 = 5'(vs2);
    ins.red_len = 16'(L); ins.vsac = vsac;
    ins.cfg.prec = prec_e'(prec); ins.cfg.ksize = 4'd1; ins.cfg.nstage_m1 = 3'(N - 1);
    ins.cfg.dataflow = dataflow_e'(df);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("ERROR: busy_o low after start"); end
    t0 = 0;
    while (!done) begin @(negedge clk); t0++; end
    for (int j = 0; j < nout; j++) begin
      checks++;
      if (mv[vd*WPV + j] !== expv[j]) begin
        failures++;
        $display("ERROR: df %0d vsac %0d prec %0d N %0d L %0d word %0d: %h expected %h",
                 df, vsac, prec, N, L, j, mv[vd*WPV + j], expv[j]);
      end
    end
    // mechanisms implied by the dataflow
    if (!vsac && N > 1) begin
      checks++;
      if ((df == 0 && n_i == ei) || (df == 1 && n_w == ew) || (df == 3 && n_w == ew) ||
          ((df == 0 || df == 1) && n_a == ea)) begin
        failures++; $display("ERROR: df %0d: expected reuse/accumulation events missing", df);
      end
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("ERROR: busy_o high after done"); end
  endtask

  initial begin
    start = 0; ins = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 3; rep++)
      for (int prec = 0; prec < 3; prec++) begin
        run(0, 0, prec, 1 + $urandom_range(2), 1 + $urandom_range(4));
        run(1, 0, prec, 1 + $urandom_range(2), (rep == 0) ? 9 : 1 + $urandom_range(8));
        run(2, 0, prec, 1 + $urandom_range(3), 1 + $urandom_range(5));
        run(3, 0, prec, 1 + $urandom_range(3), (rep == 0) ? 9 : 1 + $urandom_range(5));
        run(0, 1, prec, 1, 1 + $urandom_range(31));
      end
    run(2, 0, 1, 2, 32);   // a stage filling the whole operand queue
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
