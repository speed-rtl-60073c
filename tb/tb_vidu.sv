// tb_vidu: self-checking test of the vector instruction decode unit.
//
// It sends VSETVLI, VSACFG, VLE, VSALD, VSE, VADD, VSAM, VSAC and an unknown
// word, and checks: the responses of the configuration instructions (new vl, new
// configuration) one cycle after acceptance, the decoded records (unit, registers,
// word counts, reduction length, broadcast flag, register masks, attached
// configuration), the illegal flag, and the forwarding of a commit tag, including
// a commit that arrives while the unit is busy with its own response.
module tb_vidu;
  import speed_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        iv, ir, ov, ordy, cv, cr, rv, ril;
  logic [31:0] ii, rs1, rres;
  logic [3:0]  itag, ctag, rtag;
  vinstr_t     o;
  mptu_cfg_t   cfg;
  logic [15:0] vl;

  vidu #(.LANES(4), .WPV(16), .TILE_R(2), .TILE_C(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(iv), .in_ready_o(ir), .in_instr_i(ii),
    .in_rs1_i(rs1), .in_tag_i(itag), .out_valid_o(ov), .out_ready_i(ordy), .out_o(o),
    .cmt_valid_i(cv), .cmt_ready_o(cr), .cmt_tag_i(ctag), .resp_valid_o(rv), .resp_tag_o(rtag),
    .resp_result_o(rres), .resp_illegal_o(ril), .cfg_o(cfg), .vl_o(vl));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("ERROR: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // send one word; returns after the acceptance edge
  task automatic send(logic [31:0] w, logic [31:0] r, logic [3:0] t);
    @(negedge clk);
    iv = 1; ii = w; rs1 = r; itag = t;
    while (!ir) @(negedge clk);
    @(posedge clk); #1;
    iv = 0;
  endtask

  initial begin
    iv = 0; ii = '0; rs1 = '0; itag = '0; ordy = 1; cv = 0; ctag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // VSETVLI e64, m1, avl 100 -> vl = 64 (VLEN = 4096 bits)
    send({1'b0, 11'(3 << 3), 5'd1, 3'b111, 5'd0, 7'b1010111}, 100, 4'd1);
    chk(rv && rtag == 1 && rres == 64 && !ril && vl == 64, "VSETVLI response");
    // VSACFG 8 bit, k = 3, N = 2, FFCS
    send({3'b101, 3'd1, 4'd3, 2'd1, 3'b000, 2'd1, 3'b111, 5'd0, 7'b1010111}, 0, 4'd2);
    chk(rv && rtag == 2 && cfg.prec == PREC_8 && cfg.ksize == 3 && cfg.nstage_m1 == 1
        && cfg.dataflow == DF_FFCS && rres == 32'(cfg), "VSACFG response");
    // VLE64 v3
    send({3'b000, 1'b0, 2'b00, 1'b1, 5'b00000, 5'd1, 3'b111, 5'd3, 7'b0000111}, 32'h100, 4'd3);
    chk(ov && o.fu == FU_VLDU && o.vd == 3 && o.nwords == 64 && !o.bcast && o.addr == 32'h100
        && o.wmask == 32'h8 && o.tag == 3, "VLE decode");
    // VSALD64 v4 (broadcast: 64 words in every lane = 4 registers)
    send({3'b000, 1'b0, 2'b00, 1'b1, 5'b00100, 5'd1, 3'b111, 5'd4, 7'b0000111}, 32'h200, 4'd4);
    chk(ov && o.fu == FU_VLDU && o.bcast && o.wmask == 32'hF0, "VSALD decode");
    // VSE64 v8
    send({3'b000, 1'b0, 2'b00, 1'b1, 5'b00000, 5'd1, 3'b111, 5'd8, 7'b0100111}, 32'h300, 4'd5);
    chk(ov && o.fu == FU_VSTU && o.rmask == 32'h100 && o.wmask == 0, "VSE decode");
    // VADD.VV v1, v2, v3
    send({6'b000000, 1'b1, 5'd2, 5'd3, 3'b000, 5'd1, 7'b1010111}, 0, 4'd6);
    chk(ov && o.fu == FU_ALU && o.alu_op == ALU_ADD && o.vd == 1 && o.vs2 == 2 && o.vs1 == 3
        && o.rmask == 32'hC && o.wmask == 32'h2, "VADD decode");
    // VSAM v20, v10, v16 under FFCS 3x3: L = 9
    send({6'b101010, 1'b1, 5'd16, 5'd10, 3'b010, 5'd20, 7'b1010111}, 0, 4'd7);
    chk(ov && o.fu == FU_MPTU && !o.vsac && o.red_len == 9 && o.cfg.prec == PREC_8
        && o.cfg.dataflow == DF_FFCS && o.wmask[20] && o.rmask[10] && o.rmask[16] && o.rmask[20],
        "VSAM decode");
    // VSAC: L = vl
    send({6'b101110, 1'b1, 5'd16, 5'd10, 3'b010, 5'd21, 7'b1010111}, 0, 4'd8);
    chk(ov && o.vsac && o.red_len == 64, "VSAC decode");
    // unknown word
    send(32'h0000_0013, 0, 4'd9);
    chk(rv && ril && rtag == 9, "illegal response");
    // output back-pressure: the register holds while out_ready is low
    ordy = 0;
    send({6'b000000, 1'b1, 5'd2, 5'd3, 3'b000, 5'd1, 7'b1010111}, 0, 4'd10);
    @(negedge clk);
    chk(ov && o.tag == 10 && !ir, "output held");
    ordy = 1;
    @(negedge clk);
    // commit forwarding, and a commit during an own response
    cv = 1; ctag = 4'd11;
    @(posedge clk); #1;
    chk(rv && rtag == 11 && !ril, "commit forwarded");
    @(negedge clk);
    iv = 1; ii = {1'b0, 11'(3 << 3), 5'd1, 3'b111, 5'd0, 7'b1010111}; rs1 = 8; itag = 12; ctag = 13;
    #1 chk(!cr, "commit held during own response");
    @(posedge clk); #1;
    iv = 0;
    chk(rv && rtag == 12 && rres == 8, "own response first");
    @(posedge clk); #1;
    chk(rv && rtag == 13, "held commit follows");
    cv = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
