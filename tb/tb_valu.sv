// tb_valu: self-checking test of the lane ALU.
//
// Random 64-bit operands for every operation and element width (8/16/32/64 bit),
// compared element by element with a reference computed here.
module tb_valu;
  import speed_pkg::*;
  alu_op_e     op;
  logic [1:0]  sew;
  logic [63:0] a, b, y;
  valu dut (.op_i(op), .sew_i(sew), .a_i(a), .b_i(b), .y_o(y));

  int checks = 0, failures = 0;

  function automatic logic [63:0] ref_op(alu_op_e o, int s, logic [63:0] x, logic [63:0] z);
    logic [63:0] r = '0;
    int W;
    W = 8 << s;
    for (int e = 0; e < 64 / W; e++) begin
      longint unsigned ua, ub, m, res;
      longint sa, sb;
      int sh;
      m  = (W == 64) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << W) - 1);
      ua = (x >> (e*W)) & m;  ub = (z >> (e*W)) & m;
      sa = (W == 64) ? longint'(ua) : longint'((ua ^ (64'd1 << (W-1))) - (64'd1 << (W-1)));
      sb = (W == 64) ? longint'(ub) : longint'((ub ^ (64'd1 << (W-1))) - (64'd1 << (W-1)));
      sh = int'(ub % W);
      case (o)
        ALU_ADD:  res = ua + ub;
        ALU_SUB:  res = ua - ub;
        ALU_AND:  res = ua & ub;
        ALU_OR:   res = ua | ub;
        ALU_XOR:  res = ua ^ ub;
        ALU_MIN:  res = (sa < sb) ? ua : ub;
        ALU_MAX:  res = (sa > sb) ? ua : ub;
        ALU_MINU: res = (ua < ub) ? ua : ub;
        ALU_MAXU: res = (ua > ub) ? ua : ub;
        ALU_SLL:  res = ua << sh;
        ALU_SRL:  res = ua >> sh;
        default:  res = longint'(sa >>> sh);
      endcase
      r = r | ((res & m) << (e*W));
    end
    return r;
  endfunction

  initial begin
    for (int t = 0; t < 6000; t++) begin
      op  = alu_op_e'(t % 12);
      sew = 2'(t / 12 % 4);
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      #1;
      checks++;
      if (y !== ref_op(op, int'(sew), a, b)) begin
        failures++;
        if (failures < 10) $display("ERROR: op %s sew %0d a %h b %h y %h exp %h", op.name(), sew, a, b, y, ref_op(op, int'(sew), a, b));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
