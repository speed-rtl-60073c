// tb_vis: self-checking test of the vector instruction sequencer (2 lanes).
//
// Directed scenarios: an MPTU instruction reading v1 after a load writing v1 must
// wait for the load to commit (RAW), while an independent ALU instruction issues
// under a busy MPTU; a store waits for a running load (memory order); a lane
// instruction commits only when both lanes reported done; commits carry the tag
// and wait for cmt_ready_i. Random traffic then checks that no two in-flight
// instructions ever have overlapping register masks with a write involved.
module tb_vis;
  import speed_pkg::*;
  localparam int LANES = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       iv, ir, ldv, stv, alv, mpv, ldd, std, cv, crdy, haz;
  vinstr_t    in, iss;
  logic [LANES-1:0] ald, mpd;
  logic [3:0] ctag;

  vis #(.LANES(LANES)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(iv), .in_ready_o(ir), .in_i(in), .issue_o(iss),
    .ld_valid_o(ldv), .st_valid_o(stv), .alu_valid_o(alv), .mptu_valid_o(mpv),
    .ld_done_i(ldd), .st_done_i(std), .alu_done_i(ald), .mptu_done_i(mpd),
    .cmt_valid_o(cv), .cmt_ready_i(crdy), .cmt_tag_o(ctag), .hazard_stall_o(haz));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("ERROR: %s", what); end
  endtask

  function automatic vinstr_t mk(fu_e f, logic [31:0] rm, logic [31:0] wm, logic [3:0] t);
    vinstr_t v = '0;
    v.fu = f; v.rmask = rm; v.wmask = wm; v.tag = t;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue monitor: remember which units are busy, with what masks
  logic [31:0] act_r [4], act_w [4];
  bit          act   [4];
  int n_issue = 0, n_haz = 0;
  always @(posedge clk) if (rst_n) begin
    if (haz) n_haz++;
    if (ldv || stv || alv || mpv) begin
      int u;
      u = ldv ? 0 : stv ? 1 : alv ? 2 : 3;
      n_issue++;
      for (int i = 0; i < 4; i++)
        if (act[i]) begin
          checks++;
          if ((iss.rmask & act_w[i]) != 0 || (iss.wmask & act_r[i]) != 0 || (iss.wmask & act_w[i]) != 0
              || i == u || (u == 0 && i == 1) || (u == 1 && i == 0)) begin
            failures++; $display("ERROR: issued unit %0d while unit %0d conflicts", u, i);
          end
        end
      act[u] = 1; act_r[u] = iss.rmask; act_w[u] = iss.wmask;
    end
  end

  task automatic push(vinstr_t v);
    @(negedge clk);
    iv = 1; in = v;
    @(posedge clk);
    while (!ir) @(posedge clk);
    #1 iv = 0;
  endtask

  task automatic done_unit(int u);
    @(negedge clk);
    case (u)
      0: ldd = 1;
      1: std = 1;
      2: ald = '1;
      default: mpd = '1;
    endcase
    @(negedge clk);
    ldd = 0; std = 0; ald = '0; mpd = '0;
    act[u] = 0;
  endtask

  initial begin
    iv = 0; in = '0; ldd = 0; std = 0; ald = '0; mpd = '0; crdy = 1;
    for (int i = 0; i < 4; i++) begin act[i] = 0; act_r[i] = 0; act_w[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load v1, then MPTU reading v1 (RAW) -> stall
    push(mk(FU_VLDU, 0, 32'h2, 4'd1));
    push(mk(FU_MPTU, 32'h2, 32'h4, 4'd2));
    repeat (3) @(negedge clk);
    chk(haz, "RAW hazard stall visible");
    done_unit(0);
    @(posedge clk); #1;
    chk(cv == 0 || ctag == 1, "load commit tag");
    repeat (2) @(negedge clk);
    // MPTU now running on v1->v2; an ALU on v8,v9 -> v10 issues under it
    push(mk(FU_ALU, 32'h300, 32'h400, 4'd3));
    repeat (2) @(negedge clk);
    chk(act[2] && act[3], "ALU issued under a running MPTU");
    // one lane done only: no commit of the ALU yet
    crdy = 0;
    @(negedge clk); ald = 2'b01; @(negedge clk); ald = '0;
    repeat (2) @(negedge clk);
    chk(!cv, "no commit with one lane done");
    @(negedge clk); ald = 2'b10; @(negedge clk); ald = '0;
    chk(cv && ctag == 3, "commit after both lanes");
    @(negedge clk);
    chk(cv, "commit held while not ready");
    crdy = 1;
    @(negedge clk);
    act[2] = 0;
    // load of v5, then store of v6: the store waits for the load (memory order)
    push(mk(FU_VLDU, 0, 32'h20, 4'd4));
    push(mk(FU_VSTU, 32'h40, 0, 4'd5));
    repeat (3) @(negedge clk);
    chk(act[0] && !act[1], "store held behind the load");
    done_unit(0);
    repeat (2) @(negedge clk);
    chk(act[1], "store issued after the load");
    done_unit(1);
    done_unit(3);
    repeat (3) @(negedge clk);
    // random traffic
    fork
      begin
        for (int t = 0; t < 300; t++) begin
          int f;
          logic [31:0] rm, wm;
          f = $urandom_range(3);
          rm = 32'(1) << $urandom_range(7); wm = 32'(1) << $urandom_range(7);
          push(mk(f == 0 ? FU_VLDU : f == 1 ? FU_VSTU : f == 2 ? FU_ALU : FU_MPTU,
                  (f == 0) ? 0 : rm, (f == 1) ? 0 : wm, 4'(t)));
        end
      end
      begin
        for (int t = 0; t < 3000; t++) begin
          @(negedge clk);
          for (int u = 0; u < 4; u++)
            if (act[u] && $urandom_range(3) == 0) begin
              case (u)
                0: ldd = 1;
                1: std = 1;
                2: ald = '1;
                default: mpd = '1;
              endcase
              act[u] = 0;
            end
          @(posedge clk); #1;
          ldd = 0; std = 0; ald = '0; mpd = '0;
        end
      end
    join
    chk(n_issue > 250, "random traffic issued");
    $display("issued %0d, hazard stall cycles %0d", n_issue, n_haz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
