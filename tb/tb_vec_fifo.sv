// tb_vec_fifo: self-checking test of the FIFO buffer (DEPTH = 3, 16-bit data).
//
// Random pushes and pops for 5000 cycles against a queue model: data order,
// valid/ready (full and empty), the fill count and a flush are checked every
// cycle. A push into a full FIFO is held back by ready_o and retried.
module tb_vec_fifo;
  localparam int D = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        vi, ro, vo, ri, fl;
  logic [15:0] di, dout;
  logic [1:0]  cnt;

  vec_fifo #(.T(logic [15:0]), .DEPTH(D)) dut (
    .clk_i(clk), .rst_ni(rst_n), .flush_i(fl), .valid_i(vi), .ready_o(ro), .data_i(di),
    .valid_o(vo), .ready_i(ri), .data_o(dout), .count_o(cnt));

  int checks = 0, failures = 0;
  logic [15:0] q[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vi = 0; ri = 0; fl = 0; di = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      vi = ($urandom_range(2) != 0); ri = ($urandom_range(2) != 0);
      fl = ($urandom_range(199) == 0); di = 16'($urandom);
      #1;
      checks++;
      if (cnt != 2'(q.size()) || ro != (q.size() < D) || vo != (q.size() != 0) ||
          (q.size() != 0 && dout !== q[0])) begin
        failures++;
        $display("ERROR: cycle %0d count %0d model %0d", t, cnt, q.size());
      end
      @(posedge clk);
      if (fl) q.delete();
      else begin
        if (vo && ri) void'(q.pop_front());
        if (vi && ro) q.push_back(di);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
