// vrf: one lane's slice of the vector register file.
//
// WORDS 64-bit words are split over NBANKS single-ported banks. Word address a
// belongs to vector register a / WPV; its bank is (a + a / WPV) mod NBANKS and
// its row a / NBANKS, so the same element of two consecutive vector registers
// sits in different banks and an ALU operation can read both operands in one
// cycle. NP requester ports compete for the banks: for every bank the lowest
// numbered requesting port wins (fixed priority) and gnt_o tells it in the same
// cycle. A granted read returns rdata_o with rvalid_o in the next cycle; a
// granted write updates the bank at the clock edge. Different banks serve
// different ports in the same cycle, which is what lets the MPTU request
// operands while the load unit or the ALU write other banks.
//
// From the paper: a banked VRF per lane (Bank #0..#N-1) serving as the lane's
// local memory with concurrent access. The bank mapping, the single port per
// bank and the fixed priority are this design's choices. The storage is written
// as an array; a real chip would use SRAM macros.
module vrf
  import speed_pkg::*;
#(
  parameter int unsigned WORDS  = 512,
  parameter int unsigned NBANKS = 8,
  parameter int unsigned WPV    = 16,
  parameter int unsigned NP     = 7,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              req_i   [NP],
  input  logic              we_i    [NP],
  input  logic [AW-1:0]     addr_i  [NP],
  input  logic [WORD_W-1:0] wdata_i [NP],
  output logic              gnt_o   [NP],
  output logic              rvalid_o[NP],
  output logic [WORD_W-1:0] rdata_o [NP]
);

  localparam int unsigned DEPTH = WORDS / NBANKS;
  localparam int unsigned BW    = (NBANKS > 1) ? $clog2(NBANKS) : 1;
  localparam int unsigned RW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  function automatic logic [BW-1:0] bank_of(logic [AW-1:0] a);
    return BW'((int'(a) + int'(a) / WPV) % NBANKS);
  endfunction

  logic [WORD_W-1:0] mem [NBANKS][DEPTH];

  // per-bank arbitration
  logic          bank_busy [NBANKS];
  logic          bank_we   [NBANKS];
  logic [RW-1:0] bank_row  [NBANKS];
  logic [WORD_W-1:0] bank_wd [NBANKS];

  always_comb begin
    for (int b = 0; b < NBANKS; b++) begin
      bank_busy[b] = 1'b0;
      bank_we[b]   = 1'b0;
      bank_row[b]  = '0;
      bank_wd[b]   = '0;
    end
    for (int p = 0; p < NP; p++) gnt_o[p] = 1'b0;
    for (int p = 0; p < NP; p++) begin
      if (req_i[p] && !bank_busy[bank_of(addr_i[p])]) begin
        bank_busy[bank_of(addr_i[p])] = 1'b1;
        bank_we[bank_of(addr_i[p])]   = we_i[p];
        bank_row[bank_of(addr_i[p])]  = RW'(addr_i[p] / AW'(NBANKS));
        bank_wd[bank_of(addr_i[p])]   = wdata_i[p];
        gnt_o[p] = 1'b1;
      end
    end
  end

  // banks
  logic [WORD_W-1:0] bank_rd_q [NBANKS];
  always_ff @(posedge clk_i) begin
    for (int b = 0; b < NBANKS; b++) begin
      if (bank_busy[b]) begin
        if (bank_we[b]) mem[b][bank_row[b]] <= bank_wd[b];
        else            bank_rd_q[b] <= mem[b][bank_row[b]];
      end
    end
  end

  // read return, one cycle after the grant
  logic          rd_v_q [NP];
  logic [BW-1:0] rd_b_q [NP];
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int p = 0; p < NP; p++) begin rd_v_q[p] <= 1'b0; rd_b_q[p] <= '0; end
    end else begin
      for (int p = 0; p < NP; p++) begin
        rd_v_q[p] <= gnt_o[p] && !we_i[p];
        rd_b_q[p] <= bank_of(addr_i[p]);
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      rvalid_o[p] = rd_v_q[p];
      rdata_o[p]  = bank_rd_q[rd_b_q[p]];
    end
  end

endmodule
