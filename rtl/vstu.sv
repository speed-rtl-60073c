// vstu: vector store unit (VSE).
//
// The unit writes a vector register group, distributed over the lanes with the
// sequential allocation (word w in lane w mod LANES, local word w / LANES), back to
// memory one bus beat (LANES 64-bit words) at a time. For beat b every lane reads
// its local word b of vs3 through its store read port; the words are collected in
// a beat register (each lane may be granted in a different cycle), and the beat is
// sent as one write request with a byte strobe that masks the words past the end
// of the vector. The next beat starts when the write is accepted; done_o pulses
// one cycle after the last write has been accepted. Writes get no response.
//
// From the paper: a store unit between the VRFs and memory. The beat-by-beat
// procedure and the strobe are this design's choices.
module vstu
  import speed_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter int unsigned WPV   = 16,
  parameter int unsigned AW    = 9
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  input  logic                         start_i,
  input  vinstr_t                      instr_i,
  output logic                         done_o,
  // memory write channel
  output logic                         mem_req_o,
  output logic [31:0]                  mem_addr_o,
  output logic [LANES*WORD_W-1:0]      mem_wdata_o,
  output logic [LANES*WORD_W/8-1:0]    mem_wstrb_o,
  input  logic                         mem_gnt_i,
  // VRF read ports, one per lane
  output logic [LANES-1:0]             vrf_req_o,
  output logic [LANES-1:0][AW-1:0]     vrf_addr_o,
  input  logic [LANES-1:0]             vrf_gnt_i,
  input  logic [LANES-1:0]             vrf_rvalid_i,
  input  logic [LANES-1:0][WORD_W-1:0] vrf_rdata_i
);

  localparam int unsigned BEAT_BYTES = LANES * WORD_W / 8;

  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} st_e;
  st_e         st_q;
  logic [4:0]  vs_q;
  logic [31:0] base_q;
  logic [15:0] nwords_q, nbeats_q, beat_q;
  logic [LANES-1:0] gnt_q, have_q, need;
  logic [LANES-1:0][WORD_W-1:0] data_q;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      need[l]       = (int'(beat_q) * LANES + l) < int'(nwords_q);
      vrf_req_o[l]  = (st_q == S_READ) && need[l] && !gnt_q[l];
      vrf_addr_o[l] = AW'(int'(vs_q) * WPV + int'(beat_q));
    end
  end

  logic [LANES-1:0] have_nxt;
  always_comb begin
    for (int l = 0; l < LANES; l++)
      have_nxt[l] = have_q[l] || !need[l] || (vrf_rvalid_i[l] && gnt_q[l]);
  end

  assign mem_req_o   = (st_q == S_WRITE);
  assign mem_addr_o  = base_q + 32'(beat_q) * BEAT_BYTES;
  assign mem_wdata_o = data_q;
  always_comb
    for (int l = 0; l < LANES; l++) mem_wstrb_o[l*8 +: 8] = {8{need[l]}};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; vs_q <= '0; base_q <= '0; nwords_q <= '0; nbeats_q <= '0;
      beat_q <= '0; gnt_q <= '0; have_q <= '0; data_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      case (st_q)
        S_IDLE: if (start_i) begin
          vs_q     <= instr_i.vd;
          base_q   <= instr_i.addr;
          nwords_q <= instr_i.nwords;
          nbeats_q <= 16'((int'(instr_i.nwords) + LANES - 1) / LANES);
          beat_q   <= '0;
          gnt_q    <= '0;
          have_q   <= '0;
          data_q   <= '0;
          if (instr_i.nwords == 0) done_o <= 1'b1;
          else                     st_q <= S_READ;
        end
        S_READ: begin
          gnt_q <= gnt_q | (vrf_req_o & vrf_gnt_i);
          for (int l = 0; l < LANES; l++)
            if (vrf_rvalid_i[l] && gnt_q[l] && !have_q[l]) data_q[l] <= vrf_rdata_i[l];
          have_q <= have_nxt;
          if (&have_nxt) st_q <= S_WRITE;
        end
        S_WRITE: if (mem_gnt_i) begin
          gnt_q  <= '0;
          have_q <= '0;
          data_q <= '0;
          if (beat_q + 1 == nbeats_q) begin
            st_q   <= S_IDLE;
            done_o <= 1'b1;
          end else begin
            st_q <= S_READ;
          end
          beat_q <= beat_q + 1'b1;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
