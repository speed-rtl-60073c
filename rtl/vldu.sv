// vldu: vector load unit (VLE and VSALD).
//
// The unit moves a vector operand from memory into the lanes' VRFs. The memory
// bus carries one beat of LANES 64-bit words (64*LANES bits) per request, so a
// load of nwords words needs ceil(nwords / LANES) beats at consecutive beat
// addresses. Up to MAX_OUT read requests are in flight; read data comes back in
// order and waits in a small response buffer whose free space is reserved when a
// request is sent, so the bus is never stalled by the unit.
//   * VLE (sequential allocation): word l of beat b goes to lane l, local word b
//     of register vd, so one beat is written into all lanes in the same cycle
//     (each lane has its own write port).
//   * VSALD (multi-broadcast): every word of the beat is written into every lane,
//     at local word b*LANES+j of vd; each lane then holds the whole operand, which
//     is how the MPTUs of all lanes share one set of inputs or weights. A beat
//     takes LANES write cycles.
// A lane may grant the write later than the others (VRF bank conflict); the unit
// keeps a done bit per lane and moves on when every lane has written. A one-cycle
// done_o pulse follows the last write.
//
// From the paper: VSALD loads data from memory and broadcasts it to the lanes'
// VRFs, VLE uses the usual sequential allocation. The bus width, the number of
// outstanding requests and the buffering are this design's choices.
module vldu
  import speed_pkg::*;
#(
  parameter int unsigned LANES   = 4,
  parameter int unsigned WPV     = 16,
  parameter int unsigned AW      = 9,
  parameter int unsigned MAX_OUT = 4
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      start_i,
  input  vinstr_t                   instr_i,
  output logic                      done_o,
  // memory read channel
  output logic                      mem_req_o,
  output logic [31:0]               mem_addr_o,
  input  logic                      mem_gnt_i,
  input  logic                      mem_rvalid_i,
  input  logic [LANES*WORD_W-1:0]   mem_rdata_i,
  // VRF write ports, one per lane
  output logic [LANES-1:0]          vrf_req_o,
  output logic [LANES-1:0][AW-1:0]  vrf_addr_o,
  output logic [LANES-1:0][WORD_W-1:0] vrf_wdata_o,
  input  logic [LANES-1:0]          vrf_gnt_i
);

  localparam int unsigned BEAT_BYTES = LANES * WORD_W / 8;
  localparam int unsigned CW = $clog2(MAX_OUT + 1);
  localparam int unsigned JW = (LANES > 1) ? $clog2(LANES) : 1;

  typedef logic [LANES*WORD_W-1:0] beat_t;

  logic        active_q, bcast_q;
  logic [4:0]  vd_q;
  logic [31:0] base_q;
  logic [15:0] nwords_q, nbeats_q, req_cnt_q, wr_beat_q;
  logic [JW-1:0]    sub_q;
  logic [LANES-1:0] lane_done_q;
  logic [CW-1:0]    inflight_q;

  // response buffer
  logic  rb_valid, rb_pop, rb_ready;
  beat_t rb_data;
  logic [$clog2(MAX_OUT+1)-1:0] rb_cnt;

  vec_fifo #(.T(beat_t), .DEPTH(MAX_OUT)) u_rsp (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .valid_i(mem_rvalid_i), .ready_o(rb_ready), .data_i(mem_rdata_i),
    .valid_o(rb_valid), .ready_i(rb_pop), .data_o(rb_data), .count_o(rb_cnt)
  );

  // a request may go when the buffer has room for all in-flight responses
  assign mem_req_o  = active_q && (req_cnt_q < nbeats_q)
                   && (32'(inflight_q) + 32'(rb_cnt) < MAX_OUT);
  assign mem_addr_o = base_q + 32'(req_cnt_q) * BEAT_BYTES;

  // global word index written by lane l in the current write cycle
  function automatic int unsigned word_of(int unsigned l, logic bc, logic [15:0] beat,
                                          logic [JW-1:0] sub);
    return bc ? int'(beat) * LANES + int'(sub) : int'(beat) * LANES + l;
  endfunction

  logic [LANES-1:0] lane_need, lane_fin;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      lane_need[l]   = rb_valid && active_q && !lane_done_q[l]
                     && (word_of(l, bcast_q, wr_beat_q, sub_q) < int'(nwords_q));
      vrf_req_o[l]   = lane_need[l];
      vrf_addr_o[l]  = bcast_q ? AW'(int'(vd_q) * WPV + int'(wr_beat_q) * LANES + int'(sub_q))
                               : AW'(int'(vd_q) * WPV + int'(wr_beat_q));
      vrf_wdata_o[l] = bcast_q ? rb_data[int'(sub_q)*WORD_W +: WORD_W] : rb_data[l*WORD_W +: WORD_W];
      lane_fin[l]    = !lane_need[l] || vrf_gnt_i[l];
    end
  end

  logic step_done, beat_done;
  assign step_done = rb_valid && active_q && (&(lane_fin | lane_done_q));
  assign beat_done = step_done && (!bcast_q || int'(sub_q) == LANES - 1
                                  || (int'(wr_beat_q) * LANES + int'(sub_q) + 1 >= int'(nwords_q)));
  assign rb_pop    = beat_done;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0; bcast_q <= 1'b0; vd_q <= '0; base_q <= '0;
      nwords_q <= '0; nbeats_q <= '0; req_cnt_q <= '0; wr_beat_q <= '0;
      sub_q <= '0; lane_done_q <= '0; inflight_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      inflight_q <= inflight_q + CW'(mem_req_o && mem_gnt_i) - CW'(mem_rvalid_i);
      if (start_i && !active_q) begin
        bcast_q   <= instr_i.bcast;
        vd_q      <= instr_i.vd;
        base_q    <= instr_i.addr;
        nwords_q  <= instr_i.nwords;
        nbeats_q  <= 16'((int'(instr_i.nwords) + LANES - 1) / LANES);
        req_cnt_q <= '0;
        wr_beat_q <= '0;
        sub_q     <= '0;
        lane_done_q <= '0;
        if (instr_i.nwords == 0) done_o <= 1'b1;
        else                     active_q <= 1'b1;
      end else if (active_q) begin
        if (mem_req_o && mem_gnt_i) req_cnt_q <= req_cnt_q + 1'b1;
        if (step_done) begin
          lane_done_q <= '0;
          if (beat_done) begin
            sub_q <= '0;
            if (wr_beat_q + 1 == nbeats_q) begin
              active_q <= 1'b0;
              done_o   <= 1'b1;
            end
            wr_beat_q <= wr_beat_q + 1'b1;
          end else begin
            sub_q <= sub_q + 1'b1;
          end
        end else begin
          lane_done_q <= lane_done_q | (lane_need & vrf_gnt_i);
        end
      end
    end
  end

  // read data only arrives for requests in flight and always finds room
  assert property (@(posedge clk_i) disable iff (!rst_ni) mem_rvalid_i |-> (inflight_q != 0) && rb_ready);

endmodule
