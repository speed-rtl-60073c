// speed_top: the SPEED vector processor (vector side of the RISC-V system).
//
// The top wires the vector front end and the lanes together:
//   scalar core --(instruction, rs1, tag)--> vector instruction queue (VIQ)
//   VIQ --> decode unit (vidu, ID) --> sequencer (vis, IS/CO)
//   vis --> load unit (vldu), store unit (vstu), and LANES lanes (ALU + MPTU + VRF)
//   vldu/vstu <--> one memory port, 64*LANES bits wide.
// The scalar core itself and the memory are outside: their signals are the ports.
// A request on acc_req_* is a vector instruction word with the value of its rs1
// register and a 4-bit tag; every instruction completes with exactly one pulse
// on acc_resp_* carrying the tag (the new vl for VSETVLI, the new configuration
// for VSACFG, otherwise zero; acc_resp_illegal_o for an unknown instruction).
// Memory: mem_req_valid_o/mem_req_ready_i handshake; a read (mem_req_we_o = 0)
// is answered, in order and some cycles later, by one mem_rsp_valid_i pulse with
// the beat; a write carries mem_req_wdata_o and a byte strobe and gets no answer.
// The load unit has priority on the port; the sequencer never has a load and a
// store in flight together, so the arbiter only selects.
// The observation outputs (obs_*) report one-cycle events used to count the
// mechanisms: hazard stall in the sequencer, operand reuse and accumulation in
// the MPTUs, and the current MPTU configuration.
//
// From the paper: the block structure (Fig. 3: VIQ, VIDU, VIS, VLDU, VSTU,
// lanes with VRF, ALU and MPTU), 4 lanes, a 16 KiB VRF in total and a 2x2 tensor
// core per lane in the main configuration. The port set, the bus and the VIQ
// depth are this design's choices.
//
// Lint note: rst_ni is both the asynchronous reset of the flip-flops and the
// disable condition of the concurrent assertions, which some linters report as
// a net used synchronously and asynchronously; that is intended.
module speed_top
  import speed_pkg::*;
#(
  parameter int unsigned LANES     = 4,
  parameter int unsigned TILE_R    = 2,
  parameter int unsigned TILE_C    = 2,
  parameter int unsigned VRF_KIB   = 16,
  parameter int unsigned NBANKS    = 8,
  parameter int unsigned QDEPTH    = 32,
  parameter int unsigned VIQ_DEPTH = 4,
  localparam int unsigned WORDS    = VRF_KIB * 1024 / 8 / LANES,  // 64-bit words per lane
  localparam int unsigned WPV      = WORDS / NVREG,
  localparam int unsigned AW       = $clog2(WORDS),
  localparam int unsigned BUS_W    = LANES * WORD_W
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // scalar core: instruction offload
  input  logic               acc_req_valid_i,
  output logic               acc_req_ready_o,
  input  logic [31:0]        acc_req_instr_i,
  input  logic [31:0]        acc_req_rs1_i,
  input  logic [3:0]         acc_req_tag_i,
  output logic               acc_resp_valid_o,
  output logic [3:0]         acc_resp_tag_o,
  output logic [31:0]        acc_resp_result_o,
  output logic               acc_resp_illegal_o,
  // memory
  output logic               mem_req_valid_o,
  input  logic               mem_req_ready_i,
  output logic               mem_req_we_o,
  output logic [31:0]        mem_req_addr_o,
  output logic [BUS_W-1:0]   mem_req_wdata_o,
  output logic [BUS_W/8-1:0] mem_req_wstrb_o,
  input  logic               mem_rsp_valid_i,
  input  logic [BUS_W-1:0]   mem_rsp_rdata_i,
  // observation
  output logic               obs_hazard_stall_o,
  output logic [LANES-1:0]   obs_w_reuse_o,
  output logic [LANES-1:0]   obs_i_reuse_o,
  output logic [LANES-1:0]   obs_acc_o,
  output logic [LANES-1:0]   obs_mptu_busy_o,
  output mptu_cfg_t          obs_cfg_o,
  output logic [15:0]        obs_vl_o
);

  // ---------------- vector instruction queue ----------------
  typedef struct packed {
    logic [31:0] instr;
    logic [31:0] rs1;
    logic [3:0]  tag;
  } viq_t;

  viq_t viq_in, viq_out;
  logic viq_valid, viq_ready;
  assign viq_in = '{instr: acc_req_instr_i, rs1: acc_req_rs1_i, tag: acc_req_tag_i};

  vec_fifo #(.T(viq_t), .DEPTH(VIQ_DEPTH)) u_viq (
    .clk_i, .rst_ni, .flush_i(1'b0),
    .valid_i(acc_req_valid_i), .ready_o(acc_req_ready_o), .data_i(viq_in),
    .valid_o(viq_valid), .ready_i(viq_ready), .data_o(viq_out), .count_o()
  );

  // ---------------- decode and sequence ----------------
  logic    id_valid, id_ready, cmt_valid, cmt_ready;
  vinstr_t id_instr, is_instr;
  logic [3:0] cmt_tag;

  vidu #(.LANES(LANES), .WPV(WPV), .TILE_R(TILE_R), .TILE_C(TILE_C)) u_vidu (
    .clk_i, .rst_ni,
    .in_valid_i(viq_valid), .in_ready_o(viq_ready), .in_instr_i(viq_out.instr),
    .in_rs1_i(viq_out.rs1), .in_tag_i(viq_out.tag),
    .out_valid_o(id_valid), .out_ready_i(id_ready), .out_o(id_instr),
    .cmt_valid_i(cmt_valid), .cmt_ready_o(cmt_ready), .cmt_tag_i(cmt_tag),
    .resp_valid_o(acc_resp_valid_o), .resp_tag_o(acc_resp_tag_o),
    .resp_result_o(acc_resp_result_o), .resp_illegal_o(acc_resp_illegal_o),
    .cfg_o(obs_cfg_o), .vl_o(obs_vl_o)
  );

  logic ld_valid, st_valid, alu_valid, mptu_valid, ld_done, st_done;
  logic [LANES-1:0] alu_done, mptu_done;

  vis #(.LANES(LANES)) u_vis (
    .clk_i, .rst_ni,
    .in_valid_i(id_valid), .in_ready_o(id_ready), .in_i(id_instr),
    .issue_o(is_instr), .ld_valid_o(ld_valid), .st_valid_o(st_valid),
    .alu_valid_o(alu_valid), .mptu_valid_o(mptu_valid),
    .ld_done_i(ld_done), .st_done_i(st_done), .alu_done_i(alu_done), .mptu_done_i(mptu_done),
    .cmt_valid_o(cmt_valid), .cmt_ready_i(cmt_ready), .cmt_tag_o(cmt_tag),
    .hazard_stall_o(obs_hazard_stall_o)
  );

  // ---------------- load / store units ----------------
  logic              ld_mem_req, ld_mem_gnt, st_mem_req, st_mem_gnt;
  logic [31:0]       ld_mem_addr, st_mem_addr;
  logic [LANES-1:0]  ld_vrf_req, ld_vrf_gnt, st_vrf_req, st_vrf_gnt, st_vrf_rvalid;
  logic [LANES-1:0][AW-1:0]     ld_vrf_addr, st_vrf_addr;
  logic [LANES-1:0][WORD_W-1:0] ld_vrf_wdata, st_vrf_rdata;

  vldu #(.LANES(LANES), .WPV(WPV), .AW(AW)) u_vldu (
    .clk_i, .rst_ni, .start_i(ld_valid), .instr_i(is_instr), .done_o(ld_done),
    .mem_req_o(ld_mem_req), .mem_addr_o(ld_mem_addr), .mem_gnt_i(ld_mem_gnt),
    .mem_rvalid_i(mem_rsp_valid_i), .mem_rdata_i(mem_rsp_rdata_i),
    .vrf_req_o(ld_vrf_req), .vrf_addr_o(ld_vrf_addr), .vrf_wdata_o(ld_vrf_wdata),
    .vrf_gnt_i(ld_vrf_gnt)
  );

  logic [BUS_W-1:0]   st_wdata;
  logic [BUS_W/8-1:0] st_wstrb;

  vstu #(.LANES(LANES), .WPV(WPV), .AW(AW)) u_vstu (
    .clk_i, .rst_ni, .start_i(st_valid), .instr_i(is_instr), .done_o(st_done),
    .mem_req_o(st_mem_req), .mem_addr_o(st_mem_addr), .mem_wdata_o(st_wdata),
    .mem_wstrb_o(st_wstrb), .mem_gnt_i(st_mem_gnt),
    .vrf_req_o(st_vrf_req), .vrf_addr_o(st_vrf_addr), .vrf_gnt_i(st_vrf_gnt),
    .vrf_rvalid_i(st_vrf_rvalid), .vrf_rdata_i(st_vrf_rdata)
  );

  // memory port: the load unit first
  assign mem_req_valid_o = ld_mem_req || st_mem_req;
  assign mem_req_we_o    = !ld_mem_req;
  assign mem_req_addr_o  = ld_mem_req ? ld_mem_addr : st_mem_addr;
  assign mem_req_wdata_o = st_wdata;
  assign mem_req_wstrb_o = ld_mem_req ? '0 : st_wstrb;
  assign ld_mem_gnt      = ld_mem_req && mem_req_ready_i;
  assign st_mem_gnt      = !ld_mem_req && st_mem_req && mem_req_ready_i;

  // ---------------- lanes ----------------
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    lane #(.LANES(LANES), .LANE_ID(l), .TILE_R(TILE_R), .TILE_C(TILE_C),
           .WORDS(WORDS), .NBANKS(NBANKS), .QDEPTH(QDEPTH)) u_lane (
      .clk_i, .rst_ni,
      .instr_i(is_instr), .alu_valid_i(alu_valid), .mptu_valid_i(mptu_valid),
      .alu_done_o(alu_done[l]), .mptu_done_o(mptu_done[l]),
      .ld_req_i(ld_vrf_req[l]), .ld_addr_i(ld_vrf_addr[l]), .ld_wdata_i(ld_vrf_wdata[l]),
      .ld_gnt_o(ld_vrf_gnt[l]),
      .st_req_i(st_vrf_req[l]), .st_addr_i(st_vrf_addr[l]), .st_gnt_o(st_vrf_gnt[l]),
      .st_rvalid_o(st_vrf_rvalid[l]), .st_rdata_o(st_vrf_rdata[l]),
      .mptu_busy_o(obs_mptu_busy_o[l]), .ev_w_reuse_o(obs_w_reuse_o[l]),
      .ev_i_reuse_o(obs_i_reuse_o[l]), .ev_acc_o(obs_acc_o[l])
    );
  end

  // the sequencer keeps loads and stores apart
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(ld_mem_req && st_mem_req));

endmodule
