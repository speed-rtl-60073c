// ext_mem_model: behavioural model of the external memory seen by the vector
// load/store units (not synthesizable, for testbenches only).
//
// The array holds NBEATS beats of BUS_W bits, addressed by byte address / (BUS_W/8).
// A request is accepted when mem_req_ready_o is high; the model lowers ready at
// random (about one cycle in four) to exercise back-pressure. A read is answered
// in order after LAT_MIN..LAT_MAX cycles by one mem_rsp_valid_o pulse; a write
// updates the bytes selected by the strobe and is not answered. Testbenches may
// fill and inspect the array `mem` directly.
module ext_mem_model #(
  parameter int unsigned BUS_W   = 256,
  parameter int unsigned NBEATS  = 1024,
  parameter int unsigned LAT_MIN = 2,
  parameter int unsigned LAT_MAX = 6
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               mem_req_valid_i,
  output logic               mem_req_ready_o,
  input  logic               mem_req_we_i,
  input  logic [31:0]        mem_req_addr_i,
  input  logic [BUS_W-1:0]   mem_req_wdata_i,
  input  logic [BUS_W/8-1:0] mem_req_wstrb_i,
  output logic               mem_rsp_valid_o,
  output logic [BUS_W-1:0]   mem_rsp_rdata_o
);
  localparam int unsigned BB = BUS_W / 8;

  logic [BUS_W-1:0] mem [NBEATS];

  typedef struct { longint unsigned due; logic [BUS_W-1:0] data; } rsp_t;
  rsp_t q[$];
  longint unsigned cyc;
  int unsigned idx;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mem_req_ready_o <= 1'b0;
      mem_rsp_valid_o <= 1'b0;
      mem_rsp_rdata_o <= '0;
      cyc <= 0;
      q.delete();
    end else begin
      cyc <= cyc + 1;
      mem_req_ready_o <= ($urandom_range(3) != 0);
      if (mem_req_valid_i && mem_req_ready_o) begin
        idx = (mem_req_addr_i / BB) % NBEATS;
        if (mem_req_we_i) begin
          for (int b = 0; b < BB; b++)
            if (mem_req_wstrb_i[b]) mem[idx][b*8 +: 8] <= mem_req_wdata_i[b*8 +: 8];
        end else begin
          q.push_back('{due: cyc + longint'($urandom_range(LAT_MAX, LAT_MIN)), data: mem[idx]});
        end
      end
      mem_rsp_valid_o <= 1'b0;
      if (q.size() != 0 && q[0].due <= cyc) begin
        mem_rsp_valid_o <= 1'b1;
        mem_rsp_rdata_o <= q[0].data;
        void'(q.pop_front());
      end
    end
  end
endmodule
