// Behavioural model of the external DDR memory, for simulation only (not synthesizable).
//
// One array of WORDS 32-bit words serves every port of the array, like the single DDR bank of the
// reference board. Two vector read ports return VEC consecutive words per request, one word read
// port serves the bias fetches and one word write port takes results. Each read port accepts a
// request when its ready is high; ready is dropped at random for STALL_PCT percent of the cycles to
// exercise back-pressure. Responses return in order LAT cycles after the request and cannot be
// refused. Testbenches fill and inspect `mem` hierarchically.
module ddr_model #(
  parameter int WORDS     = 65536,
  parameter int VEC       = 8,
  parameter int LAT       = 6,
  parameter int STALL_PCT = 20
) (
  input  logic                 clk,
  input  logic [1:0]           vrd_req_valid,
  output logic [1:0]           vrd_req_ready,
  input  logic [1:0][31:0]     vrd_req_addr,
  output logic [1:0]           vrd_rsp_valid,
  output logic [1:0][VEC-1:0][31:0] vrd_rsp_data,
  input  logic                 srd_req_valid,
  output logic                 srd_req_ready,
  input  logic [31:0]          srd_req_addr,
  output logic                 srd_rsp_valid,
  output logic [31:0]          srd_rsp_data,
  input  logic                 wr_valid,
  output logic                 wr_ready,
  input  logic [31:0]          wr_addr,
  input  logic [31:0]          wr_data
);
  logic [31:0] mem [WORDS];
  longint unsigned cycle = 0;
  typedef struct { longint unsigned due; logic [31:0] addr; } req_t;
  req_t vq[2][$];
  req_t sq[$];
  int writes = 0;

  initial begin
    vrd_req_ready = '0; srd_req_ready = 1'b0; wr_ready = 1'b0;
    vrd_rsp_valid = '0; srd_rsp_valid = 1'b0; vrd_rsp_data = '0; srd_rsp_data = '0;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    // accept requests presented in this cycle
    for (int p = 0; p < 2; p++)
      if (vrd_req_valid[p] && vrd_req_ready[p]) vq[p].push_back('{cycle + 64'(LAT), vrd_req_addr[p]});
    if (srd_req_valid && srd_req_ready) sq.push_back('{cycle + 64'(LAT), srd_req_addr});
    if (wr_valid && wr_ready) begin
      mem[wr_addr % WORDS] <= wr_data;
      writes <= writes + 1;
    end
    // responses
    for (int p = 0; p < 2; p++) begin
      vrd_rsp_valid[p] <= 1'b0;
      if (vq[p].size() > 0 && vq[p][0].due <= cycle) begin
        req_t r;
        r = vq[p].pop_front();
        vrd_rsp_valid[p] <= 1'b1;
        for (int v = 0; v < VEC; v++) vrd_rsp_data[p][v] <= mem[(r.addr + 32'(v)) % WORDS];
      end
    end
    srd_rsp_valid <= 1'b0;
    if (sq.size() > 0 && sq[0].due <= cycle) begin
      req_t r;
      r = sq.pop_front();
      srd_rsp_valid <= 1'b1;
      srd_rsp_data  <= mem[r.addr % WORDS];
    end
    // random back-pressure for the next cycle
    for (int p = 0; p < 2; p++) vrd_req_ready[p] <= ($urandom_range(99) >= STALL_PCT);
    srd_req_ready <= ($urandom_range(99) >= STALL_PCT);
    wr_ready      <= ($urandom_range(99) >= STALL_PCT);
  end
endmodule
