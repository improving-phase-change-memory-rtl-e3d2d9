// at_model: behavioural model of the address translation table kept in a
// PCM partition (not synthesizable). One entry per request through a
// valid/ready port; ready is randomly withheld; read data returns in request
// order LAT cycles after the request. Entries never written read as 0, which
// the controller takes as the identity mapping. Write and read counts are
// kept for the testbenches.
module at_model #(
  parameter int unsigned LADDR_W = 23,
  parameter int unsigned ENTRY_W = 32,
  parameter int unsigned LAT     = 4,
  parameter int unsigned READY_PCT = 80
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_write,
  input  logic [LADDR_W-1:0] req_idx,
  input  logic [ENTRY_W-1:0] req_wdata,
  output logic               rsp_valid,
  output logic [ENTRY_W-1:0] rsp_rdata
);
  logic [ENTRY_W-1:0] mem [logic [LADDR_W-1:0]];
  int unsigned n_reads = 0, n_writes = 0;
  typedef struct { longint due; logic [ENTRY_W-1:0] data; } rsp_t;
  rsp_t pend[$];
  longint cyc = 0;

  function automatic logic [ENTRY_W-1:0] peek(input logic [LADDR_W-1:0] i);
    return mem.exists(i) ? mem[i] : '0;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && req_valid && req_ready) begin
      if (req_write) begin
        mem[req_idx] = req_wdata;
        n_writes++;
      end else begin
        rsp_t r;
        r.due  = cyc + LAT;
        r.data = peek(req_idx);
        pend.push_back(r);
        n_reads++;
      end
    end
  end

  always @(negedge clk) begin
    req_ready <= ($urandom_range(0, 99) < READY_PCT);
    if (pend.size() != 0 && pend[0].due <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_rdata <= pend[0].data;
      void'(pend.pop_front());
    end else begin
      rsp_valid <= 1'b0;
    end
  end
endmodule
