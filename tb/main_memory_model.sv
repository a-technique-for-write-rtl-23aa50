// main_memory_model: behavioural model of the off-chip DRAM main memory, for
// testbenches only.
//
// Accepts one request at a time on a valid/ready port. Writes complete on
// acceptance; a read returns its line LATENCY cycles later (160 cycles, the
// main-memory latency of the evaluated system) on resp_valid. Lines never
// written read as a pattern made from their address, so stale data is
// detectable. Counts reads and writes for the testbenches.
module main_memory_model #(
  parameter int unsigned LATENCY = 160
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  llc_pkg::mem_req_t  req,
  output logic               resp_valid,
  output logic [511:0]       resp_rdata,
  output int unsigned        n_reads,
  output int unsigned        n_writes
);
  logic [511:0] mem [longint unsigned];
  int unsigned  remain;
  logic         pending;
  logic [39:0]  paddr;

  function automatic logic [511:0] pattern(input logic [39:0] a);
    logic [511:0] d;
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = a[39:8] ^ (32'h9e37_79b9 * (w + 1));
    return d;
  endfunction

  function automatic logic [511:0] peek(input logic [39:0] a);
    longint unsigned k;
    k = longint'(a >> 6);
    return mem.exists(k) ? mem[k] : pattern(a);
  endfunction

  assign req_ready = !pending;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0; remain <= 0; resp_valid <= 1'b0; resp_rdata <= '0;
      n_reads <= 0; n_writes <= 0; paddr <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req.write) begin
          mem[longint'(req.addr >> 6)] = req.wdata;
          n_writes <= n_writes + 1;
        end else begin
          pending <= 1'b1;
          remain  <= LATENCY - 1;
          paddr   <= req.addr;
          n_reads <= n_reads + 1;
        end
      end else if (pending) begin
        if (remain == 0) begin
          pending    <= 1'b0;
          resp_valid <= 1'b1;
          resp_rdata <= peek(paddr);
        end else begin
          remain <= remain - 1;
        end
      end
    end
  end
endmodule
