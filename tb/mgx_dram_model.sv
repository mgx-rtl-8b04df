// mgx_dram_model -- behavioural model of the untrusted DRAM behind the
// memory protection unit (testbench only, not synthesizable).
//
// Sparse 16-byte words in an associative array (unwritten words read as 0),
// byte strobes on writes, read responses returned in order after LATENCY
// cycles.  When STALL is set the request and response sides randomly refuse
// or withhold transfers, to exercise back-pressure.  Tests reach `mem`
// hierarchically to inspect ciphertext and to tamper with or replay it.
module mgx_dram_model #(
  parameter int unsigned LATENCY = 8,
  parameter bit          STALL   = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [63:0]   req_addr,
  input  logic [127:0]  req_wdata,
  input  logic [15:0]   req_wstrb,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output logic [127:0]  rsp_rdata
);
  logic [127:0] mem [logic [59:0]];

  typedef struct { logic [127:0] data; longint due; } rsp_t;
  rsp_t q [$];
  longint cyc = 0;
  int unsigned n_reads = 0, n_writes = 0, n_stalls = 0;

  function automatic logic [127:0] rd(input logic [63:0] a);
    return mem.exists(a[63:4]) ? mem[a[63:4]] : '0;
  endfunction

  logic ready_r;
  assign req_ready = ready_r;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    ready_r <= STALL ? (($urandom % 4) != 0) : 1'b1;
    if (!rst_n) begin
      q.delete();
    end else begin
      if (req_valid && !req_ready) n_stalls <= n_stalls + 1;
      if (req_valid && req_ready) begin
        if (req_we) begin
          logic [127:0] w;
          w = rd(req_addr);
          for (int b = 0; b < 16; b++)
            if (req_wstrb[b]) w[8*b +: 8] = req_wdata[8*b +: 8];
          mem[req_addr[63:4]] = w;
          n_writes <= n_writes + 1;
        end else begin
          q.push_back('{data: rd(req_addr), due: cyc + longint'(LATENCY)});
          n_reads <= n_reads + 1;
        end
      end
      if (rsp_valid && rsp_ready) void'(q.pop_front());
    end
  end

  logic hold;
  always_ff @(posedge clk) hold <= STALL ? (($urandom % 5) == 0) : 1'b0;

  assign rsp_valid = (q.size() > 0) && (q[0].due <= cyc) && !hold;
  assign rsp_rdata = (q.size() > 0) ? q[0].data : '0;
endmodule
