// tas_ext_mem_model: behavioural model of the external DRAM seen by the TAS
// engine. Not synthesizable.
//
// Word addressed, sparse (associative array). A request is accepted in a cycle
// with req and ready high; `ready` drops at random when STALL_PCT > 0, which
// exercises the engine's handling of a busy memory. Read data come back in
// order LATENCY cycles after acceptance with rvalid (at most one per cycle).
// Writes store wdata; reads return the low TILE*DATA_W bits of a word. Like a
// DRAM, the model flags a cycle in which a write arrives while a read is still
// in flight (rw_conflicts), and counts reads and writes for the external
// memory access (EMA) figures.
module tas_ext_mem_model #(
  parameter int unsigned TILE      = 8,
  parameter int unsigned DATA_W    = 8,
  parameter int unsigned ACC_W     = 32,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned LATENCY   = 3,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic                   clk,
  input  logic                   req,
  input  logic                   we,
  input  logic [ADDR_W-1:0]      addr,
  input  logic [TILE*ACC_W-1:0]  wdata,
  output logic                   ready,
  output logic [TILE*DATA_W-1:0] rdata,
  output logic                   rvalid
);

  logic [TILE*ACC_W-1:0] mem [logic [ADDR_W-1:0]];

  int unsigned reads, writes, stalls, rw_conflicts;
  logic [TILE*DATA_W-1:0] q_data [$];
  longint unsigned        q_due  [$];
  longint unsigned        cyc;

  initial begin
    reads = 0; writes = 0; stalls = 0; rw_conflicts = 0; cyc = 0;
    ready = 1'b1; rvalid = 1'b0; rdata = '0;
  end

  // Backdoor access for the testbench.
  function automatic void poke(input logic [ADDR_W-1:0] a, input logic [TILE*ACC_W-1:0] d);
    mem[a] = d;
  endfunction
  function automatic logic [TILE*ACC_W-1:0] peek(input logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    // Return read data that are due.
    if (q_due.size() > 0 && q_due[0] <= cyc) begin
      rvalid <= 1'b1;
      rdata  <= q_data.pop_front();
      void'(q_due.pop_front());
    end else begin
      rvalid <= 1'b0;
    end
    if (req && ready) begin
      if (we) begin
        writes <= writes + 1;
        if (q_due.size() > 0) rw_conflicts <= rw_conflicts + 1;
        mem[addr] = wdata;
      end else begin
        reads <= reads + 1;
        q_data.push_back(mem.exists(addr) ? mem[addr][TILE*DATA_W-1:0] : '0);
        q_due.push_back(cyc + LATENCY);
      end
    end
    if (req && !ready) stalls <= stalls + 1;
    ready <= (STALL_PCT == 0) ? 1'b1 : (($urandom % 100) >= STALL_PCT);
  end

endmodule
