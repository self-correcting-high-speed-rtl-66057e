// Logical p-bit state memory.
//
// The physical p-bits are far faster than the logic that uses them, so
// each one serves many logical p-bits whose states live here, one bit per
// logical p-bit (1 = +1, 0 = -1). Every update lane reads neighbour
// states through its own port and writes back the p-bit it has just
// updated; the host can load and read the whole state vector. Keeping
// logical p-bits in memory follows the design; the port arrangement is
// this design's choice.
//
// Timing: lane reads are combinational (rd_data follows rd_addr in the
// same cycle); lane writes take effect at the clock edge. The host read
// is registered (host_rdata one cycle after host_re). A host write is
// ignored when a lane writes the same address in that cycle. Lanes own
// disjoint address ranges, so lane writes never collide.
module state_mem #(
  parameter int N_PBITS  = 64000,
  parameter int LANES    = 4,
  parameter int IDX_BITS = $clog2(N_PBITS)
) (
  input  logic                clk,
  input  logic [IDX_BITS-1:0] rd_addr [LANES],
  output logic                rd_data [LANES],
  input  logic                wr_en   [LANES],
  input  logic [IDX_BITS-1:0] wr_addr [LANES],
  input  logic                wr_data [LANES],
  input  logic                host_we,
  input  logic                host_re,
  input  logic [IDX_BITS-1:0] host_addr,
  input  logic                host_wdata,
  output logic                host_rdata
);
  logic mem [N_PBITS];

  always_comb
    for (int l = 0; l < LANES; l++) rd_data[l] = mem[rd_addr[l]];

  logic host_blocked;
  always_comb begin
    host_blocked = 1'b0;
    for (int l = 0; l < LANES; l++)
      if (wr_en[l] && wr_addr[l] == host_addr) host_blocked = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (host_we && !host_blocked) mem[host_addr] <= host_wdata;
    for (int l = 0; l < LANES; l++)
      if (wr_en[l]) mem[wr_addr[l]] <= wr_data[l];
    if (host_re) host_rdata <= mem[host_addr];
  end

  // Each lane writes only inside its own block of N_PBITS/LANES entries.
  always_ff @(posedge clk)
    for (int l = 0; l < LANES; l++)
      if (wr_en[l])
        assert (int'(wr_addr[l]) / (N_PBITS / LANES) == l)
          else $error("lane %0d wrote outside its block: %0d", l, wr_addr[l]);
endmodule
