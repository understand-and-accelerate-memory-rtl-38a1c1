// key_sram: one on-chip tier of the key store (instantiated once for BRAM and once
// for URAM).
//
// DEPTH keys of W bits, one write port and one read port, so new keys can be
// appended while a scan reads older ones. Reads are synchronous: rdata is valid
// the cycle after re (rvalid marks it), as in a block or ultra RAM. The published
// design fixes which tokens each tier holds (BRAM 0-16383, URAM 16384-65535);
// the single-key-wide port is this implementation's choice. A read of an address
// written in the same cycle returns the old word.
module key_sram #(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned W     = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [W-1:0]             wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [W-1:0]             rdata,
  output logic                     rvalid
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid <= 1'b0;
    else        rvalid <= re;
  end

  a_waddr: assert property (@(posedge clk) disable iff (!rst_n) we |-> (32'(waddr) < DEPTH));
  a_raddr: assert property (@(posedge clk) disable iff (!rst_n) re |-> (32'(raddr) < DEPTH));

endmodule
