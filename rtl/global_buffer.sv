// global_buffer: on-chip store of compressed KV records.
//
// A dual-port memory of DEPTH words of W bits. Port A belongs to the core
// (the packer writes records, the dequantisation path reads them); port B is
// the side toward external HBM, through which records are moved out to or in
// from off-chip memory. Reads are registered (one cycle latency) on both
// ports. Every port-A write also carries the record's compressed length, and
// nz_bits accumulates it: the number of bits that moving the stored cache
// off-chip takes when only index, label and non-zero data are sent.
//
// The paper names the global buffer and its links (to the pruning,
// quantisation and dequantisation units, to the layernorm input and from FC2)
// but gives no size or organisation; all of that is this design's choice.
// Writing the same address from both ports in one cycle is not allowed.
module global_buffer #(
  parameter int DEPTH  = 256,
  parameter int W      = 3072,
  parameter int BITS_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     a_we,
  input  logic                     a_re,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  input  logic [W-1:0]             a_wdata,
  input  logic [BITS_W-1:0]        a_wbits,
  output logic [W-1:0]             a_rdata,
  input  logic                     b_we,
  input  logic                     b_re,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  logic [W-1:0]             b_wdata,
  output logic [W-1:0]             b_rdata,
  output logic [BITS_W-1:0]        nz_bits
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    if (b_we) mem[b_addr] <= b_wdata;
    if (a_re) a_rdata <= mem[a_addr];
    if (b_re) b_rdata <= mem[b_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) nz_bits <= '0;
    else if (a_we) nz_bits <= nz_bits + a_wbits;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(a_we && b_we && a_addr == b_addr));
endmodule
