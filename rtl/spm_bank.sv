// One L1 scratchpad bank: Rows x 32-bit words, single port, one access per
// cycle, synchronous read with byte-enabled writes. The read data register
// changes only on a read, so it holds the last read word while writes take
// place (the memory controller relies on this for atomics and for stalled
// responses). In silicon this is an SRAM macro; here it is a plain array.
// Size follows the paper: 1 MiB over 1024 banks = 256 words per bank.
module spm_bank #(
  parameter int unsigned Rows = 256,
  localparam int unsigned RowW = $clog2(Rows)
) (
  input  logic              clk_i,
  input  logic              req_i,
  input  logic              we_i,
  input  logic [RowW-1:0]   addr_i,
  input  logic [31:0]       wdata_i,
  input  logic [3:0]        be_i,
  output logic [31:0]       rdata_o
);
  logic [31:0] mem_q [Rows];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem_q[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem_q[addr_i];
      end
    end
  end
endmodule
