// One bank of the cluster scratchpad memory.
//
// A single-port memory of WORDS words of DATA_W bits with byte enables. A
// request is served in the cycle it is presented; read data appears on rdata
// in the following cycle and holds until the next read. Thirty-two such
// banks (B0..B31) make up the 128 KiB cluster scratchpad. The bank stands in
// for an SRAM macro and is written as a plain array; like an SRAM it has no
// reset of its contents.
module spm_bank #(
  parameter int unsigned WORDS  = 512,
  parameter int unsigned DATA_W = 64,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic                clk_i,
  input  logic                req_i,
  input  logic                we_i,
  input  logic [AW-1:0]       addr_i,
  input  logic [DATA_W/8-1:0] be_i,
  input  logic [DATA_W-1:0]   wdata_i,
  output logic [DATA_W-1:0]   rdata_o
);
  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < DATA_W/8; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
