// spatz_sram_bank: one bank of the cluster's L1 scratchpad memory (1 KiB = 256 x 32 bit).
//
// Single-port synchronous memory with byte write enables: a request presented with req_i is
// executed at the clock edge; a read returns its data on rdata_o in the next cycle, with
// rvalid_o high for that cycle (writes give no response). In silicon this is an SRAM macro;
// here it is a plain array, which a synthesis flow maps to a macro. Sixteen such banks form
// the 16 KiB L1 of the cluster, as in the paper; the one-cycle latency is this design's
// choice. Contents are not reset.
module spatz_sram_bank #(
  parameter int unsigned WORDS  = 256,
  parameter int unsigned ADDR_W = $clog2(WORDS)
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              req_i,
  input  logic              we_i,
  input  logic [ADDR_W-1:0] addr_i,
  input  logic [31:0]       wdata_i,
  input  logic [3:0]        be_i,
  output logic              rvalid_o,
  output logic [31:0]       rdata_o
);

  logic [31:0] mem_q [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++) if (be_i[b]) mem_q[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem_q[addr_i];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_o <= 1'b0;
    else         rvalid_o <= req_i && !we_i;
  end

endmodule
