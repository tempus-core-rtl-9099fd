// cb_model: behavioural model of the convolution buffer's read port.
//
// Behavioural model for testbenches only (the buffer belongs to the host
// accelerator, not to the convolution core). An array of DEPTH entries of
// N*W bits; a read issued with rd_en in one cycle returns mem[rd_addr] on
// rd_data after the next clock edge and holds it until the next read, like
// a synchronous SRAM. Testbenches fill mem directly.
module cb_model #(
  parameter int unsigned N      = 16,
  parameter int unsigned W      = 8,
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned DEPTH  = 4096
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [N*W-1:0]    rd_data
);
  logic [N*W-1:0] mem [DEPTH];
  int             reads = 0;

  initial rd_data = '0;

  always @(posedge clk) begin
    if (rd_en) begin
      rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
      reads   <= reads + 1;
    end
  end
endmodule
