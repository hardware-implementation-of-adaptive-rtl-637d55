// sync_ram: simple dual-port on-chip RAM, one write port and one read
// port, used for the three internal memories of the embedder (input image,
// watermark message, output image).
//
// Written as an array so that synthesis maps it to block RAM. A write
// (we) stores wdata at waddr on the rising edge; a read (re) registers
// mem[raddr] into rdata on the rising edge, so data follows the address by
// one cycle and rdata holds while re is low. A read and a write of the same
// address in one cycle return the old word. The memory contents are not
// reset; the rdata register is.
module sync_ram #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= mem[raddr];
  end

  a_waddr: assert property (@(posedge clk) disable iff (!rst_n) we |-> int'(waddr) < DEPTH)
    else $error("sync_ram: write address out of range");
  a_raddr: assert property (@(posedge clk) disable iff (!rst_n) re |-> int'(raddr) < DEPTH)
    else $error("sync_ram: read address out of range");
endmodule
