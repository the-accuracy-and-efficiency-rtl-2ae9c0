// posit_regfile: the floating-point register file of the F extension,
// holding posits instead of IEEE 754 numbers.
//
// The paper places a register file in the decode stage of its pipeline
// figure and keeps posits in the core's registers; its size here (32
// registers, as the F extension defines) and its ports are this design's
// choice: three combinational read ports (rs1, rs2, rs3 for fused
// multiply-add) and one write port written at the rising clock edge, so a
// value written in one cycle is read by the next instruction.  Reset
// clears every register to the posit 0.
module posit_regfile #(
  parameter int unsigned PS    = 32,
  parameter int unsigned NREGS = 32,
  localparam int unsigned AW   = $clog2(NREGS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] raddr1, raddr2, raddr3,
  output logic [PS-1:0] rdata1, rdata2, rdata3,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [PS-1:0] wdata
);

  logic [PS-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
    end
  end

  assign rdata1 = regs[raddr1];
  assign rdata2 = regs[raddr2];
  assign rdata3 = regs[raddr3];

endmodule
