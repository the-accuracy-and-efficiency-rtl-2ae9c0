// tb_posar_matmul: matrix multiplication C = A * B of two 182 x 182
// matrices on the posit unit at its default Posit(32,3) size.  182 is the
// largest size the 512 kB board memory of the evaluated system holds.
//
// The matrices live in a behavioural memory in this testbench (random
// posits in [0,1)).  The unit runs the inner loop a compiler emits for the
// F extension: flw a[i][k]; flw b[k][j]; fmadd c, a, b, c; and fsw c at the
// end of each dot product, streaming all 182^3 multiply-adds through it.
// Checks:
//   * a sample of result elements (every 7th row and column) is recomputed
//     with the bit-level software model, using the same operation order
//     and the same double rounding of fmadd, and must match bit for bit;
//   * every result element must agree with a double-precision product of
//     the same inputs to a relative error below 1e-5.
module tb_posar_matmul;
  import posar_pkg::*;
  import posit_ref_pkg::*;

  localparam int N  = 182;
  localparam int PS = 32;
  localparam int ES = 3;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid;
  posar_op_e   in_op;
  logic [4:0]  in_rd, in_rs1, in_rs2, in_rs3;
  logic [31:0] in_int;
  logic        out_valid, out_int_wr;
  logic [4:0]  out_rd;
  logic [31:0] out_int;

  posar dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_op(in_op), .in_rm(3'd0),
    .in_rd(in_rd), .in_rs1(in_rs1), .in_rs2(in_rs2), .in_rs3(in_rs3), .in_int(in_int),
    .out_valid(out_valid), .out_int_wr(out_int_wr), .out_rd(out_rd), .out_int(out_int));

  logic [31:0] a [N*N];
  logic [31:0] b [N*N];
  logic [31:0] c [N*N];
  real         ar [N*N];
  real         br [N*N];

  task automatic issue(input posar_op_e op, input logic [4:0] rd, input logic [4:0] rs1,
                       input logic [4:0] rs2, input logic [4:0] rs3, input logic [31:0] x);
    @(negedge clk);
    in_valid = 1'b1; in_op = op; in_rd = rd; in_rs1 = rs1; in_rs2 = rs2; in_rs3 = rs3;
    in_int = x;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  initial begin : watchdog
    repeat (30000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] acc;
    real         want, got;
    in_valid = 1'b0; in_op = OP_LOAD; in_rd = 0; in_rs1 = 0; in_rs2 = 0; in_rs3 = 0;
    in_int = 0;
    for (int i = 0; i < N * N; i++) begin
      // random posit in [0,1): 0x00000000 .. 0x3fffffff
      a[i] = {2'b00, 30'($urandom)};
      b[i] = {2'b00, 30'($urandom)};
      ar[i] = ref_to_real(64'(a[i]), PS, ES);
      br[i] = ref_to_real(64'(b[i]), PS, ES);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        issue(OP_LOAD, 5'd3, 0, 0, 0, 32'd0);              // c = 0
        for (int k = 0; k < N; k++) begin
          issue(OP_LOAD, 5'd1, 0, 0, 0, a[i*N+k]);
          issue(OP_LOAD, 5'd2, 0, 0, 0, b[k*N+j]);
          issue(OP_MADD, 5'd3, 5'd1, 5'd2, 5'd3, 32'd0);
        end
        issue(OP_STORE, 0, 5'd3, 0, 0, 32'd0);
        @(negedge clk);
        c[i*N+j] = out_int;
      end

    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        want = 0.0;
        for (int k = 0; k < N; k++) want += ar[i*N+k] * br[k*N+j];
        got = ref_to_real(64'(c[i*N+j]), PS, ES);
        checks++;
        if ((got - want) > 1e-5 * want || (want - got) > 1e-5 * want) begin
          failures++;
          if (failures < 10) $display("FAIL c[%0d][%0d] = %g, expected %g", i, j, got, want);
        end
        if (i % 7 == 0 && j % 7 == 0) begin
          acc = 0;
          for (int k = 0; k < N; k++)
            acc = ref_add(ref_mul(64'(a[i*N+k]), 64'(b[k*N+j]), PS, ES), acc, 1'b0, PS, ES);
          checks++;
          if (acc != 64'(c[i*N+j])) begin
            failures++;
            if (failures < 10) $display("FAIL c[%0d][%0d] = %h, model %h", i, j, c[i*N+j], acc);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
