// series_runner: drives one posar instance of size Posit(PS,ES) through the
// level-one numerical-series programs (Euler's number, Nilakantha and
// Leibniz series for pi, Taylor series of sin(1)) written as sequences of
// F-extension instructions, as a compiler would emit them.  Constants are
// loaded as posit bit patterns (flw), as the software does for a posit
// machine.  Each program also runs on a software model (posit_ref_pkg with
// a shadow register file); the unit's final result must match the model
// bit for bit.  Leibniz is modelled for its first MODEL_LEIBNIZ iterations
// only, to keep the simulation short; the unit itself runs all of them.
module series_runner
  import posar_pkg::*;
  import posit_ref_pkg::*;
#(
  parameter int PS = 32,
  parameter int ES = 3,
  parameter int LEIBNIZ_ITERS = 2000000,
  parameter int MODEL_LEIBNIZ = 20000
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output real  result [4]        // e, pi (Nilakantha), sin(1), pi (Leibniz)
);

  logic        in_valid;
  posar_op_e   in_op;
  logic [4:0]  in_rd, in_rs1, in_rs2;
  logic [31:0] in_int;
  logic        out_valid, out_int_wr;
  logic [4:0]  out_rd;
  logic [31:0] out_int;

  posar #(.PS(PS), .ES(ES)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_op(in_op),
    .in_rm(3'd0), .in_rd(in_rd), .in_rs1(in_rs1), .in_rs2(in_rs2), .in_rs3(5'd0),
    .in_int(in_int), .out_valid(out_valid), .out_int_wr(out_int_wr), .out_rd(out_rd),
    .out_int(out_int));

  logic [63:0] model [32];
  bit          model_on;

  task automatic exec(input posar_op_e op, input logic [4:0] rd, input logic [4:0] rs1,
                      input logic [4:0] rs2, input logic [63:0] x = 0);
    @(negedge clk);
    in_valid = 1'b1; in_op = op; in_rd = rd; in_rs1 = rs1; in_rs2 = rs2; in_int = 32'(x);
    if (model_on)
      case (op)
        OP_ADD:   model[rd] = ref_add(model[rs1], model[rs2], 1'b0, PS, ES);
        OP_SUB:   model[rd] = ref_add(model[rs1], model[rs2], 1'b1, PS, ES);
        OP_MUL:   model[rd] = ref_mul(model[rs1], model[rs2], PS, ES);
        OP_DIV:   model[rd] = ref_div(model[rs1], model[rs2], PS, ES);
        // result is negative exactly when rs2 is not
        OP_SGNJN: model[rd] = (model[rs1][PS-1] != model[rs2][PS-1]) ? model[rs1]
                                                                    : pneg(model[rs1], PS);
        default:  model[rd] = x & pmask(PS);
      endcase
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  task automatic load(input logic [4:0] rd, input int v);
    exec(OP_LOAD, rd, 0, 0, ref_from_int(32'(v), 1'b1, PS, ES));
  endtask

  // Read a register through fsw, compare with the model, return its value.
  task automatic finish_prog(input logic [4:0] r, input int idx, input string name);
    logic [PS-1:0] got;
    exec(OP_STORE, 0, r, 0);
    @(negedge clk);
    got = out_int[PS-1:0];
    result[idx] = ref_to_real(64'(got), PS, ES);
    checks++;
    if (!(out_valid && 64'(got) == model[r])) begin
      failures++;
      $display("FAIL P%0d %s: unit %h, model %h", PS, name, got, model[r]);
    end
  endtask

  // Register names
  localparam logic [4:0] ONE = 1, TWO = 2, FOUR = 3, A = 4, B = 5, C = 6, D = 7,
                         ACC = 8, K = 9, T = 10, X = 11;

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    in_valid = 1'b0; in_op = OP_LOAD; in_rd = 0; in_rs1 = 0; in_rs2 = 0; in_int = 0;
    model_on = 1'b1;
    for (int i = 0; i < 32; i++) model[i] = 0;
    @(posedge rst_n);
    load(ONE, 1); load(TWO, 2); load(FOUR, 4);

    // Euler's number, N = 20, exactly the loop of the C listing:
    // fact = fact / k; k = k + one; e = e + fact;  (i = 2 .. N-1)
    load(ACC, 2); load(K, 2); load(A, 1);
    for (int i = 2; i < 20; i++) begin
      exec(OP_DIV, A, A, K);
      exec(OP_ADD, K, K, ONE);
      exec(OP_ADD, ACC, ACC, A);
    end
    finish_prog(ACC, 0, "e (Euler)");

    // Nilakantha, 200 terms: pi = 3 + 4/(2*3*4) - 4/(4*5*6) + ...
    load(ACC, 3); load(K, 2);
    for (int i = 0; i < 200; i++) begin
      exec(OP_ADD, B, K, ONE);
      exec(OP_ADD, C, K, TWO);
      exec(OP_MUL, D, K, B);
      exec(OP_MUL, D, D, C);
      exec(OP_DIV, T, FOUR, D);
      exec(i % 2 ? OP_SUB : OP_ADD, ACC, ACC, T);
      exec(OP_ADD, K, K, TWO);
    end
    finish_prog(ACC, 1, "pi (Nilakantha)");

    // sin(1), 10 terms: term *= -x*x / ((2i)(2i+1)); sum += term
    load(X, 1); load(ACC, 1); load(T, 1); load(K, 1);
    exec(OP_MUL, A, X, X);
    exec(OP_SGNJN, A, A, A);                     // a = -x*x
    for (int i = 1; i < 10; i++) begin
      exec(OP_ADD, K, K, ONE);                   // 2i
      exec(OP_ADD, B, K, ONE);                   // 2i+1
      exec(OP_MUL, D, K, B);
      exec(OP_MUL, T, T, A);
      exec(OP_DIV, T, T, D);
      exec(OP_ADD, ACC, ACC, T);
      exec(OP_ADD, K, K, ONE);
    end
    finish_prog(ACC, 2, "sin(1)");

    // Leibniz: pi = sum (-1)^i * 4 / (2i+1)
    load(ACC, 0); load(D, 1);
    for (int i = 0; i < LEIBNIZ_ITERS; i++) begin
      if (i == MODEL_LEIBNIZ) begin
        finish_prog(ACC, 3, "pi (Leibniz, first iterations)");
        model_on = 1'b0;
      end
      exec(OP_DIV, T, FOUR, D);
      exec(i % 2 ? OP_SUB : OP_ADD, ACC, ACC, T);
      exec(OP_ADD, D, D, TWO);
    end
    exec(OP_STORE, 0, ACC, 0);
    @(negedge clk);
    result[3] = ref_to_real(64'(out_int[PS-1:0]), PS, ES);
    done = 1'b1;
  end

endmodule
