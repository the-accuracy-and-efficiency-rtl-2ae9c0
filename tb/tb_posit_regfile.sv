// tb_posit_regfile: self-checking test of posit_regfile.
//
// Checks that reset clears every register, then performs random writes
// while reading three random registers each cycle, comparing with a
// shadow copy: a write becomes visible on the read ports after the clock
// edge that performs it, and disabled writes change nothing.
module tb_posit_regfile;
  localparam int PS = 32, N = 32;
  int checks = 0;
  int failures = 0;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic [4:0]    ra1, ra2, ra3, wa;
  logic [PS-1:0] rd1, rd2, rd3, wd;
  logic          we;
  logic [PS-1:0] shadow [N];

  posit_regfile #(.PS(PS), .NREGS(N)) dut (.clk(clk), .rst_n(rst_n), .raddr1(ra1), .raddr2(ra2),
    .raddr3(ra3), .rdata1(rd1), .rdata2(rd2), .rdata3(rd3), .we(we), .waddr(wa), .wdata(wd));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 1'b0; wa = '0; wd = '0; ra1 = '0; ra2 = '0; ra3 = '0;
    #12 rst_n = 1'b1;
    for (int i = 0; i < N; i++) begin
      ra1 = 5'(i);
      #1 checks++;
      if (rd1 != '0) failures++;
      shadow[i] = '0;
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      we = 1'($urandom());
      wa = 5'($urandom());
      wd = $urandom();
      ra1 = 5'($urandom()); ra2 = 5'($urandom()); ra3 = wa;
      #1;
      checks++;
      if (rd1 != shadow[ra1] || rd2 != shadow[ra2] || rd3 != shadow[ra3]) begin
        failures++;
        if (failures < 10) $display("FAIL read before write");
      end
      @(posedge clk);
      if (we) shadow[wa] = wd;
      #1;
      checks++;
      if (rd3 != shadow[wa]) begin
        failures++;
        if (failures < 10) $display("FAIL write not visible");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
