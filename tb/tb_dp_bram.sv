// tb_dp_bram: self-checking test of the dual-port clutter-map RAM.
//
// Writes random words to random addresses on port A while reading random
// addresses on port B, and checks each read, one cycle after its address,
// against a shadow array (read-first on a same-cycle collision). Also checks
// that the output holds while `enb` is low and clears on `rstb`.
module tb_dp_bram;
  localparam int DEPTH = 256, W = 14, AW = $clog2(DEPTH);
  logic clk = 0;
  logic ena = 0, wea = 0, enb = 0, rstb = 1;
  logic [AW-1:0] addra = '0, addrb = '0;
  logic [W-1:0] dia = '0, dob;
  int checks = 0, failures = 0;
  int shadow[DEPTH];
  int expected;

  dp_bram #(.DEPTH(DEPTH), .W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    @(posedge clk); #1;
    checks++; if (dob !== '0) begin failures++; $display("FAIL rstb"); end
    rstb = 0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      ena = 1; wea = 1; addra = AW'(a); dia = W'($urandom); shadow[a] = int'(dia);
      @(posedge clk); #1;
    end
    ena = 0; wea = 0;
    for (int n = 0; n < 4000; n++) begin
      ena = $urandom % 2; wea = $urandom % 2;
      addra = AW'($urandom); dia = W'($urandom);
      enb = ($urandom % 4) != 0; addrb = (n % 7 == 0) ? addra : AW'($urandom);
      expected = enb ? shadow[addrb] : int'(dob);
      @(posedge clk); #1;
      if (ena && wea) shadow[addra] = int'(dia);
      checks++;
      if (dob !== W'(expected)) begin
        failures++; $display("FAIL read addr %0d got %0d exp %0d", addrb, dob, expected);
      end
    end
    rstb = 1; @(posedge clk); #1;
    checks++; if (dob !== '0) begin failures++; $display("FAIL rstb late"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
