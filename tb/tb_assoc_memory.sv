// tb_assoc_memory: writes random class HVs, reads them back on the
// asynchronous port, checks that a write takes effect at the next edge only,
// that reset clears the memory and that an out-of-range address reads 0
// (three-class instance).
module tb_assoc_memory;
  localparam int D = 1024;

  logic clk = 0, rst_n = 0, we = 0;
  logic [0:0] waddr = '0, raddr = '0;
  logic [D-1:0] wdata = '0, rdata;
  logic [D-1:0] model [2];
  int checks = 0, failures = 0;

  assoc_memory dut (.*);

  // three classes, 2-bit address, address 3 out of range
  logic we3 = 0;
  logic [1:0] wa3 = '0, ra3 = '0;
  logic [D-1:0] rd3;
  assoc_memory #(.D(D), .NUM_CLASSES(3)) dut3 (.clk, .rst_n, .we(we3), .waddr(wa3), .wdata, .raddr(ra3), .rdata(rd3));

  always #5 clk = ~clk;

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [D-1:0] rand_hv();
    logic [D-1:0] v;
    for (int i = 0; i < D / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int k = 0; k < 2; k++) begin
      raddr = 1'(k); #1;
      checks++; if (rdata !== '0) begin failures++; $display("not cleared by reset"); end
      model[k] = '0;
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 1'($urandom); wdata = rand_hv();
      raddr = waddr; #1;
      checks++; if (rdata !== model[raddr]) begin failures++; $display("write visible too early n=%0d", n); end
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      for (int k = 0; k < 2; k++) begin
        raddr = 1'(k); #1;
        checks++;
        if (rdata !== model[k]) begin failures++; if (failures < 10) $display("n=%0d class %0d mismatch", n, k); end
      end
    end
    we = 0;
    // three-class instance
    @(negedge clk);
    we3 = 1; wa3 = 2'd2; wdata = rand_hv();
    @(negedge clk);
    we3 = 0; ra3 = 2'd2; #1;
    checks++; if (rd3 !== wdata) begin failures++; $display("class 2 mismatch"); end
    ra3 = 2'd3; #1;
    checks++; if (rd3 !== '0) begin failures++; $display("out of range read not 0"); end
    // reset clears
    rst_n = 0; @(posedge clk); #1; rst_n = 1;
    raddr = 1'b1; #1;
    checks++; if (rdata !== '0) begin failures++; $display("reset did not clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
