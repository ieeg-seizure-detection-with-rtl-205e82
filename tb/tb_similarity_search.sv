// tb_similarity_search: random query and class HVs of varying densities; a
// small behavioural AM answers the read port. Checks the score of every
// class (AND + popcount), the winning class (ties to the lower index), that
// done rises exactly NUM_CLASSES+1 = 3 clocks after start, that busy is high
// in between, and that both classes and at least one tie occur. A second,
// four-class instance checks the running maximum over more than two classes.
module tb_similarity_search;
  import tb_ref_pkg::*;
  localparam int D = 1024;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int seen [4];
  int ties = 0;

  // two-class instance
  logic start = 0, busy, done;
  logic [D-1:0] query = '0, am_rdata;
  logic [0:0] am_raddr, pred;
  logic [10:0] best_score;
  logic [1:0][10:0] scores;
  logic [D-1:0] am [2];
  assign am_rdata = am[am_raddr];
  similarity_search dut (.*);

  // four-class instance
  logic start4 = 0, busy4, done4;
  logic [1:0] raddr4, pred4;
  logic [D-1:0] rdata4;
  logic [10:0] best4;
  logic [3:0][10:0] scores4;
  logic [D-1:0] am4 [4];
  assign rdata4 = am4[raddr4];
  similarity_search #(.D(D), .NUM_CLASSES(4)) dut4 (
    .clk, .rst_n, .start(start4), .query, .am_raddr(raddr4), .am_rdata(rdata4),
    .busy(busy4), .done(done4), .pred(pred4), .best_score(best4), .scores(scores4));

  always #5 clk = ~clk;

  initial begin : watchdog
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [D-1:0] rand_hv(input int pct);
    logic [D-1:0] v;
    for (int i = 0; i < D; i++) v[i] = (int'($urandom % 100) < pct);
    return v;
  endfunction

  initial begin
    for (int k = 0; k < 4; k++) seen[k] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 300; n++) begin
      int exp_s [4];
      int exp_best, lat;
      bit four;
      four = (n % 3 == 2);
      @(negedge clk);
      query = rand_hv(5 + $urandom % 40);
      for (int k = 0; k < 4; k++) begin
        am4[k] = rand_hv(5 + $urandom % 60);
        if (k < 2) am[k] = am4[k];
      end
      if (n % 10 == 0) begin am[1] = am[0]; am4[1] = am4[0]; end  // force a tie
      exp_best = 0;
      for (int k = 0; k < (four ? 4 : 2); k++) begin
        exp_s[k] = int'(ref_popcount_and(query, am4[k], D));
        if (exp_s[k] > exp_s[exp_best]) exp_best = k;
      end
      if (exp_s[0] == exp_s[1] && !four) ties++;
      if (four) start4 = 1; else start = 1;
      @(negedge clk);
      start = 0; start4 = 0;
      lat = 1;
      while (!(four ? done4 : done) && lat < 10) begin
        checks++;
        if (!(four ? busy4 : busy)) begin failures++; $display("busy low during search"); end
        @(negedge clk); lat++;
      end
      checks++;
      if (lat != (four ? 5 : 3)) begin failures++; $display("latency %0d", lat); end
      for (int k = 0; k < (four ? 4 : 2); k++) begin
        checks++;
        if (int'(four ? scores4[k] : scores[k]) != exp_s[k]) begin
          failures++; $display("n=%0d class %0d score %0d exp %0d", n, k, four ? scores4[k] : scores[k], exp_s[k]);
        end
      end
      checks++;
      if (int'(four ? pred4 : pred) != exp_best) begin failures++; $display("n=%0d pred %0d exp %0d", n, four ? pred4 : pred, exp_best); end
      checks++;
      if (int'(four ? best4 : best_score) != exp_s[exp_best]) begin failures++; $display("best score"); end
      seen[exp_best]++;
      @(negedge clk);
      checks++;
      if (done || done4) begin failures++; $display("done longer than one cycle"); end
    end
    for (int k = 0; k < 2; k++) begin
      checks++; if (seen[k] == 0) begin failures++; $display("class %0d never won", k); end
    end
    checks++; if (ties == 0) begin failures++; $display("no tie"); end
    $display("wins: %0d %0d %0d %0d, ties %0d", seen[0], seen[1], seen[2], seen[3], ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
