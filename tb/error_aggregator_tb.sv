// error_aggregator_tb: checks the parity-error aggregation.
// For random single and multiple active inputs: err_fast follows the OR of the inputs in
// the same cycle, err_agg equals the OR of the inputs two cycles earlier, and flush (and
// reset) clears what is in flight. The expected values come from a reference history.
module error_aggregator_tb;
  localparam int unsigned N = 80;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, flush;
  logic [N-1:0] err_in;
  logic err_fast, err_agg;
  logic h1, h2;  // OR of inputs one and two cycles ago (cleared by flush)
  int checks = 0, failures = 0;

  error_aggregator #(.N_ERR(N), .GROUP(8)) dut (.clk, .rst, .flush, .err_in, .err_fast, .err_agg);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    rst = 1'b1; flush = 1'b0; err_in = '0; h1 = 1'b0; h2 = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      int r;
      r = int'($urandom_range(9));
      err_in = '0;
      if (r < 3) err_in[$urandom_range(N - 1)] = 1'b1;
      else if (r == 3) begin
        err_in[$urandom_range(N - 1)] = 1'b1;
        err_in[$urandom_range(N - 1)] = 1'b1;
      end
      flush = ($urandom_range(19) == 0);
      #1;
      check(err_fast == (|err_in), "err_fast");
      check(err_agg == h2, $sformatf("err_agg cycle %0d", n));
      @(posedge clk);
      if (flush) begin
        h2 = 1'b0; h1 = 1'b0;
      end else begin
        h2 = h1; h1 = |err_in;
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
