// logic_parity_group_tb: checks the logic-parity flip-flop group.
// Random loads must come back unchanged with err low; a single flipped bit (seu_flip)
// must raise err in the next cycle and leave the flipped value on q; two flips in the
// same word cancel (parity sees odd numbers of flips only); a reload clears the error;
// reset clears data, parity and err; holding (en low) keeps the value and err low.
module logic_parity_group_tb;
  localparam int unsigned W = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, en;
  logic [W-1:0] d, flip, q;
  logic err;
  int checks = 0, failures = 0;

  logic_parity_group #(.W(W)) dut (.clk, .rst, .en, .d, .seu_flip(flip), .q, .err);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic [W-1:0] v;
    rst = 1'b1; en = 1'b0; d = '0; flip = '0;
    @(posedge clk); #1;
    rst = 1'b0;
    check(q == '0 && !err, "reset state");
    for (int n = 0; n < 200; n++) begin
      v = $urandom;
      en = 1'b1; d = v; flip = '0;
      @(posedge clk); #1;
      check(q == v && !err, $sformatf("load %h", v));
      // hold
      en = 1'b0; d = ~v;
      @(posedge clk); #1;
      check(q == v && !err, "hold");
      // single upset
      begin
        int b;
        b = int'($urandom_range(W - 1));
        flip = '0; flip[b] = 1'b1;
        @(posedge clk); #1;
        flip = '0;
        check(q == (v ^ (W'(1) << b)) && err, $sformatf("single flip bit %0d", b));
        @(posedge clk); #1;
        check(err, "error persists until reload");
        // double upset on the same word cancels
        if (n % 4 == 0) begin
          flip = '0; flip[(b + 1) % W] = 1'b1; flip[(b + 2) % W] = 1'b1;
          @(posedge clk); #1;
          flip = '0;
          check(err, "two more flips keep an odd count");
        end
      end
      // upset together with a load: the new value is hit
      if (n % 5 == 0) begin
        en = 1'b1; d = v + 1; flip = W'(1);
        @(posedge clk); #1;
        flip = '0;
        check(q == ((v + 1) ^ W'(1)) && err, "flip during load");
      end
    end
    // reload clears
    en = 1'b1; d = 32'h1234_5678;
    @(posedge clk); #1;
    check(q == 32'h1234_5678 && !err, "reload clears error");
    flip = 32'h0000_0100;
    en = 1'b0;
    @(posedge clk); #1;
    flip = '0;
    check(err, "flip before reset");
    rst = 1'b1;
    @(posedge clk); #1;
    rst = 1'b0;
    check(q == '0 && !err, "reset clears error");
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
