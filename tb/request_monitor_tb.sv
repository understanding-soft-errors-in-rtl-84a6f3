// request_monitor_tb: drives random combinations of core valid, L2C ready, table full,
// recovery and error and checks the monitor's decisions against the rules written out
// here: a packet is accepted (and recorded) only with valid, L2C ready, a free entry, no
// recovery and no error; it is forwarded to L2C unless blocked; recorded and forwarded
// packets equal the offered one; the blocking reasons are reported. A core keeps offering
// the same packet until it is accepted, and the test counts acceptances against offers.
module request_monitor_tb;
  import qrr_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  logic core_req_valid, core_req_ready, l2c_ready, table_full, recovering, err_fast;
  logic fwd_valid, alloc_en, blk_full, blk_recovery;
  req_pkt_t core_req_pkt, fwd_pkt, alloc_pkt;

  request_monitor dut (.*);

  int checks = 0, failures = 0, accepted = 0, offered = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic acc, open, pending;
    rst = 1'b1;
    core_req_valid = 1'b0; core_req_pkt = '0;
    l2c_ready = 1'b0; table_full = 1'b0; recovering = 1'b0; err_fast = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    pending = 1'b0;
    for (int n = 0; n < 5000; n++) begin
      if (!pending) begin
        // previous offer done: maybe make a new one
        core_req_valid = $urandom_range(3) != 0;
        core_req_pkt   = req_pkt_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
        if (core_req_valid) offered++;
      end
      l2c_ready  = $urandom_range(4) != 0;
      table_full = $urandom_range(5) == 0;
      recovering = $urandom_range(7) == 0;
      err_fast   = $urandom_range(11) == 0;
      #1;
      open = !table_full && !recovering && !err_fast;
      acc  = core_req_valid && l2c_ready && open;
      check(core_req_ready == (l2c_ready && open), "ready");
      check(alloc_en == acc, "record on accept");
      check(fwd_valid == (core_req_valid && open), "forward");
      check(fwd_pkt == core_req_pkt && alloc_pkt == core_req_pkt, "packet copied");
      check(blk_full == (core_req_valid && table_full && !recovering), "blk_full");
      check(blk_recovery == (core_req_valid && (recovering || err_fast)), "blk_recovery");
      if (acc) accepted++;
      pending = core_req_valid && !acc;
      @(posedge clk);
      #1;
    end
    // drain the last offer
    l2c_ready = 1'b1; table_full = 1'b0; recovering = 1'b0; err_fast = 1'b0;
    #1;
    if (pending) begin
      check(core_req_ready, "drain");
      accepted++;
    end
    @(posedge clk);
    check(accepted == offered, $sformatf("accepted %0d of %0d offers", accepted, offered));
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
