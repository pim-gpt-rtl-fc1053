// tb_sync_fifo: random pushes and pops against a queue model, checking order,
// full/empty flags and the occupancy count.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [7:0] in_data = 0, out_data;
  logic [3:0] count;
  logic [7:0] q [$];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  sync_fifo #(.T(logic [7:0]), .DEPTH(8)) dut (.*);

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      in_valid  = ($urandom % 4) < ((i / 500) % 2 ? 3 : 1);
      out_ready = ($urandom % 4) < ((i / 500) % 2 ? 1 : 3);
      in_data   = 8'($urandom);
      #0.5;
      chk(count == 4'(q.size()), "count");
      chk(in_ready == (q.size() < 8), "in_ready");
      chk(out_valid == (q.size() > 0), "out_valid");
      if (out_valid) chk(out_data == q[0], "data order");
      begin
        logic do_pop, do_push;
        do_pop  = out_valid && out_ready;
        do_push = in_valid && in_ready;
        @(posedge clk);
        if (do_pop) void'(q.pop_front());
        if (do_push) q.push_back(in_data);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
