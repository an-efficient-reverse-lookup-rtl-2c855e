// tb_sync_fifo: random pushes and pops against a reference queue; checks
// ordering, the full and empty flags, push-while-full-with-pop and that a
// pushed entry is visible one cycle later. Depth 4 as in the subsystem.
module tb_sync_fifo;
  localparam int WIDTH = 36, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [WIDTH-1:0] in_data, out_data;

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  logic [WIDTH-1:0] model [$];
  int checks = 0, failures = 0, n_full = 0, n_full_push = 0;

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 2) != 0);
      in_data   = {4'($urandom), $urandom};
      out_ready = ($urandom_range(0, 2) == 0) || (n > 4000);
      #1;
      checks++;
      if (out_valid != (model.size() != 0)) begin failures++; $display("ERROR out_valid"); end
      if (in_ready != (model.size() < DEPTH || out_ready)) begin failures++; $display("ERROR in_ready"); end
      if (out_valid && out_data !== model[0]) begin failures++; $display("ERROR data %h exp %h", out_data, model[0]); end
      if (model.size() == DEPTH) n_full++;
      if (model.size() == DEPTH && in_valid && out_ready) n_full_push++;
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    checks++;
    if (n_full == 0 || n_full_push == 0) begin failures++; $display("ERROR full case not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("ERROR watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
