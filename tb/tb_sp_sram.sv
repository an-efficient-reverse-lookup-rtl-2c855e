// tb_sp_sram: checks the single-port SRAM against a reference array: masked
// lane writes, read-first behaviour, one-cycle read latency and that the
// output holds while the SRAM is not enabled. Uses the cache data-array
// shape (512 x 512 bits, byte lanes).
module tb_sp_sram;
  localparam int DEPTH = 512, WIDTH = 512, LANE_W = 8, LANES = WIDTH / LANE_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic en, we;
  logic [8:0] addr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [LANES-1:0] wmask;

  sp_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH), .LANE_W(LANE_W)) dut (.*);

  logic [WIDTH-1:0] ref_mem [DEPTH];
  bit               known [DEPTH];
  int checks = 0, failures = 0;

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] v;
    for (int i = 0; i < WIDTH / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    logic [WIDTH-1:0] expv, held;
    bit exp_known;
    en = 0; we = 0; addr = 0; wdata = 0; wmask = 0;
    // fill every word so that all reads are defined
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 9'(a); wdata = rnd(); wmask = '1;
      ref_mem[a] = wdata; known[a] = 1;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      en    = ($urandom_range(0, 5) != 0);
      we    = en && $urandom_range(0, 1);
      addr  = 9'($urandom_range(0, DEPTH - 1));
      wdata = rnd();
      for (int l = 0; l < LANES / 32; l++) wmask[l*32 +: 32] = $urandom;
      expv = ref_mem[addr];                       // read-first
      if (we) for (int l = 0; l < LANES; l++) if (wmask[l]) ref_mem[addr][l*LANE_W +: LANE_W] = wdata[l*LANE_W +: LANE_W];
      held = rdata;
      @(posedge clk); #1;
      checks++;
      if (en) begin
        if (rdata !== expv) begin failures++; $display("ERROR read addr %0d", addr); end
      end else if (rdata !== held) begin failures++; $display("ERROR output not held"); end
    end
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
