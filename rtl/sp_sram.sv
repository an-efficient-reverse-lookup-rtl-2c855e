// sp_sram: single-port synchronous SRAM with a per-lane write mask.
//
// This is the array primitive behind the cache tag and data arrays and the
// RLUT set-associative memory. One access per clock: when en is high the
// word at addr is read (read-first: rdata shows the contents from before a
// write in the same cycle) and, when we is high, the lanes selected by wmask
// are written. rdata is registered, valid the cycle after the access, and
// holds its value while en is low. The contents are not reset; the users
// keep their valid bits in flip-flops.
//
// Interface: clk, en, we, addr, wdata, wmask (one bit per LANE_W-bit lane),
// rdata. Timing: 1-cycle read latency, write takes effect at the edge.
module sp_sram #(
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned LANE_W = 8,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned LANES = WIDTH / LANE_W
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [LANES-1:0] wmask,
  output logic [WIDTH-1:0] rdata
);

  logic [LANES-1:0][LANE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      rdata <= mem[addr];
      if (we) begin
        for (int l = 0; l < LANES; l++) begin
          if (wmask[l]) mem[addr][l] <= wdata[l*LANE_W +: LANE_W];
        end
      end
    end
  end

endmodule
