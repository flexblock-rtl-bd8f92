// fb_sram: on-chip buffer (input, weight or output buffer of a core).
//
// Behaviour of a synchronous SRAM with one write port and one read port:
// a write takes effect at the clock edge; a read returns data one cycle after
// re. The paper sizes the accelerator's buffers (512 KB input, 512 KB weight,
// 256 KB output, shared by 64 cores, so 8 KB / 8 KB / 4 KB per core) but does not
// design the macros; this array stands in for them. Reading and writing the
// same address in one cycle returns the old data.
module fb_sram #(
  parameter int unsigned WIDTH = 912,
  parameter int unsigned DEPTH = 75,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WIDTH-1:0]  rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < DEPTH) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule
