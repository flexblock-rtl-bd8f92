// fb_fifo: synchronous FIFO with valid/ready on both sides.
//
// Sits between the masking unit and the weight update unit and absorbs the
// difference in their rates (the weight update unit waits for the weights it
// subtracts from). Data are written when in_valid && in_ready and leave when
// out_valid && out_ready; `count` is the fill level. Depth and width are
// parameters; the paper shows the FIFO without giving its size.
module fb_fifo #(
  parameter int unsigned WIDTH = 594,
  parameter int unsigned DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [WIDTH-1:0]  in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WIDTH-1:0]  out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wp, rp;
  logic             push, pop;

  assign in_ready  = 32'(count) < DEPTH;
  assign out_valid = count != 0;
  assign out_data  = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop) rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> count != 0);
endmodule
