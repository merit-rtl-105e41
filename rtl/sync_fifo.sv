// sync_fifo: small synchronous FIFO (helper). Valid/ready on both sides,
// DEPTH a power of two, first-word-fall-through: dout shows the oldest entry
// while out_valid is high. Push and pop may happen in the same cycle.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] din,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] dout
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [AW:0]   cnt;
  logic push, pop;
  assign in_ready  = cnt < (AW+1)'(DEPTH);
  assign out_valid = cnt != 0;
  assign dout      = mem[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
  always_ff @(posedge clk) if (push) mem[wp] <= din;
endmodule
