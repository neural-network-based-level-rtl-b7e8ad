// nn_fifo: synchronous first-in-first-out buffer for the NN module inputs.
//
// Holds the filtered samples of all trigger paths while the network computes
// on them; the head is read out (pop) when the network output for it is ready,
// so the legacy paths leave the NN module aligned with the network output.
// The published design names this buffer but not its depth; DEPTH = 4 is a
// choice of this design (one entry suffices when the network finishes within
// a sample period, the others absorb back-to-back samples).
//
// Interface: dout shows the head combinationally whenever empty is low. push
// and pop may coincide. A push while full (and not popping) is dropped and
// raises overflow for one clock. A pop while empty is ignored.
module nn_fifo #(
  parameter int WIDTH = 832,
  parameter int DEPTH = 4
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        push,
  input  logic [WIDTH-1:0]            din,
  input  logic                        pop,
  output logic [WIDTH-1:0]            dout,
  output logic                        empty,
  output logic                        full,
  output logic [$clog2(DEPTH+1)-1:0]  count,
  output logic                        overflow
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rp, wp;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign dout    = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rp       <= '0;
      wp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= push && !do_push;
      if (do_push) wp <= inc(wp);
      if (do_pop)  rp <= inc(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (rst) count <= CW'(DEPTH));

endmodule
