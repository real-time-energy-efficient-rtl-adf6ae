// sync_fifo: single-clock first-in first-out buffer placed between pipeline
// stages so that a producer and a consumer running at different momentary
// rates are decoupled.
//
// How it works: a circular array with read and write pointers and an
// occupancy counter. Push and pop in the same cycle are allowed. The output
// is the head entry (first-word fall-through).
//
// Interface: push/din (ignored when full), pop/dout/empty (pop ignored when
// empty), count. Assertions flag a push into a full or a pop from an empty
// FIFO, which the surrounding flow control must prevent.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 64,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic          do_push, do_pop;

  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp    <= '0;
      wp    <= '0;
      count <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= din;
        wp      <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (do_pop) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!(push && full))  else $error("sync_fifo: push while full");
      assert (!(pop && empty))  else $error("sync_fifo: pop while empty");
    end
  end
endmodule
