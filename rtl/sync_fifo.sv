// sync_fifo: single-clock first-word-fall-through FIFO (helper).
// push_i writes din_i unless full; dout_o/valid_o show the oldest word and
// pop_i removes it. count_o is the fill level. Storage is a plain array, so
// synthesis maps it to block RAM.
module sync_fifo #(
  parameter int unsigned WIDTH = 513,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     push_i,
  input  logic [WIDTH-1:0]         din_i,
  input  logic                     pop_i,
  output logic [WIDTH-1:0]         dout_o,
  output logic                     valid_o,
  output logic                     full_o,
  output logic [$clog2(DEPTH):0]   count_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign full_o  = (count_o == (AW+1)'(DEPTH));
  assign valid_o = (count_o != '0);
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && valid_o;
  assign dout_o  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din_i;
    if (rst) begin
      wp <= '0; rp <= '0; count_o <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + AW'(1);
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + AW'(1);
      count_o <= count_o + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) !(push_i && full_o))
    else $error("sync_fifo: push while full");
endmodule
