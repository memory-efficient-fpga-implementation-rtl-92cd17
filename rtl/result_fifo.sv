// result_fifo: block-RAM first-in first-out buffer for the annealing results.
//
// Each entry is one spin vector (WIDTH = number of spin-gates, 800 bits).
// The processor writes a vector on every cycle at the maximum pseudo-inverse
// temperature; the host drains the FIFO through the read port. Published
// sizes: 800 bits wide, 16,384 deep (13.1 Mbit, 80 % of the Kintex-7 block
// RAM), enough for the 150 x 100 = 15,000 vectors of one trial.
//
// Interface: wr/din push, rd pops. The read is registered, like a block RAM:
// dout and dout_valid appear on the clock after rd. full and empty are
// registered-state flags; count is the fill level. A write while full or a
// read while empty is dropped, and an assertion reports it.
// Pointer and flag logic is this design's own choice.
module result_fifo #(
  parameter int unsigned WIDTH = 800,
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr,
  input  logic [WIDTH-1:0] din,
  input  logic             rd,
  output logic [WIDTH-1:0] dout,
  output logic             dout_valid,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  logic do_wr, do_rd;
  assign do_wr = wr && !full;
  assign do_rd = rd && !empty;
  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  // Memory array: no reset, as block RAM.
  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= din;
    if (do_rd) dout <= mem[rp];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp         <= '0;
      rp         <= '0;
      count      <= '0;
      dout_valid <= 1'b0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      count      <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
      dout_valid <= do_rd;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr && full))
    else $error("result_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd && empty))
    else $error("result_fifo: read while empty");

endmodule
