// test_shift_chain: the serial test chain used to check the chip for timing
// violations.
//
// N_REGS flip-flops in series. While `shift_en` is high every register takes
// its neighbour's value on each clock, so a bit entering at `sin` reaches the
// output register `sout` after exactly N_REGS clocks: a pattern sent in
// reappears at the output N_REGS cycles later, which a tester or a scope
// compares at the operating clock rate.
//
// The 768 registers, one register per clock and the output register follow
// the published timing test. What the registers hold in normal operation is
// not published; here the chain is a dedicated one. The shift enable and the
// reset to 0 are this design's choices.
module test_shift_chain #(
  parameter int unsigned N_REGS = 768
) (
  input  logic clk,
  input  logic rst_n,
  input  logic shift_en,
  input  logic sin,
  output logic sout
);

  logic [N_REGS-1:0] regs;   // regs[N_REGS-1] is the output register

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        regs <= '0;
    else if (shift_en) regs <= {regs[N_REGS-2:0], sin};
  end

  assign sout = regs[N_REGS-1];

endmodule
