// tmr_reg: datapath register protected by simple triple modular redundancy.
//
// Three flip-flop banks, all clocked by the same clock, load the same D value
// computed once by the upstream combinational logic; a bitwise majority voter
// forms the output. A single-event upset in one bank is masked at the output
// and is overwritten at the next clock edge, which is enough for the pipeline
// registers because new data arrive every bunch crossing (25 ns); there is no
// feedback autocorrection here. This follows the datapath TMR scheme of the
// design (one comb-logic copy, three registers, one voter).
//
// Interface: d is sampled on every rising clk edge when en is high; q is the
// voted value, valid one cycle after d. rst_n is a synchronous active-low reset
// to zero (reset behaviour is this design's choice).
module tmr_reg #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] r_a, r_b, r_c;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      r_a <= '0;
      r_b <= '0;
      r_c <= '0;
    end else if (en) begin
      r_a <= d;
      r_b <= d;
      r_c <= d;
    end
  end

  tmr_voter #(.W(W)) u_vote (.a(r_a), .b(r_b), .c(r_c), .y(q));
endmodule
