// tmr_reg: triplicated register with triplicated majority voters.
//
// Three W-bit registers each take their own next value d_i[k]. Every register output goes to
// three bit-wise majority voters, one per lane, so q_o[k] is the vote of all three copies and
// a single upset copy is outvoted and then overwritten on the next clock edge (a lane that
// feeds q_o[k] back into d_i[k] repairs itself). This is the "voters after every register"
// structure the paper applies to the peripherals, control registers and state machines.
// err_o flags any disagreement between the three stored copies (combinational).
// Reset value RstVal on rst_ni low (asynchronous, active low).
// Where all three lanes compute the same next value from voted inputs, a generic synthesis
// run sees three identical flip-flops and merges them; an implementation flow must keep the
// three copies (and their voters) apart, as any triplicated design requires.
module tmr_reg #(
  parameter int unsigned W = 1,
  parameter logic [W-1:0] RstVal = '0
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [W-1:0] d_i [3],
  output logic [W-1:0] q_o [3],
  output logic         err_o
);
  logic [W-1:0] q [3];

  for (genvar k = 0; k < 3; k++) begin : g_copy
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) q[k] <= RstVal;
      else         q[k] <= d_i[k];
    end
    // one voter per lane
    assign q_o[k] = (q[0] & q[1]) | (q[0] & q[2]) | (q[1] & q[2]);
  end

  assign err_o = (q[0] != q[1]) || (q[0] != q[2]);
endmodule
