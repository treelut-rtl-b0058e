// treelut_pipe_reg -- a run of STAGES register stages on a WIDTH-bit bus.
//
// TreeLUT places its pipeline registers only at layer boundaries: after the key
// generator (p0 stages), after the decision trees (p1 stages) and at a few
// levels inside each adder tree (p2 stages in all). This module is one such
// boundary. With STAGES = 0 it is a plain wire, so the pipelining parameters
// can be changed without touching the surrounding netlist.
//
// Interface: d in, q out, both WIDTH bits; q is d delayed by STAGES clocks.
// A new word may enter on every clock (initiation interval 1); there is no
// stall. If RESETTABLE is set the stages clear to zero on an active-low
// asynchronous reset; that is used for the valid flag that travels along the
// datapath. Data stages are not reset. Stall-free stages, the valid flag and
// the reset are this design's choices; the paper only fixes where the stages go.
module treelut_pipe_reg #(
  parameter int unsigned WIDTH      = 8,
  parameter int unsigned STAGES     = 1,
  parameter bit          RESETTABLE = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  if (STAGES == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [STAGES-1:0][WIDTH-1:0] r;
    if (RESETTABLE) begin : g_rst
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          r <= '0;
        end else begin
          r[0] <= d;
          for (int s = 1; s < STAGES; s++) r[s] <= r[s-1];
        end
      end
    end else begin : g_norst
      always_ff @(posedge clk) begin
        r[0] <= d;
        for (int s = 1; s < STAGES; s++) r[s] <= r[s-1];
      end
    end
    assign q = r[STAGES-1];
  end

endmodule
