// delay_chain: a fixed delay of TOTAL_PS built from delay_cell instances.
//
// The total is split into cells of at most MAX_CELL_PS each, so that pulses
// as narrow as MAX_CELL_PS pass the chain (each delay_cell is inertial).
// TOTAL_PS = 0 gives a plain wire.  Used for the fixed offsets of the delay
// line stages (coarse comparator path, fine stage offset, bypass paths).
`timescale 1ps/1ps
module delay_chain #(
  parameter int unsigned TOTAL_PS    = 100,
  parameter int unsigned MAX_CELL_PS = 50
) (
  input  logic a,
  output logic y
);
  localparam int unsigned N    = (TOTAL_PS + MAX_CELL_PS - 1) / MAX_CELL_PS;
  localparam int unsigned STEP = (N == 0) ? 0 : TOTAL_PS / N;
  localparam int unsigned LAST = TOTAL_PS - (N == 0 ? 0 : (N - 1) * STEP);

  generate
    if (N == 0) begin : g_wire
      assign y = a;
    end else begin : g_cells
      logic [N:0] node;
      assign node[0] = a;
      for (genvar i = 0; i < N; i++) begin : g_c
        delay_cell #(.DELAY_PS((i == N - 1) ? LAST : STEP)) u_c (.a(node[i]), .y(node[i+1]));
      end
      assign y = node[N];
    end
  endgenerate
endmodule
