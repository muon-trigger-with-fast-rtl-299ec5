// layer_select: reduce a filtered window group to one hit per layer.
//
// A single muon crosses each layer once, so at most one hit per layer can
// belong to it. For every layer the hit on the lowest-numbered wire among
// those kept by the filtering mask is taken. The result is accepted
// (ok_o = 1) only when at least three layers hold a hit; otherwise the group
// is treated as noise and dropped by the caller.
//
// Interface: group_i and mask_i (hits kept by the filter; a channel counts
// only if it is also present in group_i.mask) in; quad_o (present bit, wire index and time
// per layer), nlayers_o and ok_o out. Purely combinational: in the TPG it sits
// in front of the input register of the disambiguation network, so it adds no
// clock of latency.
//
// Reducing to a single set of three or four hits and the at-least-three rule
// follow the published design. Picking the lowest wire when the mask keeps
// two hits in one layer is a choice of this implementation.
module layer_select
  import tpg_pkg::*;
(
  input  group_t           group_i,
  input  logic [N_CH-1:0]  mask_i,
  output quad_t            quad_o,
  output logic [2:0]       nlayers_o,
  output logic             ok_o
);

  always_comb begin
    quad_o    = '0;
    nlayers_o = '0;
    for (int l = 0; l < N_LAYERS; l++) begin
      for (int w = N_WIRES - 1; w >= 0; w--) begin
        if (group_i.mask[l * N_WIRES + w] && mask_i[l * N_WIRES + w]) begin
          quad_o.present[l] = 1'b1;
          quad_o.wno[l]    = 2'(w);
          quad_o.t[l]       = group_i.t[l * N_WIRES + w];
        end
      end
      nlayers_o = nlayers_o + 3'(quad_o.present[l]);
    end
    ok_o = (nlayers_o >= 3'd3);
  end

endmodule
