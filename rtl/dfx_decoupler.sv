// dfx_decoupler: isolation between the static logic and the reconfigurable
// partition (RP) that holds the current neural-network model.
//
// While a new model is loaded into the RP by partial reconfiguration, the
// RP's outputs toggle arbitrarily. With decouple high this block forces
// every control signal that crosses the boundary to 0, in both directions:
// the model sees no start and no weight write, and the static side sees no
// busy, done or result. Data buses pass unchanged because they are only
// used together with a gated control signal. decouple is driven by a
// general-purpose output of the processor, as in the published system;
// the exact set of gated signals is this design's choice.
//
// Timing: purely combinational; decouple_status equals decouple.
module dfx_decoupler #(
  parameter int unsigned CLS_W     = 2,
  parameter int unsigned N_CLASSES = 4
) (
  input  logic                 decouple,
  output logic                 decouple_status,
  // static side -> RP
  input  logic                 s_start,
  input  logic                 s_wr_en,
  output logic                 rp_start,
  output logic                 rp_wr_en,
  // RP -> static side
  input  logic                 rp_busy,
  input  logic                 rp_done,
  input  logic [CLS_W-1:0]     rp_class_idx,
  input  logic [N_CLASSES-1:0] rp_one_hot,
  output logic                 s_busy,
  output logic                 s_done,
  output logic [CLS_W-1:0]     s_class_idx,
  output logic [N_CLASSES-1:0] s_one_hot
);

  assign decouple_status = decouple;

  assign rp_start    = s_start  & ~decouple;
  assign rp_wr_en    = s_wr_en  & ~decouple;
  assign s_busy      = rp_busy  & ~decouple;
  assign s_done      = rp_done  & ~decouple;
  assign s_class_idx = decouple ? '0 : rp_class_idx;
  assign s_one_hot   = decouple ? '0 : rp_one_hot;

endmodule
