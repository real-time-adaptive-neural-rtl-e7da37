// ce_control_unit: sequencer of the competence estimator.
//
// Only NUM_DM distance modules exist, so the centroids are handled in
// passes: in pass p, distance module k is given centroid p*NUM_DM+k. One
// pass is issued per cycle (the centroid memory and the distance modules are
// pipelined); a module whose centroid index would pass NUM_CENTROIDS stays
// idle in the last pass. Every distance that comes out is written to the
// distances buffer (the write enables are the modules' out_valid, wired at
// the estimator level); when all NUM_CENTROIDS distances are stored the unit
// starts the comparator and waits for its done.
//
// States: IDLE -> ISSUE (read centroids) -> DRAIN (wait for the last
// distances) -> COMPARE (comparator scan) -> IDLE, with a done pulse.
// The pass scheme follows the description of the control unit; the state
// machine itself is this design's choice.
//
// Interface: start/busy/done; rom_rd_en/rom_rd_idx per module; dm_valid and
// dm_idx (the centroid index, aligned with the memory's read data);
// dm_out_valid back from the modules; cmp_start/cmp_done to the comparator.
module ce_control_unit #(
  parameter int unsigned NUM_CENTROIDS = 70,
  parameter int unsigned NUM_DM        = 2,
  localparam int unsigned IDX_W = $clog2(NUM_CENTROIDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic             rom_rd_en    [NUM_DM],
  output logic [IDX_W-1:0] rom_rd_idx   [NUM_DM],
  output logic             dm_valid     [NUM_DM],
  output logic [IDX_W-1:0] dm_idx       [NUM_DM],
  input  logic             dm_out_valid [NUM_DM],
  output logic             cmp_start,
  input  logic             cmp_done
);

  localparam int unsigned NUM_PASSES = (NUM_CENTROIDS + NUM_DM - 1) / NUM_DM;
  localparam int unsigned PASS_W     = $clog2(NUM_PASSES + 1);
  localparam int unsigned CNT_W      = $clog2(NUM_CENTROIDS + 1);

  typedef enum logic [1:0] {IDLE, ISSUE, DRAIN, COMPARE} state_e;
  state_e state;

  logic [PASS_W-1:0] pass;
  logic [CNT_W-1:0]  stored;     // distances written to the buffer so far
  logic [CNT_W-1:0]  n_out;

  // Centroid addresses of the current pass.
  for (genvar k = 0; k < NUM_DM; k++) begin : g_addr
    localparam int unsigned IW = IDX_W + 2;   // room for pass*NUM_DM+k
    logic [IW-1:0] idx;
    assign idx           = IW'(pass) * IW'(NUM_DM) + IW'(k);
    assign rom_rd_idx[k] = idx[IDX_W-1:0];
    assign rom_rd_en[k]  = (state == ISSUE) && (idx < IW'(NUM_CENTROIDS));
  end

  always_comb begin
    n_out = '0;
    for (int k = 0; k < NUM_DM; k++) n_out += CNT_W'(dm_out_valid[k]);
  end

  // The memory read takes one cycle: delay enables and indices to match.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_DM; k++) begin
        dm_valid[k] <= 1'b0;
        dm_idx[k]   <= '0;
      end
    end else begin
      for (int k = 0; k < NUM_DM; k++) begin
        dm_valid[k] <= rom_rd_en[k];
        dm_idx[k]   <= rom_rd_idx[k];
      end
    end
  end

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      pass      <= '0;
      stored    <= '0;
      cmp_start <= 1'b0;
      done      <= 1'b0;
    end else begin
      cmp_start <= 1'b0;
      done      <= 1'b0;
      if (state != IDLE) stored <= stored + n_out;
      unique case (state)
        IDLE: if (start) begin
          state  <= ISSUE;
          pass   <= '0;
          stored <= '0;
        end
        ISSUE: begin
          if (int'(pass) == NUM_PASSES-1) state <= DRAIN;
          else                            pass  <= pass + 1'b1;
        end
        DRAIN: if (stored + n_out == CNT_W'(NUM_CENTROIDS)) begin
          state     <= COMPARE;
          cmp_start <= 1'b1;
        end
        COMPARE: if (cmp_done) begin
          state <= IDLE;
          done  <= 1'b1;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
