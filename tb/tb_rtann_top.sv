// tb_rtann_top: end-to-end test of dynamic classifier selection with the
// vehicle configuration (18 features, 70 centroids, five models NN1..NN5,
// 4 classes) on synthetic data.
//
// Five builds of the design (tb_rtann_node, RM_ID 0..4) stand for the five
// partial bitstreams: their static parts receive identical bus traffic, and
// "reconfiguring" the partition means decoupling the build in use and
// continuing on the build that holds the selected model. For each test
// instance the processor model streams the vector, runs the competence
// estimator, checks its label against a nearest-centroid search done here,
// reconfigures if the label differs from the loaded model (trying a start
// while decoupled, which must be ignored), and runs the model, checking the
// class against a reference forward pass of that model.
//
// Mechanisms counted, each must occur: model kept, model swapped (partial
// reconfiguration), start blocked by the decoupler, DMA beats stalled while
// the estimator works, wrong-length frame flagged, at least three distinct
// models selected.
module tb_rtann_top;
  import rtann_pkg::*;
  import tb_ref_pkg::*;

  localparam int NF = 18, NC = 70, NM = 5, NCLS = 4;
  localparam int NVEC = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tb_rtann_node #(.RM_ID(0)) n0 (.clk, .rst_n);
  tb_rtann_node #(.RM_ID(1)) n1 (.clk, .rst_n);
  tb_rtann_node #(.RM_ID(2)) n2 (.clk, .rst_n);
  tb_rtann_node #(.RM_ID(3)) n3 (.clk, .rst_n);
  tb_rtann_node #(.RM_ID(4)) n4 (.clk, .rst_n);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cen [][];
  int lab [];
  int sizes [NM][];
  int w [NM][][][];

  // ----- per-node dispatch
  task automatic n_send(int k, int x [], int nb);
    case (k) 0: n0.send(x, nb); 1: n1.send(x, nb); 2: n2.send(x, nb); 3: n3.send(x, nb); default: n4.send(x, nb); endcase
  endtask
  task automatic n_estimate(int k, output int label, output int idx, output longint d);
    case (k) 0: n0.estimate(label, idx, d); 1: n1.estimate(label, idx, d); 2: n2.estimate(label, idx, d);
             3: n3.estimate(label, idx, d); default: n4.estimate(label, idx, d); endcase
  endtask
  task automatic n_classify(int k, int polls, output int cls, output logic [31:0] oh);
    case (k) 0: n0.classify(polls, cls, oh); 1: n1.classify(polls, cls, oh); 2: n2.classify(polls, cls, oh);
             3: n3.classify(polls, cls, oh); default: n4.classify(polls, cls, oh); endcase
  endtask
  task automatic n_status(int k, output logic [31:0] s);
    case (k) 0: n0.read_status(s); 1: n1.read_status(s); 2: n2.read_status(s); 3: n3.read_status(s); default: n4.read_status(s); endcase
  endtask
  task automatic n_decouple(int k, logic v);
    case (k) 0: n0.decouple = v; 1: n1.decouple = v; 2: n2.decouple = v; 3: n3.decouple = v; default: n4.decouple = v; endcase
  endtask
  function automatic int n_stalls(int k);
    case (k) 0: return n0.dma.stalls; 1: return n1.dma.stalls; 2: return n2.dma.stalls; 3: return n3.dma.stalls; default: return n4.dma.stalls; endcase
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
  endtask

  int n_keep = 0, n_swap = 0, n_blocked = 0, n_stall = 0, n_lenerr = 0;
  int sel_count [NM];

  initial begin
    int loaded;
    logic [31:0] s;
    // ----- synthetic trained parameters
    cen = new[NC]; lab = new[NC];
    for (int i = 0; i < NC; i++) begin
      cen[i] = new[NF];
      for (int j = 0; j < NF; j++) cen[i][j] = $urandom_range(2000) - 1000;
      lab[i] = (i * 3) % NM;
    end
    for (int m = 0; m < NM; m++) begin
      int nh;
      nh = num_hidden(DS_VEHICLE, m);
      sizes[m] = new[nh + 2];
      sizes[m][0] = NF;
      for (int l = 0; l < nh; l++) sizes[m][l+1] = hidden_size(DS_VEHICLE, m, l);
      sizes[m][nh+1] = NCLS;
      w[m] = new[nh + 1];
      for (int l = 0; l <= nh; l++) begin
        w[m][l] = new[sizes[m][l+1]];
        for (int j = 0; j < sizes[m][l+1]; j++) begin
          w[m][l][j] = new[sizes[m][l] + 1];
          for (int i = 0; i <= sizes[m][l]; i++) w[m][l][j][i] = $urandom_range(200) - 100;
        end
      end
    end
    for (int m = 0; m < NM; m++) sel_count[m] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ----- configuration: centroids into every static part, weights per model
    fork
      begin n0.load_centroids(cen, lab); n0.load_weights(sizes[0], w[0]); end
      begin n1.load_centroids(cen, lab); n1.load_weights(sizes[1], w[1]); end
      begin n2.load_centroids(cen, lab); n2.load_weights(sizes[2], w[2]); end
      begin n3.load_centroids(cen, lab); n3.load_weights(sizes[3], w[3]); end
      begin n4.load_centroids(cen, lab); n4.load_weights(sizes[4], w[4]); end
    join
    loaded = 0;

    for (int v = 0; v < NVEC; v++) begin
      int x [], label, idx, exp_idx, cls, exp_cls, k;
      longint d, exp_d;
      logic [31:0] oh;
      // instances near centroids chosen so that models repeat and change
      k = (v < 2) ? 0 : (v * 11) % NC;
      x = new[NF];
      for (int j = 0; j < NF; j++) x[j] = cen[k][j] + $urandom_range(40) - 20;
      exp_idx = nearest(x, cen, exp_d);

      if (v == 4) begin
        // a short frame must be flagged and not accepted as a vector
        n_send(loaded, x, NF - 3);
        n_status(loaded, s);
        check("length error flag", s[5], 1);
        check("vector not valid", s[4], 0);
        if (s[5]) n_lenerr++;
      end
      for (int m = 0; m < NM; m++) n_send(m, x, NF);   // the static buffer of every build
      n_status(loaded, s);
      check("vector valid", s[4], 1);

      if (v == 6) begin
        // stream the next vector while the estimator works: beats must stall
        int stalls0;
        int x2 [];
        stalls0 = n_stalls(loaded);
        x2 = new[NF];
        for (int j = 0; j < NF; j++) x2[j] = 0;
        fork
          n_estimate(loaded, label, idx, d);
          begin repeat (4) @(posedge clk); n_send(loaded, x2, NF); end
        join
        if (n_stalls(loaded) > stalls0) n_stall++;
        // estimator result must be the one of x, computed stalls0 the new frame landed
        n_send(loaded, x, NF);
      end else begin
        n_estimate(loaded, label, idx, d);
      end
      check("nearest centroid", idx, exp_idx);
      check("squared distance", d, exp_d);
      check("selected model", label, lab[exp_idx]);
      if (label < 0 || label >= NM) label = 0;
      sel_count[label]++;

      if (label != loaded) begin
        // partial reconfiguration of the partition, bracketed by decoupling
        n_decouple(loaded, 1);
        n_status(loaded, s);
        check("decouple status", s[6], 1);
        n_classify(loaded, 30, cls, oh);
        check("start ignored while decoupled", cls, -1);
        if (cls == -1) n_blocked++;
        n_decouple(loaded, 0);
        n_decouple(label, 1);     // new module arrives decoupled ...
        n_decouple(label, 0);     // ... and is released after loading
        loaded = label;
        n_swap++;
      end else begin
        n_keep++;
      end

      exp_cls = forward(x, sizes[loaded], w[loaded]);
      n_classify(loaded, 1000, cls, oh);
      check("class", cls, exp_cls);
      check("one-hot label", oh, 1 << exp_cls);
    end

    // ----- mechanisms
    begin
      int distinct;
      distinct = 0;
      for (int m = 0; m < NM; m++) if (sel_count[m] > 0) distinct++;
      $display("mechanisms: kept %0d swapped %0d blocked %0d stalled %0d length-errors %0d distinct models %0d",
               n_keep, n_swap, n_blocked, n_stall, n_lenerr, distinct);
      check("model kept at least once", n_keep > 0, 1);
      check("model swapped at least once", n_swap > 0, 1);
      check("decoupler blocked a start", n_blocked > 0, 1);
      check("stream stalled by estimator", n_stall > 0, 1);
      check("length error seen", n_lenerr > 0, 1);
      check("three or more models selected", distinct >= 3, 1);
      check("bus errors", n0.ps.errors + n1.ps.errors + n2.ps.errors + n3.ps.errors + n4.ps.errors, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
