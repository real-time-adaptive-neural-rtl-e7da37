// rtann_pkg: types and constants shared by the adaptive neural network.
//
// Number format. All features, centroid coordinates, weights, biases and
// neuron outputs are signed fixed-point words of DATA_W bits with FRAC_W
// fractional bits (Q8.8 by default). The number format is this design's
// choice; the source description does not give one. Products are kept at
// full width (2*DATA_W) and accumulated in ACC_W bits.
//
// Ensemble table. The model sizes (hidden-layer neuron counts per model and
// dataset) follow the published table of the five ensemble members. The
// feature and class counts of the three datasets are those of the public
// datasets (Statlog Vehicle Silhouettes: 18 features, 4 classes; Pima
// Diabetes: 8 features, 2 classes; German Credit, numeric form: 24 features,
// 2 classes); the description itself does not list them. The vehicle
// configuration is the default because the resource figures are given for it.
package rtann_pkg;

  // ---------------------------------------------------------------- numbers
  parameter int unsigned DATA_W = 16;   // word width of every value
  parameter int unsigned FRAC_W = 8;    // fractional bits
  parameter int unsigned ACC_W  = 40;   // neuron accumulator width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // ------------------------------------------------------------- ensemble
  parameter int unsigned NUM_MODELS = 5;     // NN1 .. NN5
  parameter int unsigned MAX_HIDDEN = 3;     // deepest model has 3 hidden layers

  typedef enum logic [1:0] {
    DS_VEHICLE = 2'd0,
    DS_DIABETES = 2'd1,
    DS_GERMAN  = 2'd2
  } dataset_e;

  parameter int unsigned LABEL_W = 3;     // model label width (5 models)

  // Number of hidden layers of model m (0-based) for a dataset.
  function automatic int unsigned num_hidden(dataset_e ds, int unsigned m);
    case (ds)
      DS_VEHICLE:  return 3;
      DS_DIABETES: return (m == 0 || m == 1) ? 2 : 3;
      default:     return (m == 0 || m == 2) ? 2 : 3;
    endcase
  endfunction

  // Neuron count of hidden layer l of model m for a dataset (0 if absent).
  function automatic int unsigned hidden_size(dataset_e ds, int unsigned m, int unsigned l);
    int unsigned t [3][NUM_MODELS][MAX_HIDDEN];
    t = '{
      '{ '{18,18,10}, '{30,30,20}, '{27,27,22}, '{20,20,15}, '{20,20,16} },  // vehicle
      '{ '{ 5, 3, 0}, '{ 3, 3, 0}, '{12,12, 8}, '{ 8, 8, 4}, '{ 6, 4, 4} },  // diabetes
      '{ '{ 7, 7, 0}, '{ 7, 7, 4}, '{ 4, 4, 0}, '{ 8, 8, 4}, '{ 6, 6, 4} }   // german credit
    };
    return t[int'(ds)][m][l];
  endfunction

  function automatic int unsigned num_features(dataset_e ds);
    case (ds)
      DS_VEHICLE:  return 18;
      DS_DIABETES: return 8;
      default:     return 24;
    endcase
  endfunction

  function automatic int unsigned num_classes(dataset_e ds);
    return (ds == DS_VEHICLE) ? 4 : 2;
  endfunction

  function automatic int unsigned num_centroids(dataset_e ds);
    return (ds == DS_DIABETES) ? 50 : 70;
  endfunction

  // Saturate a wide signed value to a data word.
  function automatic data_t sat_data(input acc_t v);
    acc_t maxv, minv;
    maxv = acc_t'((1 <<< (DATA_W-1)) - 1);
    minv = -acc_t'(1 <<< (DATA_W-1));
    if (v > maxv)      return data_t'(maxv);
    else if (v < minv) return data_t'(minv);
    else               return data_t'(v);
  endfunction

endpackage
