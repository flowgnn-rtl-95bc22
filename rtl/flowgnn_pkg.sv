// flowgnn_pkg: constants, data types and fixed-point helpers shared by the
// FlowGNN dataflow accelerator.
//
// Defaults describe the main configuration: two Node Transformation (NT)
// units, four Message Passing (MP) units, a GIN model with five layers and
// node embedding dimension 100. The parallel factors P_apply = P_scatter = 2
// follow the "FlowGNN-2-2" point of the ablation study. Number format,
// buffer capacities and the edge attribute width are this design's own
// choices: values are 16-bit signed fixed point with 8 fractional bits,
// messages are 24-bit wrap-around sums (so the order in which messages
// arrive never changes the result) and MAC accumulators are 40 bits wide.
package flowgnn_pkg;

  // ---- architecture (paper) -------------------------------------------
  parameter int CFG_P_NODE    = 2;    // NT units
  parameter int CFG_P_EDGE    = 4;    // MP units / message buffer banks
  parameter int CFG_P_APPLY   = 2;    // embedding elements per cycle per NT unit
  parameter int CFG_P_SCATTER = 2;    // embedding elements per cycle per MP unit
  parameter int CFG_DIM       = 100;  // node embedding dimension (GIN)
  parameter int CFG_LAYERS    = 5;    // GIN layers

  // ---- capacities and number format (own choice) --------------------
  parameter int CFG_MAX_NODES = 512;
  parameter int CFG_MAX_EDGES = 8192;
  parameter int CFG_EATTR_W   = 4;    // edge attribute = category index
  parameter int DATA_W    = 16;   // embeddings, weights
  parameter int FRAC_W    = 8;
  parameter int MSG_W     = 24;   // aggregated messages
  parameter int ACC_W     = 40;   // MAC accumulators
  parameter int CFG_QUEUE_DEPTH = 16; // node queue entries

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [MSG_W-1:0]  msg_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // NT operating mode for one pass over the nodes of a graph
  typedef enum logic [1:0] {
    NT_IDENTITY = 2'd0,  // scatter the input embeddings unchanged (pass 0)
    NT_LAYER    = 2'd1,  // GIN layer, followed by scatter
    NT_LAST     = 2'd2   // last GIN layer, results go to pooling only
  } nt_mode_e;

  // parameter load port targets
  typedef enum logic [2:0] {
    LD_WEIGHT = 3'd0,  // NT weight W[layer][out][in]
    LD_BIAS   = 3'd1,  // NT bias b[layer][out]
    LD_EPS    = 3'd2,  // GIN epsilon[layer]
    LD_EDGE   = 3'd3,  // edge embedding E[layer][attr][elem]
    LD_HEAD_W = 3'd4,  // output head weight [elem]
    LD_HEAD_B = 3'd5   // output head bias
  } load_sel_e;

  // one parameter word written by the host: sel picks the table, layer/row/
  // col address the element inside it (unused fields are ignored)
  typedef struct packed {
    load_sel_e   sel;
    logic [3:0]  layer;
    logic [15:0] row;
    logic [15:0] col;
    data_t       data;
  } load_t;

  // saturate a wide signed value to the embedding format
  function automatic data_t sat_data(input logic signed [63:0] v);
    localparam logic signed [63:0] MAXV = (64'sd1 <<< (DATA_W-1)) - 64'sd1;
    localparam logic signed [63:0] MINV = -(64'sd1 <<< (DATA_W-1));
    if (v > MAXV)      return data_t'(MAXV);
    else if (v < MINV) return data_t'(MINV);
    else               return data_t'(v);
  endfunction

  function automatic data_t relu(input data_t v);
    return v[DATA_W-1] ? '0 : v;
  endfunction

endpackage
