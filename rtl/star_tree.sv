// star_tree: the star-like broadcast connection from the IQE driver to the
// control electronics.
//
// Every word put on din reaches all N_OUT outputs, and reaches them in the
// same clock cycle, so a trigger starts every device together.  The
// connection is a tree of registered fan-out nodes: the root register stands
// for the driver's output stage, and each lower level for a master board that
// re-broadcasts to up to FANOUT children (one chassis driving the next ones).
// LEVELS = ceil(log_FANOUT(N_OUT)) levels sit below the root, so the latency is
// LEVELS+1 cycles for every output.  No handshake: the link never stalls.
// Broadcasting, equal arrival time and the fan-out of 10 follow the paper; the
// register-per-level structure is this design's own.
module star_tree #(
  parameter int unsigned W      = 32,
  parameter int unsigned N_OUT  = 10,
  parameter int unsigned FANOUT = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [W-1:0]              din,
  output logic [N_OUT-1:0][W-1:0]   dout
);
  function automatic int unsigned levels_for(int unsigned n, int unsigned f);
    int unsigned l = 1;
    longint unsigned cap = longint'(f);
    while (cap < longint'(n)) begin
      cap = cap * longint'(f);
      l++;
    end
    return l;
  endfunction

  localparam int unsigned LEVELS = levels_for(N_OUT, FANOUT);

  // node j of level l feeds nodes j*FANOUT .. j*FANOUT+FANOUT-1 of level l+1;
  // only the first N_OUT nodes of each level are kept
  logic [W-1:0] root;
  logic [W-1:0] node [LEVELS][N_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) root <= '0;
    else        root <= din;
  end

  for (genvar l = 0; l < LEVELS; l++) begin : g_lvl
    for (genvar j = 0; j < N_OUT; j++) begin : g_node
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)      node[l][j] <= '0;
        else if (l == 0) node[l][j] <= root;
        else             node[l][j] <= node[(l == 0) ? 0 : l-1][j / FANOUT];
      end
    end
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_out
    assign dout[j] = node[LEVELS-1][j];
  end
endmodule
