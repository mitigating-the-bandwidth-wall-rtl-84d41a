// mf_systolic_array: W x W output-stationary systolic array with input skew and
// result drain.
//
// Each cycle the feeder presents one column of the A tile (a_col[i] = A[i][k],
// one element per array row) and the matching column of the row-striped B tile
// (b_col[j] = B[j][k], one element per array column), together with a valid bit
// and a last bit marking the final k of an output tile. Row i of A is delayed
// by i cycles and column j of B by j cycles (the skew triangles), so that
// A[i][k] and B[j][k] meet in PE(i,j), which accumulates
//   C[i][j] = sum_k A[i][k] * B[j][k].
// A moves right and B moves down one PE per cycle; the array itself never
// stalls, gaps in the input stream are simply beats with valid low.
//
// A last beat fed in cycle t has reached every PE by cycle t + 2W: a delay line
// of 2W stages then starts the drain. For W cycles the result registers of each
// column shift down one row and the bottom row is presented on out_data, rows
// W-1 first, down to row 0 (out_row gives the row index). The PEs meanwhile
// accumulate the next output tile. Consecutive last beats must therefore be at
// least 3W cycles apart, which holds for any page-sized tile (L >= 64); an
// assertion checks it.
//
// The 2(W-1) fill/drain skew follows the paper's overlap bound; the drain
// through per-column shift chains and the side-band timing are this design's.
module mf_systolic_array #(
  parameter int unsigned W      = 16,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32,
  parameter bit          FLOAT  = 1'b0   // floating-point PEs (FP16 / FP32)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         in_last,
  input  logic [W-1:0][DATA_W-1:0]     a_col,
  input  logic [W-1:0][DATA_W-1:0]     b_col,
  output logic                         out_valid,
  output logic [$clog2(W)-1:0]         out_row,
  output logic [W-1:0][ACC_W-1:0]      out_data,
  output logic                         busy       // data or a drain in flight
);

  // ---------------------------------------------------------------- skew
  // Row (column) i passes through i registers; row 0 enters undelayed.
  logic [W-1:0][DATA_W-1:0] a_edge, b_edge;
  logic [W-1:0]             v_edge, l_edge;

  for (genvar i = 0; i < W; i++) begin : g_skew
    if (i == 0) begin : g_nodly
      assign a_edge[i] = a_col[i];
      assign b_edge[i] = b_col[i];
      assign v_edge[i] = in_valid;
      assign l_edge[i] = in_last;
    end else begin : g_dly
      logic [i-1:0][DATA_W-1:0] a_sr, b_sr;
      logic [i-1:0]             v_sr, l_sr;
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          a_sr <= '0;
          b_sr <= '0;
          v_sr <= '0;
          l_sr <= '0;
        end else begin
          a_sr[0] <= a_col[i];
          b_sr[0] <= b_col[i];
          v_sr[0] <= in_valid;
          l_sr[0] <= in_last;
          for (int d = 1; d < i; d++) begin
            a_sr[d] <= a_sr[d-1];
            b_sr[d] <= b_sr[d-1];
            v_sr[d] <= v_sr[d-1];
            l_sr[d] <= l_sr[d-1];
          end
        end
      end
      assign a_edge[i] = a_sr[i-1];
      assign b_edge[i] = b_sr[i-1];
      assign v_edge[i] = v_sr[i-1];
      assign l_edge[i] = l_sr[i-1];
    end
  end

  // ---------------------------------------------------------------- PE grid
  // Horizontal nets: index [row][col], col W is the right edge.
  logic [DATA_W-1:0] a_h [W][W+1];
  logic              v_h [W][W+1];
  logic              l_h [W][W+1];
  // Vertical nets: index [row][col], row W is the bottom edge.
  logic [DATA_W-1:0] b_v [W+1][W];
  logic [ACC_W-1:0]  s_v [W+1][W];
  logic              shift;

  for (genvar i = 0; i < W; i++) begin : g_row
    assign a_h[i][0] = a_edge[i];
    assign v_h[i][0] = v_edge[i];
    assign l_h[i][0] = l_edge[i];
  end
  for (genvar j = 0; j < W; j++) begin : g_col
    assign b_v[0][j] = b_edge[j];
    assign s_v[0][j] = '0;
  end

  for (genvar i = 0; i < W; i++) begin : g_r
    for (genvar j = 0; j < W; j++) begin : g_c
      mf_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W), .FLOAT(FLOAT)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .a_in    (a_h[i][j]),
        .v_in    (v_h[i][j]),
        .l_in    (l_h[i][j]),
        .b_in    (b_v[i][j]),
        .a_out   (a_h[i][j+1]),
        .v_out   (v_h[i][j+1]),
        .l_out   (l_h[i][j+1]),
        .b_out   (b_v[i+1][j]),
        .shift   (shift),
        .sum_in  (s_v[i][j]),
        .sum_out (s_v[i+1][j])
      );
    end
  end

  // ---------------------------------------------------------------- drain
  localparam int unsigned DLY = 2 * W;
  logic [DLY-1:0]       last_dly;
  logic                 start;
  logic [$clog2(W)-1:0] dcnt;
  logic [DLY-1:0]       vld_dly;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_dly <= '0;
      vld_dly  <= '0;
    end else begin
      last_dly <= {last_dly[DLY-2:0], in_valid & in_last};
      vld_dly  <= {vld_dly[DLY-2:0], in_valid};
    end
  end
  assign start = last_dly[DLY-1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dcnt <= '0;
    end else if (start) begin
      dcnt <= $clog2(W)'(W - 1);
    end else if (dcnt != '0) begin
      dcnt <= dcnt - 1'b1;
    end
  end

  assign shift     = start | (dcnt != '0);
  assign out_valid = shift;
  assign out_row   = start ? $clog2(W)'(W - 1) : dcnt - 1'b1;
  for (genvar j = 0; j < W; j++) begin : g_out
    assign out_data[j] = s_v[W][j];
  end
  assign busy = in_valid | (|vld_dly) | shift;

  // A new tile's results must not reach the result registers while a drain
  // is still shifting them.
  a_drain_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> dcnt == '0);

endmodule
