// fp_systolic_array: ROWS x COLS weight-stationary systolic array of FPMACs.
//
// Row i carries input channel i, column j produces output channel j. An input
// vector presented with in_valid enters through a triangular skew (row i is
// delayed i cycles), activations travel right and partial sums travel down,
// and a triangular deskew (column j delayed COLS-1-j cycles) realigns the
// column sums. The result vector
//     out[j] = sum_i w[i][j] * in[i]
// appears with out_valid exactly LAT = ROWS + COLS - 1 cycles after its input;
// one vector can enter every cycle. Weights are loaded all at once from
// w_in with w_load (no vector may be in flight while they change).
// The 32x32 size follows the paper; the weight-stationary dataflow and the
// skew/deskew arrangement are this design's choices.
module fp_systolic_array
  import nb_pkg::*;
#(
  parameter int ROWS  = SA_DIM,
  parameter int COLS  = SA_DIM,
  parameter int ACC_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    w_load,
  input  act_t                    w_in [ROWS][COLS],
  input  logic                    in_valid,
  input  act_t                    in_vec [ROWS],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_vec [COLS]
);
  localparam int LAT = ROWS + COLS - 1;

  // Input skew: row i passes through i registers.
  act_t skew [ROWS][ROWS];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++)
        for (int d = 0; d < ROWS; d++) skew[i][d] <= '0;
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        skew[i][0] <= in_valid ? in_vec[i] : act_t'(0);
        for (int d = 1; d < ROWS; d++) skew[i][d] <= skew[i][d-1];
      end
    end

  act_t                    a_h [ROWS][COLS+1];
  logic signed [ACC_W-1:0] p_v [ROWS+1][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    if (i == 0) begin : g_r0
      assign a_h[0][0] = in_valid ? in_vec[0] : act_t'(0);
    end else begin : g_ri
      assign a_h[i][0] = skew[i][i-1];
    end
    for (genvar j = 0; j < COLS; j++) begin : g_col
      fp_pe #(.ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .w_load(w_load), .w_in(w_in[i][j]),
        .a_in(a_h[i][j]), .p_in(p_v[i][j]),
        .a_out(a_h[i][j+1]), .p_out(p_v[i+1][j])
      );
    end
  end
  for (genvar j = 0; j < COLS; j++) begin : g_top
    assign p_v[0][j] = '0;
  end

  // Output deskew: column j passes through COLS-1-j registers.
  logic signed [ACC_W-1:0] dsk [COLS][COLS];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++)
        for (int d = 0; d < COLS; d++) dsk[j][d] <= '0;
    end else begin
      for (int j = 0; j < COLS; j++) begin
        dsk[j][0] <= p_v[ROWS][j];
        for (int d = 1; d < COLS; d++) dsk[j][d] <= dsk[j][d-1];
      end
    end
  always_comb
    for (int j = 0; j < COLS; j++)
      out_vec[j] = (j == COLS - 1) ? p_v[ROWS][j] : dsk[j][COLS-2-j];

  logic [LAT-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  assign out_valid = vpipe[LAT-1];
endmodule
