// mx_systolic_array -- N x N output-stationary array of precision-flexible PEs.
//
// Row i of activation beats enters at the left edge after a skew of i cycles
// and moves one PE to the right per cycle; column j of weight beats enters at
// the top after a skew of j cycles and moves down one PE per cycle, so PE(i,j)
// sees the matching beats of row i and column j in the same cycle, 
// i + j cycles after they were presented. Each PE keeps its own output C(i,j).
// The paper gives the 16x16 size and the A buffer / W buffer / O buffer sides
// of the array; the dataflow (output stationary, skewed edges) is this
// design's choice.
//
// Drain: a one-cycle pulse on drain_start copies every accumulator into the
// PE output registers; for the next N cycles the columns shift down and the
// bottom row is presented on out_row_data as binary32, bottom row first
// (out_row_idx = N-1, N-2, ..., 0) with out_valid high. drain_start must not
// come while beats are still in flight (the tile controller waits 2N cycles).
module mx_systolic_array
  import mixdit_pkg::*;
#(
  parameter int N = SA_DIM
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  pe_beat_t             a_row [N],
  input  pe_beat_t             w_col [N],
  input  logic                 drain_start,
  output logic                 out_valid,
  output logic [$clog2(N)-1:0] out_row_idx,
  output logic [31:0]          out_row_data [N],
  output logic                 draining
);

  pe_beat_t a_skew [N];
  pe_beat_t w_skew [N];
  pe_beat_t a_h [N][N+1];      // a_h[i][j] is the input of PE(i,j)
  pe_beat_t w_v [N+1][N];      // w_v[i][j] is the input of PE(i,j)
  acc_t     o_v [N+1][N];      // o_v[i+1][j] is out_q of PE(i,j)
  acc_t     acc_unused [N][N];
  logic     cap, shift;
  logic [$clog2(N+1)-1:0] dcnt;

  // Input skew: lane k is delayed by k cycles.
  for (genvar k = 0; k < N; k++) begin : g_skew
    if (k == 0) begin : g_direct
      assign a_skew[k] = a_row[k];
      assign w_skew[k] = w_col[k];
    end else begin : g_delay
      pe_beat_t a_d [k];
      pe_beat_t w_d [k];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < k; s++) begin
            a_d[s] <= '0;
            w_d[s] <= '0;
          end
        end else begin
          a_d[0] <= a_row[k];
          w_d[0] <= w_col[k];
          for (int s = 1; s < k; s++) begin
            a_d[s] <= a_d[s-1];
            w_d[s] <= w_d[s-1];
          end
        end
      end
      assign a_skew[k] = a_d[k-1];
      assign w_skew[k] = w_d[k-1];
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_edge
    assign a_h[i][0] = a_skew[i];
    assign w_v[0][i] = w_skew[i];
    assign o_v[0][i] = '0;
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      mx_pe u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clear (clear),
        .a_in  (a_h[i][j]),
        .w_in  (w_v[i][j]),
        .a_out (a_h[i][j+1]),
        .w_out (w_v[i+1][j]),
        .cap   (cap),
        .shift (shift),
        .out_in(o_v[i][j]),
        .out_q (o_v[i+1][j]),
        .acc_q (acc_unused[i][j])
      );
    end
  end

  // Drain sequencing.
  assign cap   = drain_start;
  assign shift = (dcnt != 0);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           dcnt <= '0;
    else if (drain_start) dcnt <= ($clog2(N+1))'(N);
    else if (dcnt != 0)   dcnt <= dcnt - 1'b1;
  end

  assign out_valid   = (dcnt != 0);
  assign out_row_idx = ($clog2(N))'(dcnt - 1'b1);
  assign draining    = (dcnt != 0) || drain_start;
  for (genvar j = 0; j < N; j++) begin : g_out
    assign out_row_data[j] = acc_to_fp32(o_v[N][j]);
  end

endmodule
