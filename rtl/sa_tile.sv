// sa_tile -- one systolic array unit: A buffer, W buffer, group sequencer,
// 16x16 precision-flexible PE array and O buffer bank.
//
// Loading: off-chip memory writes MX groups into the buffers (ld_en, ld_is_w
// selects the W buffer, ld_lane = array row for A / column for W, ld_addr =
// K-group index).
//
// Computing: a start pulse with n_groups runs the K-groups 0..n_groups-1
// through the array. For every K-group the sequencer reads one word from each
// buffer and issues its beats to all rows and columns at once. If either
// operand of the K-group is MX9 (the precision bit of row 0 / column 0 is
// taken for the whole word) the group is issued in wide mode, 16 beats of one
// element; otherwise in narrow mode, 4 beats of four elements. With a
// registered prefetch of the next word the issue runs back to back: a K-group
// costs exactly 4 cycles (MX6 x MX6) or 16 cycles (with MX9), the paper's
// figures. 'clear' zeroes the accumulators before the first group; without it
// results accumulate onto the previous command (a K dimension longer than the
// buffers). After the last beat the sequencer waits 2*SA_DIM cycles for the
// skewed wavefront to leave the array. If 'drain' is set the array is then
// drained into O buffer slot 'slot' (SA_DIM cycles, one row per cycle).
// 'done' pulses for one cycle at the end; 'busy' is high from start to done.
// 'busy' lasts 1 (clear) + 1 (first read) + sum over K-groups of 4 or 16
// + 2*SA_DIM (flush) + 1 (done) cycles, plus 1 + SA_DIM with a drain.
//
// The sequencer is this design's own; the paper only gives the per-group
// cycle counts and that activations and weights are fetched pre-ordered.
module sa_tile
  import mixdit_pkg::*;
#(
  parameter int KG_MAX = 32,
  parameter int SLOTS  = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // buffer load
  input  logic                        ld_en,
  input  logic                        ld_is_w,
  input  logic [$clog2(SA_DIM)-1:0]   ld_lane,
  input  logic [$clog2(KG_MAX)-1:0]   ld_addr,
  input  mx_group_t                   ld_data,
  // command
  input  logic                        start,
  input  logic [$clog2(KG_MAX+1)-1:0] n_groups,
  input  logic                        clear,
  input  logic                        drain,
  input  logic [$clog2(SLOTS)-1:0]    slot,
  output logic                        busy,
  output logic                        done,
  // O buffer read port (reordering controller)
  input  logic                        rd_en,
  input  logic [$clog2(SLOTS)-1:0]    rd_slot,
  input  logic [$clog2(SA_DIM)-1:0]   rd_row,
  input  logic [$clog2(SA_DIM)-1:0]   rd_col,
  output logic [31:0]                 rd_data,
  // activity, for performance counting
  output logic                        wide_group
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_FETCH, S_ISSUE, S_FLUSH, S_DRAIN, S_WAIT, S_DONE}
    state_e;

  state_e                        state;
  mx_group_t                     a_word [SA_DIM];
  mx_group_t                     w_word [SA_DIM];
  logic                          buf_rd;
  logic [$clog2(KG_MAX)-1:0]     buf_addr;
  logic [$clog2(KG_MAX+1)-1:0]   g, n_q;
  logic [4:0]                    beat;
  logic [$clog2(2*SA_DIM+1)-1:0] fcnt;
  logic                          drain_q, clear_q;
  logic [$clog2(SLOTS)-1:0]      slot_q;
  logic                          wide;
  pe_beat_t                      a_row [SA_DIM];
  pe_beat_t                      w_col [SA_DIM];
  logic                          arr_clear, drain_start;
  logic                          out_valid, draining;
  logic [$clog2(SA_DIM)-1:0]     out_row_idx;
  logic [31:0]                   out_row_data [SA_DIM];
  logic                          last_beat;

  operand_buffer #(.LANES_N(SA_DIM), .DEPTH(KG_MAX)) u_abuf (
    .clk, .wr_en(ld_en && !ld_is_w), .wr_lane(ld_lane), .wr_addr(ld_addr),
    .wr_data(ld_data), .rd_en(buf_rd), .rd_addr(buf_addr), .rd_data(a_word));

  operand_buffer #(.LANES_N(SA_DIM), .DEPTH(KG_MAX)) u_wbuf (
    .clk, .wr_en(ld_en && ld_is_w), .wr_lane(ld_lane), .wr_addr(ld_addr),
    .wr_data(ld_data), .rd_en(buf_rd), .rd_addr(buf_addr), .rd_data(w_word));

  // The buffers' registered outputs hold the word of K-group g while it is
  // issued; the next word is read on the last beat, ready for the next cycle.
  assign wide      = (a_word[0].prec == MX9) || (w_word[0].prec == MX9);
  assign last_beat = (state == S_ISSUE) && (beat == (wide ? 5'd15 : 5'd3));
  assign buf_rd    = (state == S_FETCH) || (last_beat && (g + 1'b1 < n_q));
  assign buf_addr  = (state == S_FETCH) ? '0 : ($clog2(KG_MAX))'(g + 1'b1);
  assign wide_group = (state == S_ISSUE) && (beat == 0) && wide;

  // Beat formation: narrow beats carry elements 4b..4b+3, wide beats element b.
  function automatic pe_beat_t make_beat(mx_group_t grp, logic [4:0] b, logic wd,
                                         logic issue, logic lst);
    pe_beat_t r;
    int       e;
    r       = '0;
    r.valid = issue;
    r.first = issue && (b == 0);
    r.last  = issue && lst;
    r.wide  = wd;
    r.prec  = grp.prec;
    r.exp   = grp.exp;
    for (int l = 0; l < LANES; l++) begin
      e = wd ? int'(b) : 4 * int'(b[1:0]) + l;
      if (!wd || l == 0) begin
        r.sign[l] = grp.sign[e];
        r.mu[l]   = grp.mu[e / SUBGROUP];
        r.mag[l]  = grp.mant[e];
      end
    end
    if (!issue) r = '0;
    return r;
  endfunction

  always_comb
    for (int k = 0; k < SA_DIM; k++) begin
      a_row[k] = make_beat(a_word[k], beat, wide, state == S_ISSUE, last_beat);
      w_col[k] = make_beat(w_word[k], beat, wide, state == S_ISSUE, last_beat);
    end

  assign arr_clear   = (state == S_CLEAR);
  assign drain_start = (state == S_DRAIN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      g       <= '0;
      n_q     <= '0;
      beat    <= '0;
      fcnt    <= '0;
      drain_q <= 1'b0;
      clear_q <= 1'b0;
      slot_q  <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          n_q     <= n_groups;
          drain_q <= drain;
          clear_q <= clear;
          slot_q  <= slot;
          g       <= '0;
          beat    <= '0;
          state   <= S_CLEAR;
        end
        S_CLEAR: begin
          fcnt  <= '0;
          state <= (n_q == 0) ? S_FLUSH : S_FETCH;
        end
        S_FETCH: state <= S_ISSUE;
        S_ISSUE: begin
          if (last_beat) begin
            beat <= '0;
            if (g + 1'b1 == n_q) begin
              state <= S_FLUSH;
              fcnt  <= '0;
            end
            g <= g + 1'b1;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_FLUSH: begin
          fcnt <= fcnt + 1'b1;
          if (fcnt == ($clog2(2*SA_DIM+1))'(2*SA_DIM - 1))
            state <= drain_q ? S_DRAIN : S_DONE;
        end
        S_DRAIN: state <= S_WAIT;
        S_WAIT:  if (!out_valid || out_row_idx == 0) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  mx_systolic_array #(.N(SA_DIM)) u_array (
    .clk, .rst_n, .clear(arr_clear && clear_q), .a_row, .w_col,
    .drain_start, .out_valid, .out_row_idx, .out_row_data, .draining);

  o_buffer #(.ROWS(SA_DIM), .COLS(SA_DIM), .SLOTS(SLOTS)) u_obuf (
    .clk, .wr_en(out_valid), .wr_slot(slot_q), .wr_row(out_row_idx),
    .wr_data(out_row_data), .rd_en, .rd_slot, .rd_row, .rd_col, .rd_data);

endmodule
