// reorder_controller -- reads output channels from the O buffer banks in the
// channel order required by the next layer and hands them, 16 at a time, to
// the MX converter.
//
// Order table. For each of N_CTX contexts (a layer at a timestep) the table
// holds, for every output position k, the channel index to place there, and
// for every 16-position group the format (MX6/MX9) it is converted to. After
// reordering, the high-magnitude channels (or heads) come first and form the
// MX9 groups. The host writes the table through the cfg_* ports (one channel
// entry or one group format per cycle).
//
// Operation. A start pulse with ctx, slot, n_tok and n_grp walks tokens
// 0..n_tok-1 and, for each, output groups 0..n_grp-1. For a group it issues
// 16 single-channel reads, one per cycle: channel c = table[ctx][k] lives in
// bank c / BANK_COLS (one bank per systolic array) at column c % BANK_COLS.
// Read data returns one cycle later. When 16 values are in, they are offered
// on grp_vals with grp_valid (and the group's format, token and index) until
// grp_ready; then the next group starts. A group takes 17 cycles plus any
// wait for grp_ready. 'done' pulses for one cycle after the last group.
//
// The paper says only that the controller keeps a per-layer, per-timestep
// channel-order table, selects channels from the output buffer banks and
// forwards them in order to the MX converter; the table layout, the format
// bits, the one-read-per-cycle schedule and the handshake are this
// design's choice.
module reorder_controller
  import mixdit_pkg::*;
#(
  parameter int NUM_BANKS = 32,
  parameter int BANK_COLS = SA_DIM,
  parameter int ROWS      = SA_DIM,
  parameter int N_CTX     = 4,
  parameter int SLOTS     = 2,
  localparam int NUM_CH   = NUM_BANKS * BANK_COLS,
  localparam int CH_W     = $clog2(NUM_CH),
  localparam int NGRP     = NUM_CH / GROUP,
  localparam int GRP_W    = $clog2(NGRP + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // table configuration
  input  logic                         cfg_ch_we,
  input  logic                         cfg_prec_we,
  input  logic [$clog2(N_CTX)-1:0]     cfg_ctx,
  input  logic [CH_W-1:0]              cfg_pos,     // position k, or group index
  input  logic [CH_W-1:0]              cfg_chan,
  input  mx_prec_e                     cfg_prec,
  // command
  input  logic                         start,
  input  logic [$clog2(N_CTX)-1:0]     ctx,
  input  logic [$clog2(SLOTS)-1:0]     slot,
  input  logic [$clog2(ROWS+1)-1:0]    n_tok,
  input  logic [GRP_W-1:0]             n_grp,
  output logic                         busy,
  output logic                         done,
  // O buffer read (bank select is decoded outside)
  output logic                         rd_en,
  output logic [$clog2(NUM_BANKS)-1:0] rd_bank,
  output logic [$clog2(SLOTS)-1:0]     rd_slot,
  output logic [$clog2(ROWS)-1:0]      rd_row,
  output logic [$clog2(BANK_COLS)-1:0] rd_col,
  input  logic [31:0]                  rd_data,
  // to the MX converter
  output logic                         grp_valid,
  input  logic                         grp_ready,
  output logic [31:0]                  grp_vals [GROUP],
  output mx_prec_e                     grp_prec,
  output logic [$clog2(ROWS)-1:0]      grp_tok,
  output logic [GRP_W-1:0]             grp_idx
);

  typedef enum logic [1:0] {R_IDLE, R_GATHER, R_OUT, R_DONE} rstate_e;

  logic [CH_W-1:0] order_tbl [N_CTX][NUM_CH];
  mx_prec_e        prec_tbl  [N_CTX][NGRP];

  rstate_e                      state;
  logic [$clog2(N_CTX)-1:0]     ctx_q;
  logic [$clog2(SLOTS)-1:0]     slot_q;
  logic [$clog2(ROWS+1)-1:0]    ntok_q;
  logic [GRP_W-1:0]             ngrp_q;
  logic [$clog2(ROWS)-1:0]      tok;
  logic [GRP_W-1:0]             gi;
  logic [4:0]                   k;         // read being issued, 0..16
  logic                         ret_v;     // a read returns this cycle
  logic [3:0]                   ret_k;
  logic [CH_W-1:0]              chan;
  logic [CH_W-1:0]              pos;

  always_ff @(posedge clk) begin
    if (cfg_ch_we)   order_tbl[cfg_ctx][cfg_pos] <= cfg_chan;
    if (cfg_prec_we) prec_tbl[cfg_ctx][cfg_pos[$clog2(NGRP)-1:0]] <= cfg_prec;
  end

  assign pos     = CH_W'(gi) * CH_W'(GROUP) + CH_W'(k[3:0]);
  assign chan    = order_tbl[ctx_q][pos];
  assign rd_en   = (state == R_GATHER) && (k < 16);
  assign rd_bank = ($clog2(NUM_BANKS))'(chan / BANK_COLS);
  assign rd_col  = ($clog2(BANK_COLS))'(chan % BANK_COLS);
  assign rd_row  = tok;
  assign rd_slot = slot_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= R_IDLE;
      ctx_q  <= '0;
      slot_q <= '0;
      ntok_q <= '0;
      ngrp_q <= '0;
      tok    <= '0;
      gi     <= '0;
      k      <= '0;
      ret_v  <= 1'b0;
      ret_k  <= '0;
      for (int i = 0; i < GROUP; i++) grp_vals[i] <= '0;
    end else begin
      ret_v <= rd_en;
      ret_k <= k[3:0];
      if (ret_v) grp_vals[ret_k] <= rd_data;
      case (state)
        R_IDLE: if (start) begin
          ctx_q  <= ctx;
          slot_q <= slot;
          ntok_q <= n_tok;
          ngrp_q <= n_grp;
          tok    <= '0;
          gi     <= '0;
          k      <= '0;
          state  <= (n_tok == 0 || n_grp == 0) ? R_DONE : R_GATHER;
        end
        R_GATHER: begin
          if (k == 16) state <= R_OUT;     // last read returned this cycle
          else         k     <= k + 1'b1;
        end
        R_OUT: if (grp_ready) begin
          k <= '0;
          if (gi + 1'b1 == ngrp_q) begin
            gi <= '0;
            if (32'(tok) + 1 == 32'(ntok_q)) state <= R_DONE;
            else begin
              tok   <= tok + 1'b1;
              state <= R_GATHER;
            end
          end else begin
            gi    <= gi + 1'b1;
            state <= R_GATHER;
          end
        end
        R_DONE:  state <= R_IDLE;
        default: state <= R_IDLE;
      endcase
    end
  end

  assign grp_valid = (state == R_OUT);
  assign grp_prec  = prec_tbl[ctx_q][gi[$clog2(NGRP)-1:0]];
  assign grp_tok   = tok;
  assign grp_idx   = gi;
  assign busy      = (state != R_IDLE);
  assign done      = (state == R_DONE);

endmodule
