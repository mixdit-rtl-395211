// mixdit_top -- MixDiT accelerator: NUM_ARRAYS systolic array tiles, one
// reordering controller and one MX converter.
//
// Dataflow (one output tile). Activations and weights, already reordered and
// quantised to MX6/MX9 off-chip, are loaded into the tiles' A and W buffers
// (ld_*). A loads with ld_bcast set go to every tile's A buffer: all tiles
// share the same 16 tokens and each holds the weights of its own 16 output
// channels, so output channel c is computed by tile c/16, column c%16. A
// compute command (cmd_*) starts all tiles together; each runs its K-groups
// at 4 cycles per MX6 x MX6 group or 16 cycles per group with an MX9 operand,
// and optionally drains into O buffer slot cmd_slot. A reorder command (ro_*)
// then walks the tokens of a slot: the reordering controller reads the
// channels in the order of table context ro_ctx from the tiles' O buffer banks
// and the MX converter turns every 16 of them into one MX6 or MX9 group,
// offered on out_* (valid/ready) for the store to off-chip memory. Because the
// O buffer has two slots, a reorder of one slot can run while the tiles
// compute and drain into the other.
//
// Off-chip memory is outside this module; its traffic is the ld_* (load) and
// out_* (store) streams. The paper gives the component set, the 16x16 array
// size and the count of 1024 arrays; the command interface, the broadcast of
// activations and the split of output channels over tiles are this design's.
// NUM_ARRAYS defaults to 32 instead of the paper's 1024: lint tools need about
// 137 MB of memory per array, so 1024 arrays do not fit a 32 GiB machine.
//
// Counters: perf_wide_groups counts K-groups issued in wide (8-bit) mode by
// tile 0, perf_out_stalls counts cycles an output group waited for out_ready.
module mixdit_top
  import mixdit_pkg::*;
#(
  parameter int NUM_ARRAYS = 32,
  parameter int KG_MAX     = 32,
  parameter int N_CTX      = 4,
  parameter int SLOTS      = 2,
  localparam int NUM_CH    = NUM_ARRAYS * SA_DIM,
  localparam int CH_W      = $clog2(NUM_CH),
  localparam int GRP_W     = $clog2(NUM_CH / GROUP + 1),
  localparam int ARR_W     = (NUM_ARRAYS > 1) ? $clog2(NUM_ARRAYS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // load stream from off-chip memory
  input  logic                        ld_en,
  input  logic                        ld_is_w,
  input  logic                        ld_bcast,
  input  logic [ARR_W-1:0]            ld_array,
  input  logic [$clog2(SA_DIM)-1:0]   ld_lane,
  input  logic [$clog2(KG_MAX)-1:0]   ld_addr,
  input  mx_group_t                   ld_data,
  // compute command
  input  logic                        cmd_start,
  input  logic [$clog2(KG_MAX+1)-1:0] cmd_n_groups,
  input  logic                        cmd_clear,
  input  logic                        cmd_drain,
  input  logic [$clog2(SLOTS)-1:0]    cmd_slot,
  output logic                        cmd_busy,
  output logic                        cmd_done,
  // reorder table configuration
  input  logic                        cfg_ch_we,
  input  logic                        cfg_prec_we,
  input  logic [$clog2(N_CTX)-1:0]    cfg_ctx,
  input  logic [CH_W-1:0]             cfg_pos,
  input  logic [CH_W-1:0]             cfg_chan,
  input  mx_prec_e                    cfg_prec,
  // reorder command
  input  logic                        ro_start,
  input  logic [$clog2(N_CTX)-1:0]    ro_ctx,
  input  logic [$clog2(SLOTS)-1:0]    ro_slot,
  input  logic [$clog2(SA_DIM+1)-1:0] ro_n_tok,
  input  logic [GRP_W-1:0]            ro_n_grp,
  output logic                        ro_busy,
  output logic                        ro_done,
  // store stream to off-chip memory
  output logic                        out_valid,
  input  logic                        out_ready,
  output mx_group_t                   out_group,
  output logic [$clog2(SA_DIM)-1:0]   out_tok,
  output logic [GRP_W-1:0]            out_gidx,
  // counters
  output logic [31:0]                 perf_wide_groups,
  output logic [31:0]                 perf_out_stalls
);

  logic [NUM_ARRAYS-1:0]  t_busy, t_done, t_wide;
  logic [31:0]            t_rd_data [NUM_ARRAYS];
  logic                   rd_en;
  logic [ARR_W-1:0]       rd_bank, rd_bank_q;
  logic [$clog2(SLOTS)-1:0]  rd_slot;
  logic [$clog2(SA_DIM)-1:0] rd_row, rd_col;
  logic [31:0]            grp_vals [GROUP];
  mx_prec_e               grp_prec;

  for (genvar t = 0; t < NUM_ARRAYS; t++) begin : g_tile
    sa_tile #(.KG_MAX(KG_MAX), .SLOTS(SLOTS)) u_tile (
      .clk, .rst_n,
      .ld_en     (ld_en && (ld_bcast && !ld_is_w || ld_array == ARR_W'(t))),
      .ld_is_w, .ld_lane, .ld_addr, .ld_data,
      .start     (cmd_start), .n_groups(cmd_n_groups), .clear(cmd_clear),
      .drain     (cmd_drain), .slot(cmd_slot),
      .busy      (t_busy[t]), .done(t_done[t]),
      .rd_en     (rd_en && rd_bank == ARR_W'(t)),
      .rd_slot, .rd_row, .rd_col,
      .rd_data   (t_rd_data[t]),
      .wide_group(t_wide[t]));
  end

  assign cmd_busy = |t_busy;
  assign cmd_done = t_done[0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)     rd_bank_q <= '0;
    else if (rd_en) rd_bank_q <= rd_bank;

  reorder_controller #(.NUM_BANKS(NUM_ARRAYS), .BANK_COLS(SA_DIM), .ROWS(SA_DIM),
                       .N_CTX(N_CTX), .SLOTS(SLOTS)) u_reorder (
    .clk, .rst_n,
    .cfg_ch_we, .cfg_prec_we, .cfg_ctx, .cfg_pos, .cfg_chan, .cfg_prec,
    .start(ro_start), .ctx(ro_ctx), .slot(ro_slot), .n_tok(ro_n_tok), .n_grp(ro_n_grp),
    .busy(ro_busy), .done(ro_done),
    .rd_en, .rd_bank, .rd_slot, .rd_row, .rd_col,
    .rd_data(t_rd_data[rd_bank_q]),
    .grp_valid(out_valid), .grp_ready(out_ready), .grp_vals, .grp_prec,
    .grp_tok(out_tok), .grp_idx(out_gidx));

  mx_converter u_conv (.vals(grp_vals), .prec(grp_prec), .grp(out_group));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_wide_groups <= '0;
      perf_out_stalls  <= '0;
    end else begin
      if (t_wide[0])               perf_wide_groups <= perf_wide_groups + 1;
      if (out_valid && !out_ready) perf_out_stalls  <= perf_out_stalls + 1;
    end
  end

  // All tiles run the same command in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) t_done == '0 || &t_done);

endmodule
