// gobo_top: GOBO accelerator chip top level.
//
// NUM_TILES GOBO tiles (768 in the paper's FP32 configuration) fed by the
// banked global buffer, plus the GOBO decompression engine for off-chip
// weight compression. Each start command runs one output group on every
// tile at once: all tiles take the same n_sm x 16 input activations (one
// per cycle, broadcast from the activation bank starting at act_base) and
// each tile streams its own n_sm x 16 blocks of weight indexes and its own
// outliers and centroids, producing 16 output activations (or partial sums)
// of its own rows. Running the next input word, or the next group of
// columns, is a new start with another act_base or other bank contents;
// this is how the paper's dataflow reuses the weights already in the global
// buffer for many words.
// wide_mode pairs tiles 2k (lower) and 2k+1 (upper) for 4-bit indexes, as
// in the paper: both see the same blocks, the lower tile accumulates
// indexes 0..7 and the upper 8..15, and the lower tile finally adds the
// upper tile's outputs into its own; read the lower tile's outputs. The
// pair's upper tile is reached through the lower tile's pair port while the
// pair is running, and through the host read port afterwards.
// The decompression engine serves a different use of GOBO (an accelerator
// that computes with FP32 weights reads compressed weights from DRAM); it
// shares nothing with the tiles here and its streams are ports. DRAM and
// its controller are outside the chip description.
// Interface: host_* writes any global-buffer word; start/n_sm/act_base/
// wide_mode start a group (start only while idle); done is high when all
// tiles are done; rd_tile/rd_addr select an output activation on rd_data;
// overflow reports an SM with more outliers than a tile's outlier slots.
// Timing: one group takes 1 + 16 + 16 n_sm + 128 cycles (+17 in wide mode)
// plus one cycle for each extra outlier that shares a column with another
// in the same SM of the slowest tile.
module gobo_top
  import gobo_pkg::*;
#(
  parameter int unsigned NUM_TILES  = 768,
  parameter int unsigned WB_DEPTH   = 128,
  parameter int unsigned OB_DEPTH   = 64,
  parameter int unsigned AB_DEPTH   = 262144,
  parameter int unsigned OUTL_SLOTS = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // global buffer fill
  input  logic                           host_we,
  input  logic [1:0]                     host_bank,
  input  logic [$clog2(NUM_TILES+1)-1:0] host_tile,
  input  logic [31:0]                    host_addr,
  input  logic [63:0]                    host_wdata,
  // command
  input  logic                           start,
  input  logic [15:0]                    n_sm,
  input  logic [$clog2(AB_DEPTH)-1:0]    act_base,
  input  logic                           wide_mode,
  output logic                           done,
  output logic                           overflow,
  // output activations
  input  logic [$clog2(NUM_TILES+1)-1:0] rd_tile,
  input  logic [3:0]                     rd_addr,
  output fp32_t                          rd_data,
  // decompression engine (DRAM side and consumer side)
  input  logic                           dc_qw_valid,
  input  logic [47:0]                    dc_qw_data,
  output logic                           dc_qw_ready,
  input  logic                           dc_ol_valid,
  input  ocf_entry_t                     dc_ol_data,
  output logic                           dc_ol_ready,
  output logic                           dc_out_valid,
  output fp32_t                          dc_out_data [NPE],
  output logic                           dc_out_last,
  input  logic                           dc_out_ready,
  output logic                           dc_busy,
  output logic                           dc_hdr_error
);

  logic              gb_act_valid, all_act_ready, act_take;
  fp32_t             gb_act_data;
  logic              wblk_valid [NUM_TILES];
  logic [WBLK_W-1:0] wblk_data  [NUM_TILES];
  logic              wblk_ready [NUM_TILES];
  logic              ocf_valid  [NUM_TILES];
  ocf_entry_t        ocf_data   [NUM_TILES];
  logic              ocf_ready  [NUM_TILES];
  logic [NUM_TILES-1:0] t_act_ready, t_done, t_ovf;
  logic [3:0]        t_pair_addr [NUM_TILES];
  logic [3:0]        t_rd_addr   [NUM_TILES];
  fp32_t             t_rd_data   [NUM_TILES];
  logic              mode_q;

  // mode is captured at start so the pair wiring stays fixed during a group
  always_ff @(posedge clk) begin
    if (!rst_n)     mode_q <= 1'b0;
    else if (start) mode_q <= wide_mode;
  end

  gobo_global_buffer #(
    .NUM_TILES(NUM_TILES), .WB_DEPTH(WB_DEPTH), .OB_DEPTH(OB_DEPTH), .AB_DEPTH(AB_DEPTH)
  ) u_gb (
    .clk, .rst_n, .host_we, .host_bank, .host_tile, .host_addr, .host_wdata,
    .start, .act_base, .n_sm,
    .act_valid(gb_act_valid), .act_data(gb_act_data), .act_ready(all_act_ready),
    .wblk_valid, .wblk_data, .wblk_ready, .ocf_valid, .ocf_data, .ocf_ready
  );

  // an activation is taken only when every tile can take it
  assign all_act_ready = &t_act_ready;
  assign act_take      = gb_act_valid && all_act_ready;

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    localparam bit IS_UPPER = (t % 2) == 1;
    logic wide_t, upper_t, pair_done_t;
    fp32_t pair_data_t;

    assign wide_t  = mode_q && (t + 1 < NUM_TILES || IS_UPPER);
    assign upper_t = wide_t && IS_UPPER;

    if (IS_UPPER) begin : g_up
      assign pair_done_t    = 1'b0;
      assign pair_data_t    = '0;
      assign t_rd_addr[t]   = (mode_q && !t_done[t-1]) ? t_pair_addr[t-1] : rd_addr;
    end else if (t + 1 < NUM_TILES) begin : g_lo
      assign pair_done_t    = t_done[t+1];
      assign pair_data_t    = t_rd_data[t+1];
      assign t_rd_addr[t]   = rd_addr;
    end else begin : g_single
      assign pair_done_t    = 1'b0;
      assign pair_data_t    = '0;
      assign t_rd_addr[t]   = rd_addr;
    end

    gobo_tile #(.OUTL_SLOTS(OUTL_SLOTS)) u_tile (
      .clk, .rst_n, .start, .n_sm, .wide_mode(wide_t), .upper(upper_t),
      .done(t_done[t]), .overflow(t_ovf[t]),
      .act_valid(act_take), .act_data(gb_act_data), .act_ready(t_act_ready[t]),
      .wblk_valid(wblk_valid[t]), .wblk_data(wblk_data[t]), .wblk_ready(wblk_ready[t]),
      .ocf_valid(ocf_valid[t]), .ocf_data(ocf_data[t]), .ocf_ready(ocf_ready[t]),
      .pair_done(pair_done_t), .pair_rd_addr(t_pair_addr[t]), .pair_rd_data(pair_data_t),
      .rd_addr(t_rd_addr[t]), .rd_data(t_rd_data[t])
    );
  end

  assign done     = &t_done;
  assign overflow = |t_ovf;

  // read mux over a power-of-two table; entries past the last tile read 0
  localparam int unsigned RD_N = 2 ** $clog2(NUM_TILES + 1);
  fp32_t rd_table [RD_N];
  for (genvar t = 0; t < RD_N; t++) begin : g_rd
    if (t < NUM_TILES) begin : g_t
      assign rd_table[t] = t_rd_data[t];
    end else begin : g_z
      assign rd_table[t] = '0;
    end
  end
  assign rd_data  = rd_table[rd_tile];

  gobo_decomp #(.LANES(NPE)) u_decomp (
    .clk, .rst_n,
    .qw_valid(dc_qw_valid), .qw_data(dc_qw_data), .qw_ready(dc_qw_ready),
    .ol_valid(dc_ol_valid), .ol_data(dc_ol_data), .ol_ready(dc_ol_ready),
    .out_valid(dc_out_valid), .out_data(dc_out_data), .out_last(dc_out_last),
    .out_ready(dc_out_ready), .busy(dc_busy), .hdr_error(dc_hdr_error)
  );

endmodule
