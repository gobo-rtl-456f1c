// gobo_global_buffer: banked on-chip global buffer of the GOBO accelerator.
//
// The paper splits the global buffer across the tiles, with at least three
// banks per tile: one for activations, a wider one for the weight indexes
// and one for the outliers plus the (replicated) centroids. Because every
// tile reads the same activation in the same cycle, this design keeps a
// single activation bank whose output is broadcast to all tiles, and gives
// each tile its own weight bank and outlier/centroid bank.
// Bank sizes are not in the paper and are this design's choice, picked so
// that the total is about the 2 MB the paper gives the accelerator:
//   activations   AB_DEPTH x 32 bit                (1 MB at the default)
//   weights       NUM_TILES x WB_DEPTH x 64 bit    (768 KB)
//   outliers      NUM_TILES x OB_DEPTH x 40 bit    (240 KB)
// Loading from DRAM is outside this block: a host write port fills any
// bank word (host_bank 0 = activations, 1 = weights, 2 = outliers and
// centroids; host_tile selects the tile for banks 1 and 2).
// start restarts three sequential read streams for one output group:
// n_sm x 16 activations from act_base (one stream, advanced when act_ready,
// i.e. when every tile can take it), n_sm x 16 weight blocks from address 0
// of each weight bank, and the outlier/centroid bank of each tile from
// address 0 until the tile stops taking entries. Replaying from address 0
// on every start is how the same weights are reused for many input words.
// Timing: each stream reads its bank synchronously into an output register
// and refills it in the cycle it is taken, so each delivers one word per
// cycle; the first words are valid in the cycle after start.
// host_addr is a plain 32-bit address; bits above a bank's depth are
// ignored (the address wraps within the bank).
module gobo_global_buffer
  import gobo_pkg::*;
#(
  parameter int unsigned NUM_TILES = 768,
  parameter int unsigned WB_DEPTH  = 128,
  parameter int unsigned OB_DEPTH  = 64,
  parameter int unsigned AB_DEPTH  = 262144
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host write port
  input  logic                         host_we,
  input  logic [1:0]                   host_bank,
  input  logic [$clog2(NUM_TILES+1)-1:0] host_tile,
  input  logic [31:0]                  host_addr,
  input  logic [63:0]                  host_wdata,
  // group command
  input  logic                         start,
  input  logic [$clog2(AB_DEPTH)-1:0]  act_base,
  input  logic [15:0]                  n_sm,
  // broadcast activation stream
  output logic                         act_valid,
  output fp32_t                        act_data,
  input  logic                         act_ready,
  // per-tile streams
  output logic                         wblk_valid [NUM_TILES],
  output logic [WBLK_W-1:0]            wblk_data  [NUM_TILES],
  input  logic                         wblk_ready [NUM_TILES],
  output logic                         ocf_valid  [NUM_TILES],
  output ocf_entry_t                   ocf_data   [NUM_TILES],
  input  logic                         ocf_ready  [NUM_TILES]
);

  localparam int unsigned AAW = $clog2(AB_DEPTH);
  localparam int unsigned WAW = $clog2(WB_DEPTH);
  localparam int unsigned OAW = $clog2(OB_DEPTH);

  // ---------------- activation bank ----------------
  fp32_t         abank [AB_DEPTH];
  logic [AAW:0]  a_ptr, a_end;
  logic          a_take;

  assign a_take = act_ready && act_valid;

  always_ff @(posedge clk) begin
    if (host_we && host_bank == 2'd0) abank[host_addr[AAW-1:0]] <= host_wdata[31:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_ptr     <= '0;
      a_end     <= '0;
      act_valid <= 1'b0;
      act_data  <= '0;
    end else if (start) begin
      a_ptr     <= {1'b0, act_base};
      a_end     <= {1'b0, act_base} + (AAW+1)'({n_sm, 4'd0});
      act_valid <= 1'b0;
    end else if (!act_valid || a_take) begin
      if (a_ptr != a_end) begin
        act_data  <= abank[a_ptr[AAW-1:0]];
        act_valid <= 1'b1;
        a_ptr     <= a_ptr + 1'b1;
      end else begin
        act_valid <= 1'b0;
      end
    end
  end

  // ---------------- per-tile banks ----------------
  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    logic [WBLK_W-1:0] wbank [WB_DEPTH];
    ocf_entry_t        obank [OB_DEPTH];
    logic [WAW:0]      w_ptr;
    logic [19:0]       w_end;
    logic [OAW:0]      o_ptr;

    always_ff @(posedge clk) begin
      if (host_we && host_bank == 2'd1 && host_tile == ($clog2(NUM_TILES+1))'(t))
        wbank[host_addr[WAW-1:0]] <= host_wdata[WBLK_W-1:0];
      if (host_we && host_bank == 2'd2 && host_tile == ($clog2(NUM_TILES+1))'(t))
        obank[host_addr[OAW-1:0]] <= host_wdata[OCF_W-1:0];
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        w_ptr         <= '0;
        w_end         <= '0;
        wblk_valid[t] <= 1'b0;
        wblk_data[t]  <= '0;
      end else if (start) begin
        w_ptr         <= '0;
        w_end         <= {n_sm, 4'd0};
        wblk_valid[t] <= 1'b0;
      end else if (!wblk_valid[t] || wblk_ready[t]) begin
        if (20'(w_ptr) != w_end && w_ptr != (WAW+1)'(WB_DEPTH)) begin
          wblk_data[t]  <= wbank[w_ptr[WAW-1:0]];
          wblk_valid[t] <= 1'b1;
          w_ptr         <= w_ptr + 1'b1;
        end else begin
          wblk_valid[t] <= 1'b0;
        end
      end
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        o_ptr        <= '0;
        ocf_valid[t] <= 1'b0;
        ocf_data[t]  <= '0;
      end else if (start) begin
        o_ptr        <= '0;
        ocf_valid[t] <= 1'b0;
      end else if (!ocf_valid[t] || ocf_ready[t]) begin
        if (o_ptr != (OAW+1)'(OB_DEPTH)) begin
          ocf_data[t]  <= obank[o_ptr[OAW-1:0]];
          ocf_valid[t] <= 1'b1;
          o_ptr        <= o_ptr + 1'b1;
        end else begin
          ocf_valid[t] <= 1'b0;
        end
      end
    end
  end

endmodule
