// gobo_act_buffer: the pair of circular input-activation buffers at the
// front of a GOBO tile.
//
// One buffer (staging) fills with the next N activations, one per cycle
// from the global activation buffer, while the other (current) feeds the
// PEs. Every cycle the current buffer rotates by one position so that, over
// N cycles, each of the N PEs sees each of the N activations once. When the
// current buffer has been used N times and the staging buffer is full the
// two swap roles. This follows the paper; the direction of rotation follows
// its dataflow figure: in the t-th rotation after a swap, PE p sees
// activation (p - t) mod N of the group, so PE0 sees IA0 then IA15 and PE1
// sees IA1 then IA0.
// Interface: ld_valid/ld_data/ld_ready load the staging buffer (ready while
// it is not full); rotate advances the current buffer; swap exchanges the
// buffers and empties the new staging buffer. swap is honoured only while
// swap_ok is high: the staging buffer is full, or its last entry is being
// loaded in this very cycle, in which case that entry goes straight into the
// new current buffer. This bypass keeps a 16-cycle rhythm per group of
// activations. pe_act[p] is the activation at PE p. clr empties the staging
// buffer (the start of an output group).
// Timing: loads, rotation and swap take effect at the clock edge; swap has
// priority over rotate.
module gobo_act_buffer
  import gobo_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  ld_valid,
  input  fp32_t ld_data,
  output logic  ld_ready,
  input  logic  rotate,
  input  logic  swap,
  output logic  swap_ok,
  output fp32_t pe_act [N]
);

  fp32_t cur [N];
  fp32_t stg [N];
  logic [$clog2(N):0] fill;
  logic               staged_full, last_ld, do_swap;

  assign staged_full = (fill == ($clog2(N)+1)'(N));
  assign ld_ready    = !staged_full;
  assign last_ld     = ld_valid && (fill == ($clog2(N)+1)'(N - 1));
  assign swap_ok     = staged_full || last_ld;
  assign do_swap     = swap && swap_ok;
  assign pe_act      = cur;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      fill <= '0;
    end else if (do_swap) begin
      fill <= '0;
    end else if (ld_valid && ld_ready) begin
      fill <= fill + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) begin
        cur[i] <= '0;
        stg[i] <= '0;
      end
    end else begin
      if (do_swap) begin
        cur <= stg;
        if (!staged_full) cur[N-1] <= ld_data;   // last entry bypasses staging
      end else if (rotate) begin
        // entry p moves to p+1, entry N-1 wraps to 0
        for (int i = 0; i < int'(N); i++) cur[(i + 1) % N] <= cur[i];
      end
      if (ld_valid && ld_ready && !do_swap)
        stg[fill[$clog2(N)-1:0]] <= ld_data;
    end
  end

endmodule
