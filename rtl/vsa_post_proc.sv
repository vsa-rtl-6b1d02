// vsa_post_proc: optional 2x2 max pooling of the output spikes.
// For binary spikes the maximum of a window is the OR of its four spikes.
// One spike column vector (8 rows of one output channel) arrives per valid
// cycle, columns in increasing order within a channel.
//   pool = 0 : the vector passes with an all-ones lane mask, column unchanged.
//   pool = 1 : rows 2i and 2i+1 are ORed (4 results); an even column is held,
//              the following odd column is ORed with it and emitted as pooled
//              column col/2. The 4 pooled rows occupy lanes 0..3, or lanes
//              4..7 when out_half is set, so two consecutive tiles fill one
//              8-row output word; out_mask marks the lanes written.
// Timing: outputs are registered, one clock after the input.
// The paper places max pooling after the IF neuron ("IF + max pooling", MP2
// layers); the OR form, lane packing and column order are this design's.
module vsa_post_proc
  import vsa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pool,
  input  logic        out_half,
  input  logic        in_valid,
  input  spike_vec_t  in_spk,
  input  tag_t        in_tag,
  output logic        out_valid,
  output spike_vec_t  out_bits,
  output spike_vec_t  out_mask,
  output tag_t        out_tag
);
  localparam int HALF = PE_ROWS / 2;

  logic [HALF-1:0] vpair, held;

  always_comb
    for (int i = 0; i < HALF; i++) vpair[i] = in_spk[2*i] | in_spk[2*i+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= '0;
      out_valid <= 1'b0;
      out_bits  <= '0;
      out_mask  <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        out_tag <= in_tag;
        if (!pool) begin
          out_valid <= 1'b1;
          out_bits  <= in_spk;
          out_mask  <= '1;
        end else if (!in_tag.col[0]) begin
          held <= vpair;
        end else begin
          out_valid   <= 1'b1;
          out_tag.col <= in_tag.col >> 1;
          if (out_half) begin
            out_bits <= {held | vpair, HALF'(0)};
            out_mask <= {{HALF{1'b1}}, HALF'(0)};
          end else begin
            out_bits <= {HALF'(0), held | vpair};
            out_mask <= {HALF'(0), {HALF{1'b1}}};
          end
        end
      end
    end
  end
endmodule
