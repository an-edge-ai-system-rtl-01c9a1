// Fully connected layer engine for the classifier head (64 -> 48 -> 24 -> 2).
//
// One start runs one layer: for each output neuron j it accumulates
// sum_i w[j][i] * x[i] at one multiply-accumulate per clock, reading 12-bit
// weights from a 1-cycle-latency RAM (w[j][i] at wbase + j*n_in + i) and
// 22-bit activations from a register vector, then applies bias, the layer's
// requantization shift and optional ReLU through the shared post-op and
// stores the 22-bit result. Two internal activation banks alternate, so
// consecutive layers chain without copying: a layer reads either the
// external vector `x_ext` (src_ext, for the first layer) or the bank the
// previous layer wrote, and writes the other bank; `y` shows the bank last
// written. A layer takes n_out*n_in + 3 clocks from `start` to `done`.
// The layer sizes are the network's; the serial schedule, the banks and the
// weight layout are this design's choices.
module fc_engine import rfd_pkg::*; #(
  parameter int unsigned MAX_N = 64
)(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  fc_cfg_t                        cfg,
  output logic                           busy,
  output logic                           done,
  input  logic [MAX_N-1:0][WIDE_W-1:0]   x_ext,
  output logic [FWA_W-1:0]               w_addr,
  input  fm_t                            w_data,
  output logic [FBA_W-1:0]               b_addr,
  input  wide_t                          b_data,
  output logic [MAX_N-1:0][WIDE_W-1:0]   y
);
  fc_cfg_t c;
  logic run, cur;
  logic [CH_W-1:0] i, j;
  logic [FWA_W-1:0] wptr;
  logic [MAX_N-1:0][WIDE_W-1:0] bank [2];

  logic s1_valid, s1_first, s1_last, s1_final;
  logic [CH_W-1:0] s1_i, s1_j;
  logic s2_valid, s2_final;
  logic [CH_W-1:0] s2_j;
  acc_t acc, fin, prod;
  wide_t s2_bias, s2_y;
  wide_t xv;

  assign w_addr = wptr;
  assign b_addr = c.bbase + FBA_W'(j);

  always_comb begin
    xv   = c.src_ext ? wide_t'(x_ext[s1_i]) : wide_t'(bank[cur][s1_i]);
    prod = acc_t'(w_data) * acc_t'(xv);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; run <= 1'b0; cur <= 1'b0; i <= '0; j <= '0; wptr <= '0;
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_final <= 1'b0;
      s1_i <= '0; s1_j <= '0; s2_valid <= 1'b0; s2_final <= 1'b0; s2_j <= '0;
      acc <= '0; fin <= '0; s2_bias <= '0; done <= 1'b0;
      bank[0] <= '0; bank[1] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        c <= cfg; run <= 1'b1; i <= '0; j <= '0; wptr <= cfg.wbase;
      end else if (run) begin
        wptr <= wptr + 1'b1;
        if (i == c.n_in - 1'b1) begin
          i <= '0;
          if (j == c.n_out - 1'b1) run <= 1'b0;
          else j <= j + 1'b1;
        end else i <= i + 1'b1;
      end
      s1_valid <= run;
      s1_first <= (i == '0);
      s1_last  <= (i == c.n_in - 1'b1);
      s1_final <= run && (i == c.n_in - 1'b1) && (j == c.n_out - 1'b1);
      s1_i <= i; s1_j <= j;
      if (s1_valid) acc <= s1_first ? prod : acc + prod;
      s2_valid <= s1_valid && s1_last;
      s2_final <= s1_valid && s1_final;
      if (s1_valid && s1_last) begin
        fin <= s1_first ? prod : acc + prod;
        s2_bias <= b_data;
        s2_j <= s1_j;
      end
      if (s2_valid) bank[!cur][s2_j] <= s2_y;
      if (s2_valid && s2_final) begin
        done <= 1'b1;
        cur  <= !cur;
      end
    end
  end

  post_op u_post (
    .acc      (fin),
    .scale    (fm_t'(1)),
    .bias     (s2_bias),
    .rshift   (c.rshift),
    .resid    ('0),
    .resid_en (1'b0),
    .relu_en  (c.relu),
    .y_wide   (s2_y),
    .y_fm     ()
  );

  assign busy = run || s1_valid || s2_valid;
  assign y    = bank[cur];

  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && !busy) |-> (cfg.n_in <= CH_W'(MAX_N)) && (cfg.n_out <= CH_W'(MAX_N)) && (cfg.n_in != 0));
endmodule
