// Fusion Unit: 16 BitBricks that fuse at run time into 1, 2, 4, 8 or 16
// Fused-PEs, one cell of the systolic array.
//
// Each step the unit receives a slice of packed input elements (from the left
// neighbour or the row's input buffer) and a slice of packed weight elements
// (from its own weight buffer). It multiplies element pairs, sums the
// products, adds the partial sum arriving from the unit above and registers
// the result for the unit below. Inputs are also registered and forwarded to
// the right.
//
// Spatial fusion (paper, Fig. 2, 6, 7, 9): an operand of up to 8 bits is cut
// into 2-bit chunks; the top chunk carries the operand's sign, lower chunks
// are unsigned. Each product of an n-chunk input and an m-chunk weight uses
// n*m BitBricks; their 6-bit products are shifted by 2*(a+c) (a, c: chunk
// indices) and added. The adders form the paper's two-level tree: four groups
// of four BitBricks, each group a four-input adder after shift units, then one
// four-input adder over the group sums. The brick index is assigned, from its
// least significant bit, to the split bits in the order input-low,
// weight-low, input-high, weight-high, so the first tree level applies the
// 2-bit-level shifts and the second level the 4-bit-level shifts, as in the
// paper's recursive decomposition (Eq. 2 and 3). Bricks whose index is past
// the last product are idle. This ordering is this design's choice; the paper
// shows the tree but not which brick takes which chunk.
//
// Temporal fusion (paper Sec. III-C): a 16-bit operand is processed as two
// 8-bit halves in successive cycles (phases); the low half is unsigned, the
// high half carries the sign, and the phase result is shifted by 8 per high
// half. 16x16 takes four phases. Phase results are accumulated locally and the
// partial sum leaves on the last phase.
//
// Timing: beat_in/in_slice/wt_slice are valid together; psum_in must be valid
// in the cycle of the step's last phase. Outputs are registered: psum_out and
// psum_vout one cycle after the last phase, beat_out and in_fwd one cycle
// after beat_in.
module fusion_unit
  import bf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  fu_cfg_t            cfg,
  input  beat_t              beat_in,
  input  logic [31:0]        in_slice,
  input  logic [31:0]        wt_slice,
  input  logic signed [31:0] psum_in,
  output beat_t              beat_out,
  output logic [31:0]        in_fwd,
  output logic signed [31:0] psum_out,
  output logic               psum_vout
);
  localparam int NB = 16;

  logic [1:0]        bx   [NB];
  logic [1:0]        by   [NB];
  logic              bsx  [NB];
  logic              bsy  [NB];
  logic signed [5:0] bp   [NB];
  logic [3:0]        sh1  [4];   // first-level shift of brick j within a group
  logic [3:0]        sh2  [4];   // second-level shift of group g
  logic signed [31:0] grp [4];
  logic signed [31:0] spatial, phase_sum;
  logic signed [31:0] tacc;

  for (genvar b = 0; b < NB; b++) begin : g_bb
    bitbrick u_bb (.x(bx[b]), .sx(bsx[b]), .y(by[b]), .sy(bsy[b]), .p(bp[b]));
  end

  // ---------------------------------------------------------- operand routing
  always_comb begin
    logic ih, wh;                 // temporal phase selects high half
    logic [2:0] nsplit;
    logic [3:0] bitshift [4];     // shift weight of each brick-index bit
    logic       bit_is_a [4];     // index bit selects an input chunk bit
    logic       bit_lvl  [4];     // which chunk-index bit (0 or 1)
    int k;
    ih = cfg.t_i & beat_in.phase[0];
    wh = cfg.t_w & (cfg.t_i ? beat_in.phase[1] : beat_in.phase[0]);

    // split-bit order: a0, c0, a1, c1 (only those present)
    k = 0;
    for (int i = 0; i < 4; i++) begin
      bitshift[i] = '0; bit_is_a[i] = 1'b0; bit_lvl[i] = 1'b0;
    end
    if (cfg.lg_ci >= 2'd1) begin bitshift[k] = 4'd2; bit_is_a[k] = 1'b1; bit_lvl[k] = 1'b0; k++; end
    if (cfg.lg_cw >= 2'd1) begin bitshift[k] = 4'd2; bit_is_a[k] = 1'b0; bit_lvl[k] = 1'b0; k++; end
    if (cfg.lg_ci >= 2'd2) begin bitshift[k] = 4'd4; bit_is_a[k] = 1'b1; bit_lvl[k] = 1'b1; k++; end
    if (cfg.lg_cw >= 2'd2) begin bitshift[k] = 4'd4; bit_is_a[k] = 1'b0; bit_lvl[k] = 1'b1; k++; end
    nsplit = 3'(k);

    for (int j = 0; j < 4; j++) begin
      sh1[j] = (j[0] ? bitshift[0] : 4'd0) + (j[1] ? bitshift[1] : 4'd0);
      sh2[j] = (j[0] ? bitshift[2] : 4'd0) + (j[1] ? bitshift[3] : 4'd0);
    end

    for (int b = 0; b < NB; b++) begin
      logic [3:0]  bi;
      logic [4:0]  p;
      logic [1:0]  a, c;
      logic [15:0] xe, we;
      logic [7:0]  xs, ws;
      logic        xsg, wsg;
      bi = 4'(b);
      a = '0; c = '0;
      for (int i = 0; i < 4; i++)
        if (3'(i) < nsplit && bi[i]) begin
          if (bit_is_a[i]) a[bit_lvl[i]] = 1'b1;
          else             c[bit_lvl[i]] = 1'b1;
        end
      p  = 5'(bi >> nsplit);
      // element p of each slice
      xe = 16'(in_slice >> (p << cfg.lg_ewi)) & 16'((32'd1 << (32'd1 << cfg.lg_ewi)) - 1);
      we = 16'(wt_slice >> (p << cfg.lg_eww)) & 16'((32'd1 << (32'd1 << cfg.lg_eww)) - 1);
      // temporal half of a 16-bit element
      xs  = cfg.t_i ? (ih ? xe[15:8] : xe[7:0]) : xe[7:0];
      ws  = cfg.t_w ? (wh ? we[15:8] : we[7:0]) : we[7:0];
      xsg = cfg.sgn_i & (~cfg.t_i | ih);
      wsg = cfg.sgn_w & (~cfg.t_w | wh);
      if (p < (5'd1 << cfg.lg_p)) begin
        bx[b]  = xs[2*a +: 2];
        by[b]  = ws[2*c +: 2];
        // only the top chunk carries the sign; 1-bit operands are unsigned
        bsx[b] = xsg & (a == 2'((1 << cfg.lg_ci) - 1)) & (cfg.lg_ewi != 3'd0);
        bsy[b] = wsg & (c == 2'((1 << cfg.lg_cw) - 1)) & (cfg.lg_eww != 3'd0);
      end else begin
        bx[b] = '0; by[b] = '0; bsx[b] = 1'b0; bsy[b] = 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ shift-add tree
  always_comb begin
    for (int g = 0; g < 4; g++)
      grp[g] = (32'(bp[4*g+0]) <<< sh1[0]) + (32'(bp[4*g+1]) <<< sh1[1])
             + (32'(bp[4*g+2]) <<< sh1[2]) + (32'(bp[4*g+3]) <<< sh1[3]);
    spatial = (grp[0] <<< sh2[0]) + (grp[1] <<< sh2[1])
            + (grp[2] <<< sh2[2]) + (grp[3] <<< sh2[3]);
    // temporal shift: 8 bits per high half
    phase_sum = spatial <<< (5'd8 * ({4'b0, cfg.t_i & beat_in.phase[0]}
                                   + {4'b0, cfg.t_w & (cfg.t_i ? beat_in.phase[1] : beat_in.phase[0])}));
  end

  // ----------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tacc      <= '0;
      psum_out  <= '0;
      psum_vout <= 1'b0;
      beat_out  <= '0;
      in_fwd    <= '0;
    end else begin
      beat_out  <= beat_in;
      in_fwd    <= in_slice;
      psum_vout <= beat_in.valid & beat_in.last;
      if (beat_in.valid) begin
        if (beat_in.last) begin
          psum_out <= psum_in + (beat_in.phase == 2'd0 ? 32'sd0 : tacc) + phase_sum;
          tacc     <= '0;
        end else begin
          tacc     <= (beat_in.phase == 2'd0 ? 32'sd0 : tacc) + phase_sum;
        end
      end
    end
  end
endmodule
