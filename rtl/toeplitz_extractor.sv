// toeplitz_extractor: pipelined Toeplitz-hashing randomness extractor.
//
// Hashes each k_in-bit block D (W = k_in/b words D_i of b bits) into
// j output bits, Z = M * D over GF(2), one b-bit word per clock cycle,
// and emits Z in j/b pieces of b bits. The j x k_in matrix is never stored:
// a (j+k_in)-bit vector T holds the seed and is shifted right by b per word,
// and the b matrix columns needed for word D_i are the overlapping slices
// T_B[j+g-1:g], g = 0..b-1, of its low j+b bits. Column g is multiplied by
// data bit D_i[b-1-g]. The matrix entry for output bit r and input bit
// c = b*i + (b-1-g) is therefore seed[b*i + g + r].
//
// Pipeline (one register per stage, one word per cycle):
//   generation  T      <- seed on reset ("Toeplitz init") or on proc_done,
//                         else T >> b after each issued word
//   data load   T_B    <- T[j+b-1:0],  D_i <- D[b*i+b-1 : b*i]
//   multiply    U_B[g] <- T_B[j+g-1:g] AND D_i[b-1-g]   (b vectors of j bits)
//               U      <- XOR of U_B[0..b-1]
//   accumulate  Z      <- Z XOR U (Z starts from 0 for every block), i += 1
//   output      Z_capture <- Z when i >= k_in/b-1, then b bits per cycle
//               shifted out for j/b cycles
// proc_done is the look-ahead condition i == k_in/b - N_STAGES - 1 in the
// accumulation stage (N_STAGES = 3 registers lie between generation and
// accumulation); it reloads T in the same cycle as the last word of a block
// is issued, so the next block starts on the following cycle.
//
// Stage order, the formulas, the shift, the look-ahead reload and the
// capture-then-shift output follow the design. The block handshake
// (d_valid / d_release with the buffer), the hold of the generation stage
// while no block is ready, and out_valid are this design's choices.
// Timing: a block is consumed in W cycles; its first output piece appears
// 6 cycles after its last word was loaded. Needs W > N_STAGES + 1 and j a
// multiple of b.
module toeplitz_extractor #(
  parameter int unsigned J        = 1272,
  parameter int unsigned K        = 2880,
  parameter int unsigned B        = 24,
  parameter int unsigned N_STAGES = 3
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [J+K-1:0] seed,
  input  logic [K-1:0]   d_block,
  input  logic           d_valid,
  output logic           d_release,
  output logic [B-1:0]   out_data,
  output logic           out_valid,
  output logic           block_done,
  output logic           out_collision
);
  localparam int unsigned W    = K / B;       // words per block
  localparam int unsigned NOUT = J / B;       // output pieces per block
  localparam int unsigned IW   = $clog2(W + 1);
  localparam int unsigned OW   = $clog2(NOUT + 1);
  localparam int unsigned PROC_DONE_I = W - N_STAGES - 1;

  // Generation stage
  logic           init_q;
  logic [J+K-1:0] t_q;
  logic [IW-1:0]  gen_i_q;
  logic           issue, proc_done, finished;
  // Data load stage
  logic [J+B-1:0] tb_q;
  logic [B-1:0]   di_q;
  logic           v1_q;
  // Multiplication stage
  logic [B-1:0][J-1:0] ub_q;
  logic           v2_q;
  logic [J-1:0]   u_q;
  logic           v3_q;
  // Accumulation stage
  logic [J-1:0]   z_q;
  logic           z_init_q;
  logic [IW-1:0]  acc_i_q;
  logic           cap_go_q;
  // Output stage
  logic [J-1:0]   zcap_q;
  logic [OW-1:0]  out_left_q;

  assign finished  = (gen_i_q == IW'(W));
  assign issue     = d_valid && !init_q && !finished;
  assign proc_done = v3_q && (acc_i_q == IW'(PROC_DONE_I));
  assign d_release = issue && (gen_i_q == IW'(W - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_q  <= 1'b1;
      t_q     <= '0;
      gen_i_q <= '0;
    end else begin
      init_q <= 1'b0;
      if (init_q || proc_done) begin
        t_q     <= seed;
        gen_i_q <= '0;
      end else if (issue) begin
        t_q     <= t_q >> B;
        gen_i_q <= gen_i_q + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tb_q <= '0;
      di_q <= '0;
      v1_q <= 1'b0;
    end else begin
      v1_q <= issue;
      if (issue) begin
        tb_q <= t_q[J+B-1:0];
        di_q <= d_block[gen_i_q*B +: B];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2_q <= 1'b0;
      v3_q <= 1'b0;
    end else begin
      v2_q <= v1_q;
      v3_q <= v2_q;
    end
  end

  // Wide data registers carry no reset: the valid bits qualify them.
  always_ff @(posedge clk) begin
    for (int g = 0; g < int'(B); g++)
      ub_q[g] <= tb_q[g +: J] & {J{di_q[B-1-g]}};
    u_q <= xor_reduce(ub_q);
  end

  function automatic logic [J-1:0] xor_reduce(logic [B-1:0][J-1:0] v);
    logic [J-1:0] r;
    r = '0;
    for (int g = 0; g < int'(B); g++) r ^= v[g];
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_q      <= '0;
      z_init_q <= 1'b1;
      acc_i_q  <= '0;
      cap_go_q <= 1'b0;
    end else begin
      cap_go_q <= v3_q && (acc_i_q >= IW'(W - 1));
      if (v3_q) begin
        z_q <= (z_init_q ? '0 : z_q) ^ u_q;
        if (acc_i_q >= IW'(W - 1)) begin
          acc_i_q  <= '0;
          z_init_q <= 1'b1;
        end else begin
          acc_i_q  <= acc_i_q + 1'b1;
          z_init_q <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zcap_q        <= '0;
      out_left_q    <= '0;
      out_data      <= '0;
      out_valid     <= 1'b0;
      out_collision <= 1'b0;
    end else begin
      if (cap_go_q) begin
        zcap_q     <= z_q;
        out_left_q <= OW'(NOUT);
        out_valid  <= 1'b0;
        if (out_left_q != '0) out_collision <= 1'b1;
      end else if (out_left_q != '0) begin
        out_data   <= zcap_q[B-1:0];
        out_valid  <= 1'b1;
        zcap_q     <= zcap_q >> B;
        out_left_q <= out_left_q - 1'b1;
      end else begin
        out_valid <= 1'b0;
      end
    end
  end

  assign block_done = cap_go_q;

  // The look-ahead reload must coincide with issuing the last word.
  a_reload_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    proc_done |-> (issue && gen_i_q == IW'(W - 1)));
  initial begin
    assert (K % B == 0 && J % B == 0) else $error("K and J must be multiples of B");
    assert (W > N_STAGES + 1) else $error("block too short for the look-ahead reload");
  end
endmodule
