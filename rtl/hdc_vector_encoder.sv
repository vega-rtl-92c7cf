// hdc_vector_encoder: the vector encoder of Hypnos, a W-bit (512) datapath
// that builds HD vectors one operation per cycle.
//  * Input mux: zero vector, the hardwired seed vector, an AM row or the
//    encoder register.
//  * Similarity manipulator: flips the first 4*N bits of the selected vector
//    (N a 7-bit count, optionally taken from the current input sample), which
//    gives continuous item memory (CIM) mapping: close values, few flipped
//    bits, small Hamming distance.
//  * Mixer: one of four hardwired pseudo-random permutations pi0, pi1,
//    pi0^-1, pi1^-1, or none.
//  * Encoder units, one per bit: pass, XOR (bind), AND or NOT against the
//    encoder register, plus a saturating up/down 8-bit counter for bundling
//    (+1 for a one, -1 for a zero); the bundle result bit is 1 when its
//    counter is above zero (majority).
//  * Item-memory rematerialisation (map_i): starting from the seed, the D
//    bits of the input sample, most significant first, each select pi1 (bit
//    1) or pi0 (bit 0) for one cycle; after D cycles the register holds the
//    sample's quasi-orthogonal HD vector. busy_o is high meanwhile.
// The structure is the paper's; the permutations p(i) = (A*i + B) mod W, the
// xorshift seed, the 4-bit flip granularity and the majority tie rule are
// this design's choices, since the paper does not give them.
module hdc_vector_encoder #(
  parameter int unsigned W     = 512,
  parameter int unsigned CNT_W = 8
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          op_valid_i,   // apply src/flip/perm/comb this cycle
  input  logic [1:0]    src_i,        // 0 zero, 1 seed, 2 AM row, 3 register
  input  logic [6:0]    flip_i,
  input  logic [2:0]    perm_i,       // 0 none, 1 pi0, 2 pi1, 3 pi0^-1, 4 pi1^-1
  input  logic [1:0]    comb_i,       // 0 pass, 1 xor, 2 and, 3 not
  input  logic [W-1:0]  am_rdata_i,
  input  logic          bundle_i,     // add register into counters
  input  logic          bclear_i,     // clear counters
  input  logic          bout_i,       // register <= majority of counters
  input  logic          map_i,        // start IM mapping of sample_i
  input  logic [15:0]   sample_i,
  input  logic [4:0]    dwidth_i,     // D, 1..16
  output logic          busy_o,
  output logic [W-1:0]  reg_o
);
  localparam int unsigned PA0 = 117, PB0 = 33, PA1 = 301, PB1 = 7;

  function automatic int unsigned pidx(input int unsigned a, input int unsigned b, input int unsigned i);
    return (a * i + b) % W;
  endfunction

  function automatic logic [W-1:0] make_seed();
    logic [31:0] s;
    logic [W-1:0] v;
    s = 32'h1234_5678;
    v = '0;
    for (int i = 0; i < W / 32; i++) begin
      s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5);
      v[32*i +: 32] = s;
    end
    return v;
  endfunction
  localparam logic [W-1:0] SEED = make_seed();

  function automatic logic [W-1:0] permute(input logic [W-1:0] v, input logic [2:0] sel);
    logic [W-1:0] o;
    o = v;
    for (int i = 0; i < W; i++) begin
      unique case (sel)
        3'd1: o[i] = v[pidx(PA0, PB0, i)];
        3'd2: o[i] = v[pidx(PA1, PB1, i)];
        3'd3: o[pidx(PA0, PB0, i)] = v[i];
        3'd4: o[pidx(PA1, PB1, i)] = v[i];
        default: ;
      endcase
    end
    return o;
  endfunction

  logic [W-1:0] reg_q, src_v, flip_v, mix_v;
  logic [W-1:0][CNT_W-1:0] cnt_q;
  logic [4:0]  mcnt_q;
  logic [15:0] msample_q;
  logic        mbusy_q;

  assign busy_o = mbusy_q;
  assign reg_o  = reg_q;

  always_comb begin
    unique case (src_i)
      2'd0: src_v = '0;
      2'd1: src_v = SEED;
      2'd2: src_v = am_rdata_i;
      default: src_v = reg_q;
    endcase
    flip_v = src_v;
    for (int i = 0; i < W; i++)
      if (i < 4 * int'(flip_i)) flip_v[i] = ~src_v[i];
    mix_v = permute(flip_v, perm_i);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      reg_q <= '0; cnt_q <= '0; mcnt_q <= '0; msample_q <= '0; mbusy_q <= 1'b0;
    end else begin
      if (mbusy_q) begin
        reg_q     <= permute(reg_q, msample_q[15] ? 3'd2 : 3'd1);
        msample_q <= msample_q << 1;
        mcnt_q    <= mcnt_q - 1'b1;
        if (mcnt_q == 5'd1) mbusy_q <= 1'b0;
      end else if (map_i) begin
        reg_q     <= SEED;
        msample_q <= sample_i << (5'd16 - dwidth_i);
        mcnt_q    <= dwidth_i;
        mbusy_q   <= (dwidth_i != 0);
      end else if (op_valid_i) begin
        unique case (comb_i)
          2'd0: reg_q <= mix_v;
          2'd1: reg_q <= mix_v ^ reg_q;
          2'd2: reg_q <= mix_v & reg_q;
          default: reg_q <= ~mix_v;
        endcase
      end else if (bout_i) begin
        for (int i = 0; i < W; i++) reg_q[i] <= !cnt_q[i][CNT_W-1] && (cnt_q[i] != '0);
      end
      // encoder unit counters (two's complement, saturating)
      if (bclear_i && bundle_i) begin
        for (int i = 0; i < W; i++) cnt_q[i] <= reg_q[i] ? CNT_W'(1) : '1;
      end else if (bclear_i) cnt_q <= '0;
      else if (bundle_i) begin
        for (int i = 0; i < W; i++) begin
          if (reg_q[i]) begin
            if (cnt_q[i] != {1'b0, {(CNT_W-1){1'b1}}}) cnt_q[i] <= cnt_q[i] + 1'b1;
          end else begin
            if (cnt_q[i] != {1'b1, {(CNT_W-1){1'b0}}}) cnt_q[i] <= cnt_q[i] - 1'b1;
          end
        end
      end
    end
  end
endmodule
