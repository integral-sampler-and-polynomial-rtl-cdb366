// gen_ctrl: general controller of the integral sampler / polynomial
// multiplier.  It runs one Ring-LWE key-generation style operation
//     b(x) = a(x) * s(x) + e(x)  in  Z_q[x] / (x^n + 1)
// where a(x) was loaded by the host and s(x), e(x) are drawn from the
// discrete Gaussian sampler that shares the butterfly array.  Phases:
//   SAMP_S, SAMP_E  the array is lent to the selected sampling control
//                   (Knuth-Yao: wide adder, Ziggurat: wide multiplier); n
//                   samples each are stored as residues mod q
//   NTT_A, NTT_S    a_i * psi^i (pre-multipliers) streamed through the
//                   forward NTT; the bit-reversed output is written back in
//                   natural order, in place
//   MUL             A_k * S_k on the pre-multipliers, streamed through the
//                   inverse NTT, written back in natural order into A
//   POST            c_i * psi^-i * n^-1 on the two pre-multipliers, plus
//                   e_i (modular adder), written into A
// Each streaming phase issues one coefficient per cycle and ends when the
// last result has been written (about 2n + log2(n) cycles).  The host owns
// memory A through host_* while the controller is idle (host_rdata is
// memory A's read data, passed through unregistered); `go` starts an
// operation and `done` pulses at its end.  The phase order and the use of
// the pre-multipliers for the psi weighting follow the negative wrapped
// convolution the paper refers to; the rest is this design's choice.
module gen_ctrl
  import lbc_pkg::*;
#(
  parameter int unsigned W   = lbc_pkg::W_DEF,
  parameter int unsigned Q   = lbc_pkg::Q_DEF,
  parameter int unsigned N   = lbc_pkg::N_DEF,
  parameter int unsigned PSI = lbc_pkg::PSI_DEF,
  parameter int unsigned SW  = 12,
  parameter int unsigned AW  = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 go,
  input  samp_sel_t            samp_sel,
  output logic                 busy,
  output logic                 done,
  // host access to memory A while idle
  input  logic                 host_we,
  input  logic [AW-1:0]        host_addr,
  input  logic [W-1:0]         host_wdata,
  output logic [W-1:0]         host_rdata,
  // sampler
  output logic                 samp_en,
  input  logic                 smp_valid,
  input  logic signed [SW-1:0] smp,
  output logic                 smp_ready,
  // butterfly array
  output arr_mode_t            arr_mode,
  output logic                 arr_inv,
  output logic                 arr_start,
  output logic [W-1:0]         arr_din,
  output logic [W-1:0]         arr_w0,
  output logic [W-1:0]         arr_w1,
  input  logic [W-1:0]         arr_pre_q,
  input  logic [W-1:0]         arr_dout,
  input  logic                 arr_dout_start,
  // memories A, S, E
  output logic [2:0]           m_we,
  output logic [AW-1:0]        m_waddr [3],
  output logic [W-1:0]         m_wdata [3],
  output logic [AW-1:0]        m_raddr [3],
  input  logic [W-1:0]         m_rdata [3]
);
  localparam int unsigned MA = 0, MS = 1, ME = 2;
  localparam int unsigned NINV = modpow(N, Q - 2, Q);

  typedef enum logic [2:0] {
    P_IDLE, P_SAMP_S, P_SAMP_E, P_NTT_A, P_NTT_S, P_MUL, P_POST
  } phase_t;

  // psi^i and psi^-i, i = 0 .. N-1
  logic [W-1:0] psi_pow [N];
  logic [W-1:0] psi_ipw [N];
  initial begin
    for (int unsigned i = 0; i < N; i++) begin
      psi_pow[i] = W'(modpow(PSI, i, Q));
      psi_ipw[i] = W'(modpow(PSI, 2 * N - i, Q));
    end
  end

  phase_t        ph;
  logic [AW:0]   rcnt;        // coefficients issued
  logic [AW:0]   wcnt;        // results written
  logic          rd_v1, rd_v2;
  logic [AW-1:0] ri1, ri2;    // index of the word on rdata / pre_q
  logic          out_on;
  logic [W-1:0]  e_d;
  logic [W-1:0]  sum_post;
  logic          unused_cout;

  logic stream;
  assign stream = (ph == P_NTT_A) || (ph == P_NTT_S) || (ph == P_MUL) || (ph == P_POST);
  assign busy   = (ph != P_IDLE);

  // sampled value as a residue mod q
  logic [W-1:0] smp_mod;
  assign smp_mod = smp[SW-1] ? W'(Q - 32'(unsigned'(-smp))) : W'(unsigned'(smp));

  mod_add #(.W(W), .Q(Q)) u_add_e (
    .a(arr_pre_q), .b(e_d), .sub(1'b0), .gen(1'b0), .cin(1'b0),
    .s(sum_post), .cout(unused_cout));

  // ---------------- datapath steering ----------------
  always_comb begin
    samp_en   = (ph == P_SAMP_S) || (ph == P_SAMP_E);
    smp_ready = samp_en;
    arr_mode  = samp_en ? ((samp_sel == SAMP_KY) ? ARR_ADD : ARR_MUL) : ARR_NTT;
    arr_inv   = (ph == P_MUL);
    arr_start = stream && (ph != P_POST) && rd_v1 && (ri1 == '0);
    arr_din   = m_rdata[(ph == P_NTT_S) ? MS : MA];
    arr_w0    = '0;
    arr_w1    = W'(1);
    unique case (ph)
      P_NTT_A, P_NTT_S: arr_w0 = psi_pow[ri1];
      P_MUL:            arr_w0 = m_rdata[MS];
      P_POST: begin
        arr_w0 = psi_ipw[ri1];
        arr_w1 = W'(NINV);
      end
      default: ;
    endcase

    for (int m = 0; m < 3; m++) begin
      m_we[m]    = 1'b0;
      m_waddr[m] = '0;
      m_wdata[m] = '0;
      m_raddr[m] = rcnt[AW-1:0];
    end
    host_rdata = m_rdata[MA];
    unique case (ph)
      P_IDLE: begin
        m_raddr[MA] = host_addr;
        m_we[MA]    = host_we;
        m_waddr[MA] = host_addr;
        m_wdata[MA] = host_wdata;
      end
      P_SAMP_S, P_SAMP_E: begin
        m_we[(ph == P_SAMP_S) ? MS : ME]    = smp_valid;
        m_waddr[(ph == P_SAMP_S) ? MS : ME] = wcnt[AW-1:0];
        m_wdata[(ph == P_SAMP_S) ? MS : ME] = smp_mod;
      end
      P_NTT_A, P_NTT_S, P_MUL: begin
        // the transform leaves in bit-reversed order
        m_we[(ph == P_NTT_S) ? MS : MA]    = out_on || arr_dout_start;
        m_waddr[(ph == P_NTT_S) ? MS : MA] = AW'(bitrev(32'(wcnt[AW-1:0]), AW));
        m_wdata[(ph == P_NTT_S) ? MS : MA] = arr_dout;
      end
      P_POST: begin
        m_we[MA]    = rd_v2;
        m_waddr[MA] = ri2;
        m_wdata[MA] = sum_post;
      end
      default: ;
    endcase
  end

  // ---------------- sequencing ----------------
  logic last_write;
  assign last_write = (ph == P_POST) ? (rd_v2 && ri2 == AW'(N - 1))
                                     : ((out_on || arr_dout_start) && wcnt == (AW+1)'(N - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= P_IDLE; rcnt <= '0; wcnt <= '0; done <= 1'b0;
      rd_v1 <= 1'b0; rd_v2 <= 1'b0; ri1 <= '0; ri2 <= '0;
      out_on <= 1'b0; e_d <= '0;
    end else begin
      done  <= 1'b0;
      rd_v1 <= stream && (rcnt < (AW+1)'(N));
      ri1   <= rcnt[AW-1:0];
      rd_v2 <= rd_v1;
      ri2   <= ri1;
      e_d   <= m_rdata[ME];
      if (stream && rcnt < (AW+1)'(N)) rcnt <= rcnt + 1'b1;
      unique case (ph)
        P_IDLE: if (go) begin
          ph <= P_SAMP_S; rcnt <= '0; wcnt <= '0;
        end
        P_SAMP_S, P_SAMP_E: if (smp_valid) begin
          if (wcnt == (AW+1)'(N - 1)) begin
            ph   <= (ph == P_SAMP_S) ? P_SAMP_E : P_NTT_A;
            wcnt <= '0;
            rcnt <= '0;
          end else wcnt <= wcnt + 1'b1;
        end
        default: begin
          if (ph != P_POST && arr_dout_start) out_on <= 1'b1;
          if (ph != P_POST && (out_on || arr_dout_start)) wcnt <= wcnt + 1'b1;
          if (last_write) begin
            out_on <= 1'b0;
            wcnt   <= '0;
            rcnt   <= '0;
            rd_v1  <= 1'b0;
            rd_v2  <= 1'b0;
            unique case (ph)
              P_NTT_A: ph <= P_NTT_S;
              P_NTT_S: ph <= P_MUL;
              P_MUL:   ph <= P_POST;
              default: begin ph <= P_IDLE; done <= 1'b1; end
            endcase
          end
        end
      endcase
    end
  end
endmodule
