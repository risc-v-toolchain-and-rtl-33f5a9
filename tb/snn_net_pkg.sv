// snn_net_pkg: a software view of a one-layer spiking classifier as a
// program of SNN operations, for the end-to-end testbenches.
//
// The network has NIN binary inputs (784 = 28x28 by default) and NOUT LIF
// neurons with 1-bit synapses, stored as 64-bit words. Inputs are synthetic
// "digits": one random prototype image per class, rate (Poisson) encoded each
// time step (pixel on: spike probability 1/2, off: 1/32); the prototypes share
// a common part so that classes overlap. Per time step and
// neuron the program issues
//   SPK x words         count valid spikes word by word (summed in software)
//   NEU                 LIF update
//   SRW POST            (training) teacher: force the label neuron to fire,
//                       keep the others silent, only if its own spike differs
//   SYN x words         (training, if POST) binary stochastic STDP
// Every operation carries its expected result, computed here with the
// reference model while the program is generated, so results can be checked
// in order as the hardware produces them.
package snn_net_pkg;
  import snn_pkg::*;
  import snn_model_pkg::*;

  typedef struct {
    snn_req_t    req;
    logic [63:0] exp;
    logic        has_exp;
  } op_t;

  class snn_net;
    int unsigned nin, nout, nwords, nclass;
    logic [63:0] w[][];        // weights [neuron][word]
    int unsigned v[];          // membrane potentials
    int unsigned out_spk[];    // output spikes of the current sample
    logic [63:0] proto[][];    // class prototypes [class][word]
    logic [63:0] base[];
    logic [15:0] vth, vleak;
    logic [9:0]  pltd;
    logic        post;
    ltd_model    m;
    op_t         prog[$];
    // statistics of what the program exercised
    int unsigned n_fire, n_floor, n_ltp, n_ltd, n_teacher;

    function new(int unsigned nin_, int unsigned nout_, int unsigned nclass_);
      nin = nin_; nout = nout_; nclass = nclass_;
      nwords = (nin + 63) / 64;
      w = new[nout]; v = new[nout]; out_spk = new[nout];
      foreach (w[n]) begin
        w[n] = new[nwords];
        foreach (w[n][k]) w[n][k] = {$urandom, $urandom} & valid_mask(k);
      end
      // Prototypes share a common stroke pattern, which makes classes overlap.
      base = new[nwords];
      foreach (base[k]) base[k] = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      proto = new[nclass];
      foreach (proto[c]) begin
        proto[c] = new[nwords];
        foreach (proto[c][k])
          proto[c][k] = (base[k] | ({$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom}))
                        & valid_mask(k);
      end
      m = new(64);
      vth = 16'd16; vleak = 16'd1; pltd = 10'd0; post = 1'b0;
    endfunction

    function logic [63:0] valid_mask(int unsigned k);
      int unsigned rem = nin - 64 * k;
      return (rem >= 64) ? '1 : ((64'd1 << rem) - 1);
    endfunction

    function void emit(snn_op_e op, sreg_e sr, logic [63:0] a, logic [63:0] b, logic [63:0] e, logic he);
      op_t o;
      o.req.op = op; o.req.sreg = sr; o.req.src1 = a; o.req.src2 = b;
      o.exp = e; o.has_exp = he;
      prog.push_back(o);
    endfunction

    function void srw(sreg_e sr, logic [63:0] val);
      emit(SNN_SRW, sr, val, 64'd0, 64'd0, 1'b1);
      case (sr)
        SR_VTH:   vth  = val[15:0];
        SR_VLEAK: vleak = val[15:0];
        SR_PLTD:  pltd = val[9:0];
        SR_SEED:  m.reseed(val[15:0]);
        SR_POST:  post = val[0];
        default: ;
      endcase
    endfunction

    function void configure(int unsigned th, int unsigned lk, int unsigned p, logic [15:0] seed);
      srw(SR_VTH, 64'(th));
      emit(SNN_SRR, SR_VTH, 64'd0, 64'd0, 64'(th), 1'b1);
      srw(SR_VLEAK, 64'(lk));
      srw(SR_PLTD, 64'(p));
      emit(SNN_SRR, SR_PLTD, 64'd0, 64'd0, 64'(p), 1'b1);
      srw(SR_SEED, 64'(seed));
    endfunction

    // One sample: T time steps of class c. If `train`, the neurons lo..hi
    // learn with the teacher signal; the others only integrate.
    function void sample(int unsigned c, int unsigned t_steps, bit train,
                         int unsigned lo = 0, int unsigned hi = 1 << 20);
      logic [63:0] in_w[];
      in_w = new[nwords];
      foreach (v[n]) begin v[n] = 0; out_spk[n] = 0; end
      for (int unsigned t = 0; t < t_steps; t++) begin
        foreach (in_w[k]) begin
          for (int b = 0; b < 64; b++)
            in_w[k][b] = proto[c][k][b] ? ($urandom % 2 == 0) : ($urandom % 32 == 0);
          in_w[k] &= valid_mask(k);
        end
        for (int unsigned n = 0; n < nout; n++) begin
          int unsigned cnt = 0, pc;
          logic [16:0] r;
          logic teach;
          foreach (in_w[k]) begin
            pc = m_popcount(in_w[k] & w[n][k], 64);
            cnt += pc;
            emit(SNN_SPK, SR_VTH, in_w[k], w[n][k], 64'(pc), 1'b1);
          end
          if (v[n] < vleak) n_floor++;
          r = m_lif(16, v[n], cnt, vleak, vth);
          emit(SNN_NEU, SR_VTH, 64'(v[n]), 64'(cnt), {r[16], 47'd0, r[15:0]}, 1'b1);
          v[n] = r[15:0];
          post = r[16];
          if (r[16]) begin n_fire++; out_spk[n]++; end
          if (train && n >= lo && n <= hi) begin
            teach = ((n % nclass) == c);
            if (teach != post) begin srw(SR_POST, 64'(teach)); n_teacher++; end
            if (post) begin
              foreach (in_w[k]) begin
                logic [63:0] nw = m.stdp(w[n][k], in_w[k], post, pltd);
                n_ltp += $countones(nw & ~w[n][k]);
                n_ltd += $countones(w[n][k] & ~nw);
                emit(SNN_SYN, SR_VTH, w[n][k], in_w[k], nw, 1'b1);
                m.step();
                w[n][k] = nw;
              end
            end
          end
        end
      end
    endfunction

    // Class decided by the neuron with the most output spikes (neuron n
    // stands for class n mod nclass); -1 if no neuron fired.
    function int winner(int unsigned hi = 1 << 20);
      int best = -1, bs = 0;
      foreach (out_spk[n]) if (n <= hi && out_spk[n] > bs) begin bs = out_spk[n]; best = n % nclass; end
      return best;
    endfunction
  endclass
endpackage
