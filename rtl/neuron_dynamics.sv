// neuron_dynamics -- one neuron datapath: advances a neuron's state by one
// timestep, purely combinational.
//
// Inputs are the neuron's stored state, the model parameters and the two
// receptor sums read from the delay buffer's head slot (excitatory,
// inhibitory). Arithmetic is 32-bit signed fixed point, 12 integer bits.
// Two models are selectable at run time:
//   NM_LIF_SUB   (leaky integrate-and-fire as in snnTorch's Leaky neuron,
//                 reset by subtraction):
//                 V' = decay*V + Iexc + Iinh + Iext - (V > thr ? thr : 0),
//                 spike = V' > thr.
//   NM_IAF_DELTA (leaky integrate-and-fire with delta synapses, as NEST's
//                 iaf_psc_delta, potentials relative to rest):
//                 while Tr > 0: Tr = Tr-1, V = Vreset, input discarded;
//                 else V' = decay*V + Iext + Iexc + Iinh, and if V' >= thr:
//                 spike, V' = Vreset, Tr = tref.
// A non-leaky integrate-and-fire neuron is either model with decay = 1.0.
// The source names these models and the state variables (V_m, refractory
// counter, currents); the update equations are the standard forms of the
// named reference neurons, written out here by this design. The adaptive
// exponential model the source also lists is not included.
module neuron_dynamics
  import aigor_pkg::*;
(
  input  nparams_t prm,
  input  nstate_t  st,
  input  fix_t     in_exc,
  input  fix_t     in_inh,
  output nstate_t  st_next,
  output logic     spike
);
  fix_t leak, v_new;

  always_comb begin
    st_next      = st;
    st_next.iexc = in_exc;
    st_next.iinh = in_inh;
    spike        = 1'b0;
    leak         = fix_mul(prm.decay, st.vm);
    v_new        = leak + prm.iext + in_exc + in_inh;
    case (prm.model)
      NM_LIF_SUB: begin
        if (st.vm > prm.thr) v_new = v_new - prm.thr;
        st_next.vm = v_new;
        st_next.tr = '0;
        spike      = (v_new > prm.thr);
      end
      NM_IAF_DELTA: begin
        if (st.tr != 0) begin
          st_next.tr = st.tr - 1'b1;
          st_next.vm = prm.vreset;
        end else if (v_new >= prm.thr) begin
          spike      = 1'b1;
          st_next.vm = prm.vreset;
          st_next.tr = prm.tref;
        end else begin
          st_next.vm = v_new;
        end
      end
      default: ;
    endcase
  end
endmodule
