// reps_ref_pkg: reference model of the REPS per-connection procedures for
// testbenches, written with plain integers and queues-free arrays, independent
// of the RTL. step() applies one operation and reports the expected EV source
// and EV (-1 when the EV is a random draw).
package reps_ref_pkg;
  import reps_pkg::*;

  class reps_ref;
    int ev[BUF_SIZE];
    bit val[BUF_SIZE];
    int head, nv, expl;
    int unsigned exit_t;
    bit frz, filled;

    function new();
      clear();
    endfunction

    function void clear();
      for (int i = 0; i < BUF_SIZE; i++) begin ev[i] = 0; val[i] = 0; end
      head = 0; nv = 0; expl = 0; exit_t = 0; frz = 0; filled = 0;
    endfunction

    // now and exit_t are 32-bit time stamps compared wrap-aware
    function void step(reps_op_e op, int aev, bit aecn, int unsigned now,
                       int cwnd, int unsigned fto,
                       output ev_src_e src, output int eev,
                       output bit een, output bit eex);
      int B = BUF_SIZE;
      src = SRC_NONE; eev = 0; een = 0; eex = 0;
      case (op)
        OP_ACK: if (!aecn) begin
          if (!val[head]) nv++;
          ev[head] = aev; val[head] = 1; head = (head + 1) % B; filled = 1;
          if (frz && int'(now - exit_t) > 0) begin
            frz = 0; expl = cwnd; eex = 1;
          end
        end
        OP_FAIL: if (!frz && expl == 0) begin
          frz = 1; exit_t = now + fto; een = 1;
        end
        OP_SEND: begin
          bit done = 0;
          if (expl > 0) begin
            expl--;
            if (expl % B == 0) begin src = SRC_EXPLORE; eev = -1; done = 1; end
          end
          if (!done) begin
            if (!filled || (nv == 0 && !frz)) begin src = SRC_EXPLORE; eev = -1; end
            else if (nv > 0) begin
              int off = (head - nv + B) % B;
              val[off] = 0; nv--; src = SRC_REUSE; eev = ev[off];
            end else begin
              src = SRC_FROZEN; eev = ev[head]; head = (head + 1) % B;
            end
          end
        end
        OP_CLEAR: clear();
        default: ;
      endcase
    endfunction
  endclass
endpackage
