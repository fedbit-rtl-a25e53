// engine_scheduler: the crypto engine's control logic, for both scheduling and handshaking.
//
// Each macro operation is a fixed list of steps. Each step starts one functional unit
// (NTT/INTT unit, element-wise unit or DELTA divider) with a start pulse. The scheduler then
// waits for that unit's done pulse before it starts the next step. The step lists follow
// the BRAM dataflow of the preparation, encryption and decryption stages (BRAM0..2 = B0..B2):
//
//   PREP : NTT(B0) ; NTT(B1) ; B1 = B0*B1, B0 = -B0 ; INTT(B1) ; B1 = B1 + B2
//          in: B0 = a, B1 = s, B2 = e   ->  out: B0 = NTT(-a), B1 = as + e
//   ENC  : B2 = DELTA*B2 ; B2 = B2 + B1
//          in: B0 = NTT(-a), B1 = as+e, B2 = m  ->  out: B0 = c1, B2 = c0 = as+e+DELTA*m
//   DEC  : B2 = B0*B2 ; INTT(B2) ; B1 = B1 + B2 ; DIVIDE(B1)
//          in: B0 = sum NTT(-a), B1 = sum c0, B2 = NTT(s)  ->  out: B1 = m'
//   NTT / INTT : one transform of buffer buf_id. The host uses it to turn s into NTT(s).
//
// The figure shows NTT(a) and NTT(s) in the same time slot. This design has one NTT unit
// and runs the two one after the other. Where NTT(s) for decryption comes from is not shown;
// here the host loads it, after making it with the NTT command. A step is started only
// when its unit is idle. `done` pulses one cycle after the last step ends.
module engine_scheduler
  import fedbit_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  eng_op_e op,
  input  bufsel_t buf_id,
  output logic    busy,
  output logic    done,
  // NTT / INTT unit
  output logic    ntt_start,
  output logic    ntt_inverse,
  output bufsel_t ntt_buf,
  input  logic    ntt_done,
  // element-wise unit
  output logic    vec_start,
  output vop_e    vec_op,
  output bufsel_t vec_a,
  output bufsel_t vec_b,
  output bufsel_t vec_dst,
  input  logic    vec_done,
  // DELTA divider
  output logic    dec_start,
  output bufsel_t dec_buf,
  input  logic    dec_done
);
  typedef enum logic [2:0] {K_END, K_NTT, K_INTT, K_VEC, K_DEC} kind_e;
  typedef struct packed {
    kind_e   kind;
    vop_e    vop;
    bufsel_t a;
    bufsel_t b;
    bufsel_t d;
  } step_t;

  function automatic step_t step_of(eng_op_e o, logic [2:0] i, bufsel_t bsel);
    step_t s;
    s = '{kind: K_END, vop: VOP_ADD, a: 2'd0, b: 2'd0, d: 2'd0};
    unique case (o)
      EOP_PREP: unique case (i)
        3'd0: s = '{K_NTT,  VOP_ADD,    2'd0, 2'd0, 2'd0};
        3'd1: s = '{K_NTT,  VOP_ADD,    2'd1, 2'd1, 2'd1};
        3'd2: s = '{K_VEC,  VOP_MULNEG, 2'd0, 2'd1, 2'd1};
        3'd3: s = '{K_INTT, VOP_ADD,    2'd1, 2'd1, 2'd1};
        3'd4: s = '{K_VEC,  VOP_ADD,    2'd1, 2'd2, 2'd1};
        default: ;
      endcase
      EOP_ENC: unique case (i)
        3'd0: s = '{K_VEC,  VOP_SCALE,  2'd2, 2'd2, 2'd2};
        3'd1: s = '{K_VEC,  VOP_ADD,    2'd2, 2'd1, 2'd2};
        default: ;
      endcase
      EOP_DEC: unique case (i)
        3'd0: s = '{K_VEC,  VOP_MUL,    2'd0, 2'd2, 2'd2};
        3'd1: s = '{K_INTT, VOP_ADD,    2'd2, 2'd2, 2'd2};
        3'd2: s = '{K_VEC,  VOP_ADD,    2'd1, 2'd2, 2'd1};
        3'd3: s = '{K_DEC,  VOP_ADD,    2'd1, 2'd1, 2'd1};
        default: ;
      endcase
      EOP_NTT:  if (i == 3'd0) s = '{K_NTT,  VOP_ADD, bsel, bsel, bsel};
      EOP_INTT: if (i == 3'd0) s = '{K_INTT, VOP_ADD, bsel, bsel, bsel};
      default: ;
    endcase
    return s;
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_e;
  state_e     state;
  eng_op_e    op_q;
  bufsel_t    buf_q;
  logic [2:0] idx;
  step_t      cur;
  logic       unit_done;

  assign cur = step_of(op_q, idx, buf_q);

  always_comb begin
    unique case (cur.kind)
      K_NTT, K_INTT: unit_done = ntt_done;
      K_VEC:         unit_done = vec_done;
      K_DEC:         unit_done = dec_done;
      default:       unit_done = 1'b1;
    endcase
  end

  assign ntt_start   = (state == S_ISSUE) && (cur.kind == K_NTT || cur.kind == K_INTT);
  assign ntt_inverse = (cur.kind == K_INTT);
  assign ntt_buf     = cur.a;
  assign vec_start   = (state == S_ISSUE) && (cur.kind == K_VEC);
  assign vec_op      = cur.vop;
  assign vec_a       = cur.a;
  assign vec_b       = cur.b;
  assign vec_dst     = cur.d;
  assign dec_start   = (state == S_ISSUE) && (cur.kind == K_DEC);
  assign dec_buf     = cur.a;
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      op_q  <= EOP_PREP;
      buf_q <= '0;
      idx   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q  <= op;
          buf_q <= buf_id;
          idx   <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          if (cur.kind == K_END) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_WAIT;
        end
        S_WAIT: if (unit_done) begin
          idx   <= idx + 1'b1;
          state <= S_ISSUE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("engine_scheduler: start while busy");
endmodule
