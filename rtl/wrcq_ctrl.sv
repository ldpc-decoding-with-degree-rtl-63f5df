// wrcq_ctrl: schedule of the layered W-RCQ decoder.
//
// The paper's layered schedule processes the layers (block rows) one after the
// other in every iteration and stops when all parity checks hold or the
// iteration limit is reached. This controller runs, for every layer m, two
// phases of deg(m) cycles each, one circulant k per cycle:
//   PH_VC : read posterior block and stored C2V block of circulant k, form and
//           quantize the V2C messages, feed the check-node units;
//   PH_CV : read the V2C block back, form the new C2V messages, write them and
//           the updated posterior block;
// followed by one drain cycle, so that the last posterior write of a layer has
// landed before the next layer reads. After the last layer a check pass
// (PH_SYN) reads all circulants again, one per cycle, and one drain cycle and one
// decision cycle later the controller either stops (parity satisfied, or
// max_iter reached) or starts the next iteration.
// Memory reads take one cycle, so every issued step is repeated one cycle later
// on the b_* outputs, which drive the datapath that consumes the read data.
// Only the first num_layers layers are processed: a rate-compatible code whose
// higher rates use the top rows of one base matrix is decoded at a chosen rate
// by lowering this count.
// Cycles per iteration: sum over the layers in use of (3*deg(m) + 1) + 2, plus
// one start cycle per decode. Layers need at least two circulants (real codes
// have check degree >= 3). The phase structure and the check pass are the
// design's own; the paper defers its FPGA schedule to other work.
module wrcq_ctrl
  import wrcq_pkg::*;
#(
  parameter int unsigned MB     = MB_DEF,
  parameter int unsigned DC_MAX = DC_MAX_DEF,
  parameter int unsigned IT_MAX = IT_MAX_DEF,
  localparam int unsigned MW    = (MB > 1) ? $clog2(MB) : 1,
  localparam int unsigned KW    = $clog2(DC_MAX),
  localparam int unsigned DW    = $clog2(DC_MAX + 1),
  localparam int unsigned IW    = $clog2(IT_MAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] deg,        // circulants in layer m (from the code table)
  input  logic [IW-1:0] max_iter,
  input  logic [MW:0]   num_layers, // layers in use, 1..MB (rate selection)
  input  logic          syn_fail,   // parity-check result of the last pass
  // issue step
  output logic [MW-1:0] m,
  output logic [KW-1:0] k,
  output logic [IW-1:0] it,
  output logic          iss_valid,
  output phase_e        iss_phase,
  // consume step (one cycle after issue)
  output logic          b_valid,
  output phase_e        b_phase,
  output logic [MW-1:0] b_m,
  output logic [KW-1:0] b_k,
  output logic          b_first,
  output logic          b_last,
  output logic          syn_clear,
  // status
  output logic          busy,
  output logic          done,
  output logic          converged,
  output logic [IW-1:0] iters_used
);

  typedef enum logic [2:0] {S_IDLE, S_VC, S_CV, S_DRAIN, S_SYN, S_SYN_DRAIN, S_DECIDE} state_e;
  state_e state;

  logic last_k, last_m;
  assign last_k = (32'(k) + 1 >= 32'(deg));
  assign last_m = (32'(m) + 1 >= 32'(num_layers)) || (32'(m) == MB - 1);

  always_comb begin
    iss_valid = (state == S_VC) || (state == S_CV) || (state == S_SYN);
    unique case (state)
      S_CV:    iss_phase = PH_CV;
      S_SYN:   iss_phase = PH_SYN;
      default: iss_phase = PH_VC;
    endcase
    syn_clear = (state == S_DRAIN) && last_m;
    busy      = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      m          <= '0;
      k          <= '0;
      it         <= '0;
      done       <= 1'b0;
      converged  <= 1'b0;
      iters_used <= '0;
      b_valid    <= 1'b0;
      b_phase    <= PH_VC;
      b_m        <= '0;
      b_k        <= '0;
      b_first    <= 1'b0;
      b_last     <= 1'b0;
    end else begin
      done    <= 1'b0;
      b_valid <= iss_valid;
      b_phase <= iss_phase;
      b_m     <= m;
      b_k     <= k;
      b_first <= (k == '0);
      b_last  <= last_k;
      unique case (state)
        S_IDLE: if (start) begin
          state     <= S_VC;
          m         <= '0;
          k         <= '0;
          it        <= '0;
          converged <= 1'b0;
        end
        S_VC: begin
          if (last_k) begin
            k     <= '0;
            state <= S_CV;
          end else k <= k + 1'b1;
        end
        S_CV: begin
          if (last_k) state <= S_DRAIN;
          else        k <= k + 1'b1;
        end
        S_DRAIN: begin
          k <= '0;
          if (last_m) begin
            m     <= '0;
            state <= S_SYN;
          end else begin
            m     <= m + 1'b1;
            state <= S_VC;
          end
        end
        S_SYN: begin
          if (last_k) begin
            k <= '0;
            if (last_m) state <= S_SYN_DRAIN;
            else                  m <= m + 1'b1;
          end else k <= k + 1'b1;
        end
        S_SYN_DRAIN: begin
          m     <= '0;
          state <= S_DECIDE;
        end
        S_DECIDE: begin
          if (!syn_fail || (32'(it) + 1 >= 32'(max_iter))) begin
            state      <= S_IDLE;
            done       <= 1'b1;
            converged  <= !syn_fail;
            iters_used <= it + 1'b1;
          end else begin
            it    <= it + 1'b1;
            state <= S_VC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A layer with fewer than two circulants would read its V2C buffer word in
  // the cycle it is written. (The reset also disables this check, so the
  // linter notes rst_n as used both asynchronously and synchronously.)
  property p_deg_ok;
    @(posedge clk) disable iff (!rst_n) (state == S_VC) |-> (deg >= 2);
  endproperty
  a_deg_ok: assert property (p_deg_ok);

endmodule
