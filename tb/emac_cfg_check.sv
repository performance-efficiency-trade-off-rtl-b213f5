// emac_cfg_check: drives one dp_neuron (output neuron, no ReLU) of a given
// format and size with random dot products and checks every result.
//
// Used by tb_emac_sweep to cover the bit widths and format parameters over
// which the design is evaluated.  Operands are random bit patterns of the
// format (posit Not-a-Real and float all-ones exponents excluded), the
// dot products 1 to 16 terms long, back to back or with gaps.  The reference
// is exact (dp_ref_pkg) and generic in the format parameters.  Each result
// must appear three cycles after its last input.  `done` rises when all
// DOTS dot products have been checked.
module emac_cfg_check
  import dp_pkg::*;
  import dp_ref_pkg::*;
#(
  parameter fmt_e FMT  = FMT_POSIT,
  parameter int   N    = 8,
  parameter int   ES   = 1,
  parameter int   WE   = 4,
  parameter int   Q    = 5,
  parameter int   DOTS = 150
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int WF  = N - 1 - WE;
  localparam int FSH = (2 ** (WE - 1)) - 1 + WF - 1;
  localparam int L   = (2 ** ES) * 2 * (N - 2);

  logic rst_n = 1'b0;
  emac_ctl_t ctl;
  logic [N-1:0] w, a, b, res;
  logic ov;

  dp_neuron #(.FMT(FMT), .N(N), .ES(ES), .WE(WE), .Q(Q), .RELU(1'b0)) dut (
    .clk, .rst_n, .in_ctl(ctl), .weight(w), .activation(a), .bias(b), .out_valid(ov), .out(res));

  int cyc = 0;
  logic [N-1:0] exp_q[$];
  int due_q[$];

  always @(posedge clk) cyc <= cyc + 1;

  function automatic big_t vbias(logic [N-1:0] v);
    case (FMT)
      FMT_FIXED: return big_t'($signed(v)) <<< Q;
      FMT_FLOAT: return float_val(32'(v), WE, WF) <<< FSH;
      default:   return posit_val(32'(v), N, ES, L);
    endcase
  endfunction

  function automatic big_t vprod(logic [N-1:0] x, logic [N-1:0] y);
    case (FMT)
      FMT_FIXED: return big_t'($signed(x)) * big_t'($signed(y));
      FMT_FLOAT: return float_val(32'(x), WE, WF) * float_val(32'(y), WE, WF);
      default:   return posit_val(32'(x), N, ES, L / 2) * posit_val(32'(y), N, ES, L / 2);
    endcase
  endfunction

  function automatic logic [N-1:0] vround(big_t s);
    big_t q, r, half, lim;
    case (FMT)
      FMT_FIXED: begin
        half = big_t'(1) <<< (Q - 1);
        q = s / (big_t'(1) <<< Q);
        r = s - q * (big_t'(1) <<< Q);
        if (r < 0) begin
          q = q - 1;
          r = r + (big_t'(1) <<< Q);
        end
        if (r > half || (r == half && q[0])) q = q + 1;
        lim = big_t'(1) <<< (N - 1);
        if (q > lim - 1) q = lim - 1;
        if (q < -lim) q = -lim;
        return q[N-1:0];
      end
      FMT_FLOAT: return N'(float_round(s, WE, WF));
      default:   return N'(posit_round(s <<< 8, N, ES, L + 8));
    endcase
  endfunction

  function automatic logic [N-1:0] vrand();
    logic [N-1:0] v;
    v = N'($urandom);
    if ($urandom_range(0, 7) == 0) v = '0;
    if (FMT == FMT_POSIT && v == {1'b1, {(N-1){1'b0}}}) v = '0;
    if (FMT == FMT_FLOAT && v[N-2 -: WE] == '1) v[N-2] = 1'b0;
    return v;
  endfunction

  always @(negedge clk) begin
    if (rst_n && ov) begin
      checks++;
      if (due_q.size() == 0) begin
        failures++;
        $display("FAIL cfg fmt=%0d n=%0d: unexpected out_valid", FMT, N);
      end else begin
        logic [N-1:0] e;
        int d;
        e = exp_q.pop_front();
        d = due_q.pop_front();
        if (res !== e || d != cyc) begin
          failures++;
          $display("FAIL cfg fmt=%0d n=%0d es=%0d we=%0d q=%0d: %h expected %h (cycle %0d/%0d)",
                   FMT, N, ES, WE, Q, res, e, cyc, d);
        end
      end
    end
  end

  initial begin
    checks = 0;
    failures = 0;
    done = 1'b0;
    ctl = '0; w = '0; a = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < DOTS; t++) begin
      int len;
      big_t sum;
      logic [N-1:0] bv;
      len = 1 + int'($urandom_range(0, 15));
      bv  = vrand();
      sum = vbias(bv);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        ctl = '{valid: 1'b1, first: (i == 0), last: (i == len - 1)};
        w = vrand();
        a = vrand();
        b = (i == 0) ? bv : N'($urandom);
        sum += vprod(w, a);
        if (i == len - 1) due_q.push_back(cyc + 3);
      end
      exp_q.push_back(vround(sum));
      repeat ($urandom_range(0, 2)) begin
        @(negedge clk);
        ctl = '0;
      end
    end
    @(negedge clk);
    ctl = '0;
    repeat (6) @(negedge clk);
    checks++;
    if (due_q.size() != 0) failures++;
    done = 1'b1;
  end
endmodule
