// tb_vpu_tile: drives one VPU tile with back-to-back random vector pairs in
// all four modes, with and without accumulation, and checks each result
// against real-number references: dot product (GEMV), max/min over all
// 2*LANES operands (digests) and sum_c max(a_2c*b_2c, a_2c+1*b_2c+1) (score).
// It also checks the pipeline latency (log2(LANES)+2 cycles) and that one
// result comes out per cycle.
module tb_vpu_tile;
  import fp16_pkg::*;
  import vpu_pkg::*;
  import tb_fp16_pkg::*;

  localparam int LANES = 128;
  localparam int LAT   = $clog2(LANES) + 2;
  localparam int NVEC  = 64;

  logic      clk = 0, rst_n = 0;
  logic      in_valid;
  vpu_mode_e mode;
  logic      acc;
  fp16_t     a [LANES], b [LANES];
  logic      y_valid;
  fp16_t     y;
  int checks = 0, failures = 0;

  vpu_tile #(.LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  real       exp_v [NVEC];
  real       tol_v [NVEC];
  int        in_cyc [NVEC];
  int        cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference for one vector pair
  task automatic ref_one(input vpu_mode_e m, output real r, output real tol);
    real s, t, x0, x1;
    s = 0.0; t = 0.0;
    case (m)
      VPU_GEMV: for (int i = 0; i < LANES; i++) begin
        s += h2r(a[i]) * h2r(b[i]);
        t += (h2r(a[i]) * h2r(b[i]) < 0.0) ? -h2r(a[i]) * h2r(b[i]) : h2r(a[i]) * h2r(b[i]);
      end
      VPU_DIGEST_MAX: begin
        s = h2r(a[0]);
        for (int i = 0; i < LANES; i++) begin
          if (h2r(a[i]) > s) s = h2r(a[i]);
          if (h2r(b[i]) > s) s = h2r(b[i]);
        end
      end
      VPU_DIGEST_MIN: begin
        s = h2r(a[0]);
        for (int i = 0; i < LANES; i++) begin
          if (h2r(a[i]) < s) s = h2r(a[i]);
          if (h2r(b[i]) < s) s = h2r(b[i]);
        end
      end
      default: for (int c = 0; c < LANES / 2; c++) begin
        x0 = h2r(a[2*c]) * h2r(b[2*c]);
        x1 = h2r(a[2*c+1]) * h2r(b[2*c+1]);
        s += (x0 > x1) ? x0 : x1;
        t += (x0 > 0.0 ? x0 : -x0) + (x1 > 0.0 ? x1 : -x1);
      end
    endcase
    r   = s;
    tol = t * 0.004 + 1.0e-3;
  endtask

  int  nout;
  real accv;

  initial begin
    in_valid = 0; mode = VPU_GEMV; acc = 0;
    foreach (a[i]) begin a[i] = '0; b[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 5; pass++) begin
      vpu_mode_e m;
      m = (pass == 4) ? VPU_GEMV : vpu_mode_e'(pass);
      nout = 0;
      fork
        begin
          for (int v = 0; v < NVEC; v++) begin
            real r, tl;
            @(negedge clk);
            in_valid = 1; mode = m; acc = (pass == 4) && (v % 4 != 0);
            for (int i = 0; i < LANES; i++) begin
              a[i] = rnd_h(-3, 2);
              b[i] = rnd_h(-3, 2);
            end
            ref_one(m, r, tl);
            if (pass == 4) begin
              if (v % 4 == 0) accv = 0.0;
              accv += r;
              exp_v[v] = accv;
              tol_v[v] = tl * 4.0;
            end else begin
              exp_v[v] = r;
              tol_v[v] = (m == VPU_DIGEST_MAX || m == VPU_DIGEST_MIN) ? 0.0 : tl;
            end
            in_cyc[v] = cyc;
          end
          @(negedge clk);
          in_valid = 0;
        end
        begin
          while (nout < NVEC) begin
            @(posedge clk);
            #1;
            if (y_valid) begin
              checks++;
              if (!close(h2r(y), exp_v[nout], 0.0, tol_v[nout])) begin
                failures++;
                $display("FAIL mode=%0d vec=%0d y=%f exp=%f", m, nout, h2r(y), exp_v[nout]);
              end
              checks++;
              if (cyc - in_cyc[nout] != LAT) begin
                failures++;
                $display("FAIL latency %0d", cyc - in_cyc[nout]);
              end
              nout++;
            end
          end
        end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
