// tb_speedup_workloads -- the sparsity sweeps of the evaluation, run on the
// three units, with the cycle counts compared against closed-form values.
//
//  1. Unstructured unit: blocks of four INT8 weights, each weight zero with
//     probability x (independent). The mean MAC cycles per block must match
//       c_o = sum_{k=0..3} C(4,k) x^k (1-x)^(4-k) (4-k) + x^4
//     (n cycles for n non-zero weights, one for an all-zero block) within 5 %,
//     for x = 0, 0.2, 0.4, 0.5, 0.6, 0.8, 0.9; the speedup over a four-cycle
//     sequential MAC is 4 / c_o.
//  2. Semi-structured unit: rows of a convolution with a fraction x_ss = 25,
//     50, 75 % of all-zero blocks (first block always non-zero, so that every
//     zero block can be announced), run with the lookahead loop. The number of
//     blocks the loop visits must equal the non-zero blocks, i.e. the ideal
//     speedup 1 / (1 - x_ss) in MAC instructions as long as no zero run is
//     longer than 15 blocks. Every result is compared with the dense sum.
//  3. Combined unit (the default top) at (x_ss, x_us) = (25,25), (25,50),
//     (50,25) %: results against the dense sum, and MAC cycles against four
//     cycles for every block of the dense layer.
// The layer shape (576 weights per output = 3x3 kernel, 64 input channels)
// is a typical layer of the evaluated networks, not a size from the paper.
module tb_speedup_workloads;
  import tb_ref_pkg::*;

  localparam int IC = 576, NB = IC / 4;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  logic [9:0]  cmd_function_id = '0;
  logic [31:0] cmd_rs1 = '0, cmd_rs2 = '0, rsp_rd;
  int checks = 0, failures = 0;

  // the three units share the command bus; sel picks the one that is driven
  int          sel = 0;
  logic [2:0]  v, r, rv;
  logic [31:0] rd [3];

  ussa_cfu   u_ussa (.clk, .rst_n, .cmd_valid(v[0]), .cmd_ready(r[0]), .cmd_function_id, .cmd_rs1, .cmd_rs2,
                     .rsp_valid(rv[0]), .rsp_ready(rsp_ready && sel == 0), .rsp_rd(rd[0]));
  sssa_cfu   u_sssa (.clk, .rst_n, .cmd_valid(v[1]), .cmd_ready(r[1]), .cmd_function_id, .cmd_rs1, .cmd_rs2,
                     .rsp_valid(rv[1]), .rsp_ready(rsp_ready && sel == 1), .rsp_rd(rd[1]));
  sparse_cfu u_top  (.clk, .rst_n, .cmd_valid(v[2]), .cmd_ready(r[2]), .cmd_function_id, .cmd_rs1, .cmd_rs2,
                     .rsp_valid(rv[2]), .rsp_ready(rsp_ready && sel == 2), .rsp_rd(rd[2]));

  always_comb begin
    for (int k = 0; k < 3; k++) v[k] = cmd_valid && (sel == k);
    cmd_ready = r[sel];
    rsp_valid = rv[sel];
    rsp_rd    = rd[sel];
  end

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // CPU side of the CFU handshake.
  //
  // issue() is entered and left on a falling clock edge. It offers one command,
  // waits for it to be accepted, measures the latency as the number of rising
  // edges from the accepting edge's cycle to the first cycle with rsp_valid
  // (1 = response in the cycle after the accept), optionally withholds
  // rsp_ready for `hold` cycles while checking that the response stays put, and
  // takes the response.
  task automatic issue(input logic [9:0] fid, input logic [31:0] a, input logic [31:0] b,
                       input int hold, output logic [31:0] rd, output int lat);
    cmd_function_id = fid;
    cmd_rs1         = a;
    cmd_rs2         = b;
    cmd_valid       = 1'b1;
    #1;
    while (!cmd_ready) begin
      @(negedge clk);
      #1;
    end
    lat = 0;
    do begin
      @(negedge clk);
      cmd_valid = 1'b0;
      lat++;
      #1;
    end while (!rsp_valid && lat < 20);
    rd = rsp_rd;
    for (int c = 0; c < hold; c++) begin
      @(negedge clk);
      #1;
      checks++;
      if (!rsp_valid || rsp_rd !== rd || cmd_ready) begin
        failures++;
        $display("FAIL response not held under backpressure at %0t", $time);
      end
    end
    rsp_ready = 1'b1;
    @(negedge clk);
    rsp_ready = 1'b0;
  endtask

  // function id with funct7[0] = f0 and random other bits
  function automatic logic [9:0] fid_of(input bit f0);
    logic [9:0] f;
    f    = 10'($urandom);
    f[3] = f0;
    return f;
  endfunction

  task automatic expect_(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic real binom4(input int k);
    case (k) 0: return 1.0; 1: return 4.0; 2: return 6.0; 3: return 4.0; default: return 1.0; endcase
  endfunction

  function automatic real c_o(input real x);
    real c = 0.0;
    for (int k = 0; k < 4; k++) c += binom4(k) * (x ** k) * ((1.0 - x) ** (4 - k)) * (4 - k);
    return c + x ** 4;
  endfunction

  blk_t        row [NB];
  logic [31:0] xin [NB];

  // one filter row: zero blocks with probability pss (never block 0), inside
  // the other blocks zero weights with probability pus
  task automatic make_row(input int pss, input int pus);
    for (int b = 0; b < NB; b++) begin
      bit zb;
      zb = (b > 0) && ($urandom_range(0, 99) < pss);
      for (int k = 0; k < 4; k++)
        row[b][k] = (zb || $urandom_range(0, 99) < pus) ? 8'sd0 : rand_w7_nz();
      if (!zb && nonzeros(row[b]) == 0) row[b][$urandom_range(0, 3)] = rand_w7_nz();
      xin[b] = $urandom;
    end
  endtask

  // lookahead loop over the current row on unit s; returns the sum, the
  // number of blocks visited and the MAC cycles
  task automatic run_row(input int s, output int acc, output int visits, output int mac_cyc);
    int i, run, lat;
    logic [31:0] res, e;
    sel = s;
    acc = 0; visits = 0; mac_cyc = 0; i = 0;
    while (i < IC) begin
      run = 0;
      while (i/4 + run + 1 < NB && run < 15 && nonzeros(row[i/4 + run + 1]) == 0) run++;
      e = encode_last_bits(row[i/4], run);
      issue(fid_of(0), e, xin[i/4], 0, res, lat);
      acc += int'($signed(res));
      mac_cyc += lat;
      issue(fid_of(1), e, 32'(i), 0, res, lat);
      i = int'(res);
      visits++;
    end
  endtask

  initial begin
    real xs [7] = '{0.0, 0.2, 0.4, 0.5, 0.6, 0.8, 0.9};
    int  ss [3] = '{25, 50, 75};
    int  cfg [3][2] = '{'{25, 25}, '{25, 50}, '{50, 25}};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. unstructured sweep
    foreach (xs[j]) begin
      int cyc, lat, nblk;
      blk_t w;
      logic [31:0] x, res;
      real meas, want;
      cyc = 0; nblk = 1500;
      sel = 0;
      for (int n = 0; n < nblk; n++) begin
        for (int k = 0; k < 4; k++) begin
          w[k] = ($urandom_range(0, 9999) < int'(xs[j] * 10000.0)) ? 8'sd0 : rand_b();
          if (w[k] == 0 && xs[j] == 0.0) w[k] = 1;
          x[8*k +: 8] = rand_b();
        end
        issue(fid_of(0), pack8(w), x, 0, res, lat);
        if ($signed(res) != dot4(w, x)) expect_(0, "usss_vcmac value");
        cyc += lat;
      end
      meas = real'(cyc) / real'(nblk);
      want = c_o(xs[j]);
      $display("USSA x=%0.2f  cycles/block %0.3f (closed form %0.3f)  speedup %0.2f (closed form %0.2f)",
               xs[j], meas, want, 4.0 / meas, 4.0 / want);
      expect_(meas > 0.95 * want && meas < 1.05 * want, "USSA cycles per block within 5 % of c_o");
    end

    // ---- 2. semi-structured sweep
    foreach (ss[j]) begin
      int acc, visits, mac_cyc, exp, nz, reps;
      int tot_vis, tot_nz;
      tot_vis = 0; tot_nz = 0; reps = 4;
      for (int rr = 0; rr < reps; rr++) begin
        make_row(ss[j], 0);
        exp = 0; nz = 0;
        for (int b = 0; b < NB; b++) begin
          exp += dot4(row[b], xin[b]);
          if (nonzeros(row[b]) != 0) nz++;
        end
        run_row(1, acc, visits, mac_cyc);
        expect_(acc == exp, "SSSA row result");
        expect_(visits >= nz, "SSSA visits every non-zero block");
        tot_vis += visits; tot_nz += nz;
      end
      $display("SSSA x_ss=%0d%%  blocks %0d, visited %0d, non-zero %0d, MAC-instruction speedup %0.2f (ideal 1/(1-x_ss) = %0.2f)",
               ss[j], reps * NB, tot_vis, tot_nz, real'(reps * NB) / real'(tot_vis), 100.0 / real'(100 - ss[j]));
    end

    // ---- 3. combined configurations on the default top
    foreach (cfg[j]) begin
      int acc, visits, mac_cyc, exp, reps, tot_cyc;
      tot_cyc = 0; reps = 4;
      for (int rr = 0; rr < reps; rr++) begin
        make_row(cfg[j][0], cfg[j][1]);
        exp = 0;
        for (int b = 0; b < NB; b++) exp += dot4(row[b], xin[b]);
        run_row(2, acc, visits, mac_cyc);
        expect_(acc == exp, "CSA row result");
        tot_cyc += mac_cyc;
      end
      $display("CSA (x_ss, x_us) = (%0d, %0d)%%  MAC cycles %0d against %0d for a four-cycle sequential MAC on every block: %0.2fx",
               cfg[j][0], cfg[j][1], tot_cyc, 4 * NB * reps, real'(4 * NB * reps) / real'(tot_cyc));
      expect_(tot_cyc < 4 * NB * reps, "CSA needs fewer MAC cycles than the dense sequential MAC");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
