// tb_sparse_cfu -- end-to-end run of the top at its default build (combined
// unit). The testbench plays the RISC-V core executing the specialised
// pointwise-convolution kernel
//
//   for (oh) for (ow) for (oc) { i = 0;
//     while (i < IC) { acc += csa_vcmac(filter[oc][i], input[oh][ow][i]);
//                      i = csa_inc_indvar(filter[oc][i], i); } }
//
// on a layer whose weights carry both kinds of sparsity: whole zero blocks of
// four (semi-structured) and single zero weights inside the other blocks
// (unstructured). The filter rows are lookahead-encoded first (count of
// following zero blocks, capped at 15). Every output is compared with the
// dense dot product of the original weights. It also checks that the MAC
// cycles equal the sum over visited blocks of max(non-zero weights, 1), and
// reports them against four cycles for every block of a plain sequential MAC.
//
// Each mechanism is counted and must occur: a zero-block skip, a skip capped
// at 15 blocks, a partly zero block, a full block, an all-zero block taking one
// cycle (a zero first block, which the loop cannot skip), and a held response.
module tb_sparse_cfu;
  import tb_ref_pkg::*;

  localparam int OH = 2, OW = 2, OC = 6, IC = 128;   // 32 blocks per filter row
  localparam int NB = IC / 4;

  logic        clk = 0, rst_n = 0;
  logic        cmd_valid = 0, cmd_ready, rsp_valid, rsp_ready = 0;
  logic [9:0]  cmd_function_id = '0;
  logic [31:0] cmd_rs1 = '0, cmd_rs2 = '0, rsp_rd;
  int checks = 0, failures = 0;

  sparse_cfu dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
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

  blk_t        filt [OC][NB];
  logic [31:0] enc  [OC][NB];
  logic [31:0] inp  [OH][OW][NB];

  initial begin
    int n_skip, n_cap, n_partial, n_full, n_zero1, n_hold;
    int mac_cyc, mac_exp, base_cyc, lat, hold, acc, exp, i, run, b, nz;
    logic [31:0] rd;
    n_skip = 0; n_cap = 0; n_partial = 0; n_full = 0; n_zero1 = 0; n_hold = 0;
    mac_cyc = 0; mac_exp = 0; base_cyc = 0;

    // ---- weights: about 50 % zero blocks, 25 % zero weights in the rest
    for (int oc = 0; oc < OC; oc++)
      for (int bb = 0; bb < NB; bb++) begin
        bit zb;
        zb = ($urandom_range(0, 99) < 50);
        if (oc == 0) zb = (bb == 0) || (bb >= 2 && bb < 20);     // zero first block; run of 18
        if (oc == 1) zb = (bb % 2 == 1);
        for (int k = 0; k < 4; k++)
          filt[oc][bb][k] = (zb || $urandom_range(0, 3) == 0) ? 8'sd0 : rand_w7_nz();
        if (!zb && nonzeros(filt[oc][bb]) == 0) filt[oc][bb][$urandom_range(0, 3)] = rand_w7_nz();
      end
    // ---- lookahead encoding of each row (count of following zero blocks, <= 15)
    for (int oc = 0; oc < OC; oc++)
      for (int bb = 0; bb < NB; bb++) begin
        run = 0;
        while (bb + run + 1 < NB && run < 15 && nonzeros(filt[oc][bb + run + 1]) == 0) run++;
        enc[oc][bb] = encode_last_bits(filt[oc][bb], run);
      end
    for (int oh = 0; oh < OH; oh++)
      for (int ow = 0; ow < OW; ow++)
        for (int bb = 0; bb < NB; bb++) inp[oh][ow][bb] = $urandom;

    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int oh = 0; oh < OH; oh++)
      for (int ow = 0; ow < OW; ow++)
        for (int oc = 0; oc < OC; oc++) begin
          exp = 0;
          for (int bb = 0; bb < NB; bb++) exp += dot4(filt[oc][bb], inp[oh][ow][bb]);
          acc = 0; i = 0;
          while (i < IC) begin
            b    = i / 4;
            nz   = nonzeros(filt[oc][b]);
            hold = ($urandom_range(0, 7) == 0) ? 2 : 0;
            issue(fid_of(0), enc[oc][b], inp[oh][ow][b], hold, rd, lat);
            acc += int'($signed(rd));
            mac_cyc += lat;
            mac_exp += (nz == 0) ? 1 : nz;
            expect_(lat == ((nz == 0) ? 1 : nz), "csa_vcmac cycles = max(non-zero weights, 1)");
            if (nz == 0) n_zero1++;
            else if (nz < 4) n_partial++;
            else n_full++;
            if (hold > 0) n_hold++;
            issue(fid_of(1), enc[oc][b], 32'(i), 0, rd, lat);
            expect_(lat == 1, "csa_inc_indvar one cycle");
            if (int'(rd) - i > 4) n_skip++;
            if (int'(rd) - i == 64) n_cap++;
            i = int'(rd);
          end
          base_cyc += 4 * NB;
          expect_(acc == exp, "output value");
          if (acc != exp) $display("  oh=%0d ow=%0d oc=%0d got %0d exp %0d", oh, ow, oc, acc, exp);
        end

    expect_(mac_cyc == mac_exp, "MAC cycles = sum of max(non-zero weights, 1)");
    $display("MAC cycles %0d, four-cycle sequential MAC on every block %0d (ratio %0.2f)",
             mac_cyc, base_cyc, real'(base_cyc) / real'(mac_cyc));
    $display("mechanisms: zero-block skips %0d, capped skips %0d, partly zero blocks %0d, full blocks %0d, all-zero blocks %0d, held responses %0d",
             n_skip, n_cap, n_partial, n_full, n_zero1, n_hold);
    expect_(n_skip > 0,    "a zero-block skip happened");
    expect_(n_cap > 0,     "a skip capped at 15 blocks happened");
    expect_(n_partial > 0, "a partly zero block happened");
    expect_(n_full > 0,    "a full block happened");
    expect_(n_zero1 > 0,   "an all-zero block happened");
    expect_(n_hold > 0,    "a held response happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
