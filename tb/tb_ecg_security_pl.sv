// tb_ecg_security_pl: end-to-end test of the programmable-logic system at its
// default size (n = 300 samples, m = 12 features, i = 64 training vectors),
// following the data flow of the connected-health unit:
//   1. enrolment (done here in the testbench, as software would): 64 synthetic
//      heartbeats, one per enrolled person, built from Gaussian P, QRS and T
//      waves with per-person amplitudes, widths and positions; their mean; a
//      12-row projection basis (orthonormal DCT-II rows in Q16.16 fixed point,
//      standing in for the eigenvectors that a PCA of real data would give);
//      and the projected training matrix, computed with the reference model.
//   2. a test beat of one person (its training beat plus noise) is split into
//      75 blocks of 128 bits and encrypted by the cipher IP;
//   3. the ciphertext is decrypted by the decipher IP and compared with the
//      original;
//   4. the decrypted beat is loaded into the identification IP, which must
//      return that person's index.
// Step 4 is repeated for a second person while the cipher IP encrypts another
// block at the same time. Every operation is driven by its interrupt and
// acknowledged through the interrupt status register. The run counts each
// mechanism (encryptions, decryptions, identifications, each of the three
// interrupt lines, cipher work overlapping an identification) and fails if
// one never happened.
module tb_ecg_security_pl;
  import axil_pkg::*;
  import aes_ref_pkg::*;
  import ecg_ref_pkg::*;

  localparam int N = 300, M = 12, NT = 64, FRAC = 16;
  localparam int SUB_AW = 14;   // identification map at the default sizes
  localparam logic [31:0] Q_TEST = 32'(1) << (SUB_AW - 2), Q_MEAN = 32'(2) << (SUB_AW - 2),
                          Q_TRN = 32'(3) << (SUB_AW - 2), EIG = 32'(1) << SUB_AW;
  localparam int NBLK = N * 4 / 16;   // 128-bit blocks per beat

  logic clk = 0, rst_n = 0;
  axil_req_t c_req, d_req, i_req;
  axil_rsp_t c_rsp, d_rsp, i_rsp;
  logic [2:0] irq;

  int train [NT][N];
  int mean [] = new[N], eig [] = new[M*N], ptrn [] = new[M*NT];
  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0, n_id = 0, n_overlap = 0;
  int irq_seen [3] = '{0, 0, 0};
  logic [127:0] key;

  always #5 clk = ~clk;

  axil_master_bfm bfm_c (.clk, .rst_n, .req(c_req), .rsp(c_rsp));
  axil_master_bfm bfm_d (.clk, .rst_n, .req(d_req), .rsp(d_rsp));
  axil_master_bfm bfm_i (.clk, .rst_n, .req(i_req), .rsp(i_rsp));

  ecg_security_pl dut (
    .clk, .rst_n,
    .s_axi_cipher_req(c_req), .s_axi_cipher_rsp(c_rsp),
    .s_axi_decipher_req(d_req), .s_axi_decipher_rsp(d_rsp),
    .s_axi_identification_req(i_req), .s_axi_identification_rsp(i_rsp),
    .irq);

  logic [2:0] irq_d = '0;
  always @(posedge clk) begin
    for (int b = 0; b < 3; b++) if (irq[b] && !irq_d[b]) irq_seen[b]++;
    irq_d <= irq;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- synthetic enrolment ------------------------------------------
  function automatic real gauss(input real x, input real c, input real w);
    return $exp(-((x - c) / w) * ((x - c) / w));
  endfunction

  task automatic enrol();
    real ap, ar, at, cp, cr, ct, wp, wr, wt, s;
    for (int i = 0; i < NT; i++) begin
      ap = 150 + $urandom_range(0, 200);  cp = 60 + $urandom_range(0, 30);  wp = 10 + $urandom_range(0, 8);
      ar = 900 + $urandom_range(0, 800); cr = 130 + $urandom_range(0, 30); wr = 4 + $urandom_range(0, 6);
      at = 200 + $urandom_range(0, 300); ct = 200 + $urandom_range(0, 60); wt = 15 + $urandom_range(0, 15);
      for (int k = 0; k < N; k++) begin
        s = ap * gauss(k, cp, wp) + ar * gauss(k, cr, wr) - 0.2 * ar * gauss(k, cr + 2.5 * wr, wr)
          + at * gauss(k, ct, wt);
        train[i][k] = int'(s);
      end
    end
    for (int k = 0; k < N; k++) begin
      longint acc = 0;
      for (int i = 0; i < NT; i++) acc += train[i][k];
      mean[k] = int'(acc / NT);
    end
    for (int j = 0; j < M; j++)
      for (int k = 0; k < N; k++)
        eig[j*N + k] = int'($rtoi(65536.0 * $sqrt((j == 0 ? 1.0 : 2.0) / N) *
                                  $cos(3.14159265358979 * (k + 0.5) * j / N)));
    for (int i = 0; i < NT; i++) begin
      int sig [] = new[N];
      for (int k = 0; k < N; k++) sig[k] = train[i][k];
      for (int j = 0; j < M; j++) ptrn[i*M + j] = project(sig, mean, eig, j, N, FRAC);
    end
  endtask

  // ---- cipher / decipher through the bus ----------------------------
  function automatic logic [31:0] bword(input logic [127:0] b, input int w);
    logic [31:0] r;
    for (int i = 0; i < 4; i++) r[8*i +: 8] = b[127 - 8*(4*w + i) -: 8];
    return r;
  endfunction

  function automatic logic [127:0] from_words(input logic [31:0] w [4]);
    logic [127:0] b;
    for (int x = 0; x < 4; x++)
      for (int i = 0; i < 4; i++) b[127 - 8*(4*x + i) -: 8] = w[x][8*i +: 8];
    return b;
  endfunction

  task automatic aes_op(input bit dec, input logic [127:0] din, output logic [127:0] dout);
    logic [31:0] v;
    logic [31:0] w [4];
    for (int x = 0; x < 4; x++)
      if (dec) bfm_d.write(32'h20 + 4*x, bword(din, x)); else bfm_c.write(32'h20 + 4*x, bword(din, x));
    if (dec) bfm_d.write(32'h00, 32'h1); else bfm_c.write(32'h00, 32'h1);
    do @(posedge clk); while (!irq[dec ? 1 : 0]);
    for (int x = 0; x < 4; x++)
      if (dec) bfm_d.read(32'h30 + 4*x, w[x]); else bfm_c.read(32'h30 + 4*x, w[x]);
    if (dec) begin bfm_d.read(32'h00, v); bfm_d.write(32'h0C, 32'h1); n_dec++; end
    else     begin bfm_c.read(32'h00, v); bfm_c.write(32'h0C, 32'h1); n_enc++; end
    check(v[1], "done bit set at interrupt");
    dout = from_words(w);
  endtask

  // ---- identification through the bus -------------------------------
  task automatic identify(input int sig [], output int id);
    logic [31:0] v;
    for (int k = 0; k < N; k++) bfm_i.write(Q_TEST + 4*k, sig[k]);
    bfm_i.write(32'h00, 32'h1);
    do @(posedge clk); while (!irq[2]);
    bfm_i.read(32'h10, v);
    id = int'(v);
    bfm_i.read(32'h00, v);
    bfm_i.write(32'h0C, 32'h1);
    n_id++;
  endtask

  function automatic int ref_id(input int sig []);
    int p [] = new[M];
    wide_t d, best;
    int bi;
    for (int j = 0; j < M; j++) p[j] = project(sig, mean, eig, j, N, FRAC);
    best = 0; bi = 0;
    for (int i = 0; i < NT; i++) begin
      d = distance(p, ptrn, i, M);
      if (i == 0 || d < best) begin best = d; bi = i; end
    end
    return bi;
  endfunction

  initial begin
    int person, id, test [], dec_sig [];
    logic [127:0] pt, ct, back;
    logic [31:0] words [N];
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    enrol();
    key = rand128();

    // interrupt setup for all three IPs
    bfm_c.write(32'h04, 32'h1); bfm_c.write(32'h08, 32'h1);
    bfm_d.write(32'h04, 32'h1); bfm_d.write(32'h08, 32'h1);
    bfm_i.write(32'h04, 32'h1); bfm_i.write(32'h08, 32'h1);
    for (int x = 0; x < 4; x++) begin
      bfm_c.write(32'h10 + 4*x, bword(key, x));
      bfm_d.write(32'h10 + 4*x, bword(key, x));
    end
    // database into the identification IP
    for (int k = 0; k < N; k++) bfm_i.write(Q_MEAN + 4*k, mean[k]);
    for (int e = 0; e < M*NT; e++) bfm_i.write(Q_TRN + 4*e, ptrn[e]);
    for (int e = 0; e < M*N; e++) bfm_i.write(EIG + 4*e, eig[e]);

    // test beat of one person
    person = $urandom_range(0, NT - 1);
    test = new[N];
    for (int k = 0; k < N; k++) test[k] = train[person][k] + $urandom_range(0, 6) - 3;

    // encrypt and decrypt it block by block
    dec_sig = new[N];
    for (int b = 0; b < NBLK; b++) begin
      for (int x = 0; x < 4; x++)
        for (int i = 0; i < 4; i++) pt[127 - 8*(4*x + i) -: 8] = test[4*b + x][8*i +: 8];
      aes_op(0, pt, ct);
      check(ct === encrypt(key, pt), $sformatf("ciphertext block %0d", b));
      check(ct !== pt, "ciphertext differs from plaintext");
      aes_op(1, ct, back);
      check(back === pt, $sformatf("decrypted block %0d", b));
      for (int x = 0; x < 4; x++)
        for (int i = 0; i < 4; i++) dec_sig[4*b + x][8*i +: 8] = back[127 - 8*(4*x + i) -: 8];
    end

    // identify from the decrypted beat
    identify(dec_sig, id);
    check(id == ref_id(dec_sig), $sformatf("id %0d against reference %0d", id, ref_id(dec_sig)));
    check(id == person, $sformatf("identified %0d, beat belongs to %0d", id, person));
    $display("person %0d identified as %0d", person, id);

    // second person, with the cipher working at the same time
    person = (person + 17) % NT;
    for (int k = 0; k < N; k++) test[k] = train[person][k] + $urandom_range(0, 6) - 3;
    fork
      identify(test, id);
      begin
        logic [127:0] p2, c2;
        do @(posedge clk); while (i_req.awaddr != 32'h0);   // start register being written
        p2 = rand128();
        aes_op(0, p2, c2);
        check(c2 === encrypt(key, p2), "ciphertext during identification");
        if (irq[2] == 1'b0 && irq_seen[2] == 1) n_overlap++;
      end
    join
    check(id == person, $sformatf("second identification %0d, expected %0d", id, person));
    $display("person %0d identified as %0d", person, id);

    $display("encryptions %0d decryptions %0d identifications %0d irq %0d/%0d/%0d overlap %0d",
             n_enc, n_dec, n_id, irq_seen[0], irq_seen[1], irq_seen[2], n_overlap);
    check(n_enc > 0, "no encryption happened");
    check(n_dec > 0, "no decryption happened");
    check(n_id > 0, "no identification happened");
    for (int b = 0; b < 3; b++) check(irq_seen[b] > 0, $sformatf("interrupt %0d never raised", b));
    check(n_overlap > 0, "cipher never worked during an identification");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
