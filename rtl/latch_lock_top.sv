// latch_lock_top: a locked group of flip-flops, built the way latch-based
// logic locking transforms a design.
//
// The unlocked circuit this stands for has, in each of LANES lanes, an input
// register, logic cl_a, an internal register, logic cl_b/cl_c/cl_d and an
// output register (cl_b also reads the neighbouring lane, so the internal
// registers form one interconnected group). Locking converts every internal
// register into two phase-programmable latches, a negative-phase "master"
// L1 before cl_b and a positive-phase "slave" L2 after it (the retimed pair),
// and adds decoys at a ratio of one decoy latch per two real latches:
//   * even lanes: a path-delay decoy latch DD between cl_c and cl_d
//     (correct key: clear, i.e. transparent);
//   * odd lanes: a logic decoy whose cone reads this lane's L1 and the next
//     lane's L2 and whose output is XORed into cl_c's input (correct key:
//     reset, so it contributes 0).
// Every latch gets a scan test point; all test points form one scan chain.
//
// Key layout: latch j of the group takes key[2j] as Key0 and key[2j+1] as
// Key1, and the latches are numbered j = 3*lane + {0: L1, 1: L2, 2: decoy}.
// The correct key sets L1 = 10, L2 = 01, DD = 11 and the logic decoy = 00.
// With it, dout follows din with two cycles of latency, exactly as the
// unlocked circuit does. Other keys can move latches to other phases, which
// changes the number of clock cycles along a path, hold a real latch at 0,
// or switch a logic decoy on.
//
// Scan: scan_fuse_blown models the state of a one-time fuse outside this
// block; when it is 1 the scan enable and test mode are forced off and
// scan_out is forced to 0, so the chain can neither set nor observe latches.
//
// Interface: clk; din/dout, one word per lane; key (6 bits per lane);
// scan_en, test_mode, scan_in, scan_out, scan_fuse_blown.
// Timing: din is registered on the rising edge, dout is registered on the
// rising edge; with the correct key dout(k) = f(din sampled at edge k-2).
// The input and output registers have no reset, like the latches.
// Taken from the paper: the latch conversion, the two decoy kinds, the key
// truth table, two key bits per latch and the test point per latch. This
// design's own choices: the logic in the lanes, the lane structure and
// interconnect, where the decoys sit, and the XOR merge of logic decoys.
module latch_lock_top
  import llock_pkg::*;
#(
  parameter  int unsigned LANES            = 4,
  // Two converted flip-flop halves and one decoy per lane, two key bits each.
  localparam int unsigned LATCHES_PER_LANE = 3,
  localparam int unsigned KEY_BITS         = 2 * LATCHES_PER_LANE * LANES
) (
  input  logic                                 clk,
  input  word_t [LANES-1:0]                    din,
  output word_t [LANES-1:0]                    dout,
  input  logic  [KEY_BITS-1:0]                  key,
  input  logic                                 scan_en,
  input  logic                                 test_mode,
  input  logic                                 scan_in,
  output logic                                 scan_out,
  input  logic                                 scan_fuse_blown
);

  localparam int unsigned NLAT = LATCHES_PER_LANE * LANES;

  // Scan controls after the fuse.
  logic scan_en_q, test_mode_q;
  assign scan_en_q   = scan_en   & ~scan_fuse_blown;
  assign test_mode_q = test_mode & ~scan_fuse_blown;

  // Scan chain: chain[j] feeds test point j, chain[j+1] leaves it.
  logic [NLAT:0] chain;
  assign chain[0] = scan_in & ~scan_fuse_blown;
  assign scan_out = chain[NLAT] & ~scan_fuse_blown;

  word_t [LANES-1:0] in_reg, a, l1_raw, l1, b, l2_raw, l2, c, dd, out_reg;

  // Unmodified input registers.
  always_ff @(posedge clk) in_reg <= din;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned J1 = LATCHES_PER_LANE * i;      // L1 index
    localparam int unsigned J2 = LATCHES_PER_LANE * i + 1;  // L2 index
    localparam int unsigned JD = LATCHES_PER_LANE * i + 2;  // decoy index
    localparam int unsigned PREV = (i + LANES - 1) % LANES;
    localparam int unsigned NEXT = (i + 1) % LANES;

    assign a[i] = cl_a(in_reg[i]);

    // First half of the converted register (correct key: negative phase).
    prog_latch #(.W(DATA_W)) u_l1 (
      .clk(clk), .key0(key[2*J1]), .key1(key[2*J1+1]), .d(a[i]), .q(l1_raw[i]));
    scan_test_point #(.W(DATA_W)) u_tp1 (
      .clk(clk), .scan_en(scan_en_q), .test_mode(test_mode_q),
      .scan_in(chain[J1]), .lat_q(l1_raw[i]), .q(l1[i]), .scan_out(chain[J1+1]));

    assign b[i] = cl_b(l1[i], l1[PREV]);

    // Second half of the converted register (correct key: positive phase).
    prog_latch #(.W(DATA_W)) u_l2 (
      .clk(clk), .key0(key[2*J2]), .key1(key[2*J2+1]), .d(b[i]), .q(l2_raw[i]));
    scan_test_point #(.W(DATA_W)) u_tp2 (
      .clk(clk), .scan_en(scan_en_q), .test_mode(test_mode_q),
      .scan_in(chain[J2]), .lat_q(l2_raw[i]), .q(l2[i]), .scan_out(chain[J2+1]));

    if (i % 2 == 0) begin : g_delay_decoy
      // Path-delay decoy on the net between cl_c and cl_d (correct key: clear).
      word_t dd_raw;
      assign c[i] = cl_c(l2[i]);
      prog_latch #(.W(DATA_W)) u_dd (
        .clk(clk), .key0(key[2*JD]), .key1(key[2*JD+1]), .d(c[i]), .q(dd_raw));
      scan_test_point #(.W(DATA_W)) u_tpd (
        .clk(clk), .scan_en(scan_en_q), .test_mode(test_mode_q),
        .scan_in(chain[JD]), .lat_q(dd_raw), .q(dd[i]), .scan_out(chain[JD+1]));
    end else begin : g_logic_decoy
      // Logic decoy: cone of this lane's L1 and the next lane's L2, XORed
      // into cl_c's input (correct key: reset, contributes 0).
      localparam word_t MASK = word_t'(8'hA5) ^ word_t'(8'h11 * i);
      word_t dec_raw, dec;
      logic_decoy #(.W(DATA_W), .CONE_MASK(MASK)) u_ld (
        .clk(clk), .key0(key[2*JD]), .key1(key[2*JD+1]),
        .src_a(l1[i]), .src_b(l2[NEXT]), .q(dec_raw));
      scan_test_point #(.W(DATA_W)) u_tpd (
        .clk(clk), .scan_en(scan_en_q), .test_mode(test_mode_q),
        .scan_in(chain[JD]), .lat_q(dec_raw), .q(dec), .scan_out(chain[JD+1]));
      assign c[i]  = cl_c(l2[i] ^ dec);
      assign dd[i] = c[i];
    end

    // Unmodified output register.
    always_ff @(posedge clk) out_reg[i] <= cl_d(dd[i]);
  end

  assign dout = out_reg;

endmodule
