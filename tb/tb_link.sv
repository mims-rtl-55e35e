// tb_link -- tests the link-layer transmitter and receiver over one link bus
// with random stalls.
//
// The test sends packets of random length through link_tx, checks every
// symbol on the bus against the expected frame (START, sequence id, payload,
// CRC-16-CCITT computed here bit by bit, END), and checks that link_rx
// delivers exactly the payload with last on the final flit. One packet is
// corrupted on the bus (one payload bit flipped): link_rx must flag exactly
// one CRC error and nothing else.
module tb_link;
  import mims_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int unsigned checks = 0, failures = 0;

  flit_if pin  (.clk(clk), .rst_n(rst_n));
  flit_if pout (.clk(clk), .rst_n(rst_n));

  link_flit_t tx, rx;
  logic       tx_ready, rx_ready, e_seq, e_crc, e_frame;
  logic       go, corrupt;

  link_tx u_tx (.clk, .rst_n, .in(pin), .tx(tx), .tx_ready(tx_ready));
  link_rx u_rx (.clk, .rst_n, .rx(rx), .rx_ready(rx_ready), .out(pout),
                .err_seq(e_seq), .err_crc(e_crc), .err_frame(e_frame));

  // bus with random stalls; a flip of bit 0 of the first payload flit when asked
  always_ff @(posedge clk) if (!(rx.valid && !rx_ready)) go <= ($urandom % 3) != 0;
  assign tx_ready = rx_ready && go;
  int unsigned sym;   // symbol index inside the current frame
  always_ff @(posedge clk) if (tx.valid && tx_ready) sym <= (tx.k && tx.data == K_START) ? 1 : sym + 1;
  always_comb begin
    rx = tx;
    rx.valid = tx.valid && go;
    if (corrupt && sym == 2) rx.data = tx.data ^ 16'h1;   // first payload flit
  end

  // payload source
  logic [15:0] src [$];
  logic        src_last [$];
  initial begin pin.valid = 1'b0; pin.data = '0; pin.last = 1'b0; end
  always @(posedge clk) begin
    if (rst_n && pin.valid && pin.ready) begin
      void'(src.pop_front()); void'(src_last.pop_front());
    end
    pin.valid <= (src.size() != 0);
    pin.data  <= (src.size() != 0) ? src[0] : '0;
    pin.last  <= (src.size() != 0) ? src_last[0] : 1'b0;
  end

  // sink, with its own random ready
  always_ff @(posedge clk) pout.ready <= ($urandom % 4) != 0;

  function automatic logic [15:0] crc_ref(input logic [15:0] words [$]);
    logic [15:0] c;
    c = 16'hFFFF;
    foreach (words[i])
      for (int b = 15; b >= 0; b--) begin
        logic fb;
        fb = c[15] ^ words[i][b];
        c = {c[14:0], 1'b0};
        if (fb) c = c ^ 16'h1021;
      end
    return c;
  endfunction

  logic [16:0] exp_bus [$];   // {k, data}
  logic [16:0] exp_out [$];   // {last, data}
  int unsigned n_crc = 0, n_other = 0;

  always @(posedge clk) if (rst_n) begin
    if (tx.valid && tx_ready) begin
      checks++;
      if (exp_bus.size() == 0) begin failures++; $display("FAIL unexpected bus symbol"); end
      else if (exp_bus.pop_front() != {tx.k, tx.data}) begin failures++; $display("FAIL bus symbol %b %h", tx.k, tx.data); end
    end
    if (pout.valid && pout.ready) begin
      logic [16:0] e;
      checks++;
      e = (exp_out.size() != 0) ? exp_out.pop_front() : 17'h1FFFF;
      if (!corrupt && e != {pout.last, pout.data}) begin
        failures++; $display("FAIL payload got %0d/%h exp %0d/%h", pout.last, pout.data, e[16], e[15:0]);
      end
    end
    if (e_crc) n_crc++;
    if (e_seq || e_frame) n_other++;
  end

  task automatic send(input int n, input int seq);
    logic [15:0] words [$];
    words.push_back(16'(seq));
    exp_bus.push_back({1'b1, K_START});
    exp_bus.push_back({1'b0, 16'(seq)});
    for (int i = 0; i < n; i++) begin
      logic [15:0] w;
      w = 16'($urandom) | 16'h0100;
      words.push_back(w);
      src.push_back(w); src_last.push_back(i == n - 1);
      exp_bus.push_back({1'b0, w});
      exp_out.push_back({i == n - 1, w});
    end
    exp_bus.push_back({1'b1, crc_ref(words)});
    exp_bus.push_back({1'b1, K_END});
    while (exp_bus.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  initial begin
    corrupt = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 20; p++) send(1 + ($urandom % 40), p);
    checks++; if (n_crc != 0 || n_other != 0) begin failures++; $display("FAIL errors on a clean link"); end
    // corrupted packet: the flip happens after the bus check point (tx side)
    corrupt = 1'b1;
    send(10, 20);
    repeat (10) @(posedge clk);
    corrupt = 1'b0;
    exp_out.delete();
    checks++; if (n_crc != 1) begin failures++; $display("FAIL CRC errors seen %0d, expected 1", n_crc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
