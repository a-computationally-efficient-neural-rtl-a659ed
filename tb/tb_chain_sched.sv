// tb_chain_sched -- self-checking test of the layer-chaining scheduler.
// A behavioural executor answers each operation after a random delay and
// keeps its own model of the ten Input Buffer banks (which row of A, B or C
// each holds). For every issued operation it checks, independently of the
// scheduler's bookkeeping:
//   * Conv1/Conv2 read banks holding A/B rows 2p..2p+3, DeConv reads banks
//     holding C rows 3q..3q+4, and the banks follow row % 10;
//   * every bank that is overwritten (LOAD, Conv outputs) holds a row whose
//     readers have all been issued (an op may overwrite rows it reads itself);
//   * each DeConv is followed by a STORE; the op counts and orders are
//     complete (ha loads, (ha-2)/2 and (ha-4)/2 Conv pairs, (ha-6)/3 windows);
//   * done pulses and stuck stays low.
// For ha = 24 the op sequence is also compared with the published ten-bank
// schedule: A0-A9 | B0-B7 | C0-C5, D0-D5 | A10-A12 | B8,B9 | C6,C7, D6-D11 |
// A13-A15 | B10-B13 | C8-C11.
module tb_chain_sched;
  import nvca_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, op_done = 0;
  logic [9:0] ha = '0;
  logic op_valid, busy, done, stuck;
  chain_op_t op;

  chain_sched dut (.clk, .rst_n, .start, .ha, .op_valid, .op, .op_done, .busy, .done, .stuck);
  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // bank model
  int bl [10], br [10];           // layer (-1 empty, 0 A, 1 B, 2 C), row
  bit iss_b [128], iss_c [128], iss_d [128];
  int tb_, tc_, td_;

  function automatic bit dead(int l, int r);
    if (l < 0) return 1;
    if (l == 0) begin
      for (int p = 0; p < tb_; p++) if (2*p <= r && r <= 2*p+3 && !iss_b[p]) return 0;
    end else if (l == 1) begin
      for (int p = 0; p < tc_; p++) if (2*p <= r && r <= 2*p+3 && !iss_c[p]) return 0;
    end else begin
      for (int q = 0; q < td_; q++) if (3*q <= r && r <= 3*q+4 && !iss_d[q]) return 0;
    end
    return 1;
  endfunction

  string seq [$];

  task automatic run_chain(int h);
    int nl = 0, nb = 0, nc = 0, nd = 0, ns = 0;
    bit expect_store = 0, got_done = 0;
    tb_ = (h - 2) / 2; tc_ = (h - 4) / 2; td_ = (h - 6) / 3;
    for (int b = 0; b < 10; b++) begin bl[b] = -1; br[b] = 0; end
    for (int i = 0; i < 128; i++) begin iss_b[i] = 0; iss_c[i] = 0; iss_d[i] = 0; end
    seq.delete();
    @(negedge clk); ha = 10'(h); start = 1;
    @(negedge clk); start = 0;
    while (!got_done) begin
      @(negedge clk);
      if (done) got_done = 1;
      chk(!stuck, $sformatf("stuck at ha=%0d", h));
      if (stuck) break;
      if (op_valid) begin
        automatic int r = int'(op.row);
        case (op.kind)
          OP_LOAD: begin
            chk(!expect_store, "LOAD while STORE due");
            chk(r == nl, $sformatf("LOAD row %0d expected %0d", r, nl));
            chk(int'(op.out_bank[0]) == r % 10, "LOAD bank");
            chk(dead(bl[r % 10], br[r % 10]), $sformatf("LOAD A%0d overwrites live row L%0d/%0d", r, bl[r%10], br[r%10]));
            seq.push_back($sformatf("A%0d", r));
            nl++;
          end
          OP_CONV1, OP_CONV2: begin
            automatic int l = (op.kind == OP_CONV1) ? 0 : 1;
            chk(!expect_store, "CONV while STORE due");
            chk(r == (l == 0 ? nb : nc), "Conv pair order");
            for (int k = 0; k < 4; k++) begin
              chk(int'(op.in_bank[k]) == (2*r + k) % 10, "Conv in bank");
              chk(bl[(2*r + k) % 10] == l && br[(2*r + k) % 10] == 2*r + k,
                  $sformatf("Conv%0d pair %0d input row %0d not present", l + 1, r, 2*r + k));
            end
            if (l == 0) iss_b[r] = 1; else iss_c[r] = 1;
            for (int k = 0; k < 2; k++) begin
              automatic int b = (2*r + k) % 10;
              chk(int'(op.out_bank[k]) == b, "Conv out bank");
              chk(dead(bl[b], br[b]), $sformatf("Conv%0d pair %0d overwrites live row L%0d/%0d", l + 1, r, bl[b], br[b]));
            end
            seq.push_back($sformatf("%s%0d", l == 0 ? "B" : "C", 2*r));
            seq.push_back($sformatf("%s%0d", l == 0 ? "B" : "C", 2*r + 1));
            if (l == 0) nb++; else nc++;
          end
          OP_DECONV: begin
            chk(!expect_store, "DECONV while STORE due");
            chk(r == nd, "DeConv order");
            for (int k = 0; k < 5; k++) begin
              chk(int'(op.in_bank[k]) == (3*r + k) % 10, "DeConv in bank");
              chk(bl[(3*r + k) % 10] == 2 && br[(3*r + k) % 10] == 3*r + k,
                  $sformatf("DeConv %0d input C%0d not present", r, 3*r + k));
            end
            iss_d[r] = 1;
            seq.push_back($sformatf("D%0d", 6*r));
            nd++;
          end
          OP_STORE: begin
            chk(expect_store, "STORE without DeConv");
            ns++;
          end
          default: chk(0, "bad op kind");
        endcase
        // execute after a random delay
        repeat ($urandom % 4) @(negedge clk);
        op_done = 1;
        case (op.kind)
          OP_LOAD: begin bl[r % 10] = 0; br[r % 10] = r; end
          OP_CONV1, OP_CONV2:
            for (int k = 0; k < 2; k++) begin
              bl[(2*r + k) % 10] = (op.kind == OP_CONV1) ? 1 : 2; br[(2*r + k) % 10] = 2*r + k;
            end
          default: ;
        endcase
        expect_store = (op.kind == OP_DECONV);
        @(negedge clk); op_done = 0;
        if (done) got_done = 1;
      end
    end
    chk(nl == h && nb == tb_ && nc == tc_ && nd == td_ && ns == td_,
        $sformatf("counts ha=%0d: %0d %0d %0d %0d %0d", h, nl, nb, nc, nd, ns));
    chk(!busy, "busy after done");
  endtask

  initial begin
    automatic string fig7 [] = '{
      "A0","A1","A2","A3","A4","A5","A6","A7","A8","A9",
      "B0","B1","B2","B3","B4","B5","B6","B7",
      "C0","C1","C2","C3","C4","C5","D0",
      "A10","A11","A12", "B8","B9", "C6","C7","D6",
      "A13","A14","A15", "B10","B11","B12","B13", "C8","C9","C10","C11"};
    automatic int hs [] = '{24, 12, 18, 30, 48, 96};
    repeat (3) @(negedge clk); rst_n = 1;
    foreach (hs[n]) begin
      run_chain(hs[n]);
      if (hs[n] == 24)
        foreach (fig7[k]) chk(k < seq.size() && seq[k] == fig7[k],
                              $sformatf("Fig.7 step %0d: got %s expected %s", k, k < seq.size() ? seq[k] : "-", fig7[k]));
      $display("ha=%0d ops=%0d checks=%0d failures=%0d", hs[n], seq.size(), checks, failures);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
