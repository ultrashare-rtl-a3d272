// tb_sg_distributor: random tagged elements with random full flags. Checks
// that an RX element goes only to its accelerator's RX queue and a TX element
// only to its TX queue, that the element is held while that queue is full,
// that start pulses only with the first RX element of a command and carries
// the command's information, and that elements for a missing accelerator are
// dropped without any push.
module tb_sg_distributor;
  import us_pkg::*;
  localparam int K = 9;
  logic elem_valid = 0, elem_ready;
  sg_tagged_t elem_in = '0;
  logic [K-1:0] rx_sg_push, tx_sg_push, rx_sg_full = '0, tx_sg_full = '0, start;
  sg_elem_t sg_elem;
  req_info_t start_info;
  int checks = 0, failures = 0;

  sg_distributor #(.NUM_ACC(K)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      automatic int a = (n % 50 == 49) ? 12 : $urandom % K;
      automatic bit tx = $urandom % 2, full;
      elem_in = '{elem: '{addr: {32'($urandom), 32'($urandom)}, len: 32'($urandom)},
                  is_tx: tx, first: ($urandom % 3 == 0), last: ($urandom % 3 == 0),
                  info: '{acc: 8'(a), rx_nelem: 16'($urandom), tx_nelem: 16'($urandom),
                          cmd_id: 16'(n), core_id: 8'($urandom)}};
      elem_valid = ($urandom % 8) != 0;
      rx_sg_full = K'($urandom); tx_sg_full = K'($urandom);
      #1;
      if (a >= K) begin
        check(elem_ready && rx_sg_push == '0 && tx_sg_push == '0 && start == '0, "missing accelerator dropped");
      end else begin
        full = tx ? tx_sg_full[a] : rx_sg_full[a];
        check(elem_ready == !full, "ready follows target queue");
        check(rx_sg_push == ((!tx && elem_valid && !full) ? K'(1) << a : K'(0)), "RX push");
        check(tx_sg_push == (( tx && elem_valid && !full) ? K'(1) << a : K'(0)), "TX push");
        check(start == ((!tx && elem_in.first && elem_valid && !full) ? K'(1) << a : K'(0)), "start");
        check(sg_elem == elem_in.elem && start_info == elem_in.info, "data passed on");
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
