@0
02 75 81 30
@10
DE AD BE EF
@7FF
5A
