0 1 2 3 4 5 6 7 8 9 a b c d e f
9 8 b a d c f e 1 0 3 2 5 4 7 6
1 0 3 2 5 4 7 6 9 8 b a d c f e
8 9 a b c d e f 0 1 2 3 4 5 6 7
2 3 0 1 6 7 4 5 a b 8 9 e f c d
b a 9 8 f e d c 3 2 1 0 7 6 5 4
3 2 1 0 7 6 5 4 b a 9 8 f e d c
a b 8 9 e f c d 2 3 0 1 6 7 4 5
4 5 6 7 0 1 2 3 c d e f 8 9 a b
d c f e 9 8 b a 5 4 7 6 1 0 3 2
5 4 7 6 1 0 3 2 d c f e 9 8 b a
c d e f 8 9 a b 4 5 6 7 0 1 2 3
6 7 4 5 2 3 0 1 e f c d a b 8 9
f e d c b a 9 8 7 6 5 4 3 2 1 0
7 6 5 4 3 2 1 0 f e d c b a 9 8
e f c d a b 8 9 6 7 4 5 2 3 0 1
