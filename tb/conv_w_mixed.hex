28
e2
32
c4
14
ce
2d
ec
3c
dd
1e
1e
c1
0a
37
f6
d8
3f
e7
0f
