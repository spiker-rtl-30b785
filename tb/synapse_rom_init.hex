0da7
52fc
a741
fc96
41eb
9630
eb85
30da
852f
da74
2fc9
741e
c963
1eb8
630d
b852
